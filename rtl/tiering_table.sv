// tiering_table: the programmable tiering table of the logic die
// (8 x 32-bit registers, one per DRAM latency tier).
//
// The 1024-layer stack is split into 8 tiers; the wordline staircase makes a
// tier's row-to-column delay grow with its distance from the logic die. Each
// register holds the timing of one tier in 1 GHz clock cycles:
//   [7:0]   tRCD   [15:8] tRAS   [23:16] tRP   [31:24] reserved
// The reset values are the paper's Table I timings rounded up to whole cycles:
// tRCD = 2.29 .. 22.88 ns -> 3,4,6,9,12,15,19,23; tRAS = tRCD + 27.5 ns
// -> 30,32,34,36,39,43,47,51; tRP = 4.77 ns -> 5. The register layout and the
// use of the top three row-address bits as the tier number (rows are laid out
// bottom layer first, 128 layers per tier) are this design's choices.
// Registers are written through cfg_*; the lookup is combinational.
module tiering_table
  import gendram_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [2:0]       cfg_idx,
  input  logic [31:0]      cfg_wdata,
  output logic [31:0]      cfg_rdata,
  input  logic [ROW_W-1:0] row,        // row address being activated
  output logic [2:0]       tier,
  output logic [7:0]       t_rcd,
  output logic [7:0]       t_ras,
  output logic [7:0]       t_rp
);

  localparam logic [7:0] RCD_RST [N_TIER] = '{8'd3, 8'd4, 8'd6, 8'd9, 8'd12, 8'd15, 8'd19, 8'd23};
  localparam logic [7:0] RAS_RST [N_TIER] = '{8'd30, 8'd32, 8'd34, 8'd36, 8'd39, 8'd43, 8'd47, 8'd51};
  localparam logic [7:0] RP_RST = 8'd5;

  logic [31:0] regs [N_TIER];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N_TIER; t++) regs[t] <= {8'd0, RP_RST, RAS_RST[t], RCD_RST[t]};
    end else if (cfg_we) begin
      regs[cfg_idx] <= cfg_wdata;
    end
  end

  assign cfg_rdata = regs[cfg_idx];
  assign tier      = row[ROW_W-1 -: 3];
  assign t_rcd     = regs[tier][7:0];
  assign t_ras     = regs[tier][15:8];
  assign t_rp      = regs[tier][23:16];

endmodule
