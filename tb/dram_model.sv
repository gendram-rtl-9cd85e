// dram_model: behavioural model of one M3D DRAM bank-group as seen from the
// logic die (not synthesizable). It answers DC_RD with dram_rvalid/rdata
// RL cycles later, stores DC_WR data, and checks the controller's timing:
// a column command must come at least tRCD(tier) cycles after the ACT of its
// bank, only to the open row, a PRE at least tRAS(tier) after the ACT, and an
// ACT needs the bank precharged for tRP. The per-tier numbers are the ceiling
// of the published nanosecond values at 1 GHz.
// Timing violations are counted in 'violations'. Storage is sparse, keyed by
// {bank, row, col}; unwritten beats read as zero. Tasks poke/peek give the
// testbench direct access.
module dram_model
  import gendram_pkg::*;
#(
  parameter int RL = 2
) (
  input  logic             clk,
  input  dram_cmd_e        cmd,
  input  logic [3:0]       bank,
  input  logic [ROW_W-1:0] row,
  input  logic [COL_W-1:0] col,
  input  logic [IO_W-1:0]  wdata,
  output logic             rvalid,
  output logic [IO_W-1:0]  rdata
);
  localparam int RCD [8] = '{3, 4, 6, 9, 12, 15, 19, 23};
  localparam int RAS [8] = '{30, 32, 34, 36, 39, 43, 47, 51};
  logic [IO_W-1:0] mem [bit [23:0]];
  longint cyc = 0;
  longint act_t [16];
  longint pre_t [16];
  logic   open_q [16];
  logic [ROW_W-1:0] open_row [16];
  int violations = 0;
  int n_act = 0, n_rd = 0, n_wr = 0;
  logic [IO_W-1:0] pipe_d [RL];
  logic            pipe_v [RL];

  initial begin
    for (int b = 0; b < 16; b++) begin act_t[b] = -100; pre_t[b] = -100; open_q[b] = 0; open_row[b] = 0; end
    for (int s = 0; s < RL; s++) begin pipe_v[s] = 0; pipe_d[s] = '0; end
    rvalid = 0; rdata = '0;
  end

  function automatic bit [23:0] key(input logic [3:0] b, input logic [ROW_W-1:0] r, input logic [COL_W-1:0] c);
    return {b, r, c};
  endfunction

  task automatic poke(input logic [3:0] b, input logic [ROW_W-1:0] r, input logic [COL_W-1:0] c, input logic [IO_W-1:0] d);
    mem[key(b, r, c)] = d;
  endtask
  function automatic logic [IO_W-1:0] peek(input logic [3:0] b, input logic [ROW_W-1:0] r, input logic [COL_W-1:0] c);
    if (mem.exists(key(b, r, c))) return mem[key(b, r, c)];
    return '0;
  endfunction

  always @(posedge clk) begin
    logic [IO_W-1:0] d;
    logic            v;
    cyc++;
    v = 0; d = '0;
    // the first edge is the one that resets the controller: its output is not a command yet
    if (cyc > 1) case (cmd)
      DC_ACT: begin
        if (open_q[bank] || cyc - pre_t[bank] < 5) begin
          violations++; $display("%m: ACT violation bank %0d at cycle %0d (open %0d, %0d after PRE)", bank, cyc, open_q[bank], cyc - pre_t[bank]);
        end
        open_q[bank] = 1; open_row[bank] = row; act_t[bank] = cyc; n_act++;
      end
      DC_RD, DC_WR: begin
        if (!open_q[bank] || open_row[bank] != row || cyc - act_t[bank] < RCD[row[ROW_W-1 -: 3]]) begin
          violations++; $display("%m: column-command violation bank %0d row %0d at cycle %0d", bank, row, cyc);
        end
        if (cmd == DC_WR) begin mem[key(bank, row, col)] = wdata; n_wr++; end
        else begin v = 1; d = peek(bank, row, col); n_rd++; end
      end
      DC_PRE: begin
        if (open_q[bank] && cyc - act_t[bank] < RAS[open_row[bank][ROW_W-1 -: 3]]) begin
          violations++; $display("%m: PRE before tRAS bank %0d at cycle %0d", bank, cyc);
        end
        open_q[bank] = 0; pre_t[bank] = cyc;
      end
      default: ;
    endcase
    rvalid <= pipe_v[RL-1];
    rdata  <= pipe_d[RL-1];
    for (int s = RL-1; s > 0; s--) begin pipe_v[s] = pipe_v[s-1]; pipe_d[s] = pipe_d[s-1]; end
    pipe_v[0] = v; pipe_d[0] = d;
  end
endmodule
