// bank_ctrl: the PU-local DRAM memory controller for one bank-group.
//
// A PU reads and writes its bank-group in 1024-bit beats. For each request the
// controller activates the row (ACT), waits the row-to-column delay of the row's
// tier, issues the column command (RD or WR), and keeps the row open while the
// next request hits the same bank and row (a row-buffer hit needs no new ACT).
// Otherwise it precharges (PRE) once tRAS has elapsed since the ACT and waits
// tRP before the next ACT. The tier timings come from the tiering table through
// tt_row / t_rcd / t_ras / t_rp, so data placed in low tiers is served sooner.
// The ACT -> RD/WR -> PRE sequence and the timing names follow the paper; the
// open-row hit policy, one bank at a time, and the read data return (the DRAM
// answers a RD with dram_rvalid some cycles later) are this design's choices.
//
// Request: req_valid/req_ready handshake; a read answers with one rsp_valid
// pulse carrying rsp_data, a write needs no answer. act_count/hit_count count
// activations and row-buffer hits.
module bank_ctrl
  import gendram_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // request side
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [3:0]         req_bank,
  input  logic [ROW_W-1:0]   req_row,
  input  logic [COL_W-1:0]   req_col,
  input  logic [IO_W-1:0]    req_wdata,
  output logic               rsp_valid,
  output logic [IO_W-1:0]    rsp_data,
  // tiering table lookup
  output logic [ROW_W-1:0]   tt_row,
  input  logic [7:0]         t_rcd,
  input  logic [7:0]         t_ras,
  input  logic [7:0]         t_rp,
  // DRAM bank-group command/data bus
  output dram_cmd_e          dram_cmd,
  output logic [3:0]         dram_bank,
  output logic [ROW_W-1:0]   dram_row,
  output logic [COL_W-1:0]   dram_col,
  output logic [IO_W-1:0]    dram_wdata,
  input  logic               dram_rvalid,
  input  logic [IO_W-1:0]    dram_rdata,
  // statistics
  output logic [31:0]        act_count,
  output logic [31:0]        hit_count
);

  typedef enum logic [2:0] {S_IDLE, S_ACT, S_COL, S_RDW, S_OPEN, S_PRE} state_e;
  state_e st;

  logic               we_q;
  logic [3:0]         bank_q;
  logic [ROW_W-1:0]   row_q;
  logic [COL_W-1:0]   col_q;
  logic [IO_W-1:0]    wdata_q;
  logic [7:0]         cnt;       // cycles in the current wait
  logic [7:0]         ras_cnt;   // cycles since ACT
  logic [7:0]         rcd_q, ras_q, rp_q;

  wire hit = req_valid && (req_bank == bank_q) && (req_row == row_q);

  assign req_ready = (st == S_IDLE) || (st == S_OPEN && hit);
  assign tt_row    = (st == S_IDLE) ? req_row : row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; we_q <= 1'b0; bank_q <= '0; row_q <= '0; col_q <= '0; wdata_q <= '0;
      cnt <= '0; ras_cnt <= '0; rcd_q <= '0; ras_q <= '0; rp_q <= '0;
      dram_cmd <= DC_NOP; dram_bank <= '0; dram_row <= '0; dram_col <= '0; dram_wdata <= '0;
      rsp_valid <= 1'b0; rsp_data <= '0; act_count <= '0; hit_count <= '0;
    end else begin
      dram_cmd  <= DC_NOP;
      rsp_valid <= 1'b0;
      if (ras_cnt != 8'hFF) ras_cnt <= ras_cnt + 8'd1;
      unique case (st)
        S_IDLE: if (req_valid) begin
          we_q <= req_we; bank_q <= req_bank; row_q <= req_row; col_q <= req_col;
          wdata_q <= req_wdata;
          rcd_q <= t_rcd; ras_q <= t_ras; rp_q <= t_rp;
          dram_cmd <= DC_ACT; dram_bank <= req_bank; dram_row <= req_row;
          act_count <= act_count + 32'd1;
          cnt <= 8'd1; ras_cnt <= 8'd1;
          st <= S_ACT;
        end
        S_ACT: begin
          // the column command goes out tRCD cycles after the ACT
          if (cnt + 8'd1 >= rcd_q) st <= S_COL;
          cnt <= cnt + 8'd1;
        end
        S_COL: begin
          dram_cmd   <= we_q ? DC_WR : DC_RD;
          dram_bank  <= bank_q;
          dram_row   <= row_q;
          dram_col   <= col_q;
          dram_wdata <= wdata_q;
          st <= we_q ? S_OPEN : S_RDW;
        end
        S_RDW: if (dram_rvalid) begin
          rsp_valid <= 1'b1;
          rsp_data  <= dram_rdata;
          st <= S_OPEN;
        end
        S_OPEN: begin
          if (hit) begin
            we_q <= req_we; col_q <= req_col; wdata_q <= req_wdata;
            hit_count <= hit_count + 32'd1;
            st <= S_COL;
          end else if (ras_cnt >= ras_q) begin
            dram_cmd <= DC_PRE; dram_bank <= bank_q;
            cnt <= 8'd1;
            st <= S_PRE;
          end
        end
        S_PRE: begin
          if (cnt >= rp_q) st <= S_IDLE;
          cnt <= cnt + 8'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
