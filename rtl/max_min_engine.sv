// max_min_engine: the PU-level Max/Min Engine with its two helper units.
//
// Works on one shared-memory word of LANES 32-bit elements per cycle:
//   ENG_ADD  Seq-additional unit, y[l] = a[l] + b[l]
//   ENG_SUB  APSP-subtract unit,  y[l] = a[l] - b[l]  (D_old - D_new);
//            'changed' tells whether any lane differs
//   ENG_MAX  max/min unit, red = max over lanes of a (lanes with mask = 0 skipped),
//            red_idx = lowest lane holding it
//   ENG_MIN  same with min
// The three units and their formulas are the paper's; the opcode encoding,
// lane mask and the single register stage (results valid one cycle after
// in_valid) are this design's choices. Adds and subtracts wrap.
module max_min_engine
  import gendram_pkg::*;
#(
  parameter int LANES = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [1:0]                        op,       // 0 ADD, 1 SUB, 2 MAX, 3 MIN
  input  logic [LANES-1:0]                  mask,
  input  logic signed [LANES-1:0][ELEM_W-1:0] a,
  input  logic signed [LANES-1:0][ELEM_W-1:0] b,
  output logic                              out_valid,
  output logic signed [LANES-1:0][ELEM_W-1:0] y,
  output logic                              changed,
  output logic signed [ELEM_W-1:0]          red,
  output logic [$clog2(LANES)-1:0]          red_idx
);

  localparam logic [1:0] ENG_ADD = 2'd0, ENG_SUB = 2'd1, ENG_MAX = 2'd2, ENG_MIN = 2'd3;

  logic signed [LANES-1:0][ELEM_W-1:0] y_c;
  logic                                chg_c;
  logic signed [ELEM_W-1:0]            red_c;
  logic [$clog2(LANES)-1:0]            idx_c;
  logic                                found;

  always_comb begin
    y_c   = '0;
    chg_c = 1'b0;
    red_c = (op == ENG_MAX) ? NEG_INF : POS_INF;
    idx_c = '0;
    found = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      if (op == ENG_ADD) y_c[l] = a[l] + b[l];
      else               y_c[l] = a[l] - b[l];
      if (op == ENG_SUB && a[l] != b[l]) chg_c = 1'b1;
      if (mask[l]) begin
        if (!found || (op == ENG_MAX && $signed(a[l]) > red_c) || (op == ENG_MIN && $signed(a[l]) < red_c)) begin
          red_c = a[l];
          idx_c = l[$clog2(LANES)-1:0];
        end
        found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; y <= '0; changed <= 1'b0; red <= '0; red_idx <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y <= y_c; changed <= chg_c; red <= red_c; red_idx <= idx_c;
      end
    end
  end

endmodule
