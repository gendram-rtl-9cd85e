// semiring_alu: the multiplier-less adder/comparator of a Compute PE.
//
// One lane per element. In min-plus mode (APSP) a lane returns
//   y = min(a, b + c)
// and in max-plus mode (sequence alignment) it returns
//   y = max(a, b, c + d)
// which are the two datapath shapes the paper names, min(A, B+C) and
// max(A, B, C+D). The add saturates at +/-(2^30-1), so an "infinite" distance
// stays infinite. In Int5 precision the add result is clamped to the signed
// 5-bit range [-16, 15] (the difference-based alignment format); inputs are
// then expected to be in that range already. Saturation and the clamp are this
// design's choices; the paper only names the two precisions.
// Purely combinational.
module semiring_alu
  import gendram_pkg::*;
#(
  parameter int LANES = 16
) (
  input  semiring_e                      mode,
  input  prec_e                          prec,
  input  logic signed [LANES-1:0][ELEM_W-1:0] a,
  input  logic signed [LANES-1:0][ELEM_W-1:0] b,
  input  logic signed [LANES-1:0][ELEM_W-1:0] c,
  input  logic signed [LANES-1:0][ELEM_W-1:0] d,
  output logic signed [LANES-1:0][ELEM_W-1:0] y
);

  function automatic logic signed [ELEM_W-1:0] sat_add(
      input logic signed [ELEM_W-1:0] x, input logic signed [ELEM_W-1:0] z, input prec_e p);
    logic signed [ELEM_W:0] s;
    s = $signed({x[ELEM_W-1], x}) + $signed({z[ELEM_W-1], z});
    if (p == PREC_INT5) begin
      if (s > 33'sd15)       return 32'sd15;
      else if (s < -33'sd16) return -32'sd16;
      else                   return s[ELEM_W-1:0];
    end
    if (s > $signed({POS_INF[ELEM_W-1], POS_INF}))      return POS_INF;
    else if (s < $signed({NEG_INF[ELEM_W-1], NEG_INF})) return NEG_INF;
    else                                       return s[ELEM_W-1:0];
  endfunction

  logic signed [ELEM_W-1:0] t, m;

  always_comb begin
    t = '0;
    m = '0;
    y = '0;
    for (int l = 0; l < LANES; l++) begin
      // element selects of a packed array are unsigned: compare as signed
      if (mode == SR_MINPLUS) begin
        t = sat_add($signed(b[l]), $signed(c[l]), prec);
        y[l] = (t < $signed(a[l])) ? t : a[l];
      end else begin
        t = sat_add($signed(c[l]), $signed(d[l]), prec);
        m = ($signed(a[l]) > $signed(b[l])) ? a[l] : b[l];
        y[l] = (t > m) ? t : m;
      end
    end
  end

endmodule
