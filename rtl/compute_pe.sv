// compute_pe: one Compute PE, a LANES-wide SIMD slice of a Compute PU.
//
// A PE owns LANES columns of the PU's B x B tile (B = 16 PEs x 16 lanes = 256
// by default). Its local memory (32 KB by default) is two banks of ROWS x
// (LANES x 32-bit) rows: the C bank holds its slice of the tile being updated,
// the B bank its slice of the pivot-row operand tile.
//
// FW op (op_aln = 0), one row per cycle, fully pipelined:
//   C[i][l] = min(C[i][l], a + Bsrc[k][l])   for every lane l
// where a is the scalar A[i][k] supplied by the PU in the second pipeline stage
// (input a_in) and Bsrc is the B bank (op_bsel = 0) or the C bank itself
// (op_bsel = 1, used when the tile is its own pivot row). Stage 1 reads C[i]
// and Bsrc[k]; stage 2 computes and writes C[i]. A read of the row being
// written in the same cycle is forwarded, so back-to-back dependent ops are
// exact. s2_crow exposes the stage-2 C[i] so the PU can pick A[i][k] out of
// the tile itself (self and column-block updates).
//
// ALN op (op_aln = 1): one row i of a banded alignment. Lane d holds the cell
// (i, j = i + d - LANES/2) inside a band of LANES diagonals:
//   H[i][d] = max(H[i-1][d] + s(q_i, r_j), H[i-1][d+1] + GAP, H[i][d-1] + GAP)
// with s = MATCH or MISMATCH and cells outside the band at minus infinity. The
// first two terms use the semiring ALU in max-plus mode; the third is a chain
// across the lanes within the cycle. aln_init makes the previous row all zero
// (free start). Each H row is stored in C[i] (kept for traceback) and in hrow.
//
// The semiring operation, Int32/Int5 precisions, the 32 KB local memory and the
// 512-bit slice per PE follow the paper. The two-bank split of the local
// memory, the pipeline, the band layout and the scoring constants are this
// design's choices. The "Sorter" shown in the paper's PE figure has no
// described function and is not built here; the PU's max/min engine picks the
// best score instead.
module compute_pe
  import gendram_pkg::*;
#(
  parameter int LANES    = 16,
  parameter int ROWS     = 256,
  parameter int MATCH    = 1,
  parameter int MISMATCH = -1,
  parameter int GAP      = -1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  prec_e                      prec,
  // load / store port (one LANES-wide row per cycle)
  input  logic                       ld_en,
  input  logic                       ld_sel,      // 0: C bank, 1: B bank
  input  logic [$clog2(ROWS)-1:0]    ld_row,
  input  logic [LANES*ELEM_W-1:0]    ld_data,
  input  logic                       st_en,
  input  logic [$clog2(ROWS)-1:0]    st_row,
  output logic [LANES*ELEM_W-1:0]    st_data,     // one cycle after st_en
  // operation issue (stage 1)
  input  logic                       op_valid,
  input  logic                       op_aln,
  input  logic                       op_bsel,     // FW: 0 B bank, 1 C bank
  input  logic [$clog2(ROWS)-1:0]    op_i,
  input  logic [$clog2(ROWS)-1:0]    op_k,
  input  logic [1:0]                 op_qbase,
  input  logic [LANES-1:0][1:0]      op_rbases,
  input  logic                       op_init,
  // stage 2
  output logic                       s2_valid,
  output logic [LANES*ELEM_W-1:0]    s2_crow,
  input  logic signed [ELEM_W-1:0]   a_in,
  output logic [LANES*ELEM_W-1:0]    hrow
);

  localparam int AW = $clog2(ROWS);

  logic [LANES*ELEM_W-1:0] cmem [ROWS];
  logic [LANES*ELEM_W-1:0] bmem [ROWS];

  // stage 2 registers
  logic                    s2_aln;
  logic [AW-1:0]           s2_i;
  logic [LANES*ELEM_W-1:0] crow_q, brow_q;
  logic [1:0]              qb_q;
  logic [LANES-1:0][1:0]   rb_q;
  logic                    init_q;
  logic [LANES*ELEM_W-1:0] wres;          // stage 2 result written to C[s2_i]

  // ---- stage 2 datapath ----
  logic signed [LANES-1:0][ELEM_W-1:0] alu_a, alu_b, alu_c, alu_d, alu_y;
  logic signed [LANES-1:0][ELEM_W-1:0] hprev_v, crow_v, brow_v, hnew;

  semiring_alu #(.LANES(LANES)) u_alu (
    .mode (s2_aln ? SR_MAXPLUS : SR_MINPLUS),
    .prec (prec),
    .a(alu_a), .b(alu_b), .c(alu_c), .d(alu_d), .y(alu_y)
  );

  logic signed [ELEM_W-1:0] diag, up, left, run;

  always_comb begin
    crow_v  = crow_q;
    brow_v  = brow_q;
    hprev_v = hrow;
    alu_a = '0; alu_b = '0; alu_c = '0; alu_d = '0;
    diag = '0; up = '0;
    for (int l = 0; l < LANES; l++) begin
      if (!s2_aln) begin
        alu_a[l] = crow_v[l];
        alu_b[l] = a_in;
        alu_c[l] = brow_v[l];
        alu_d[l] = '0;
      end else begin
        diag = init_q ? '0 : hprev_v[l];
        if (l == LANES-1) up = NEG_INF;
        else              up = init_q ? '0 : hprev_v[l+1];
        alu_a[l] = (up == NEG_INF) ? NEG_INF : up + ELEM_W'(GAP);
        alu_b[l] = NEG_INF;
        alu_c[l] = diag;
        alu_d[l] = (qb_q == rb_q[l]) ? ELEM_W'(MATCH) : ELEM_W'(MISMATCH);
      end
    end
  end

  // left-neighbour chain of the banded row
  always_comb begin
    hnew = '0;
    run  = NEG_INF;                      // H[i][-1]
    left = NEG_INF;
    for (int l = 0; l < LANES; l++) begin
      left = (run == NEG_INF) ? NEG_INF : run + ELEM_W'(GAP);
      run  = (left > $signed(alu_y[l])) ? left : alu_y[l];
      hnew[l] = run;
    end
  end

  assign wres = s2_aln ? hnew : alu_y;

  assign s2_crow = crow_q;

  // ---- stage 1: read with forwarding from stage 2 ----
  function automatic logic [LANES*ELEM_W-1:0] fwd_c(input logic [AW-1:0] addr);
    if (s2_valid && s2_i == addr) return wres;
    return cmem[addr];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_aln <= 1'b0; s2_i <= '0;
      crow_q <= '0; brow_q <= '0; qb_q <= '0; rb_q <= '0; init_q <= 1'b0;
      hrow <= '0; st_data <= '0;
    end else begin
      s2_valid <= op_valid;
      if (op_valid) begin
        s2_aln <= op_aln;
        s2_i   <= op_i;
        qb_q   <= op_qbase;
        rb_q   <= op_rbases;
        init_q <= op_init;
        crow_q <= fwd_c(op_i);
        brow_q <= op_bsel ? fwd_c(op_k) : bmem[op_k];
      end
      if (s2_valid && s2_aln) hrow <= hnew;
      if (st_en) st_data <= cmem[st_row];
    end
  end

  // memory writes (no reset on the arrays)
  always_ff @(posedge clk) begin
    if (s2_valid)              cmem[s2_i]   <= wres;
    else if (ld_en && !ld_sel) cmem[ld_row] <= ld_data;
    if (ld_en && ld_sel)       bmem[ld_row] <= ld_data;
  end

endmodule
