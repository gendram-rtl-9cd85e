// compute_pe_tb: a PE with LANES = ROWS = 8 holds a whole 8 x 8 tile.
//  1. Floyd-Warshall on the tile in place (A and B taken from the tile itself,
//     one op per cycle, so the forwarding path is exercised) against a plain
//     triple loop.
//  2. Block update C = min(C, A + B) with B in the B bank and A supplied
//     from outside, one row updated on consecutive cycles (read-after-write
//     through the forwarding path), against a reference.
//  3. Banded alignment rows against a reference that evaluates the same
//     recurrence cell by cell over (i, j).
module compute_pe_tb;
  import gendram_pkg::*;
  localparam int L = 8, R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_en = 0, ld_sel = 0, st_en = 0, op_valid = 0, op_aln = 0, op_bsel = 0, op_init = 0, s2_valid;
  logic [2:0] ld_row = 0, st_row = 0, op_i = 0, op_k = 0;
  logic [L*ELEM_W-1:0] ld_data = 0, st_data, s2_crow, hrow;
  logic [1:0] op_qbase = 0;
  logic [L-1:0][1:0] op_rbases = 0;
  logic signed [ELEM_W-1:0] a_in;
  logic signed [ELEM_W-1:0] a_ext = 0;
  logic a_self = 0;
  int k_s2 = 0;

  compute_pe #(.LANES(L), .ROWS(R)) dut (.clk, .rst_n, .prec(PREC_INT32), .*);

  assign a_in = a_self ? $signed(s2_crow[k_s2*ELEM_W +: ELEM_W]) : a_ext;

  int D [R][R], Bm [R][R], Am [R][R];

  task automatic load_row(input logic sel, input int r, input int v [R][R]);
    @(negedge clk); ld_en = 1; ld_sel = sel; ld_row = 3'(r);
    for (int c = 0; c < L; c++) ld_data[c*ELEM_W +: ELEM_W] = v[r][c];
    @(negedge clk); ld_en = 0;
  endtask

  task automatic check_tile(input int ref_t [R][R], input string what);
    for (int r = 0; r < R; r++) begin
      @(negedge clk); st_en = 1; st_row = 3'(r);
      @(negedge clk); st_en = 0;
      for (int c = 0; c < L; c++) begin
        checks++;
        if ($signed(st_data[c*ELEM_W +: ELEM_W]) != ref_t[r][c]) begin
          failures++; $display("FAIL %s [%0d][%0d] got %0d exp %0d", what, r, c,
                               $signed(st_data[c*ELEM_W +: ELEM_W]), ref_t[r][c]);
        end
      end
    end
  endtask

  // stage-2 bookkeeping for the A operand
  always @(posedge clk) if (op_valid) k_s2 <= int'(op_k);

  initial begin
    int cyc0, cyc1;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- 1. FW self-update ----
    for (int r = 0; r < R; r++) for (int c = 0; c < L; c++)
      D[r][c] = (r == c) ? 0 : (($urandom_range(0, 3) == 0) ? int'(POS_INF) : int'($urandom_range(1, 50)));
    for (int r = 0; r < R; r++) load_row(0, r, D);
    a_self = 1;
    @(negedge clk); cyc0 = $time;
    for (int k = 0; k < R; k++) for (int i = 0; i < R; i++) begin
      op_valid = 1; op_aln = 0; op_bsel = 1; op_i = 3'(i); op_k = 3'(k);
      @(negedge clk);
    end
    op_valid = 0; cyc1 = $time;
    checks++; if ((cyc1 - cyc0) / 10 != R * R) begin failures++; $display("FAIL rate"); end
    @(negedge clk);
    for (int k = 0; k < R; k++) for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) begin
      longint s; s = longint'(D[i][k]) + longint'(D[k][j]);
      if (s > longint'(POS_INF)) s = POS_INF;
      if (s < D[i][j]) D[i][j] = int'(s);
    end
    check_tile(D, "fw-self");
    // ---- 2. block update with B bank and external A ----
    for (int r = 0; r < R; r++) for (int c = 0; c < L; c++) begin
      Bm[r][c] = $urandom_range(0, 40); Am[r][c] = $urandom_range(0, 40); D[r][c] = $urandom_range(0, 100);
    end
    for (int r = 0; r < R; r++) begin load_row(1, r, Bm); load_row(0, r, D); end
    a_self = 0;
    for (int i = 0; i < R; i++) for (int k = 0; k < R; k++) begin   // same row back to back
      @(negedge clk); op_valid = 1; op_bsel = 0; op_i = 3'(i); op_k = 3'(k);
      @(posedge clk); #1 a_ext = Am[i][k];       // A arrives in stage 2
    end
    @(negedge clk); op_valid = 0; @(negedge clk);
    for (int k = 0; k < R; k++) for (int i = 0; i < R; i++) for (int j = 0; j < R; j++)
      if (Am[i][k] + Bm[k][j] < D[i][j]) D[i][j] = Am[i][k] + Bm[k][j];
    check_tile(D, "block");
    // ---- 3. banded alignment ----
    begin
      int Q [12]; int RF [12 + L];
      int H [13][12 + L + 1];   // H[i+1][j+1], NEG outside the band
      int NEG; NEG = int'(NEG_INF);
      for (int n = 0; n < 12; n++) Q[n] = $urandom_range(0, 3);
      for (int n = 0; n < 12 + L; n++) RF[n] = (n >= 2 && n - 2 < 12 && $urandom_range(0, 4) != 0) ? Q[n-2] : int'($urandom_range(0, 3));
      for (int i = -1; i < 12; i++) for (int j = -1; j < 12 + L; j++) begin
        int v;
        if (j < i || j > i + L - 1 + (i < 0 ? 0 : 0)) v = NEG;
        if (i == -1) v = (j >= -1 && j <= L - 2) ? 0 : NEG;
        else if (j < i || j > i + L - 1) v = NEG;
        else begin
          int dg, up, lf;
          dg = H[i][j] == NEG ? NEG : H[i][j] + ((Q[i] == RF[j]) ? 1 : -1);
          up = H[i][j+1] == NEG ? NEG : H[i][j+1] - 1;
          lf = (j - 1 < i) ? NEG : H[i+1][j] - 1;
          v = dg; if (up > v) v = up; if (lf > v) v = lf;
        end
        H[i+1][j+1] = v;
      end
      for (int i = 0; i < 12; i++) begin
        @(negedge clk); op_valid = 1; op_aln = 1; op_init = (i == 0); op_i = 3'(i % R);
        op_qbase = 2'(Q[i]);
        for (int d = 0; d < L; d++) op_rbases[d] = 2'(RF[i + d]);
      end
      @(negedge clk); op_valid = 0; op_aln = 0; @(negedge clk);
      for (int d = 0; d < L; d++) begin
        checks++;
        if ($signed(hrow[d*ELEM_W +: ELEM_W]) != H[12][11 + d + 1]) begin
          failures++; $display("FAIL aln lane %0d got %0d exp %0d", d, $signed(hrow[d*ELEM_W +: ELEM_W]), H[12][11+d+1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
