// compute_pu_tb: one Compute PU with 4 PEs of 16 lanes (64 x 64 tiles, two
// 1024-bit beats per tile row) on a 4-stop ring position, with the DRAM
// bank-group model behind it. The testbench plays the rest of the machine:
// it puts tiles in DRAM, issues commands, and injects the flits other PUs
// would broadcast. Checked against software blocked Floyd-Warshall:
//   pivot tile (0,0), k = 0: self update, then STORE and SEND (flit headers,
//     order and data);
//   row tile (0,1): A = pivot tile from the ring, B = itself;
//   column tile (1,0): A = itself, B = pivot tile from the ring;
//   internal tile (1,1): A = tile (1,0), B = tile (0,1), both from the ring,
//     with a flit of an unrelated tile that must be ignored.
// An update must take B*B cycles plus a few. Then genomics: candidate flits
// are injected faster than the PU aligns them, so the queue overflows
// (counted drops); every result must match a banded-alignment model over the
// reference held in DRAM. No DRAM timing violation may occur.
module compute_pu_tb;
  import gendram_pkg::*;
  localparam int NP = 4, L = 16, B = NP * L, BPR = B / EPB, CQ = 4;
  localparam int ME = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, done, busy;
  pu_cmd_e cmd = PC_NOP;
  logic [TILE_IDX_W-1:0] cmd_ti = 0, cmd_tj = 0, cmd_k = 0;
  logic [3:0] cmd_bank = 4'd2;
  logic [ROW_W-1:0] cmd_row = 0, ref_row = 15'd300;
  logic ring_in_valid = 0, ring_out_valid;
  flit_hdr_t ring_in_hdr = '0, ring_out_hdr;
  logic [IO_W-1:0] ring_in_data = '0, ring_out_data;
  dram_cmd_e dram_cmd; logic [3:0] dram_bank; logic [ROW_W-1:0] dram_row; logic [COL_W-1:0] dram_col;
  logic [IO_W-1:0] dram_wdata, dram_rdata; logic dram_rvalid;
  logic res_valid, res_ready = 1;
  logic [15:0] res_id; logic [31:0] res_loc; logic signed [ELEM_W-1:0] res_score;
  logic [31:0] act_count, hit_count, cand_drops;

  compute_pu #(.N_PE(NP), .LANES(L), .N_RING(4), .CQ_DEPTH(CQ)) dut (
    .clk, .rst_n, .my_id(PU_ID_W'(ME)), .tt_we(1'b0), .tt_idx(3'd0), .tt_wdata(32'd0), .*);
  dram_model u_dram (.clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col),
                     .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata));

  typedef int tile_t [B][B];
  tile_t T00, T01, T10, T11, R;

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [IO_W-1:0] beat_of(input tile_t t, input int r, input int b);
    logic [IO_W-1:0] d;
    for (int e = 0; e < EPB; e++) d[e*ELEM_W +: ELEM_W] = t[r][b*EPB + e];
    return d;
  endfunction

  task automatic put_tile(input tile_t t, input int row0);
    for (int r = 0; r < B; r++) for (int b = 0; b < BPR; b++) begin
      int lin; lin = r * BPR + b;
      u_dram.poke(4'd2, ROW_W'(row0 + (lin >> COL_W)), COL_W'(lin), beat_of(t, r, b));
    end
  endtask

  task automatic check_dram_tile(input tile_t t, input int row0, input string what);
    int bad; bad = 0;
    repeat (80) @(posedge clk);    // STORE's done is posted: let the last write drain
    for (int r = 0; r < B; r++) for (int b = 0; b < BPR; b++) begin
      int lin; lin = r * BPR + b;
      if (u_dram.peek(4'd2, ROW_W'(row0 + (lin >> COL_W)), COL_W'(lin)) !== beat_of(t, r, b)) bad++;
    end
    chk(bad == 0, what);
    if (bad != 0) $display("  %0d beats differ", bad);
  endtask

  task automatic issue(input pu_cmd_e c, input int ti, input int tj, input int k, input int row);
    @(negedge clk);
    cmd = c; cmd_ti = TILE_IDX_W'(ti); cmd_tj = TILE_IDX_W'(tj); cmd_k = TILE_IDX_W'(k); cmd_row = ROW_W'(row);
    cmd_valid = 1;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    @(negedge clk); cmd_valid = 0;
    @(posedge clk); while (!done) @(posedge clk);
  endtask

  task automatic send_tile(input tile_t t, input int tr, input int tc);
    for (int r = 0; r < B; r++) for (int b = 0; b < BPR; b++) begin
      @(negedge clk);
      ring_in_valid = 1; ring_in_hdr = '0; ring_in_hdr.kind = FK_TILE; ring_in_hdr.bcast = 1;
      ring_in_hdr.src = PU_ID_W'(2); ring_in_hdr.tile_r = TILE_IDX_W'(tr); ring_in_hdr.tile_c = TILE_IDX_W'(tc);
      ring_in_hdr.row = 8'(r); ring_in_hdr.beat = 3'(b); ring_in_data = beat_of(t, r, b);
    end
    @(negedge clk); ring_in_valid = 0;
  endtask

  function automatic tile_t rnd_tile(input bit diag0);
    tile_t t;
    for (int r = 0; r < B; r++) for (int c = 0; c < B; c++)
      t[r][c] = (diag0 && r == c) ? 0 : (($urandom_range(0, 3) == 0) ? int'(POS_INF) : int'($urandom_range(1, 100)));
    return t;
  endfunction

  function automatic int sadd(input int a, input int b);
    longint s; s = longint'(a) + longint'(b);
    return (s > longint'(POS_INF)) ? int'(POS_INF) : int'(s);
  endfunction

  // C = min(C, A (x) B) in the PU's loop order; A/B may alias C via flags
  function automatic tile_t upd(input tile_t C, input tile_t A, input tile_t Bt, input bit a_self, input bit b_self);
    for (int k = 0; k < B; k++) for (int i = 0; i < B; i++) for (int j = 0; j < B; j++) begin
      int a, bb, s;
      a = a_self ? C[i][k] : A[i][k]; bb = b_self ? C[k][j] : Bt[k][j];
      s = sadd(a, bb); if (s < C[i][j]) C[i][j] = s;
    end
    return C;
  endfunction

  // flits leaving the PU during SEND
  int sent_flits = 0, sent_bad = 0; bit capture = 0;
  always @(posedge clk) if (capture && ring_out_valid && ring_out_hdr.src == PU_ID_W'(ME)) begin
    int r, b; r = sent_flits / BPR; b = sent_flits % BPR;
    if (!ring_out_hdr.bcast || ring_out_hdr.kind != FK_TILE || int'(ring_out_hdr.row) != r ||
        int'(ring_out_hdr.beat) != b || ring_out_hdr.tile_r != 0 || ring_out_hdr.tile_c != 0 ||
        ring_out_data !== beat_of(R, r, b)) sent_bad++;
    sent_flits++;
  end

  // ---- genomics model ----
  localparam int GLEN = 2048;
  int G [GLEN];
  int exp_score [int], exp_loc [int], results = 0;
  function automatic int band_score(input int q [$], input int ws);
    int NEG, prev [L], cur [L];
    NEG = int'(NEG_INF);
    for (int d = 0; d < L; d++) prev[d] = (d < L - 1) ? 0 : NEG;    // row -1, j = d - 1
    // prev[d] holds H(i-1, i-1+d); diag of (i, i+d) is prev[d], up is prev[d+1]
    for (int i = 0; i < q.size(); i++) begin
      for (int d = 0; d < L; d++) begin
        int dg, up, lf, v;
        dg = (i == 0) ? 0 : prev[d];
        dg = (dg == NEG) ? NEG : dg + ((q[i] == G[ws + i + d]) ? 1 : -1);
        up = (d == L - 1) ? NEG : prev[d + 1];
        up = (up == NEG) ? NEG : up - 1;
        lf = (d == 0) ? NEG : cur[d - 1] - 1;
        v = dg; if (up > v) v = up; if (lf > v) v = lf;
        cur[d] = v;
      end
      prev = cur;
    end
    begin int m; m = prev[0]; for (int d = 1; d < L; d++) if (prev[d] > m) m = prev[d]; return m; end
  endfunction

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int id; id = int'(res_id);
    chk(exp_score.exists(id), "result for unknown read");
    if (exp_score.exists(id)) begin
      chk(res_score == exp_score[id] && int'(res_loc) == exp_loc[id], "alignment score");
      if (res_score != exp_score[id]) $display("  read %0d score %0d exp %0d", id, res_score, exp_score[id]);
    end
    results++;
  end

  initial begin
    int t0, ups;
    repeat (3) @(posedge clk); rst_n = 1;
    T00 = rnd_tile(1); T01 = rnd_tile(0); T10 = rnd_tile(0); T11 = rnd_tile(1);
    put_tile(T00, 0); put_tile(T01, 8); put_tile(T10, 16); put_tile(T11, 24);
    // pivot tile
    issue(PC_LOAD, 0, 0, 0, 0);
    t0 = $time; issue(PC_UPDATE, 0, 0, 0, 0); ups = ($time - t0) / 10;
    chk(ups >= B * B && ups <= B * B + 8, "update cycle count");
    $display("update of a %0d x %0d tile: %0d cycles", B, B, ups);
    R = upd(T00, T00, T00, 1, 1);
    issue(PC_STORE, 0, 0, 0, 0);
    check_dram_tile(R, 0, "pivot tile");
    capture = 1; issue(PC_SEND, 0, 0, 0, 0); repeat (3) @(posedge clk); capture = 0;
    chk(sent_flits == B * BPR && sent_bad == 0, "SEND flits");
    T00 = R;
    // row tile (0,1)
    issue(PC_LOAD, 0, 1, 0, 8);
    send_tile(T00, 0, 0);
    issue(PC_UPDATE, 0, 1, 0, 8);
    issue(PC_STORE, 0, 1, 0, 8);
    T01 = upd(T01, T00, T00, 0, 1);
    check_dram_tile(T01, 8, "row tile");
    // column tile (1,0)
    issue(PC_LOAD, 1, 0, 0, 16);
    send_tile(T00, 0, 0);
    issue(PC_UPDATE, 1, 0, 0, 16);
    issue(PC_STORE, 1, 0, 0, 16);
    T10 = upd(T10, T00, T00, 1, 0);
    check_dram_tile(T10, 16, "column tile");
    // internal tile (1,1)
    issue(PC_LOAD, 1, 1, 0, 24);
    send_tile(T10, 1, 0); send_tile(T01, 0, 1); send_tile(T00, 3, 3);
    issue(PC_UPDATE, 1, 1, 0, 24);
    issue(PC_STORE, 1, 1, 0, 24);
    T11 = upd(T11, T10, T01, 0, 0);
    check_dram_tile(T11, 24, "internal tile");
    chk(act_count > 0 && hit_count > act_count, "row-buffer hits dominate");
    // ---- genomics ----
    for (int p = 0; p < GLEN; p++) G[p] = $urandom_range(0, 3);
    for (int w = 0; w < GLEN / (IO_W / 2); w++) begin
      logic [IO_W-1:0] d;
      for (int n = 0; n < IO_W / 2; n++) d[2*n +: 2] = 2'(G[w * (IO_W / 2) + n]);
      u_dram.poke(4'd2, ref_row + ROW_W'(w >> COL_W), COL_W'(w), d);
    end
    for (int r = 0; r < 12; r++) begin
      int len, loc; int q [$]; cand_payload_t cp;
      len = $urandom_range(20, 120); loc = $urandom_range(L, GLEN - 2 * L - 256 - 520);
      if (r % 3 == 0) loc = 500 + $urandom_range(0, 20);     // window straddles a beat
      q = {};
      for (int i = 0; i < len; i++) q.push_back(($urandom_range(0, 9) == 0) ? int'($urandom_range(0, 3)) : G[loc + i]);
      if (r % 4 == 1) begin q.delete(5); q.push_back(0); end  // an indel
      exp_score[r] = band_score(q, loc - L / 2); exp_loc[r] = loc;
      cp = '0; cp.read_id = 16'(r); cp.read_len = 16'(len); cp.loc = 32'(loc);
      for (int i = 0; i < len; i++) cp.bases[2*i +: 2] = 2'(q[i]);
      @(negedge clk);
      ring_in_valid = 1; ring_in_hdr = '0; ring_in_hdr.kind = FK_CAND; ring_in_hdr.dst = PU_ID_W'(ME);
      ring_in_hdr.src = PU_ID_W'(0); ring_in_data = IO_W'(cp);
      if (r == 7) begin @(negedge clk); ring_in_valid = 0; wait (!busy); end
    end
    @(negedge clk); ring_in_valid = 0;
    wait (!busy); repeat (5) @(posedge clk);
    chk(cand_drops > 0, "candidate queue overflow seen");
    chk(results + int'(cand_drops) == 12, "every candidate aligned or dropped");
    chk(u_dram.violations == 0, "DRAM timing");
    $display("results %0d drops %0d act %0d hits %0d", results, cand_drops, act_count, hit_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
