// gendram_top_tb: the whole logic die, end to end, at reduced size: 2 Search
// PUs and 4 Compute PUs on a 6-stop ring, 2 PEs of 16 lanes per PU (32 x 32
// tiles), 4-base seeds. Every ring stop has a DRAM bank-group model.
//
// Run 1, APSP: a random 64-vertex graph is split into a 2 x 2 grid of tiles,
// each placed in the bank-group of the Compute PU the tile mapping assigns
// it. After the run every tile read back from DRAM must equal the result of
// a plain Floyd-Warshall on the whole graph.
// Run 2, genomics (after a tiering-table write that slows tier 0): each
// Search PU finds 4 reads, cut from a 2048-base reference with a few
// substitutions, in its bank-group together with PTR/CAL tables indexing that
// reference; each Compute PU holds a copy of the reference. Every alignment
// result must match a banded-alignment model of the same read at the same
// location, every read's true origin must be among its results, and results
// plus dropped candidates must equal candidates sent.
// Mechanisms counted (a failure if one never happens): super-steps, ring
// broadcasts, DRAM activations, row-buffer hits, candidates sent over the
// ring, alignments, the mode switch APSP -> genomics, the tiering-table
// write. Ring injection stalls and candidate drops are reported. No DRAM
// timing violation is allowed.
module gendram_top_tb;
  import gendram_pkg::*;
  localparam int NS = 2, NC = 4, NPE = 2, L = 16, KK = 4, STR = 4, QD = 8;
  localparam int NP = NS + NC, B = NPE * L, BPR = B / EPB, M = 2, N = M * B;
  localparam int GLEN = 2048, NREAD = 4;
  localparam int PTRB = 0, CALB = 256;
  localparam logic [ROW_W-1:0] TROW = 15'd64, RROW = 15'd128, FROW = 15'd200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_start = 0, host_mode = 0, host_done, host_busy, tt_we = 0;
  logic [TILE_IDX_W:0] m = 5'(M);
  logic [15:0] num_reads = 16'(NREAD);
  logic [7:0] min_votes = 8'd2;
  logic [2:0] tt_idx = 0; logic [31:0] tt_wdata = 0;
  logic res_valid, res_ready = 1; logic [15:0] res_id; logic [31:0] res_loc;
  logic signed [ELEM_W-1:0] res_score;
  dram_cmd_e dram_cmd [NP]; logic [3:0] dram_bank [NP]; logic [ROW_W-1:0] dram_row [NP];
  logic [COL_W-1:0] dram_col [NP]; logic [IO_W-1:0] dram_wdata [NP], dram_rdata [NP];
  logic dram_rvalid [NP];
  logic [31:0] n_supersteps, n_broadcasts, cands_sent, cand_drops, act_total, hit_total;

  gendram_top #(.N_SRCH(NS), .N_CMP(NC), .N_PE(NPE), .LANES(L), .K(KK), .STRIDE(STR), .QDEPTH(QD)) dut (
    .clk, .rst_n, .host_start, .host_mode, .m, .tile_row(TROW), .num_reads, .read_row(RROW),
    .ref_row(FROW), .ptr_base(32'(PTRB)), .cal_base(32'(CALB)), .min_votes, .host_done, .host_busy,
    .tt_we, .tt_idx, .tt_wdata, .res_valid, .res_ready, .res_id, .res_loc, .res_score,
    .dram_cmd, .dram_bank, .dram_row, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata,
    .n_supersteps, .n_broadcasts, .cands_sent, .cand_drops, .act_total, .hit_total);

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- shared test data ----------------
  int D [N][N], DR [N][N];
  int G [GLEN];
  logic [63:0] tbl [int];                    // PTR/CAL table words
  logic [2*MAX_READ-1:0] rbits [int];
  int rlen [int], rorg [int];
  event load_ev, check_ev, gen_ev;
  int tiles_bad = 0, stalls = 0;

  function automatic logic [IO_W-1:0] tile_beat(input int ti, input int tj, input int r, input int b, input bit res);
    logic [IO_W-1:0] d;
    for (int e = 0; e < EPB; e++) d[e*ELEM_W +: ELEM_W] = res ? DR[ti*B + r][tj*B + b*EPB + e] : D[ti*B + r][tj*B + b*EPB + e];
    return d;
  endfunction

  for (genvar p = 0; p < NP; p++) begin : g_bg
    dram_model u_dram (.clk, .cmd(dram_cmd[p]), .bank(dram_bank[p]), .row(dram_row[p]), .col(dram_col[p]),
                       .wdata(dram_wdata[p]), .rvalid(dram_rvalid[p]), .rdata(dram_rdata[p]));
    // tile placement: tile (i,j) on Compute PU (i*M + j) mod NC
    if (p >= NS) begin : g_c
      initial begin
        @(load_ev);
        for (int t = 0; t < M * M; t++) if ((t % NC) == p - NS)
          for (int r = 0; r < B; r++) for (int b = 0; b < BPR; b++)
            u_dram.poke(4'd0, TROW + ROW_W'((r * BPR + b) >> COL_W), COL_W'(r * BPR + b), tile_beat(t / M, t % M, r, b, 0));
        @(check_ev);
        for (int t = 0; t < M * M; t++) if ((t % NC) == p - NS)
          for (int r = 0; r < B; r++) for (int b = 0; b < BPR; b++)
            if (u_dram.peek(4'd0, TROW + ROW_W'((r * BPR + b) >> COL_W), COL_W'(r * BPR + b)) !== tile_beat(t / M, t % M, r, b, 1))
              tiles_bad++;
        @(gen_ev);
        for (int w = 0; w < GLEN / (IO_W / 2); w++) begin
          logic [IO_W-1:0] d;
          for (int n = 0; n < IO_W / 2; n++) d[2*n +: 2] = 2'(G[w * (IO_W / 2) + n]);
          u_dram.poke(4'd0, FROW + ROW_W'(w >> COL_W), COL_W'(w), d);
        end
      end
    end else begin : g_s
      initial begin
        @(gen_ev);
        foreach (tbl[w]) begin
          int lin; logic [IO_W-1:0] d;
          lin = w >> 4;
          d = u_dram.peek(4'd0, ROW_W'(lin >> COL_W), COL_W'(lin));
          d[(w % 16) * 64 +: 64] = tbl[w];
          u_dram.poke(4'd0, ROW_W'(lin >> COL_W), COL_W'(lin), d);
        end
        for (int n = 0; n < NREAD; n++) begin
          logic [IO_W-1:0] d; int id;
          id = p * 16 + n; d = '0;
          d[2*MAX_READ-1:0] = rbits[id]; d[527:512] = 16'(id); d[543:528] = 16'(rlen[id]);
          u_dram.poke(4'd0, RROW + ROW_W'(n >> COL_W), COL_W'(n), d);
        end
      end
      always @(posedge clk) if (dut.g_search[p].u_spu.inj_valid && !dut.g_search[p].u_spu.inj_ready) stalls++;
    end
  end

  // ---------------- alignment model ----------------
  function automatic int gb(input longint pos);
    return (pos >= 0 && pos < GLEN) ? G[pos] : 0;
  endfunction
  function automatic int band_score(input int id, input longint ws);
    int NEG, prev [L], cur [L];
    NEG = int'(NEG_INF);
    for (int d = 0; d < L; d++) prev[d] = (d < L - 1) ? 0 : NEG;
    for (int i = 0; i < rlen[id]; i++) begin
      for (int d = 0; d < L; d++) begin
        int dg, up, lf, v;
        dg = (i == 0) ? 0 : prev[d];
        dg = (dg == NEG) ? NEG : dg + ((int'(rbits[id][2*i +: 2]) == gb(ws + i + d)) ? 1 : -1);
        up = (d == L - 1) ? NEG : prev[d + 1];
        up = (up == NEG) ? NEG : up - 1;
        lf = (d == 0) ? NEG : cur[d - 1] - 1;
        v = dg; if (up > v) v = up; if (lf > v) v = lf;
        cur[d] = v;
      end
      prev = cur;
    end
    begin int mx; mx = prev[0]; for (int d = 1; d < L; d++) if (prev[d] > mx) mx = prev[d]; return mx; end
  endfunction

  int results = 0, unchecked = 0;
  bit found [int];
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    int id; id = int'(res_id);
    results++;
    if (!rlen.exists(id)) chk(0, "result for unknown read");
    else if (res_loc < 32'(L / 2) || res_loc > 32'(GLEN)) unchecked++;
    else begin
      int e; e = band_score(id, longint'(res_loc) - L / 2);
      chk(res_score == e, "alignment score");
      if (res_score != e) $display("  read %0d loc %0d score %0d exp %0d", id, res_loc, res_score, e);
      if (int'(res_loc) == rorg[id]) found[id] = 1;
    end
  end

  function automatic int kmer(input int p);
    int v = 0;
    for (int i = 0; i < KK; i++) v |= G[p + i] << (2 * i);
    return v;
  endfunction

  initial begin
    int t0, t_apsp, t_gen, viol;
    // ---- graph ----
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      D[i][j] = (i == j) ? 0 : (($urandom_range(0, 5) == 0) ? int'($urandom_range(1, 60)) : int'(POS_INF));
    DR = D;
    for (int k = 0; k < N; k++) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      longint s; s = longint'(DR[i][k]) + longint'(DR[k][j]);
      if (s > longint'(POS_INF)) s = POS_INF;
      if (s < DR[i][j]) DR[i][j] = int'(s);
    end
    ->load_ev;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    // ---- run 1: APSP ----
    @(negedge clk); host_mode = 0; host_start = 1; @(negedge clk); host_start = 0;
    t0 = $time;
    @(posedge clk); while (!host_done) @(posedge clk);
    t_apsp = ($time - t0) / 10;
    repeat (100) @(posedge clk);
    ->check_ev; #1;
    chk(tiles_bad == 0, "APSP result in DRAM");
    if (tiles_bad != 0) $display("  %0d beats differ", tiles_bad);
    chk(n_supersteps == 32'(M), "super-step count");
    chk(n_broadcasts > 0, "ring broadcasts happened");
    $display("APSP %0d vertices: %0d cycles, %0d super-steps, %0d broadcast phases issued",
             N, t_apsp, n_supersteps, n_broadcasts);
    // ---- tiering table: slow tier 0 down (tRCD 6, tRAS 33, tRP 5) ----
    @(negedge clk); tt_we = 1; tt_idx = 0; tt_wdata = {8'd0, 8'd5, 8'd33, 8'd6};
    @(negedge clk); tt_we = 0;

    // ---- run 2: genomics ----
    for (int p = 0; p < GLEN; p++) G[p] = $urandom_range(0, 3);
    begin
      int pos [int][$]; int nxt; nxt = 0;
      for (int p = 0; p + KK <= GLEN; p++) pos[kmer(p)].push_back(p);
      for (int h = 0; h < (1 << 2*KK); h++) begin
        int c; c = pos.exists(h) ? pos[h].size() : 0;
        tbl[PTRB + h] = {32'(c), 32'(nxt)};
        for (int q = 0; q < c; q++) tbl[CALB + nxt + q] = 64'(pos[h][q]);
        nxt += c;
      end
    end
    for (int s = 0; s < NS; s++) for (int n = 0; n < NREAD; n++) begin
      int id, len, o; id = s * 16 + n;
      len = $urandom_range(40, 100); o = $urandom_range(L, GLEN - len - 2 * L);
      rlen[id] = len; rorg[id] = o; rbits[id] = '0;
      for (int i = 0; i < len; i++) rbits[id][2*i +: 2] = 2'(($urandom_range(0, 14) == 0) ? int'($urandom_range(0, 3)) : G[o + i]);
    end
    ->gen_ev; #1;
    @(negedge clk); host_mode = 1; host_start = 1; @(negedge clk); host_start = 0;
    t0 = $time;
    @(posedge clk); while (!host_done) @(posedge clk);
    t_gen = ($time - t0) / 10;
    repeat (20) @(posedge clk);
    chk(cands_sent > 0, "candidates sent over the ring");
    chk(results > 0, "alignments done");
    chk(results + int'(cand_drops) == int'(cands_sent), "every candidate aligned or dropped");
    foreach (rlen[id]) chk(found.exists(id), $sformatf("true origin of read %0d found", id));
    chk(act_total > 0, "DRAM activations");
    chk(hit_total > 0, "row-buffer hits");
    viol = 0;
    viol += g_bg[0].u_dram.violations; viol += g_bg[1].u_dram.violations; viol += g_bg[2].u_dram.violations;
    viol += g_bg[3].u_dram.violations; viol += g_bg[4].u_dram.violations; viol += g_bg[5].u_dram.violations;
    chk(viol == 0, "DRAM timing");
    if (viol != 0) $display("  violations %0d %0d %0d %0d %0d %0d", g_bg[0].u_dram.violations, g_bg[1].u_dram.violations, g_bg[2].u_dram.violations, g_bg[3].u_dram.violations, g_bg[4].u_dram.violations, g_bg[5].u_dram.violations);
    $display("genomics %0d reads: %0d cycles, %0d candidates, %0d alignments (%0d unchecked), %0d drops",
             NS * NREAD, t_gen, cands_sent, results, unchecked, cand_drops);
    $display("mechanisms: supersteps=%0d broadcasts=%0d act=%0d row_hits=%0d cands=%0d alignments=%0d mode_switches=1 tier_writes=1 ring_inject_stalls=%0d drops=%0d",
             n_supersteps, n_broadcasts, act_total, hit_total, cands_sent, results, stalls, cand_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
