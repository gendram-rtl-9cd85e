// search_pu_tb: a Search PU with 3 PEs, 4-base seeds and stride 4, on stop 0
// of a 6-stop ring, with the DRAM bank-group model behind it. The bank-group
// holds 10 read records and the PTR/CAL tables of a random 1000-base
// reference. After start, every candidate flit the PU sends is checked
// against a model of the seeding (same hit limit of 8, 16 sorter slots,
// votes, descending-vote order, min_votes = 2): per read, the list of
// locations and the read fields must match exactly. Flits must be unicast
// candidates from stop 0 to the Compute PUs 2..5 in turn. When the first
// candidate is ready, through traffic is put on the ring input to stall it.
module search_pu_tb;
  import gendram_pkg::*;
  localparam int NPE = 3, KK = 4, ST = 4, NREAD = 10, GLEN = 1000, PTRB = 0, CALB = 512;
  localparam logic [ROW_W-1:0] RROW = 15'd40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, ring_in_valid = 0, ring_out_valid;
  flit_hdr_t ring_in_hdr = '0, ring_out_hdr;
  logic [IO_W-1:0] ring_in_data = '0, ring_out_data, dram_wdata, dram_rdata;
  dram_cmd_e dram_cmd; logic [3:0] dram_bank; logic [ROW_W-1:0] dram_row; logic [COL_W-1:0] dram_col;
  logic dram_rvalid;
  logic [31:0] cands_sent, act_count, hit_count;

  search_pu #(.N_PE(NPE), .N_RING(6), .N_DST(4), .DST_BASE(2), .K(KK), .STRIDE(ST), .QDEPTH(4)) dut (
    .clk, .rst_n, .my_id(PU_ID_W'(0)), .start, .num_reads(16'(NREAD)), .read_row(RROW),
    .ptr_base(32'(PTRB)), .cal_base(32'(CALB)), .min_votes(8'd2), .busy,
    .tt_we(1'b0), .tt_idx(3'd0), .tt_wdata(32'd0), .*);
  dram_model u_dram (.clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col),
                     .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata));

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int G [GLEN];
  logic [63:0] tbl [int];
  int exp_loc [int][$];
  logic [2*MAX_READ-1:0] rb [int];
  int rl [int];
  int nflit = 0, stalls = 0;

  function automatic int kmer_g(input int p);
    int v = 0; for (int i = 0; i < KK; i++) v |= G[p + i] << (2 * i); return v;
  endfunction
  function automatic int kmer_r(input int id, input int s);
    int v = 0; for (int i = 0; i < KK; i++) v |= int'(rb[id][2*(s+i) +: 2]) << (2 * i); return v;
  endfunction

  always @(posedge clk) if (rst_n && dut.inj_valid && !dut.inj_ready) stalls++;
  always @(posedge clk) if (rst_n && ring_out_valid && ring_out_hdr.src == '0) begin
    cand_payload_t cp; int id;
    cp = cand_payload_t'(ring_out_data); id = int'(cp.read_id);
    chk(ring_out_hdr.kind == FK_CAND && !ring_out_hdr.bcast, "flit kind");
    chk(int'(ring_out_hdr.dst) == 2 + nflit % 4, "round-robin destination");
    chk(rl.exists(id) && int'(cp.read_len) == rl[id] && cp.bases == rb[id], "read fields");
    if (exp_loc.exists(id) && exp_loc[id].size() != 0) begin
      chk(int'(cp.loc) == exp_loc[id][0], $sformatf("read %0d location", id));
      void'(exp_loc[id].pop_front());
    end else chk(0, $sformatf("extra candidate for read %0d", id));
    nflit++;
  end

  initial begin
    int total;
    for (int p = 0; p < GLEN; p++) G[p] = $urandom_range(0, 3);
    begin
      int pos [int][$]; int nxt; nxt = 0;
      for (int p = 0; p + KK <= GLEN; p++) pos[kmer_g(p)].push_back(p);
      for (int h = 0; h < (1 << 2*KK); h++) begin
        int c; c = pos.exists(h) ? pos[h].size() : 0;
        tbl[PTRB + h] = {32'(c), 32'(nxt)};
        for (int q = 0; q < c; q++) tbl[CALB + nxt + q] = 64'(pos[h][q]);
        nxt += c;
      end
    end
    foreach (tbl[w]) begin
      int lin; logic [IO_W-1:0] d;
      lin = w >> 4; d = u_dram.peek(4'd0, ROW_W'(lin >> COL_W), COL_W'(lin));
      d[(w % 16) * 64 +: 64] = tbl[w];
      u_dram.poke(4'd0, ROW_W'(lin >> COL_W), COL_W'(lin), d);
    end
    total = 0;
    for (int id = 0; id < NREAD; id++) begin
      int o; logic [IO_W-1:0] d; int sl [$], sv [$];
      rl[id] = $urandom_range(16, 60); o = $urandom_range(0, GLEN - rl[id]);
      rb[id] = '0;
      for (int i = 0; i < rl[id]; i++) rb[id][2*i +: 2] = 2'(($urandom_range(0, 14) == 0) ? int'($urandom_range(0, 3)) : G[o + i]);
      d = '0; d[2*MAX_READ-1:0] = rb[id]; d[527:512] = 16'(id); d[543:528] = 16'(rl[id]);
      u_dram.poke(4'd0, RROW, COL_W'(id), d);
      sl = {}; sv = {};
      for (int s = 0; s + KK <= rl[id]; s += ST) begin
        logic [63:0] pw; int cn;
        pw = tbl[PTRB + kmer_r(id, s)]; cn = int'(pw[63:32]); if (cn > 8) cn = 8;
        for (int n = 0; n < cn; n++) begin
          int l, f; l = int'(tbl[CALB + int'(pw[31:0]) + n][31:0]) - s; f = -1;
          foreach (sl[q]) if (sl[q] == l) f = q;
          if (f >= 0) sv[f]++; else if (sl.size() < 16) begin sl.push_back(l); sv.push_back(1); end
        end
      end
      exp_loc[id] = {};
      while (sl.size() != 0) begin
        int b; b = 0;
        foreach (sv[q]) if (sv[q] > sv[b]) b = q;
        if (sv[b] < 2) break;
        exp_loc[id].push_back(sl[b]); sl.delete(b); sv.delete(b);
      end
      total += exp_loc[id].size();
    end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // through traffic from upstream: unicast flits for stop 3
    fork
      begin
        wait (dut.inj_valid);
        for (int n = 0; n < 40; n++) begin
          @(negedge clk); ring_in_valid = 1; ring_in_hdr = '0; ring_in_hdr.kind = FK_CAND;
          ring_in_hdr.src = PU_ID_W'(5); ring_in_hdr.dst = PU_ID_W'(3);
        end
        @(negedge clk); ring_in_valid = 0;
      end
    join_none
    @(posedge clk); while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    chk(nflit == total && int'(cands_sent) == total, $sformatf("candidate count %0d/%0d vs %0d", nflit, cands_sent, total));
    foreach (exp_loc[id]) chk(exp_loc[id].size() == 0, $sformatf("read %0d candidates missing", id));
    chk(stalls > 0, "injection stalled by through traffic");
    chk(u_dram.violations == 0, "DRAM timing");
    $display("candidates %0d, injection stalls %0d, act %0d hits %0d", total, stalls, act_count, hit_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
