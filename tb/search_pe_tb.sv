// search_pe_tb: a Search PE with 4-base seeds (stride 4, at most 4 hits per
// seed, 8 sorter slots) against a table memory held in the testbench. A
// random 600-base reference is indexed into a PTR table (one word per 4-mer:
// {count, start}) and a CAL table (positions grouped by 4-mer). Reads are cut
// from the reference with a few substitutions. A reference model runs the
// same seeding (seed at every stride, first MAX_HITS hits, loc = hit - s,
// votes per distinct loc, slots in order of first hit) and the candidate list
// the PE emits (descending votes, ties oldest first, at least min_votes) must
// match it exactly. The memory answers after a random delay and the candidate
// sink stalls at random. The first half of the reads runs with min_votes = 1
// and must list the true origin of each read; the second half with
// min_votes = 2.
module search_pe_tb;
  import gendram_pkg::*;
  localparam int K = 4, ST = 4, MH = 4, NC = 8, QD = 4;
  localparam int GLEN = 600, PTRB = 0, CALB = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_valid = 0, rd_ready, mem_req_valid, mem_req_ready = 0, mem_rsp_valid = 0;
  logic out_valid, out_ready = 0, idle;
  logic [15:0] rd_id = 0, rd_len = 0, out_id, out_len;
  logic [2*MAX_READ-1:0] rd_bases = '0, out_bases;
  logic [31:0] mem_req_addr, out_loc;
  logic [63:0] mem_rsp_data = 0;
  logic [7:0] out_votes;
  logic [7:0] min_votes = 8'd1;

  search_pe #(.K(K), .STRIDE(ST), .MAX_HITS(MH), .NCAND(NC), .QDEPTH(QD)) dut (
    .clk, .rst_n, .ptr_base(32'(PTRB)), .cal_base(32'(CALB)), .min_votes, .*);

  int G [GLEN];
  logic [63:0] mem [int];
  int origin [int];
  int exp_loc [int][$], exp_votes [int][$];

  // table memory: one outstanding request, random delay
  initial begin
    forever begin
      @(negedge clk);
      mem_rsp_valid = 0;
      mem_req_ready = $urandom_range(0, 1);
      if (mem_req_valid && mem_req_ready) begin
        logic [31:0] a; a = mem_req_addr;
        @(negedge clk); mem_req_ready = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        mem_rsp_data = mem.exists(int'(a)) ? mem[int'(a)] : 64'd0; mem_rsp_valid = 1;
      end
    end
  end

  // candidate sink
  int got_n = 0;
  always @(negedge clk) out_ready = $urandom_range(0, 2) != 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int id; id = int'(out_id);
    checks++;
    if (exp_loc[id].size() == 0) begin failures++; $display("FAIL extra candidate read %0d", id); end
    else begin
      if (out_loc != 32'(exp_loc[id][0]) || int'(out_votes) != exp_votes[id][0]) begin
        failures++; $display("FAIL read %0d got loc %0d/%0d exp %0d/%0d", id, out_loc, out_votes, exp_loc[id][0], exp_votes[id][0]);
      end
      if (out_loc == 32'(origin[id])) origin[id] = -1;
      void'(exp_loc[id].pop_front()); void'(exp_votes[id].pop_front());
    end
    got_n++;
  end

  function automatic int kmer(input int b [$], input int p);
    int v = 0;
    for (int i = 0; i < K; i++) v |= b[p+i] << (2 * i);
    return v;
  endfunction

  initial begin
    int NR, total;
    NR = 30; total = 0;
    for (int p = 0; p < GLEN; p++) G[p] = $urandom_range(0, 3);
    // index: PTR and CAL
    begin
      int pos [int][$]; int nxt; int gq [$];
      for (int p = 0; p < GLEN; p++) gq.push_back(G[p]);
      for (int p = 0; p + K <= GLEN; p++) pos[kmer(gq, p)].push_back(p);
      nxt = 0;
      for (int h = 0; h < (1 << 2*K); h++) begin
        int c; c = pos.exists(h) ? pos[h].size() : 0;
        mem[PTRB + h] = {32'(c), 32'(nxt)};
        for (int q = 0; q < c; q++) mem[CALB + nxt + q] = 64'(pos[h][q]);
        nxt += c;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < NR; r++) begin
      int len, o; int rb [$]; int slots_loc [$], slots_v [$];
      if (r == NR / 2) begin   // second half: filter single-vote candidates
        wait (got_n == total); repeat (5) @(posedge clk); min_votes = 8'd2;
      end
      rb = {}; slots_loc = {}; slots_v = {};
      len = $urandom_range(12, 48); o = $urandom_range(0, GLEN - len);
      for (int i = 0; i < len; i++) rb.push_back(($urandom_range(0, 19) == 0) ? int'($urandom_range(0, 3)) : G[o+i]);
      origin[r] = o;
      // reference seeding
      for (int s = 0; s + K <= len; s += ST) begin
        logic [63:0] pw; int st0, cn;
        pw = mem[PTRB + kmer(rb, s)]; st0 = int'(pw[31:0]); cn = int'(pw[63:32]);
        if (cn > MH) cn = MH;
        for (int n = 0; n < cn; n++) begin
          int l, f; l = int'(mem[CALB + st0 + n][31:0]) - s; f = -1;
          foreach (slots_loc[q]) if (slots_loc[q] == l) f = q;
          if (f >= 0) slots_v[f]++;
          else if (slots_loc.size() < NC) begin slots_loc.push_back(l); slots_v.push_back(1); end
        end
      end
      exp_loc[r] = {}; exp_votes[r] = {};
      while (slots_loc.size() != 0) begin
        int b; b = 0;
        foreach (slots_v[q]) if (slots_v[q] > slots_v[b]) b = q;
        if (slots_v[b] < int'(min_votes)) break;
        exp_loc[r].push_back(slots_loc[b]); exp_votes[r].push_back(slots_v[b]);
        slots_loc.delete(b); slots_v.delete(b);
      end
      total += exp_loc[r].size();
      // push read
      @(negedge clk);
      rd_valid = 1; rd_id = 16'(r); rd_len = 16'(len); rd_bases = '0;
      for (int i = 0; i < len; i++) rd_bases[2*i +: 2] = 2'(rb[i]);
      @(posedge clk); while (!rd_ready) @(posedge clk);
      @(negedge clk); rd_valid = 0;
    end
    wait (got_n == total);
    repeat (5) @(posedge clk);
    checks++; if (!idle) begin failures++; $display("FAIL not idle"); end
    for (int r = 0; r < NR; r++) begin
      checks++; if (exp_loc[r].size() != 0) begin failures++; $display("FAIL read %0d missing candidates", r); end
      if (r < NR / 2) checks++;
      if (r < NR / 2 && origin[r] != -1) begin failures++; $display("FAIL read %0d true origin not found", r); end
    end
    $display("candidates %0d", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
