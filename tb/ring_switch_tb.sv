// ring_switch_tb: six ring_switch stops closed into a ring. Every stop
// injects random unicast and broadcast flits, each tagged with a unique
// number. A scoreboard checks that a unicast flit is ejected exactly once,
// at its destination, after (dst - src) mod N hops, and that a broadcast
// flit is ejected once at every stop but its source and then leaves the
// ring. Injection stalls behind through traffic are counted and must occur.
module ring_switch_tb;
  import gendram_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      lv [N];  flit_hdr_t lh [N];  logic [IO_W-1:0] ld [N];
  logic      iv [N];  logic ir [N];  flit_hdr_t ih [N];  logic [IO_W-1:0] idat [N];
  logic      ev [N];  flit_hdr_t eh [N];  logic [IO_W-1:0] ed [N];

  for (genvar p = 0; p < N; p++) begin : g_stop
    ring_switch #(.N(N)) u_sw (
      .clk, .rst_n, .my_id(PU_ID_W'(p)),
      .in_valid(lv[(p + N - 1) % N]), .in_hdr(lh[(p + N - 1) % N]), .in_data(ld[(p + N - 1) % N]),
      .out_valid(lv[p]), .out_hdr(lh[p]), .out_data(ld[p]),
      .inj_valid(iv[p]), .inj_ready(ir[p]), .inj_hdr(ih[p]), .inj_data(idat[p]),
      .ej_valid(ev[p]), .ej_hdr(eh[p]), .ej_data(ed[p]));
  end

  int expect_cnt [int];     // tag -> ejections still expected
  longint sent_cyc [int];   // tag -> cycle of injection
  int cyc = 0, tag_next = 1, stalls = 0, n_uni = 0, n_bc = 0;
  bit run = 1;

  always @(posedge clk) cyc <= cyc + 1;

  // ejection scoreboard
  always @(posedge clk) if (rst_n) for (int p = 0; p < N; p++) if (ev[p]) begin
    int tag; tag = int'(ed[p][31:0]);
    checks++;
    if (!expect_cnt.exists(tag) || expect_cnt[tag] == 0) begin
      failures++; $display("FAIL unexpected ejection tag %0d at %0d", tag, p);
    end else begin
      expect_cnt[tag]--;
      if (!eh[p].bcast) begin
        checks++;
        if (int'(eh[p].dst) != p) begin failures++; $display("FAIL wrong stop"); end
        checks++;
        if (cyc - sent_cyc[tag] != (p - int'(eh[p].src) + N) % N) begin
          failures++; $display("FAIL hops tag %0d: %0d cycles", tag, cyc - sent_cyc[tag]);
        end
      end else begin
        checks++;
        if (int'(eh[p].src) == p) begin failures++; $display("FAIL bcast back at source"); end
      end
    end
  end

  // injectors
  for (genvar p = 0; p < N; p++) begin : g_inj
    always @(posedge clk) begin
      if (!rst_n) iv[p] <= 1'b0;
      else begin
        if (iv[p] && ir[p]) begin
          expect_cnt[int'(idat[p][31:0])] = ih[p].bcast ? N - 1 : 1;
          sent_cyc[int'(idat[p][31:0])]   = cyc;
          if (ih[p].bcast) n_bc++; else n_uni++;
        end else if (iv[p]) stalls++;
        if (!iv[p] || ir[p]) begin
          if (run && $urandom_range(0, 2) == 0) begin
            flit_hdr_t h; int d;
            h = '0; h.src = PU_ID_W'(p); h.bcast = ($urandom_range(0, 3) == 0);
            d = (p + 1 + $urandom_range(0, N - 2)) % N; h.dst = PU_ID_W'(d);
            h.kind = h.bcast ? FK_TILE : FK_CAND;
            ih[p] <= h; idat[p] <= {{(IO_W-32){1'b0}}, 32'(tag_next)}; tag_next++;
            iv[p] <= 1'b1;
          end else iv[p] <= 1'b0;
        end
      end
    end
  end

  initial begin
    int missing;
    for (int p = 0; p < N; p++) begin ih[p] = '0; idat[p] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (2000) @(posedge clk);
    run = 0;
    wait (iv[0] == 0 && iv[1] == 0 && iv[2] == 0 && iv[3] == 0 && iv[4] == 0 && iv[5] == 0);
    repeat (3 * N) @(posedge clk);
    missing = 0;
    foreach (expect_cnt[t]) if (expect_cnt[t] != 0) missing++;
    checks++; if (missing != 0) begin failures++; $display("FAIL %0d flits not fully delivered", missing); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no injection stall seen"); end
    for (int p = 0; p < N; p++) begin checks++; if (lv[p]) begin failures++; $display("FAIL ring not empty"); end end
    $display("unicast %0d broadcast %0d injection stalls %0d", n_uni, n_bc, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
