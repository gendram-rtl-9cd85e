// gendram_controller_tb: the central controller with 2 Search PUs and 9
// Compute PUs played by the testbench (each Compute PU answers a command
// with done after a random 1..20 cycles). For m = 1, 2 and 3 the command
// stream must be exactly the blocked Floyd-Warshall schedule: LOAD of every
// tile; per super-step k the pivot UPDATE, its SEND, the UPDATEs of row k and
// column k, their SENDs, the UPDATEs of all other tiles; then STORE of every
// tile, each command to PU (i*m + j) mod 9 with cmd_k = k. A phase may not
// start while a command of the previous one is still running. The super-step
// and broadcast counters are checked. In genomics mode the search start must
// pulse and done must come only after DRAIN cycles with no PU busy.
module gendram_controller_tb;
  import gendram_pkg::*;
  localparam int NS = 2, NC = 9, DR = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, mode = 0, done, busy, srch_start;
  logic [TILE_IDX_W:0] m = 0;
  logic [NC-1:0] cmd_valid, cpu_done = '0, cpu_busy = '0;
  logic [NS-1:0] srch_busy = '0;
  pu_cmd_e cmd;
  logic [TILE_IDX_W-1:0] cmd_ti, cmd_tj, cmd_k;
  logic [ROW_W-1:0] cmd_row;
  logic [31:0] n_supersteps, n_broadcasts;
  gendram_controller #(.N_SRCH(NS), .N_CMP(NC), .DRAIN(DR)) dut (.clk, .rst_n, .start, .mode, .m,
    .tile_row(15'd7), .done, .busy, .cmd_valid, .cmd, .cmd_ti, .cmd_tj, .cmd_k, .cmd_row,
    .cpu_done, .cpu_busy, .srch_start, .srch_busy, .n_supersteps, .n_broadcasts);

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  typedef struct { pu_cmd_e c; int ti, tj, k, grp; } ev_t;
  ev_t got [$], want [$];
  int running = 0, grp_now = -1, cur_grp [int];
  int left [NC];

  // stub Compute PUs
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      cpu_done[c] <= 1'b0;
      if (left[c] == 1) begin cpu_done[c] <= 1'b1; running--; end
      if (left[c] > 0) left[c]--;
    end
    if (rst_n) for (int c = 0; c < NC; c++) if (cmd_valid[c]) begin
      ev_t e; e.c = cmd; e.ti = int'(cmd_ti); e.tj = int'(cmd_tj); e.k = int'(cmd_k); e.grp = 0;
      got.push_back(e);
      chk(c == (e.ti * int'(m) + e.tj) % NC, "target PU");
      chk(left[c] == 0, "command to a busy PU");
      chk(cmd_row == 15'd7, "tile row");
      left[c] = $urandom_range(1, 20); running++;
    end
  end

  // phase barrier: a new phase group starts only with nothing running
  int last_key = -1;
  always @(posedge clk) if (rst_n && cmd_valid != 0) begin
    int key; key = int'(cmd) * 16 + int'(cmd_k);
    if (key != last_key) chk(running == 0, "phase started before the previous one finished");
    last_key = key;
  end

  task automatic add(input pu_cmd_e c, input int ti, input int tj, input int k);
    ev_t e; e.c = c; e.ti = ti; e.tj = tj; e.k = k; e.grp = 0; want.push_back(e);
  endtask

  initial begin
    for (int c = 0; c < NC; c++) left[c] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int mm = 1; mm <= 3; mm++) begin
      got = {}; want = {}; last_key = -1;
      for (int i = 0; i < mm; i++) for (int j = 0; j < mm; j++) add(PC_LOAD, i, j, 0);
      for (int k = 0; k < mm; k++) begin
        add(PC_UPDATE, k, k, k); add(PC_SEND, k, k, k);
        for (int i = 0; i < mm; i++) for (int j = 0; j < mm; j++) if ((i == k) != (j == k)) add(PC_UPDATE, i, j, k);
        for (int i = 0; i < mm; i++) for (int j = 0; j < mm; j++) if ((i == k) != (j == k)) add(PC_SEND, i, j, k);
        for (int i = 0; i < mm; i++) for (int j = 0; j < mm; j++) if (i != k && j != k) add(PC_UPDATE, i, j, k);
      end
      for (int i = 0; i < mm; i++) for (int j = 0; j < mm; j++) add(PC_STORE, i, j, mm - 1);
      begin
        int s0, b0; s0 = n_supersteps; b0 = n_broadcasts;
        @(negedge clk); m = (TILE_IDX_W+1)'(mm); mode = 0; start = 1; @(negedge clk); start = 0;
        @(posedge clk); while (!done) @(posedge clk);
        chk(running == 0, "done with commands running");
        chk(got.size() == want.size(), $sformatf("m=%0d command count %0d vs %0d", mm, got.size(), want.size()));
        for (int n = 0; n < got.size() && n < want.size(); n++)
          chk(got[n].c == want[n].c && got[n].ti == want[n].ti && got[n].tj == want[n].tj &&
              (got[n].c == PC_LOAD || got[n].k == want[n].k), $sformatf("m=%0d command %0d", mm, n));
        chk(n_supersteps - s0 == mm, "super-steps");
        chk(n_broadcasts - b0 == mm * (1 + 2 * (mm - 1)), "broadcasts");
      end
    end
    // genomics mode
    begin
      int t_idle, t_done;
      bit saw_start; saw_start = 0;
      @(negedge clk); mode = 1; start = 1; @(negedge clk); start = 0;
      fork
        begin
          @(posedge clk); while (!srch_start) @(posedge clk); saw_start = 1;
        end
      join_none
      #1 srch_busy = 2'b11;
      repeat (30) @(negedge clk); srch_busy = 2'b01; cpu_busy = 9'h010;
      repeat (30) @(negedge clk); srch_busy = 2'b00;
      repeat (3) @(negedge clk); cpu_busy = 9'h000;   // short idle gap shorter than DRAIN
      repeat (2) @(negedge clk); cpu_busy = 9'h100;
      repeat (10) @(negedge clk); cpu_busy = 9'h000; t_idle = $time;
      @(posedge clk); while (!done) @(posedge clk); t_done = $time;
      chk(saw_start, "search start pulse");
      chk((t_done - t_idle) / 10 >= DR, "genomics done too early");
      chk((t_done - t_idle) / 10 <= DR + 3, "genomics done too late");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
