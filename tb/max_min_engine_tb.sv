// max_min_engine_tb: random operands on 8 lanes for all four operations,
// compared one cycle later with a reference: lane-wise sum, lane-wise
// difference with the "changed" flag, and the masked max or min reduction
// with the index of the lowest lane that holds it.
module max_min_engine_tb;
  import gendram_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid, changed;
  logic [1:0] op = 0;
  logic [L-1:0] mask = '1;
  logic signed [L-1:0][ELEM_W-1:0] a = '0, b = '0, y;
  logic signed [ELEM_W-1:0] red;
  logic [$clog2(L)-1:0] red_idx;
  max_min_engine #(.LANES(L)) dut (.*);

  function automatic int rv();
    return $urandom_range(0, 3) == 0 ? int'($urandom_range(0, 5)) - 2 : int'($urandom_range(0, 2000)) - 1000;
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int ey [L]; bit ech; int er, ei; bit any;
      @(negedge clk);
      op = 2'($urandom_range(0, 3)); mask = L'($urandom); in_valid = 1;
      for (int l = 0; l < L; l++) begin a[l] = rv(); b[l] = ($urandom_range(0, 1)) ? a[l] : rv(); end
      ech = 0; er = 0; ei = 0; any = 0;
      for (int l = 0; l < L; l++) begin
        int av, bv; av = a[l]; bv = b[l];
        ey[l] = (op == 0) ? av + bv : av - bv;
        if (op == 1 && av != bv) ech = 1;
        if (mask[l] && (!any || (op == 2 && av > er) || (op == 3 && av < er))) begin er = av; ei = l; any = 1; end
      end
      @(posedge clk); #1 in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      if (op < 2) for (int l = 0; l < L; l++) begin
        checks++;
        if (y[l] != ey[l]) begin failures++; $display("FAIL op %0d lane %0d got %0d exp %0d", op, l, y[l], ey[l]); end
      end
      if (op == 1) begin checks++; if (changed != ech) begin failures++; $display("FAIL changed"); end end
      if (op >= 2 && mask != 0) begin
        checks++;
        if (red != er || int'(red_idx) != ei) begin failures++; $display("FAIL red got %0d@%0d exp %0d@%0d", red, red_idx, er, ei); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
