// tiering_table_tb: reset timings of all 8 tiers (the paper's Table I values
// rounded up to 1 GHz cycles), tier decode from the row address, reprogramming.
module tiering_table_tb;
  import gendram_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [2:0] cfg_idx = 0, tier;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic [ROW_W-1:0] row = 0;
  logic [7:0] t_rcd, t_ras, t_rp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  tiering_table dut (.*);

  // tRCD in ns from the paper, converted here with ceil(ns * 1 GHz)
  real rcd_ns [8] = '{2.29, 3.92, 5.99, 8.50, 11.44, 14.82, 18.63, 22.88};

  task automatic chk(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int t = 0; t < 8; t++) begin
      row = ROW_W'(t << (ROW_W - 3)) | ROW_W'($urandom_range(0, 4095));
      #1;
      chk(32'(tier), t, "tier");
      chk(32'(t_rcd), 32'($ceil(rcd_ns[t])), "tRCD");
      chk(32'(t_ras), 32'($ceil(rcd_ns[t] + 27.5)), "tRAS");
      chk(32'(t_rp), 32'($ceil(4.77)), "tRP");
    end
    // reprogram tier 5
    @(negedge clk); cfg_we = 1; cfg_idx = 5; cfg_wdata = 32'h0007_2A11;
    @(negedge clk); cfg_we = 0;
    row = ROW_W'(5 << (ROW_W - 3)); #1;
    chk(32'(t_rcd), 32'h11, "prog tRCD"); chk(32'(t_ras), 32'h2A, "prog tRAS"); chk(32'(t_rp), 7, "prog tRP");
    chk(cfg_rdata, 32'h0007_2A11, "readback");
    row = 0; #1; chk(32'(t_rcd), 3, "tier0 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
