// shared_memory_tb: random writes and synchronous reads against a model array.
module shared_memory_tb;
  localparam int W = 64, D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;
  shared_memory #(.WIDTH(W), .DEPTH(D)) dut (.*);
  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(a); wr_data = {$urandom, $urandom}; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      int ra;
      ra = $urandom_range(0, D-1);
      @(negedge clk); rd_en = 1; rd_addr = 6'(ra);
      wr_en = 1; wr_addr = 6'($urandom_range(0, D-1)); wr_data = {$urandom, $urandom};
      if (wr_addr == rd_addr) wr_en = 0;
      @(negedge clk);
      checks++;
      if (rd_data !== model[ra]) begin failures++; $display("FAIL addr %0d", ra); end
      if (wr_en) model[wr_addr] = wr_data;
      rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
