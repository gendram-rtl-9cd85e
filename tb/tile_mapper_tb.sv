// tile_mapper_tb: checks target = BASE + (i*M + j) mod MOD for every tile of
// every grid size up to 16 x 16, and that the tiles of a grid with at most
// MOD tiles all land on different units.
module tile_mapper_tb;
  int checks = 0, failures = 0;
  logic [3:0] i, j;
  logic [4:0] m;
  logic [4:0] pu;
  tile_mapper dut (.*);
  initial begin
    for (int mm = 1; mm <= 16; mm++) begin
      bit used [32];
      for (int n = 0; n < 32; n++) used[n] = 0;
      for (int ii = 0; ii < mm; ii++) for (int jj = 0; jj < mm; jj++) begin
        i = 4'(ii); j = 4'(jj); m = 5'(mm); #1;
        checks++;
        if (int'(pu) != 8 + (ii * mm + jj) % 24) begin
          failures++; $display("FAIL m=%0d (%0d,%0d) -> %0d", mm, ii, jj, pu);
        end
        if (mm * mm <= 24) begin
          checks++;
          if (used[pu] || pu < 8) begin failures++; $display("FAIL collision m=%0d", mm); end
          used[pu] = 1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
