// combiner_tb: rows of 4 PEs x 16 lanes x 32 bits (two 1024-bit beats) are
// handed to the combiner; the sink applies random back-pressure and checks
// that every beat arrives in order, with the right index and last flag, and
// that with a ready sink a row leaves at one beat per cycle.
module combiner_tb;
  import gendram_pkg::*;
  localparam int NP = 4, L = 16, BPR = NP * L * ELEM_W / IO_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic row_valid = 0, row_ready, beat_valid, beat_ready = 0, beat_last;
  logic [NP*L*ELEM_W-1:0] row_data = '0;
  logic [IO_W-1:0] beat_data;
  logic [2:0] beat_idx;
  combiner #(.N_PE(NP), .LANES(L)) dut (.*);

  logic [NP*L*ELEM_W-1:0] sent [$];
  int got_beat = 0, rows_out = 0;
  bit stall_sink = 1;

  always @(posedge clk) if (rst_n && beat_valid && beat_ready) begin
    checks++;
    if (beat_data !== sent[0][got_beat*IO_W +: IO_W] || int'(beat_idx) != got_beat ||
        beat_last != (got_beat == BPR - 1)) begin
      failures++; $display("FAIL row %0d beat %0d", rows_out, got_beat);
    end
    if (got_beat == BPR - 1) begin got_beat = 0; void'(sent.pop_front()); rows_out++; end
    else got_beat++;
  end
  always @(negedge clk) beat_ready = stall_sink ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int t0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      @(negedge clk);
      for (int w = 0; w < NP * L; w++) row_data[w*ELEM_W +: ELEM_W] = $urandom;
      row_valid = 1;
      @(posedge clk); while (!row_ready) @(posedge clk);
      sent.push_back(row_data);
      @(negedge clk); row_valid = 0;
    end
    wait (sent.size() == 0);
    // rate: one beat per cycle when the sink is always ready
    stall_sink = 0;
    @(negedge clk); row_valid = 1; row_data = {NP*L{$urandom}};
    @(posedge clk); sent.push_back(row_data); t0 = $time;
    @(negedge clk); row_valid = 0;
    wait (sent.size() == 0); @(negedge clk);
    checks++;
    if (($time - t0) / 10 > BPR + 1) begin failures++; $display("FAIL rate %0d", ($time - t0) / 10); end
    checks++; if (rows_out != 41) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
