// bank_ctrl_tb: writes and reads through the controller into the DRAM model.
// Checks read data, row-buffer hits (no extra ACT), that the model saw no
// timing violation, and that a tier-7 read takes tRCD(7) - tRCD(0) = 20
// cycles longer than a tier-0 read.
module bank_ctrl_tb;
  import gendram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  logic [3:0] req_bank = 0;
  logic [ROW_W-1:0] req_row = 0, tt_row, dram_row;
  logic [COL_W-1:0] req_col = 0, dram_col;
  logic [IO_W-1:0] req_wdata = 0, rsp_data, dram_wdata, dram_rdata;
  logic [7:0] t_rcd, t_ras, t_rp;
  dram_cmd_e dram_cmd; logic [3:0] dram_bank; logic dram_rvalid;
  logic [31:0] act_count, hit_count, cfg_rdata;
  logic [2:0] tier;

  bank_ctrl dut (.*);
  tiering_table u_tt (.clk, .rst_n, .cfg_we(1'b0), .cfg_idx(3'd0), .cfg_wdata(32'd0), .cfg_rdata,
                      .row(tt_row), .tier, .t_rcd, .t_ras, .t_rp);
  dram_model u_dram (.clk, .cmd(dram_cmd), .bank(dram_bank), .row(dram_row), .col(dram_col),
                     .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata));

  task automatic chk(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic access(input logic we, input logic [3:0] b, input logic [ROW_W-1:0] r,
                        input logic [COL_W-1:0] c, input logic [IO_W-1:0] d,
                        output logic [IO_W-1:0] q, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1; req_we = we; req_bank = b; req_row = r; req_col = c; req_wdata = d;
    t0 = 0;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
    lat = 1;
    if (!we) begin
      while (!rsp_valid) begin @(negedge clk); lat++; end
      q = rsp_data;
    end else q = '0;
  endtask

  function automatic logic [IO_W-1:0] pat(input int n);
    return {32{32'(n) ^ 32'hA5A5_0000}};
  endfunction

  initial begin
    logic [IO_W-1:0] q; int lat0, lat7, lat;
    repeat (3) @(posedge clk); rst_n = 1;
    // burst of writes to one tier-0 row: one ACT, then row hits
    for (int c = 0; c < 4; c++) access(1, 4'd2, 15'd10, COL_W'(c), pat(c), q, lat);
    repeat (60) @(negedge clk);
    chk(act_count == 1, "one ACT for a row burst");
    chk(hit_count == 3, $sformatf("three row-buffer hits (%0d, acts %0d)", hit_count, act_count));
    for (int c = 0; c < 4; c++) begin
      access(0, 4'd2, 15'd10, COL_W'(c), '0, q, lat);
      chk(q == pat(c), $sformatf("read back col %0d", c));
    end
    repeat (60) @(negedge clk);
    // cold read latency in tier 0 vs tier 7
    u_dram.poke(4'd1, 15'd5, 5'd3, pat(100));
    u_dram.poke(4'd1, 15'h7005, 5'd3, pat(200));
    access(0, 4'd1, 15'd5, 5'd3, '0, q, lat0);
    chk(q == pat(100), "tier 0 data");
    repeat (60) @(negedge clk);
    access(0, 4'd1, 15'h7005, 5'd3, '0, q, lat7);
    chk(q == pat(200), "tier 7 data");
    chk(lat7 - lat0 == 20, $sformatf("tier latency gap %0d (tier0 %0d, tier7 %0d)", lat7 - lat0, lat0, lat7));
    repeat (60) @(negedge clk);
    chk(u_dram.violations == 0, "no DRAM timing violations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
