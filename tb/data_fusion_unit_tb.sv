// data_fusion_unit_tb: drives random tile-beat and candidate flits at the
// receive side of a unit that owns tile (ti, tj) in super-step k, and checks
// the decoded writes against the blocked Floyd-Warshall rule: a beat of tile
// (ti, k) goes to the A buffer at row * BPR + beat, a beat of tile (k, tj) to
// the B bank, the unit's own tile and all other tiles are ignored, and a
// candidate flit is unpacked. The transmit side is checked for the header
// fields of both flit kinds.
module data_fusion_unit_tb;
  import gendram_pkg::*;
  localparam int BPR = 8, AW = 11;
  int checks = 0, failures = 0;
  logic [PU_ID_W-1:0] my_id, tx_dst;
  logic [TILE_IDX_W-1:0] ti, tj, k;
  logic tx_cand, rx_valid, a_we, b_we, cand_valid;
  logic [7:0] tx_row, b_row;
  logic [2:0] tx_beat, b_beat;
  logic [IO_W-1:0] tx_payload, tx_data, rx_data, rx_payload;
  flit_hdr_t tx_hdr, rx_hdr;
  logic [AW-1:0] a_addr;
  cand_payload_t cand;
  data_fusion_unit #(.BPR(BPR), .AW(AW)) dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      bit ea, eb, is_tile;
      my_id = PU_ID_W'($urandom); ti = TILE_IDX_W'($urandom_range(0, 3)); tj = TILE_IDX_W'($urandom_range(0, 3));
      k = TILE_IDX_W'($urandom_range(0, 3));
      tx_cand = $urandom_range(0, 1); tx_dst = PU_ID_W'($urandom);
      tx_row = 8'($urandom); tx_beat = 3'($urandom); tx_payload = {32{$urandom}};
      rx_valid = $urandom_range(0, 4) != 0;
      rx_hdr = '0; is_tile = $urandom_range(0, 3) != 0;
      rx_hdr.kind = is_tile ? FK_TILE : FK_CAND; rx_hdr.bcast = is_tile;
      rx_hdr.tile_r = TILE_IDX_W'($urandom_range(0, 3)); rx_hdr.tile_c = TILE_IDX_W'($urandom_range(0, 3));
      rx_hdr.row = 8'($urandom_range(0, 255)); rx_hdr.beat = 3'($urandom);
      for (int w = 0; w < IO_W / 32; w++) rx_data[w*32 +: 32] = $urandom;
      #1;
      ea = rx_valid && is_tile && !(rx_hdr.tile_r == ti && rx_hdr.tile_c == tj) && rx_hdr.tile_r == ti && rx_hdr.tile_c == k;
      eb = rx_valid && is_tile && !(rx_hdr.tile_r == ti && rx_hdr.tile_c == tj) && rx_hdr.tile_r == k && rx_hdr.tile_c == tj;
      chk(a_we == ea, "a_we");
      chk(b_we == eb, "b_we");
      if (ea) chk(int'(a_addr) == (int'(rx_hdr.row) * BPR + int'(rx_hdr.beat)) % (1 << AW), "a_addr");
      if (eb) chk(b_row == rx_hdr.row && b_beat == rx_hdr.beat, "b row/beat");
      if (ea || eb) chk(rx_payload == rx_data, "payload");
      chk(cand_valid == (rx_valid && !is_tile), "cand_valid");
      if (cand_valid) chk(cand.loc == rx_data[2*MAX_READ+31:2*MAX_READ] &&
                          cand.read_len == rx_data[2*MAX_READ+47:2*MAX_READ+32] &&
                          cand.read_id == rx_data[2*MAX_READ+63:2*MAX_READ+48] &&
                          cand.bases == rx_data[2*MAX_READ-1:0], "cand fields");
      chk(tx_hdr.src == my_id && tx_hdr.bcast == !tx_cand && tx_hdr.kind == (tx_cand ? FK_CAND : FK_TILE), "tx kind");
      if (tx_cand) chk(tx_hdr.dst == tx_dst, "tx dst");
      else chk(tx_hdr.tile_r == ti && tx_hdr.tile_c == tj && tx_hdr.row == tx_row && tx_hdr.beat == tx_beat, "tx tile");
      chk(tx_data == tx_payload, "tx data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
