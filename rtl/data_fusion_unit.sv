// data_fusion_unit: joins PU data with ring headers and sorts arriving flits.
//
// Transmit side: fuses a 1024-bit payload (a tile beat from the combiner or a
// candidate record) with its routing header: tile beats are broadcast with
// the sending tile's coordinates, candidates are unicast to tx_dst.
// Receive side: decides where an arriving flit belongs. For the blocked
// Floyd-Warshall update of the PU's own tile (ti, tj) under pivot index k:
//   tile (ti, k)  -> "A" operand, written to the shared memory
//   tile (k, tj)  -> "B" operand, written to the PEs' B banks
// and the PU's own tile is never taken. In super-step phase 2 this makes the
// pivot-row tiles take A_kk as A and the pivot-column tiles take it as B; in
// phase 3 every internal tile picks up its row-k and column-k partners, which
// is the broadcast pattern of the paper's APSP schedule. Candidate flits are
// passed on as a decoded record. The unit is named in the paper (with the
// switch, it enables data exchange and aggregation between PUs); header
// layout and the accept rule are this design's. Combinational.
module data_fusion_unit
  import gendram_pkg::*;
#(
  parameter int BPR = 8,            // beats per tile row
  parameter int AW  = 11            // shared-memory address width
) (
  input  logic [PU_ID_W-1:0]    my_id,
  input  logic [TILE_IDX_W-1:0] ti,
  input  logic [TILE_IDX_W-1:0] tj,
  input  logic [TILE_IDX_W-1:0] k,
  // transmit
  input  logic                  tx_cand,    // 0: tile beat, 1: candidate
  input  logic [PU_ID_W-1:0]    tx_dst,
  input  logic [7:0]            tx_row,
  input  logic [2:0]            tx_beat,
  input  logic [IO_W-1:0]       tx_payload,
  output flit_hdr_t             tx_hdr,
  output logic [IO_W-1:0]       tx_data,
  // receive
  input  logic                  rx_valid,
  input  flit_hdr_t             rx_hdr,
  input  logic [IO_W-1:0]       rx_data,
  output logic                  a_we,
  output logic [AW-1:0]         a_addr,
  output logic                  b_we,
  output logic [7:0]            b_row,
  output logic [2:0]            b_beat,
  output logic [IO_W-1:0]       rx_payload,
  output logic                  cand_valid,
  output cand_payload_t         cand
);

  logic is_tile, mine;

  always_comb begin
    tx_hdr        = '0;
    tx_hdr.src    = my_id;
    tx_hdr.kind   = tx_cand ? FK_CAND : FK_TILE;
    tx_hdr.bcast  = !tx_cand;
    tx_hdr.dst    = tx_dst;
    tx_hdr.tile_r = ti;
    tx_hdr.tile_c = tj;
    tx_hdr.row    = tx_row;
    tx_hdr.beat   = tx_beat;
    tx_data       = tx_payload;

    is_tile    = rx_valid && rx_hdr.kind == FK_TILE;
    mine       = rx_hdr.tile_r == ti && rx_hdr.tile_c == tj;
    a_we       = is_tile && !mine && rx_hdr.tile_r == ti && rx_hdr.tile_c == k;
    b_we       = is_tile && !mine && rx_hdr.tile_r == k  && rx_hdr.tile_c == tj;
    a_addr     = AW'(32'(rx_hdr.row) * BPR + 32'(rx_hdr.beat));
    b_row      = rx_hdr.row;
    b_beat     = rx_hdr.beat;
    rx_payload = rx_data;
    cand_valid = rx_valid && rx_hdr.kind == FK_CAND;
    cand       = cand_payload_t'(rx_data);
  end

endmodule
