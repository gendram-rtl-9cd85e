// ring_switch: one stop of the inter-PU ring interconnect (the PU's "Switch").
//
// The PUs form a unidirectional ring; each link carries one flit per cycle, a
// flit header plus a 1024-bit payload, i.e. 128 B per cycle = 128 GB/s at
// 1 GHz, the paper's ring link rate (32 links give its 4.096 TB/s aggregate).
// A flit arriving from the upstream stop is
//   - unicast to this stop: ejected, not forwarded;
//   - broadcast: ejected here (unless this stop sent it) and forwarded until
//     the next stop would be its sender, so every other PU sees it once;
//   - otherwise forwarded.
// Traffic already on the ring has priority; the local PU injects (inj_valid /
// inj_ready) in cycles when this stop forwards nothing. Each hop is one
// register stage. The ejection port has no back-pressure: the PU must take a
// flit every cycle, which its shared memory and PE memories do. The ring, its
// link rate and its use for broadcast and producer-consumer hand-off are the
// paper's; routing, priority and flow control are this design's choices.
module ring_switch
  import gendram_pkg::*;
#(
  parameter int N = 32          // stops on the ring
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PU_ID_W-1:0] my_id,
  // from upstream stop
  input  logic               in_valid,
  input  flit_hdr_t          in_hdr,
  input  logic [IO_W-1:0]    in_data,
  // to downstream stop
  output logic               out_valid,
  output flit_hdr_t          out_hdr,
  output logic [IO_W-1:0]    out_data,
  // local injection
  input  logic               inj_valid,
  output logic               inj_ready,
  input  flit_hdr_t          inj_hdr,
  input  logic [IO_W-1:0]    inj_data,
  // local ejection
  output logic               ej_valid,
  output flit_hdr_t          ej_hdr,
  output logic [IO_W-1:0]    ej_data
);

  logic [PU_ID_W-1:0] next_id;
  logic               through;

  always_comb begin
    next_id = (32'(my_id) == N - 1) ? '0 : my_id + 1'b1;
    through = in_valid &&
              !(!in_hdr.bcast && in_hdr.dst == my_id) &&
              !( in_hdr.bcast && next_id == in_hdr.src);
    ej_valid = in_valid && ((!in_hdr.bcast && in_hdr.dst == my_id) ||
                            ( in_hdr.bcast && in_hdr.src != my_id));
    ej_hdr   = in_hdr;
    ej_data  = in_data;
    inj_ready = !through;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_hdr <= '0; out_data <= '0;
    end else begin
      out_valid <= through || inj_valid;
      if (through) begin
        out_hdr <= in_hdr; out_data <= in_data;
      end else if (inj_valid) begin
        out_hdr <= inj_hdr; out_data <= inj_data;
      end
    end
  end

endmodule
