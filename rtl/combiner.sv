// combiner: joins the slices of the PU's PEs into shared-memory / ring words.
//
// All N_PE PEs deliver their LANES-element slice of the same tile row at once
// (row_valid). The combiner holds that N_PE*LANES*32-bit row and hands it out
// as consecutive 1024-bit beats, lowest columns first, with a valid/ready
// handshake; it accepts the next row only after the last beat has gone. With
// the default 16 PEs x 16 lanes one 8192-bit row becomes 8 beats. The block
// and its place between the PEs and the shared memory / interconnect are from
// the paper's PU figure; the serialisation order and handshake are this
// design's choices.
module combiner
  import gendram_pkg::*;
#(
  parameter int N_PE  = 16,
  parameter int LANES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          row_valid,
  output logic                          row_ready,
  input  logic [N_PE*LANES*ELEM_W-1:0]  row_data,
  output logic                          beat_valid,
  input  logic                          beat_ready,
  output logic [IO_W-1:0]               beat_data,
  output logic [2:0]                    beat_idx,
  output logic                          beat_last
);

  localparam int BPR = N_PE * LANES * ELEM_W / IO_W;   // beats per row

  logic [N_PE*LANES*ELEM_W-1:0] hold;
  logic [2:0]                   cnt;

  assign row_ready  = !beat_valid;
  assign beat_data  = hold[cnt*IO_W +: IO_W];
  assign beat_idx   = cnt;
  assign beat_last  = (32'(cnt) == BPR - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0; cnt <= '0; beat_valid <= 1'b0;
    end else begin
      if (row_valid && row_ready) begin
        hold <= row_data; cnt <= '0; beat_valid <= 1'b1;
      end else if (beat_valid && beat_ready) begin
        if (beat_last) beat_valid <= 1'b0;
        else           cnt <= cnt + 3'd1;
      end
    end
  end

  initial assert (BPR >= 1 && BPR <= 8) else $error("combiner: row must be 1..8 beats");

endmodule
