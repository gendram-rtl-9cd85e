// shared_memory: the PU's shared scratchpad SRAM (256 KB by default).
//
// It is organised as DEPTH words of WIDTH bits, WIDTH matching the 1024-bit
// bank-group interface so that one DRAM beat or one ring flit fills one word.
// In a Compute PU it holds the "A" operand tile of a blocked Floyd-Warshall
// update: a 256 x 256 tile of 32-bit distances is exactly 256 KB. One write
// port and one read port; reads are synchronous (data one cycle after rd_en).
// Capacity follows the paper's Table II (256 KB); the port arrangement and
// word width are this design's choices. Contents are not reset.
module shared_memory #(
  parameter int WIDTH = 1024,
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
