// tile_mapper: logical tile (i, j) to physical Compute PU.
//
// Implements the channel-interleaved mapping  target = (i * M + j) mod MOD,
// offset by BASE, so that neighbouring tiles of a row land on different PUs
// and bank-groups. The paper prints the modulus as C x G (16 channels x 2
// bank-groups = 32), while its mapping figure sends A00..A03 to PU8..PU11, the
// first Compute PUs, and its text says APSP runs on the 24 Compute PUs only.
// This design keeps tiles on Compute PUs: MOD = 24 and BASE = 8 (Search PUs
// are PU0..PU7) by default; setting MOD = 32, BASE = 0 gives the printed
// equation exactly. Combinational.
module tile_mapper #(
  parameter int MOD  = 24,
  parameter int BASE = 8,
  parameter int IW   = 4,     // tile index width
  parameter int PW   = 5      // PU id width
) (
  input  logic [IW-1:0] i,
  input  logic [IW-1:0] j,
  input  logic [IW:0]   m,    // tiles per matrix row
  output logic [PW-1:0] pu
);
  logic [2*IW+1:0] lin;
  always_comb begin
    lin = (2*IW+2)'(i) * (2*IW+2)'(m) + (2*IW+2)'(j);
    pu  = PW'(BASE + (int'(lin) % MOD));
  end
endmodule
