// tile_mapper: the interleaved tile-to-bank-group mapping.
//
// Tile (i, j) of an M x M grid of B x B tiles goes to bank-group
//     g = (i*M + j) mod (C*G)
// where C is the number of channels and G the number of bank-groups per
// channel, so consecutive tiles of a tile row land on consecutive
// bank-groups and the whole stack is filled before any bank-group gets a
// second tile. Bank-group g is bank-group g mod G of channel g / G. The
// (i*M + j) / (C*G)-th tile held by a bank-group starts at DRAM row
// ((i*M + j) / (C*G)) * RPT, RPT being the DRAM rows one tile occupies.
//
// Purely combinational. The formula is the source's; splitting g into
// channel and bank-group (consecutive g in one channel, as the source's
// mapping figure shows A00..A03 on BankGroup1..4 of one channel) and the
// row placement are this design's.
module tile_mapper #(
  parameter int unsigned C   = 8,    // channels
  parameter int unsigned G   = 4,    // bank-groups per channel
  parameter int unsigned RPT = 16,   // DRAM rows per tile
  parameter int unsigned TW  = 8,    // width of tile indices
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned GGW = $clog2(C*G+1)
) (
  input  logic [TW-1:0]  ti,
  input  logic [TW-1:0]  tj,
  input  logic [TW-1:0]  m,
  output logic [GGW-1:0] g,
  output logic [CW-1:0]  ch,
  output logic [GW-1:0]  bg,
  output logic [15:0]    row_base
);
  logic [2*TW-1:0] t;
  always_comb begin
    t        = ti * m + (2*TW)'(tj);
    g        = GGW'(t % (C*G));
    ch       = CW'(g / G);
    bg       = GW'(g % G);
    row_base = 16'((int'(t) / (C*G)) * RPT);
  end
endmodule
