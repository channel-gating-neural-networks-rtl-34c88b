// cg_shuffle: channel shuffle between the output groups of one layer and the
// input groups of the next.
//
// Output channel o belongs to group g = o / n at offset m = o mod n, where
// n = C_out / G channels per group. With shuffling enabled it is stored as
// channel m*G + g, the ShuffleNet transpose of the (G, n) channel matrix, so
// that every next-layer input group receives channels from every output group
// (the crossing lines of the shuffle figure). With shuffling off the channel
// keeps its index. The caller passes g and m, which it counts anyway, instead
// of o, which avoids a divider (this design's choice).
// Purely combinational.
module cg_shuffle
  import cg_pkg::*;
(
  input  logic            en,
  input  logic [LG_W-1:0] log2_g,
  input  logic [CH_W-1:0] g,      // output group of the channel
  input  logic [CH_W-1:0] m,      // index inside the group
  input  logic [CH_W-1:0] n,      // channels per group, C_out / G
  output logic [CH_W-1:0] ch
);

  always_comb begin
    if (en) ch = CH_W'((m << log2_g) + g);
    else    ch = CH_W'(g * n + m);
  end

endmodule
