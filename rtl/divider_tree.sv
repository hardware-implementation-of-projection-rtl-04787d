// divider_tree: averaging tree over NIN = 2^k vectors that are present in the
// same cycle (the Divider-Tree of the second segment of a second-order
// decoder, and the first log2(G) levels of the third-order divider tree).
//
// Each level replaces two neighbours a, b by floor((a + b) / 2): an adder and
// a one-bit arithmetic shift, so the width stays W and no precision beyond
// one guard bit is needed. After k levels the result is the average of all
// inputs with the rounding of this pairwise order. The paper gives the
// divider tree's function (pairwise adders with shifts); the pairing order
// (0,1),(2,3),... and rounding towards minus infinity are this design's
// choices. Purely combinational. Bit 0 of each pair sum is left unused on
// purpose: it is the bit the halving drops.
module divider_tree #(
  parameter int unsigned NIN = 4,
  parameter int unsigned N   = 32,
  parameter int unsigned W   = 6
) (
  input  logic signed [W-1:0] in_vec [NIN][N],
  output logic signed [W-1:0] avg    [N]
);
  localparam int unsigned LV = (NIN > 1) ? $clog2(NIN) : 0;

  typedef logic signed [W:0] ext_t;

  always_comb begin
    logic signed [W-1:0] lvl [NIN];
    for (int z = 0; z < N; z++) begin
      for (int i = 0; i < NIN; i++) lvl[i] = in_vec[i][z];
      for (int l = 0; l < LV; l++)
        for (int i = 0; i < (NIN >> (l + 1)); i++) begin
          ext_t s;
          s = ext_t'(lvl[2*i]) + ext_t'(lvl[2*i+1]);
          lvl[i] = s[W:1];
        end
      avg[z] = lvl[0];
    end
  end

endmodule
