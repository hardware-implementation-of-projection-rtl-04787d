// adder_tree: full-precision adder tree that sums NIN vectors coordinate by
// coordinate (the Adder-Tree of a second-order decoder).
//
// The inputs are padded with zeros to the next power of two and added in
// pairs, level by level, so the depth is ceil(log2 NIN) adders. Every level
// grows the width by one bit; the output width WO must be at least
// WI + ceil(log2 NIN) for the sum to be exact (the paper asks for full
// precision here). Purely combinational: the register that follows belongs to
// the user. NIN = 0 is allowed and gives zero, for a group with no PUs in its
// first segment.
module adder_tree #(
  parameter int unsigned NIN = 4,
  parameter int unsigned N   = 32,
  parameter int unsigned WI  = 6,
  parameter int unsigned WO  = 8,
  localparam int unsigned NI = (NIN > 0) ? NIN : 1
) (
  input  logic signed [WI-1:0] in_vec [NI][N],
  output logic signed [WO-1:0] sum    [N]
);
  localparam int          LV = (NIN > 1) ? $clog2(NIN) : 0;
  localparam int unsigned NP = 1 << LV;

  typedef logic signed [WO-1:0] acc_t;

  always_comb begin
    acc_t lvl [NP];
    for (int z = 0; z < N; z++) begin
      for (int i = 0; i < NP; i++)
        lvl[i] = (NIN > 0 && i < NIN) ? acc_t'(in_vec[i][z]) : acc_t'(0);
      for (int l = 0; l < LV; l++)
        for (int i = 0; i < (NP >> (l + 1)); i++)
          lvl[i] = lvl[2*i] + lvl[2*i+1];
      sum[z] = lvl[0];
    end
  end

endmodule
