// preagg_unit: pre-aggregation of one decoded projection (PreAggU of a PU,
// and the third-order pre-aggregation of a group).
//
// For the subspace B_k, k = K_BASE + sel, it computes for every coordinate z
//     out(z) = (1 - 2 c(coset(z, k))) * L(z ^ k),
// the summand of the aggregation rule. Two sets of fixed crossbars, one per
// candidate k, pick L(z ^ k) (ReArrange) and the coset bit c(coset(z,k))
// (Extension); a multiplexer driven by `sel` chooses the permutation and a
// two's-complement circuit negates where the bit is 1. This follows the
// paper's description of the PreAggU. k = 0 denotes the dummy row and gives
// the all-zero vector the paper adds to make the number of averaged vectors a
// power of two.
//
// The output has one more bit than the input so that -(-2^(QI-1)) fits.
// Timing: one register stage (t_preAgg = 1); out loads when `en` is high.
module preagg_unit #(
  parameter int unsigned N      = 32,
  parameter int unsigned QI     = 5,
  parameter int unsigned K_BASE = 1,
  parameter int unsigned NPERM  = 4,
  localparam int unsigned SELW  = (NPERM > 1) ? $clog2(NPERM) : 1,
  localparam int unsigned QO    = QI + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [SELW-1:0]       sel,
  input  logic [N/2-1:0]        c_in,
  input  logic signed [QI-1:0]  l_src [N],
  output logic signed [QO-1:0]  out   [N]
);
  import rm_pkg::*;

  logic signed [QI-1:0] l_perm [NPERM][N];
  logic                 c_ext  [NPERM][N];

  for (genvar p = 0; p < NPERM; p++) begin : g_perm
    localparam int unsigned K = K_BASE + p;
    for (genvar z = 0; z < N; z++) begin : g_coord
      if (K == 0) begin : g_dummy
        assign l_perm[p][z] = '0;
        assign c_ext[p][z]  = 1'b0;
      end else begin : g_cb
        assign l_perm[p][z] = l_src[z ^ K];
        assign c_ext[p][z]  = c_in[coset_idx(z, K)];
      end
    end
  end

  logic signed [QO-1:0] y [N];
  always_comb begin
    for (int z = 0; z < N; z++) begin
      logic signed [QO-1:0] d;
      d    = QO'(l_perm[sel][z]);
      y[z] = c_ext[sel][z] ? -d : d;     // TwosComp, enabled by the code bit
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int z = 0; z < N; z++) out[z] <= '0;
    end else if (en) begin
      out <= y;
    end
  end

endmodule
