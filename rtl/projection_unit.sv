// projection_unit: one-dimensional projection of an LLR vector (ProjU of a
// PU, and the third-order projection of a group).
//
// The unit holds NPERM fixed crossbars, one per subspace B_k with
// k = K_BASE + sel, sel = 0..NPERM-1. A multiplexer driven by `sel` picks one
// permutation, which lines up every coset {a, a^k} as a pair, and N/2
// two-input MinSum circuits combine each pair:
//     y(t) = sign(L(a)) * sign(L(a^k)) * min(|L(a)|, |L(a^k)|),
// where a is the member of coset t whose bit hibit(k) is 0. This follows the
// paper (crossbars, MUX, MinSum). The magnitude of the most negative code
// -2^(Q-1) is saturated to 2^(Q-1)-1 so the result always fits Q bits (this
// design's choice). k = 0 denotes the dummy row and gives an all-zero output.
//
// Timing: one cycle (t_proj = 1). l_out is registered and loads when `en` is
// high; it holds its value otherwise, so a consumer can read it for several
// cycles.
module projection_unit #(
  parameter int unsigned N      = 64,
  parameter int unsigned Q      = 5,
  parameter int unsigned K_BASE = 1,
  parameter int unsigned NPERM  = 4,
  localparam int unsigned SELW  = (NPERM > 1) ? $clog2(NPERM) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic [SELW-1:0]        sel,
  input  logic signed [Q-1:0]    l_in  [N],
  output logic signed [Q-1:0]    l_out [N/2]
);
  import rm_pkg::*;

  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};

  // Crossbars: the two members of every coset, for each candidate subspace.
  logic signed [Q-1:0] perm_a [NPERM][N/2];
  logic signed [Q-1:0] perm_b [NPERM][N/2];

  for (genvar p = 0; p < NPERM; p++) begin : g_perm
    localparam int unsigned K = K_BASE + p;
    for (genvar t = 0; t < N/2; t++) begin : g_pair
      if (K == 0) begin : g_dummy
        assign perm_a[p][t] = '0;
        assign perm_b[p][t] = '0;
      end else begin : g_cb
        localparam int unsigned A = ins0(t, hibit(K));
        assign perm_a[p][t] = l_in[A];
        assign perm_b[p][t] = l_in[A ^ K];
      end
    end
  end

  function automatic logic signed [Q-1:0] abs_sat(input logic signed [Q-1:0] v);
    logic signed [Q-1:0] n;
    n = -v;
    if (!v[Q-1]) return v;
    return n[Q-1] ? MAXV : n;   // -(-2^(Q-1)) overflows: saturate
  endfunction

  // MUX + MinSum
  logic signed [Q-1:0] y [N/2];
  always_comb begin
    for (int t = 0; t < N/2; t++) begin
      logic signed [Q-1:0] a, b, ma, mb, mn;
      a  = perm_a[sel][t];
      b  = perm_b[sel][t];
      ma = abs_sat(a);
      mb = abs_sat(b);
      mn = (ma < mb) ? ma : mb;
      y[t] = (a[Q-1] ^ b[Q-1]) ? -mn : mn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < N/2; t++) l_out[t] <= '0;
    end else if (en) begin
      l_out <= y;
    end
  end

endmodule
