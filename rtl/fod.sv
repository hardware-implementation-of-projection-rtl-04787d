// fod: soft-input first-order Reed-Muller decoder, RM(log2(N),1), based on
// the fast Hadamard transform (FHT).
//
// For the input LLR vector L of length N the FHT gives the correlations
// H(u) = sum_z L(z) (-1)^(u.z) with every codeword pair +/-(u.z) in log2(N)
// butterfly stages. The decoder picks u* with the largest |H(u)| (the lowest
// index wins a tie, this design's choice) and outputs the codeword
// c(z) = (u*.z) xor [H(u*) < 0]. A positive LLR means bit 0.
//
// The paper gives the function (an FHT-based FOD) and its latency of 3 or 4
// cycles; the latencies of its synthesis tables fit its latency formula with
// t_FOD = 4, so this pipeline has four register stages: (1) the first half of
// the butterflies, (2) the rest, (3) the absolute-maximum search, (4) the
// codeword generation. The split is this design's own. Full precision is kept
// (Q + log2 N bits) so no correlation saturates.
//
// Interface: in_valid/in_tag travel with the data; out_valid/out_tag appear
// T_FOD = 4 cycles after in_valid. One vector can enter every cycle.
module fod #(
  parameter int unsigned N    = 16,
  parameter int unsigned Q    = 5,
  parameter int unsigned TAGW = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [TAGW-1:0]      in_tag,
  input  logic signed [Q-1:0]  l_in [N],
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_tag,
  output logic [N-1:0]         c_out
);
  localparam int unsigned LN = $clog2(N);
  localparam int unsigned W  = Q + LN;
  localparam int unsigned S1 = (LN + 1) / 2;   // butterfly stages in pipeline stage 1

  typedef logic signed [W-1:0] corr_t;

  // ---- butterfly network, split over two register stages -----------------
  corr_t h0 [N], h1 [N], r1 [N], h2 [N], r2 [N];

  always_comb begin
    for (int z = 0; z < N; z++) h0[z] = corr_t'(l_in[z]);
    h1 = h0;
    for (int s = 0; s < S1; s++)
      for (int z = 0; z < N; z++)
        if (!z[s]) begin
          corr_t a, b;
          a = h1[z];
          b = h1[z | (1 << s)];
          h1[z]            = a + b;
          h1[z | (1 << s)] = a - b;
        end
  end

  always_comb begin
    h2 = r1;
    for (int s = S1; s < LN; s++)
      for (int z = 0; z < N; z++)
        if (!z[s]) begin
          corr_t a, b;
          a = h2[z];
          b = h2[z | (1 << s)];
          h2[z]            = a + b;
          h2[z | (1 << s)] = a - b;
        end
  end

  // ---- absolute maximum ----------------------------------------------------
  logic [LN-1:0] best_u;
  logic          best_neg;
  always_comb begin
    corr_t best_mag;
    best_u   = '0;
    best_neg = r2[0][W-1];
    best_mag = r2[0][W-1] ? -r2[0] : r2[0];
    for (int u = 1; u < N; u++) begin
      corr_t mag;
      mag = r2[u][W-1] ? -r2[u] : r2[u];
      if (mag > best_mag) begin
        best_mag = mag;
        best_u   = LN'(u);
        best_neg = r2[u][W-1];
      end
    end
  end

  logic [LN-1:0] r3_u;
  logic          r3_neg;

  // ---- codeword generation ------------------------------------------------
  logic [N-1:0] cw;
  always_comb begin
    for (int z = 0; z < N; z++) cw[z] = (^(r3_u & LN'(z))) ^ r3_neg;
  end

  logic [3:0]      v;
  logic [TAGW-1:0] t1, t2, t3, t4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0;
      for (int z = 0; z < N; z++) begin
        r1[z] <= '0;
        r2[z] <= '0;
      end
      r3_u   <= '0;
      r3_neg <= 1'b0;
      c_out  <= '0;
    end else begin
      v  <= {v[2:0], in_valid};
      t1 <= in_tag; t2 <= t1; t3 <= t2; t4 <= t3;
      r1 <= h1;
      r2 <= h2;
      r3_u   <= best_u;
      r3_neg <= best_neg;
      c_out  <= cw;
    end
  end

  assign out_valid = v[3];
  assign out_tag   = t4;

endmodule
