// iupa_decoder: soft-input IUPA decoder for the third-order Reed-Muller code
// RM(m,3), n = 2^m, with NITER unrolled iterations.
//
// The decoder takes a vector of n channel LLRs in Q-bit two's complement
// (Q(3:2) in the paper: 3 integer and 2 fractional bits) and returns the
// refined LLRs L_hat of the last iteration together with their hard
// decisions c_hat(z) = [L_hat(z) < 0]. Each iteration is a copy of
// iupa_iteration (the paper replicates the one-iteration architecture for
// every iteration and uses N_max = 2). The Q+1-bit output of an iteration is
// clamped to Q bits before the next one, this design's choice in the spirit
// of the paper's saturation between CPA iterations. Because the dummy
// all-zero row is one of the 2^(m-1) averaged vectors, an iteration's output
// never exceeds 2^(Q-1)*(1 - 2^-(m-1)) and so, after flooring, always fits Q
// bits: the clamp only guards the narrowing and never changes a value.
//
// Defaults are the paper's RM(6,3) configuration with G = 2 second-order
// decoders and latency lambda = 4, i.e. 12 PUs per iteration.
//
// Handshake: l_in is taken in a cycle with in_valid && in_ready; in_ready is
// high when the first iteration is idle or finishing a codeword, so a new
// codeword can enter every n*LAMBDA/(2G) cycles. out_valid pulses for one
// cycle with the result; there is no back-pressure on the output. Latency:
// NITER * (n*LAMBDA/(2G) + log2(2^(m-1)/G) + 11) cycles, 158 at the defaults.
// Reset rst_n is asynchronous and active low. Lint notes that rst_n is also
// sampled synchronously: that is only the disable condition of the
// handshake assertion below, not logic.
module iupa_decoder #(
  parameter int unsigned M      = 6,
  parameter int unsigned Q      = 5,
  parameter int unsigned G      = 2,
  parameter int unsigned LAMBDA = 4,
  parameter int unsigned NITER  = 2,
  localparam int unsigned N     = 1 << M,
  localparam int unsigned QO    = Q + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [Q-1:0]  llr_in  [N],
  output logic                 out_valid,
  output logic signed [QO-1:0] llr_out [N],
  output logic [N-1:0]         c_hat
);
  localparam logic signed [QO-1:0] VMAX = QO'((1 << (Q - 1)) - 1);
  localparam logic signed [QO-1:0] VMIN = -QO'(1 << (Q - 1));

  logic                 it_in_valid  [NITER];
  logic                 it_in_ready  [NITER];
  logic signed [Q-1:0]  it_in        [NITER][N];
  logic                 it_out_valid [NITER];
  logic signed [QO-1:0] it_out       [NITER][N];

  for (genvar i = 0; i < NITER; i++) begin : g_iter
    if (i == 0) begin : g_first
      assign it_in_valid[i] = in_valid;
      assign it_in[i]       = llr_in;
    end else begin : g_next
      assign it_in_valid[i] = it_out_valid[i-1];
      for (genvar z = 0; z < N; z++) begin : g_sat
        assign it_in[i][z] = (it_out[i-1][z] > VMAX) ? Q'(VMAX) :
                             (it_out[i-1][z] < VMIN) ? Q'(VMIN) : Q'(it_out[i-1][z]);
      end
      // Iterations run at the same rate, so a later one is never busy when
      // the one before delivers.
      assert property (@(posedge clk) disable iff (!rst_n)
                       it_in_valid[i] |-> it_in_ready[i]);
    end

    iupa_iteration #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA)) u_it (
      .clk, .rst_n, .in_valid(it_in_valid[i]), .in_ready(it_in_ready[i]),
      .l_in(it_in[i]), .out_valid(it_out_valid[i]), .l_out(it_out[i])
    );
  end

  assign in_ready  = it_in_ready[0];
  assign out_valid = it_out_valid[NITER-1];
  assign llr_out   = it_out[NITER-1];
  always_comb begin
    for (int z = 0; z < N; z++) c_hat[z] = llr_out[z][QO-1];
  end

endmodule
