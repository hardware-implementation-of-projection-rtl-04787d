// iupa_iteration: one iteration of the soft-input IUPA decoder for RM(m,3),
// n = 2^m.
//
// Data flow (the block diagram of the paper):
//   L --> third-order register array (2 entries)
//     --> per group g (G groups in lockstep):
//           third-order projection onto B_j, j = g*R + s, one row per
//           LAMBDA cycles (crossbars, MUX, n/2 MinSum circuits) -> L_j
//           second-order decoder -> hard decisions c_j (n/2 bits)
//           third-order pre-aggregation: (1 - 2 c_j([z + B_j])) L(z ^ j)
//     --> divider tree: the G group outputs of a slot are averaged at once
//         (log2 G levels, one register), then R = 2^(m-1)/G slots are
//         averaged sequentially (log2 R shift-register levels)
//     --> L_hat, the average of 2^(m-1) pre-aggregated vectors: the 2^(m-1)-1
//         real rows plus the dummy all-zero row 0 of group 0.
// R rows per group, so one codeword enters every R*LAMBDA = n*LAMBDA/(2G)
// cycles. Latency from the accepting clock edge to the one that sees
// out_valid: R*LAMBDA + log2(R) + 11 cycles, i.e. 79 for RM(6,3), G = 2,
// LAMBDA = 4 (the paper's formula, with its own control details, gives
// R*LAMBDA + LAMBDA*(1-1/G) + m + 9 = 81).
//
// Output width is Q+1 bits: an average of negated Q-bit LLRs can reach
// +2^(Q-1).
// Reset rst_n is asynchronous, active low; lint's note that it is also used
// synchronously refers only to the disable condition of an assertion.
module iupa_iteration #(
  parameter int unsigned M      = 6,
  parameter int unsigned Q      = 5,
  parameter int unsigned G      = 2,
  parameter int unsigned LAMBDA = 4,
  localparam int unsigned N     = 1 << M,
  localparam int unsigned QO    = Q + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [Q-1:0]  l_in  [N],
  output logic                 out_valid,
  output logic signed [QO-1:0] l_out [N]
);
  localparam int unsigned R   = (1 << (M - 1)) / G;
  localparam int unsigned SW  = (R > 1) ? $clog2(R) : 1;
  localparam int unsigned OTW = SW + 1;
  localparam int unsigned LG  = (G > 1) ? $clog2(G) : 0;
  localparam int unsigned LR  = (R > 1) ? $clog2(R) : 0;

  initial begin
    assert (G >= 2 && (1 << LG) == G) else $error("G must be a power of two >= 2");
    assert (R >= 2) else $error("at least two rows per group are needed");
    assert (LAMBDA >= 1 && LAMBDA <= (1 << (M - 2)) && (1 << $clog2(LAMBDA)) == LAMBDA)
      else $error("LAMBDA must be a power of two <= 2^(m-2)");
  end

  // ---- third-order control unit --------------------------------------------
  logic          accept, wtag, slot_valid, cur_tag;
  logic [SW-1:0] slot;

  iupa_ctrl #(.M(M), .G(G), .LAMBDA(LAMBDA)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .accept, .wtag, .slot_valid, .slot, .cur_tag
  );

  // ---- third-order register array ------------------------------------------
  logic                raddr [2];
  logic signed [Q-1:0] rdata [2][N];
  logic                agg_cw;

  assign raddr[0] = cur_tag;   // projection of the codeword in progress
  assign raddr[1] = agg_cw;    // pre-aggregation, possibly of the previous codeword

  reg_array #(.DEPTH(2), .N(N), .W(Q), .NRD(2)) u_ra3 (
    .clk, .we(accept), .waddr(wtag), .wdata(l_in), .raddr, .rdata
  );

  // ---- groups --------------------------------------------------------------
  logic                 lj_valid;
  logic [OTW-1:0]       lj_tag;
  logic signed [QO-1:0] pre_out [G][N];
  logic                 c_valid [G];
  logic [OTW-1:0]       c_tag   [G];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lj_valid <= 1'b0;
      lj_tag   <= '0;
    end else begin
      lj_valid <= slot_valid;
      lj_tag   <= {cur_tag, slot};
    end
  end

  assign agg_cw = c_tag[0][OTW-1];

  for (genvar g = 0; g < G; g++) begin : g_group
    logic signed [Q-1:0] lj [N/2];
    logic [N/2-1:0]      c_j;

    projection_unit #(.N(N), .Q(Q), .K_BASE(g*R), .NPERM(R)) u_proj3 (
      .clk, .rst_n, .en(slot_valid), .sel(slot), .l_in(rdata[0]), .l_out(lj)
    );

    second_order_decoder #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA), .GIDX(g), .OTW(OTW)) u_dec2 (
      .clk, .rst_n, .lj_valid, .lj_tag, .lj,
      .c_valid(c_valid[g]), .c_tag(c_tag[g]), .c_out(c_j)
    );

    preagg_unit #(.N(N), .QI(Q), .K_BASE(g*R), .NPERM(R)) u_preagg3 (
      .clk, .rst_n, .en(c_valid[0]), .sel(c_tag[0][SW-1:0]), .c_in(c_j),
      .l_src(rdata[1]), .out(pre_out[g])
    );
  end

  // ---- divider tree ----------------------------------------------------------
  logic                 p_valid, s_valid;
  logic signed [QO-1:0] s_avg   [N];
  logic signed [QO-1:0] s_avg_q [N];

  divider_tree #(.NIN(G), .N(N), .W(QO)) u_dt (.in_vec(pre_out), .avg(s_avg));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      s_valid <= 1'b0;
      for (int z = 0; z < N; z++) s_avg_q[z] <= '0;
    end else begin
      p_valid <= c_valid[0];
      s_valid <= p_valid;
      s_avg_q <= s_avg;
    end
  end

  seq_divider #(.LEVELS(LR), .N(N), .W(QO)) u_sd (
    .clk, .rst_n, .in_valid(s_valid), .in_vec(s_avg_q), .out_valid, .out_vec(l_out)
  );

endmodule
