// second_order_decoder: one group g_i of the IUPA decoder, the "second-order
// IUPA(g_i)" of the block diagram. It decodes the second-order vectors
// L_j (N = 2^(m-1) LLRs, RM(m-1,2)) of the rows j assigned to the group and
// returns their hard decisions.
//
// Structure (as in the paper):
//  * a local control unit that, for each new L_j, issues the LAMBDA
//    projection slots to all PUs, one per cycle, and writes L_j into
//  * the second-order register array, read back by the pre-aggregation
//    stage of the PUs (depth ceil(l_agg2 / LAMBDA) + 1, l_agg2 = 1 + T_FOD);
//  * a first segment of PL PUs for the group's left-half columns, each PU
//    taking LAMBDA consecutive columns; their outputs go to a full-precision
//    adder tree;
//  * a second segment of PR = 2^(m-2)/LAMBDA PUs for the right-half columns
//    2^(m-2)..2^(m-1)-1, whose outputs are averaged by a divider tree and
//    multiplied back by PR (log2 PR zero bits appended);
//  * an adder joining both segments, an accumulator over the LAMBDA cycles
//    of one row (the paper shows the final adder tree; the accumulation over
//    cycles is this design's reading of it) and the hard decision
//    c_j(z) = [sum(z) < 0].
// Every row of the group is decoded with all of the group's columns, so rows
// other than the group's first may repeat first-order codewords, as the paper
// accepts for its ILP groupings.
//
// Column allocation: left columns col_lo(g) .. 2^(m-2)-1 from rm_pkg (the
// unique-selection rule applied per group; the paper instead takes columns
// from an ILP solution that it prints only for RM(5,3)).
//
// Interface: lj_valid pulses once per row, at most every LAMBDA cycles, and
// lj must stay stable for the LAMBDA cycles that follow (the third-order
// projection register does this). c_valid pulses LAMBDA + 6 cycles after
// lj_valid with c_out and the row's tag. Lint reports unused bits of the
// tags seen at the PU outputs: only the slot and pointer fields are needed at
// each point, the rest travels along so all PUs share one tag format.
// rst_n is an asynchronous active-low reset; its synchronous use that lint
// reports is the disable condition of the row-spacing assertion.
module second_order_decoder #(
  parameter int unsigned M      = 6,
  parameter int unsigned Q      = 5,
  parameter int unsigned G      = 2,
  parameter int unsigned LAMBDA = 4,
  parameter int unsigned GIDX   = 0,
  parameter int unsigned OTW    = 5,
  localparam int unsigned N     = 1 << (M - 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                lj_valid,
  input  logic [OTW-1:0]      lj_tag,
  input  logic signed [Q-1:0] lj [N],
  output logic                c_valid,
  output logic [OTW-1:0]      c_tag,
  output logic [N-1:0]        c_out
);
  import rm_pkg::*;

  localparam int unsigned HALF  = 1 << (M - 2);
  localparam int unsigned CLO   = col_lo(M, G, GIDX);
  localparam int unsigned NLEFT = n_left_cols(M, G, GIDX);
  localparam int unsigned PL    = n_left_pus(M, G, LAMBDA, GIDX);
  localparam int unsigned PR    = n_right_pus(M, LAMBDA);
  localparam int unsigned LPR   = (PR > 1) ? $clog2(PR) : 0;
  localparam int unsigned D2    = (1 + T_FOD + LAMBDA - 1) / LAMBDA + 1;
  localparam int unsigned PW    = (D2 > 1) ? $clog2(D2) : 1;
  localparam int unsigned SELW  = (LAMBDA > 1) ? $clog2(LAMBDA) : 1;
  localparam int unsigned TAGW  = SELW + PW + OTW;
  localparam int unsigned QO    = Q + 1;
  localparam int unsigned WL    = QO + ((PL > 1) ? $clog2(PL) : 0);
  localparam int unsigned WA    = Q + M + 1;

  // ---- control unit ---------------------------------------------------------
  logic            run;
  logic [SELW-1:0] cnt;
  logic [PW-1:0]   wptr, ptr_q;
  logic [OTW-1:0]  tag_q;
  logic            issue;
  logic [SELW-1:0] sel;
  logic [TAGW-1:0] tag;

  always_comb begin
    issue = lj_valid || run;
    sel   = lj_valid ? '0 : cnt;
    tag   = lj_valid ? {sel, wptr, lj_tag} : {sel, ptr_q, tag_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      cnt   <= '0;
      wptr  <= '0;
      ptr_q <= '0;
      tag_q <= '0;
    end else if (lj_valid) begin
      run   <= (LAMBDA > 1);
      cnt   <= SELW'(1);
      ptr_q <= wptr;
      tag_q <= lj_tag;
      wptr  <= (32'(wptr) == D2 - 1) ? '0 : wptr + 1'b1;
    end else if (run) begin
      cnt <= cnt + 1'b1;
      if (32'(cnt) == LAMBDA - 1) run <= 1'b0;
    end
  end

  // A new row may only start once the previous one has issued all slots.
  assert property (@(posedge clk) disable iff (!rst_n) lj_valid |-> !run);

  // ---- second-order register array -----------------------------------------
  logic [TAGW-1:0]     agg_tag;
  logic [PW-1:0]       raddr [1];
  logic signed [Q-1:0] rdata [1][N];

  assign raddr[0] = agg_tag[OTW +: PW];

  reg_array #(.DEPTH(D2), .N(N), .W(Q), .NRD(1)) u_ra (
    .clk, .we(lj_valid), .waddr(wptr), .wdata(lj), .raddr, .rdata
  );

  // ---- PUs -----------------------------------------------------------------
  localparam int unsigned PLI = (PL > 0) ? PL : 1;
  logic signed [QO-1:0] left_out  [PLI][N];
  logic signed [QO-1:0] right_out [PR][N];
  logic                 r_valid;
  logic [TAGW-1:0]      r_tag;

  for (genvar p = 0; p < PL; p++) begin : g_left
    localparam int unsigned NC = (NLEFT - p*LAMBDA < LAMBDA) ? NLEFT - p*LAMBDA : LAMBDA;
    logic [TAGW-1:0] unused_agg_tag, unused_tag;
    logic            unused_valid;
    pu #(.N(N), .Q(Q), .K_BASE(CLO + p*LAMBDA), .NPERM(LAMBDA), .NCOL(NC), .TAGW(TAGW)) u_pu (
      .clk, .rst_n, .in_valid(issue), .sel, .tag, .l_in(lj),
      .agg_tag(unused_agg_tag), .l_agg(rdata[0]),
      .out_valid(unused_valid), .out_tag(unused_tag), .out(left_out[p])
    );
  end
  if (PL == 0) begin : g_no_left
    always_comb for (int z = 0; z < N; z++) left_out[0][z] = '0;
  end

  for (genvar p = 0; p < PR; p++) begin : g_right
    if (p == 0) begin : g_lead
      // The lead PU of the second segment is always busy, so its tags time
      // the register-array read and the accumulation.
      pu #(.N(N), .Q(Q), .K_BASE(HALF), .NPERM(LAMBDA), .NCOL(LAMBDA), .TAGW(TAGW)) u_pu (
        .clk, .rst_n, .in_valid(issue), .sel, .tag, .l_in(lj),
        .agg_tag(agg_tag), .l_agg(rdata[0]),
        .out_valid(r_valid), .out_tag(r_tag), .out(right_out[p])
      );
    end else begin : g_other
      logic [TAGW-1:0] unused_agg_tag, unused_tag;
      logic            unused_valid;
      pu #(.N(N), .Q(Q), .K_BASE(HALF + p*LAMBDA), .NPERM(LAMBDA), .NCOL(LAMBDA), .TAGW(TAGW)) u_pu (
        .clk, .rst_n, .in_valid(issue), .sel, .tag, .l_in(lj),
        .agg_tag(unused_agg_tag), .l_agg(rdata[0]),
        .out_valid(unused_valid), .out_tag(unused_tag), .out(right_out[p])
      );
    end
  end

  // ---- adder tree, divider tree, final adder, accumulator -------------------
  logic signed [WL-1:0] left_sum  [N];
  logic signed [QO-1:0] right_avg [N];

  adder_tree #(.NIN(PL), .N(N), .WI(QO), .WO(WL)) u_at (.in_vec(left_out), .sum(left_sum));
  divider_tree #(.NIN(PR), .N(N), .W(QO)) u_dt (.in_vec(right_out), .avg(right_avg));

  logic signed [WA-1:0] acc [N];
  logic signed [WA-1:0] step_sum [N];
  logic                 first_slot, last_slot;

  assign first_slot = (r_tag[TAGW-1 -: SELW] == '0);
  assign last_slot  = (32'(r_tag[TAGW-1 -: SELW]) == LAMBDA - 1);

  always_comb begin
    for (int z = 0; z < N; z++) begin
      logic signed [WA-1:0] v;
      v = WA'(left_sum[z]) + (WA'(right_avg[z]) <<< LPR);
      step_sum[z] = first_slot ? v : acc[z] + v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0;
      c_tag   <= '0;
      c_out   <= '0;
      for (int z = 0; z < N; z++) acc[z] <= '0;
    end else begin
      c_valid <= r_valid && last_slot;
      if (r_valid) acc <= step_sum;
      if (r_valid && last_slot) begin
        c_tag <= r_tag[OTW-1:0];
        for (int z = 0; z < N; z++) c_out[z] <= step_sum[z][WA-1];   // hard decision
      end
    end
  end

endmodule
