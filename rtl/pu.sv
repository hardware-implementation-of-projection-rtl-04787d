// pu: processing unit of a second-order decoder: ProjU -> FOD -> PreAggU.
//
// A PU is assigned NPERM consecutive second-order projections,
// k = K_BASE .. K_BASE+NPERM-1 (NPERM = lambda in the paper), and works on
// one of them per cycle: `sel` names the projection, `l_in` is the
// second-order vector (N = 2^(m-1) LLRs) being decoded. Of the NPERM slots
// only the first NCOL carry real projections; the others (the unused tail of
// the last PU of a group) are idle and give a zero output.
//
// Pipeline (one vector per cycle):
//   cycle 0  in_valid, sel, tag           -> projection register (t_proj = 1)
//   cycle 1  first-order vector           -> FOD, 4 stages (t_FOD = 4)
//   cycle 5  decoded bits, agg_tag        -> PreAggU reads l_agg, register
//   cycle 6  out_valid, out, out_tag         (t_preAgg = 1)
// The PreAggU needs the second-order vector again. As in the paper it is not
// carried through the pipeline: the PU presents agg_tag (the tag that entered
// with the data) and the group's register array returns the vector on l_agg
// in the same cycle.
module pu #(
  parameter int unsigned N      = 32,
  parameter int unsigned Q      = 5,
  parameter int unsigned K_BASE = 1,
  parameter int unsigned NPERM  = 4,
  parameter int unsigned NCOL   = 4,
  parameter int unsigned TAGW   = 4,
  localparam int unsigned SELW  = (NPERM > 1) ? $clog2(NPERM) : 1,
  localparam int unsigned QO    = Q + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [SELW-1:0]      sel,
  input  logic [TAGW-1:0]      tag,
  input  logic signed [Q-1:0]  l_in  [N],
  output logic [TAGW-1:0]      agg_tag,
  input  logic signed [Q-1:0]  l_agg [N],
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_tag,
  output logic signed [QO-1:0] out   [N]
);
  logic                 active;
  logic                 p_valid;
  logic [SELW-1:0]      p_sel;
  logic [TAGW-1:0]      p_tag;
  logic signed [Q-1:0]  p_vec [N/2];

  assign active = in_valid && (32'(sel) < NCOL);

  projection_unit #(.N(N), .Q(Q), .K_BASE(K_BASE), .NPERM(NPERM)) u_proj (
    .clk, .rst_n, .en(active), .sel, .l_in, .l_out(p_vec)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_sel   <= '0;
      p_tag   <= '0;
    end else begin
      p_valid <= active;
      p_sel   <= sel;
      p_tag   <= tag;
    end
  end

  logic                 f_valid;
  logic [SELW+TAGW-1:0] f_tag;
  logic [N/2-1:0]       f_c;

  fod #(.N(N/2), .Q(Q), .TAGW(SELW + TAGW)) u_fod (
    .clk, .rst_n, .in_valid(p_valid), .in_tag({p_sel, p_tag}), .l_in(p_vec),
    .out_valid(f_valid), .out_tag(f_tag), .c_out(f_c)
  );

  assign agg_tag = f_tag[TAGW-1:0];

  logic signed [QO-1:0] a_out [N];
  preagg_unit #(.N(N), .QI(Q), .K_BASE(K_BASE), .NPERM(NPERM)) u_preagg (
    .clk, .rst_n, .en(f_valid), .sel(f_tag[SELW+TAGW-1:TAGW]), .c_in(f_c),
    .l_src(l_agg), .out(a_out)
  );

  logic            o_valid;
  logic [TAGW-1:0] o_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_tag   <= '0;
    end else begin
      o_valid <= f_valid;
      o_tag   <= f_tag[TAGW-1:0];
    end
  end

  // Idle slots contribute nothing to the group's sum.
  always_comb begin
    for (int z = 0; z < N; z++) out[z] = o_valid ? a_out[z] : '0;
  end
  assign out_valid = o_valid;
  assign out_tag   = o_tag;

endmodule
