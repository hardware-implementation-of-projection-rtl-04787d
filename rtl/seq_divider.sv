// seq_divider: sequential part of the divider tree. It averages 2^LEVELS
// vectors that arrive one after another (one per valid pulse).
//
// Each level has a holding register (the shift register of the paper's
// divider tree) and a flag. The first vector of a pair is held; when the
// second arrives the level emits floor((held + new) / 2) to the next level,
// one cycle later. The last level's result is the average of the
// 2^LEVELS inputs with the rounding of this pairwise order, and out_valid
// pulses once per 2^LEVELS input pulses. Inputs may arrive at any spacing.
// The paper gives the structure (adders and shift registers, activated by the
// valid signal of the unit before); the flag-based activation is this
// design's choice in place of control-unit enables. Latency from the last
// input to out_valid: LEVELS cycles, plus one output register. The lint
// note that bit 0 of the pair sum is unused is intended: it is the bit the
// halving drops.
module seq_divider #(
  parameter int unsigned LEVELS = 4,
  parameter int unsigned N      = 64,
  parameter int unsigned W      = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_vec  [N],
  output logic                out_valid,
  output logic signed [W-1:0] out_vec [N]
);
  typedef logic signed [W:0] ext_t;

  // lv_*[l] is the input of level l; lv_*[LEVELS] feeds the output register.
  logic                lv_valid [LEVELS+1];
  logic signed [W-1:0] lv_vec   [LEVELS+1][N];

  logic                lvl_valid_q [LEVELS > 0 ? LEVELS : 1];
  logic signed [W-1:0] lvl_vec_q   [LEVELS > 0 ? LEVELS : 1][N];

  always_comb begin
    lv_valid[0] = in_valid;
    lv_vec[0]   = in_vec;
    for (int l = 1; l <= LEVELS; l++) begin
      lv_valid[l] = lvl_valid_q[l-1];
      lv_vec[l]   = lvl_vec_q[l-1];
    end
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    logic                have;
    logic signed [W-1:0] hold [N];
    logic signed [W-1:0] avg  [N];
    // floor((held + new) / 2); the dropped LSB is the rounding of the tree
    always_comb begin
      for (int z = 0; z < N; z++) begin
        ext_t s;
        s      = ext_t'(hold[z]) + ext_t'(lv_vec[l][z]);
        avg[z] = s[W:1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        have           <= 1'b0;
        lvl_valid_q[l]  <= 1'b0;
        for (int z = 0; z < N; z++) begin
          hold[z]         <= '0;
          lvl_vec_q[l][z]  <= '0;
        end
      end else begin
        lvl_valid_q[l] <= 1'b0;
        if (lv_valid[l]) begin
          if (!have) begin
            hold <= lv_vec[l];
            have <= 1'b1;
          end else begin
            lvl_vec_q[l]   <= avg;
            lvl_valid_q[l] <= 1'b1;
            have          <= 1'b0;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int z = 0; z < N; z++) out_vec[z] <= '0;
    end else begin
      out_valid <= lv_valid[LEVELS];
      if (lv_valid[LEVELS]) out_vec <= lv_vec[LEVELS];
    end
  end

endmodule
