// tb_pu: drives a PU (N = 16, projections k = 4..7 of which 3 are real)
// with one slot per cycle, serves its register-array read from a model and
// checks every output against project -> brute-force FOD -> pre-aggregation,
// the zero output of the idle slot and the 6-cycle latency.
module tb_pu;
  import iupa_ref_pkg::*;
  localparam int N = 16, Q = 5, LAT = 6;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [1:0] sel = 0;
  logic [3:0] tag = 0, agg_tag, out_tag;
  logic signed [Q-1:0] l_in [N], l_agg [N];
  logic signed [Q:0] out [N];
  int checks = 0, failures = 0, cycle = 0;
  int vecs [16][N];
  int exp_q[$][], t_q[$], tag_q[$];

  pu #(.N(N), .Q(Q), .K_BASE(4), .NPERM(4), .NCOL(3), .TAGW(4)) dut (
    .clk, .rst_n, .in_valid, .sel, .tag, .l_in, .agg_tag, .l_agg, .out_valid, .out_tag, .out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always_comb for (int z = 0; z < N; z++) l_agg[z] = Q'(vecs[agg_tag][z]);

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[], t0, tg;
    e = exp_q.pop_front(); t0 = t_q.pop_front(); tg = tag_q.pop_front();
    for (int z = 0; z < N; z++) begin
      checks++;
      if (int'(out[z]) != e[z]) begin failures++; $display("FAIL z=%0d got %0d exp %0d", z, out[z], e[z]); end
    end
    checks++; if (cycle - t0 != LAT) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    checks++; if (out_tag != 4'(tg)) begin failures++; $display("FAIL tag"); end
  end

  // idle slot: output must be zero
  always @(posedge clk) if (rst_n && !out_valid) begin
    for (int z = 0; z < N; z++) if (out[z] != 0) begin failures++; checks++; $display("FAIL idle output"); break; end
  end

  initial begin
    int l[], y[], c[], o[];
    for (int z = 0; z < N; z++) l_in[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int row = 0; row < 40; row++) begin
      automatic int tg = row % 16;
      l = new[N];
      foreach (l[z]) l[z] = int'($urandom % 31) - 15;
      for (int z = 0; z < N; z++) begin vecs[tg][z] = l[z]; l_in[z] = Q'(l[z]); end
      for (int s = 0; s < 4; s++) begin
        in_valid = 1; sel = 2'(s); tag = 4'(tg);
        if (s < 3) begin
          project(l, 4 + s, Q, y); fod_decode(y, c); preagg(l, c, 4 + s, o);
          exp_q.push_back(o); t_q.push_back(cycle); tag_q.push_back(tg);
        end
        @(posedge clk); #1;
      end
      in_valid = 0;
    end
    repeat (LAT + 2) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
