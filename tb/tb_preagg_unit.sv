// tb_preagg_unit: checks the pre-aggregation (1 - 2 c([z + B_k])) L(z ^ k)
// against the reference for every selectable subspace, including the
// negation of -2^(Q-1) and the dummy subspace k = 0.
module tb_preagg_unit;
  import iupa_ref_pkg::*;
  localparam int N = 16, Q = 5;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] sel = 0;
  logic [N/2-1:0] c_in;
  logic signed [Q-1:0] l_src [N];
  logic signed [Q:0] out_a [N], out_b [N];
  int checks = 0, failures = 0;

  preagg_unit #(.N(N), .QI(Q), .K_BASE(5), .NPERM(4)) dut  (.clk, .rst_n, .en, .sel, .c_in, .l_src, .out(out_a));
  preagg_unit #(.N(N), .QI(Q), .K_BASE(0), .NPERM(4)) dut0 (.clk, .rst_n, .en, .sel, .c_in, .l_src, .out(out_b));

  always #5 clk = ~clk;

  task automatic compare(input logic signed [Q:0] got [N], input int k, input int l[], input int c[]);
    int o[];
    preagg(l, c, k, o);
    for (int z = 0; z < N; z++) begin
      checks++;
      if (int'(got[z]) != o[z]) begin
        failures++;
        $display("FAIL k=%0d z=%0d got %0d exp %0d", k, z, got[z], o[z]);
      end
    end
  endtask

  initial begin
    int l[], c[];
    for (int z = 0; z < N; z++) l_src[z] = '0;
    c_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      l = new[N]; c = new[N/2];
      foreach (l[z]) l[z] = int'($urandom % 32) - 16;
      foreach (c[t]) c[t] = $urandom % 2;
      for (int z = 0; z < N; z++) l_src[z] = Q'(l[z]);
      for (int t = 0; t < N/2; t++) c_in[t] = c[t][0];
      for (int s = 0; s < 4; s++) begin
        sel = 2'(s); en = 1;
        @(posedge clk); #1 en = 0;
        compare(out_a, 5 + s, l, c);
        compare(out_b, s, l, c);
      end
    end
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
