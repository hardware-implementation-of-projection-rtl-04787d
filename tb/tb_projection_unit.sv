// tb_projection_unit: checks the MinSum projection against the reference for
// every selectable subspace, including the saturation of -2^(Q-1), the hold
// of the output register when en is low, and the dummy subspace k = 0.
module tb_projection_unit;
  import iupa_ref_pkg::*;
  localparam int N = 16, Q = 5;
  logic clk = 0, rst_n = 0, en = 0, en0 = 0;
  logic [1:0] sel = 0;
  logic sel0 = 0;
  logic signed [Q-1:0] l_in [N];
  logic signed [Q-1:0] l_out [N/2], l_out0 [N/2];
  int checks = 0, failures = 0;

  projection_unit #(.N(N), .Q(Q), .K_BASE(3), .NPERM(4)) dut (.clk, .rst_n, .en, .sel, .l_in, .l_out);
  projection_unit #(.N(N), .Q(Q), .K_BASE(0), .NPERM(2)) dut0 (.clk, .rst_n, .en(en0), .sel(sel0), .l_in, .l_out(l_out0));

  always #5 clk = ~clk;

  task automatic compare(input logic signed [Q-1:0] got [N/2], input int k, input int l[]);
    int y[];
    project(l, k, Q, y);
    for (int t = 0; t < N/2; t++) begin
      checks++;
      if (int'(got[t]) != y[t]) begin
        failures++;
        $display("FAIL k=%0d t=%0d got %0d exp %0d", k, t, got[t], y[t]);
      end
    end
  endtask

  initial begin
    int l[];
    for (int z = 0; z < N; z++) l_in[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      l = new[N];
      foreach (l[z]) l[z] = int'($urandom % 32) - 16;
      if (it < 4) l[it] = -16;
      for (int z = 0; z < N; z++) l_in[z] = Q'(l[z]);
      for (int s = 0; s < 4; s++) begin
        sel = 2'(s); en = 1;
        @(posedge clk); #1 en = 0;
        compare(l_out, 3 + s, l);
      end
      // hold: change the input with en low
      for (int z = 0; z < N; z++) l_in[z] = ~l_in[z];
      @(posedge clk); #1;
      compare(l_out, 6, l);
      for (int z = 0; z < N; z++) l_in[z] = Q'(l[z]);
      for (int s = 0; s < 2; s++) begin
        sel0 = 1'(s); en0 = 1;
        @(posedge clk); #1 en0 = 0;
        compare(l_out0, s, l);
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
