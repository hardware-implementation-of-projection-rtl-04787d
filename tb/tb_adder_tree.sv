// tb_adder_tree: checks the full-precision adder tree for 5 and 1 inputs on
// random and extreme values.
module tb_adder_tree;
  localparam int N = 4, WI = 6, WO = 9;
  logic signed [WI-1:0] in5 [5][N], in1 [1][N];
  logic signed [WO-1:0] s5 [N];
  logic signed [WI-1:0] s1 [N];
  int checks = 0, failures = 0;

  adder_tree #(.NIN(5), .N(N), .WI(WI), .WO(WO)) dut  (.in_vec(in5), .sum(s5));
  adder_tree #(.NIN(1), .N(N), .WI(WI), .WO(WI)) dut1 (.in_vec(in1), .sum(s1));

  initial begin
    for (int it = 0; it < 300; it++) begin
      int e [N];
      for (int z = 0; z < N; z++) begin
        e[z] = 0;
        for (int i = 0; i < 5; i++) begin
          automatic int v = (it < 2) ? ((it == 0) ? -32 : 31) : int'($urandom % 64) - 32;
          in5[i][z] = WI'(v);
          e[z] += v;
        end
        in1[0][z] = WI'(int'($urandom % 64) - 32);
      end
      #1;
      for (int z = 0; z < N; z++) begin
        checks++;
        if (int'(s5[z]) != e[z]) begin failures++; $display("FAIL sum %0d exp %0d", s5[z], e[z]); end
        checks++;
        if (s1[z] != in1[0][z]) begin failures++; $display("FAIL single input"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
