// tb_divider_tree: checks the pairwise averaging tree for 4 inputs against
// floor((floor((a+b)/2) + floor((c+d)/2)) / 2) on random and extreme values.
module tb_divider_tree;
  import iupa_ref_pkg::*;
  localparam int N = 4, W = 6;
  logic signed [W-1:0] in4 [4][N];
  logic signed [W-1:0] avg [N];
  int checks = 0, failures = 0;

  divider_tree #(.NIN(4), .N(N), .W(W)) dut (.in_vec(in4), .avg);

  initial begin
    for (int it = 0; it < 300; it++) begin
      int v [4][N];
      for (int z = 0; z < N; z++)
        for (int i = 0; i < 4; i++) begin
          v[i][z] = (it < 2) ? ((it == 0) ? -32 : 31) : int'($urandom % 64) - 32;
          in4[i][z] = W'(v[i][z]);
        end
      #1;
      for (int z = 0; z < N; z++) begin
        automatic int e = favg(favg(v[0][z], v[1][z]), favg(v[2][z], v[3][z]));
        checks++;
        if (int'(avg[z]) != e) begin failures++; $display("FAIL avg %0d exp %0d", avg[z], e); end
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
