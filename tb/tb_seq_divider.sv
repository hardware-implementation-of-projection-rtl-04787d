// tb_seq_divider: feeds batches of 8 vectors with random spacing into a
// three-level sequential divider and checks one output per batch, equal to
// the pairwise floor average of the batch, LEVELS + 1 clock edges after the
// edge that takes its last input.
module tb_seq_divider;
  import iupa_ref_pkg::*;
  localparam int N = 4, W = 6, LV = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] in_vec [N], out_vec [N];
  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  int exp_q[$][], t_q[$];

  seq_divider #(.LEVELS(LV), .N(N), .W(W)) dut (.clk, .rst_n, .in_valid, .in_vec, .out_valid, .out_vec);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[], t0;
    e = exp_q.pop_front(); t0 = t_q.pop_front();
    n_out++;
    for (int z = 0; z < N; z++) begin
      checks++;
      if (int'(out_vec[z]) != e[z]) begin failures++; $display("FAIL %0d exp %0d", out_vec[z], e[z]); end
    end
    checks++;
    if (cycle - t0 != LV + 1) begin failures++; $display("FAIL latency %0d", cycle - t0); end
  end

  initial begin
    for (int z = 0; z < N; z++) in_vec[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      int v[][];
      v = new[8];
      for (int i = 0; i < 8; i++) begin
        v[i] = new[N];
        foreach (v[i][z]) begin
          v[i][z] = (b == 0) ? -32 : int'($urandom % 64) - 32;
          in_vec[z] = W'(v[i][z]);
        end
        in_valid = 1;
        if (i == 7) t_q.push_back(cycle);
        @(posedge clk); #1 in_valid = 0;
        repeat ($urandom % 3) @(posedge clk);
        #1;
      end
      for (int w = 8; w > 1; w /= 2)
        for (int i = 0; i < w / 2; i++)
          foreach (v[i][z]) v[i][z] = favg(v[2*i][z], v[2*i+1][z]);
      exp_q.push_back(v[0]);
    end
    repeat (LV + 3) @(posedge clk);
    checks++; if (n_out != 30) begin failures++; $display("FAIL %0d outputs", n_out); end
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
