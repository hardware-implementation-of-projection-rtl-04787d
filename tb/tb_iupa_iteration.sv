// tb_iupa_iteration: one IUPA iteration for RM(5,3) with G = 4 and
// lambda = 2 (R = 4 rows per group; groups 2 and 3 have no left-half PUs).
// Random and noisy-codeword LLR vectors are sent back to back and with gaps;
// every L_hat is compared with the reference iteration, and the insertion
// interval R*lambda and the latency R*lambda + log2(R) + 11 are checked.
module tb_iupa_iteration;
  import iupa_ref_pkg::*;
  localparam int M = 5, Q = 5, G = 4, LAMBDA = 2;
  localparam int N = 1 << M, R = (N / 2) / G, PERIOD = R * LAMBDA, LAT = PERIOD + $clog2(R) + 11;
  localparam int NCW = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic signed [Q-1:0] l_in [N];
  logic signed [Q:0] l_out [N];
  int checks = 0, failures = 0, cycle = 0, n_out = 0, last_acc = -1, min_gap = 1 << 30;
  int exp_q[$][], t_q[$];

  iupa_iteration #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .l_in, .out_valid, .l_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      t_q.push_back(cycle);
      if (last_acc >= 0 && cycle - last_acc < min_gap) min_gap = cycle - last_acc;
      last_acc = cycle;
    end
    if (out_valid) begin
      int e[], t0;
      e = exp_q.pop_front(); t0 = t_q.pop_front();
      n_out++;
      for (int z = 0; z < N; z++) begin
        checks++;
        if (int'(l_out[z]) != e[z]) begin failures++; $display("FAIL z=%0d got %0d exp %0d", z, l_out[z], e[z]); end
      end
      checks++; if (cycle - t0 != LAT) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    end
  end

  initial begin
    int l[], c[], e[];
    for (int z = 0; z < N; z++) l_in[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NCW; i++) begin
      if (i % 2) begin
        rm_codeword(M, 3, c);
        noisy_llr(c, 7, 5, Q, l);
      end else begin
        l = new[N];
        foreach (l[z]) l[z] = int'($urandom % 32) - 16;
      end
      iteration(l, M, Q, G, LAMBDA, e);
      exp_q.push_back(e);
      for (int z = 0; z < N; z++) l_in[z] = Q'(l[z]);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
      if (i >= 6) repeat (i) @(posedge clk);
      #1;
    end
    wait (n_out == NCW);
    checks++; if (min_gap != PERIOD) begin failures++; $display("FAIL interval %0d", min_gap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (NCW * (PERIOD + 12) + LAT + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
