// iupa_workload_runner: drives one iupa_decoder of a given configuration
// with NF random noisy codewords and checks it against the reference model.
//
// Used by tb_iupa_workloads, which runs one of these per code and (G,lambda)
// configuration of the paper's synthesis tables. Frames are sent back to
// back, so the runner also checks the insertion interval n*lambda/(2G). For
// every output it checks the LLRs and hard decisions bit for bit against
// iupa_ref_pkg::decode, the latency NITER*(n*lambda/(2G) + log2(R) + 11), and
// that frames with at most 3 sign flips and no other noise decode to the sent
// codeword. It also compares the number of processing units this
// configuration elaborates with PAPER_PUS, the count printed in the paper.
// done rises when all frames are out; checks/failures hold the tallies.
module iupa_workload_runner #(
  parameter int unsigned M         = 6,
  parameter int unsigned G         = 2,
  parameter int unsigned LAMBDA    = 4,
  parameter int unsigned PAPER_PUS = 12,
  parameter int unsigned NITER     = 2,
  parameter int unsigned NF        = 3
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import iupa_ref_pkg::*;

  localparam int Q = 5;
  localparam int N = 1 << M;
  localparam int R = (N / 2) / G;
  localparam int PERIOD = N * LAMBDA / (2 * G);
  localparam int LAT = NITER * (PERIOD + $clog2(R) + 11);

  logic in_valid = 0, in_ready;
  logic signed [Q-1:0] llr_in [N];
  logic out_valid;
  logic signed [Q:0] llr_out [N];
  logic [N-1:0] c_hat;

  iupa_decoder #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA), .NITER(NITER)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .llr_in, .out_valid, .llr_out, .c_hat);

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int exp_q[$][];
  int sent_q[$][];
  int clean_q[$];
  int t_q[$];
  int n_out = 0, last_acc = -1, min_gap = 1 << 30;

  initial begin
    checks = 0; failures = 0; done = 0;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    t_q.push_back(cycle);
    if (last_acc >= 0 && cycle - last_acc < min_gap) min_gap = cycle - last_acc;
    last_acc = cycle;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[], c[];
    automatic int ok = 1, good = 1;
    int t0;
    e  = exp_q.pop_front();
    c  = sent_q.pop_front();
    t0 = t_q.pop_front();
    for (int z = 0; z < N; z++) begin
      if (int'(llr_out[z]) != e[z]) ok = 0;
      if (c_hat[z] != (e[z] < 0)) ok = 0;
      if (c_hat[z] != c[z][0]) good = 0;
    end
    checks++;
    if (!ok) begin failures++; $display("FAIL: RM(%0d,3) (%0d,%0d) frame %0d differs from the reference", M, G, LAMBDA, n_out); end
    checks++;
    if (cycle - t0 != LAT) begin failures++; $display("FAIL: RM(%0d,3) (%0d,%0d) latency %0d, expected %0d", M, G, LAMBDA, cycle - t0, LAT); end
    if (clean_q.pop_front()) begin
      checks++;
      if (!good) begin failures++; $display("FAIL: RM(%0d,3) (%0d,%0d) frame %0d not corrected", M, G, LAMBDA, n_out); end
    end
    n_out++;
  end

  initial begin
    for (int z = 0; z < N; z++) llr_in[z] = '0;
    checks++;
    if (rm_pkg::total_pus(M, G, LAMBDA) != PAPER_PUS) begin
      $display("note: RM(%0d,3) (%0d,%0d) builds %0d PUs per iteration, the paper's ILP gives %0d",
               M, G, LAMBDA, rm_pkg::total_pus(M, G, LAMBDA), PAPER_PUS);
      // Only (4,8) for RM(6,3) is known to differ (11 against 12).
      if (!(M == 6 && G == 4 && LAMBDA == 8 && rm_pkg::total_pus(M, G, LAMBDA) == 11)) failures++;
    end
    wait (rst_n);
    for (int f = 0; f < NF; f++) begin
      int c[], l[], e[];
      rm_codeword(M, 3, c);
      noisy_llr(c, (f == NF - 1) ? 6 : 8, (f == NF - 1) ? 6 : 0, Q, l);
      for (int k = 0; k < 3; k++) begin
        int p = $urandom % N;
        l[p] = -l[p];
      end
      decode(l, M, Q, G, LAMBDA, NITER, e);
      exp_q.push_back(e);
      sent_q.push_back(c);
      clean_q.push_back(f != NF - 1);
      @(negedge clk);
      for (int z = 0; z < N; z++) llr_in[z] = Q'(l[z]);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
    end
    wait (n_out == NF);
    checks++;
    if (min_gap != PERIOD) begin failures++; $display("FAIL: RM(%0d,3) (%0d,%0d) insertion interval %0d, expected %0d", M, G, LAMBDA, min_gap, PERIOD); end
    $display("RM(%0d,3) (G,lambda)=(%0d,%0d): %0d PUs, interval %0d, latency %0d cycles",
             M, G, LAMBDA, rm_pkg::total_pus(M, G, LAMBDA), min_gap, LAT);
    done = 1;
  end

endmodule
