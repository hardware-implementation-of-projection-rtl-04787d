// tb_iupa_decoder: end-to-end test of the IUPA decoder at its default size,
// RM(6,3), G = 2, lambda = 4, two iterations, 5-bit LLRs.
//
// Codewords of RM(6,3) are made from random cubic polynomials, mapped to
// LLRs, disturbed by noise and by a few sign flips, and sent to the decoder,
// partly back to back (so the input stalls on in_ready and codewords overlap
// in the pipeline) and partly with gaps. Every output is compared bit for bit
// with the reference model; frames with at most 3 flipped signs and no other
// noise (the code has minimum distance 8) must also decode to the sent
// codeword. The testbench checks the insertion interval n*lambda/(2G) and
// the latency of the design and counts how often each mechanism happened:
// input stalls, codewords in flight together, the dummy row, first-iteration
// values reaching the inter-iteration clamp at full scale, and corrupted frames.
module tb_iupa_decoder;
  import iupa_ref_pkg::*;

  localparam int M = 6, Q = 5, G = 2, LAMBDA = 4, NITER = 2;
  localparam int N = 1 << M;
  localparam int R = (N / 2) / G;
  localparam int PERIOD = N * LAMBDA / (2 * G);
  localparam int LAT = NITER * (PERIOD + $clog2(R) + 11);
  localparam int PAPER_LAT = NITER * (1 + (1 + T_FOD_TB + 1 + LAMBDA + 1) + 1
                                      + ((N / 2 - 1) * LAMBDA + G - 1) / G + M);
  localparam int T_FOD_TB = 4;
  localparam int NCW = 13;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic signed [Q-1:0] llr_in [N];
  logic out_valid;
  logic signed [Q:0] llr_out [N];
  logic [N-1:0] c_hat;

  iupa_decoder dut (.clk, .rst_n, .in_valid, .in_ready, .llr_in, .out_valid, .llr_out, .c_hat);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // scoreboard
  int exp_q[$][];
  int sent_q[$][];
  int clean_q[$];
  int acc_cycle_q[$];
  int n_out = 0;
  int stalls = 0, overlaps = 0, dummy_rows = 0, sat_events = 0, full_scale = 0, corrections = 0;
  int in_flight = 0;
  int last_accept = -1, min_gap = 1 << 30;

  task automatic fail(string what);
    failures++;
    $display("FAIL: %s", what);
  endtask

  // count mechanisms
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) stalls++;
    if (dut.g_iter[0].u_it.u_ctrl.slot_valid && dut.g_iter[0].u_it.u_ctrl.slot == 0) dummy_rows++;
    if (in_valid && in_ready) begin
      acc_cycle_q.push_back(cycle);
      if (last_accept >= 0 && cycle - last_accept < min_gap) min_gap = cycle - last_accept;
      last_accept = cycle;
      if (in_flight > 0) overlaps++;
      in_flight++;
    end
    if (out_valid) in_flight--;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int e[], c[];
    automatic int ok = 1;
    int t0;
    e  = exp_q.pop_front();
    c  = sent_q.pop_front();
    t0 = acc_cycle_q.pop_front();
    for (int z = 0; z < N; z++) begin
      if (int'(llr_out[z]) != e[z]) ok = 0;
      if (c_hat[z] != (e[z] < 0)) ok = 0;
    end
    checks++;
    if (!ok) fail($sformatf("codeword %0d: output differs from the reference", n_out));
    checks++;
    if (cycle - t0 != LAT) fail($sformatf("latency %0d, expected %0d", cycle - t0, LAT));
    if (clean_q.pop_front()) begin
      automatic int good = 1;
      for (int z = 0; z < N; z++) if (c_hat[z] != c[z][0]) good = 0;
      checks++;
      if (!good) fail($sformatf("codeword %0d: correctable errors not corrected", n_out));
    end
    n_out++;
  end

  task automatic send(input int amp, input int noise, input int flips, input int gap,
                     input bit all_ones = 0);
    int c[], l[], e[], l1[];
    rm_codeword(M, 3, c);
    if (all_ones) foreach (c[z]) c[z] = 1;
    noisy_llr(c, amp, noise, Q, l);
    for (int f = 0; f < flips; f++) begin
      int p = $urandom % N;
      l[p] = -l[p];
      if (l[p] == 16) l[p] = 15;
    end
    decode(l, M, Q, G, LAMBDA, NITER, e);
    iteration(l, M, Q, G, LAMBDA, l1);
    foreach (l1[z]) begin
      if (l1[z] > 15 || l1[z] < -16) sat_events++;
      if (l1[z] == -16 || l1[z] == 15) full_scale++;
    end
    if (flips > 0) corrections++;
    exp_q.push_back(e);
    sent_q.push_back(c);
    clean_q.push_back(noise == 0 && flips <= 3);
    for (int z = 0; z < N; z++) llr_in[z] = Q'(l[z]);
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    repeat (gap) @(posedge clk);
  endtask

  initial begin
    for (int z = 0; z < N; z++) llr_in[z] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // back-to-back burst: clean frames with up to 3 sign flips
    for (int i = 0; i < 6; i++) send(8, 0, i % 4, 0);
    // noisy frames, some with saturating magnitudes, with gaps
    for (int i = 0; i < 3; i++) send(15, 4, 2, 7 + i);
    for (int i = 0; i < 3; i++) send(6, 6, 1, 0);
    // all-ones codeword at full scale: the first iteration reaches -2^(Q-1)
    send(16, 0, 0, 0, 1);
    wait (n_out == NCW);
    repeat (5) @(posedge clk);

    checks++;
    if (min_gap != PERIOD) fail($sformatf("insertion interval %0d, expected n*lambda/(2G) = %0d", min_gap, PERIOD));
    $display("insertion interval %0d cycles (paper: n*lambda/(2G) = %0d)", min_gap, PERIOD);
    $display("latency %0d cycles for %0d iterations (paper's formula: %0d)", LAT, NITER, PAPER_LAT);
    $display("mechanisms: stalls=%0d overlaps=%0d dummy_rows=%0d full_scale=%0d out_of_range=%0d corrections=%0d",
             stalls, overlaps, dummy_rows, full_scale, sat_events, corrections);
    checks++; if (stalls == 0)     fail("no input stall happened");
    checks++; if (overlaps == 0)   fail("no two codewords were in flight together");
    checks++; if (dummy_rows == 0) fail("the dummy row was never processed");
    // With the dummy all-zero row among the 2^(m-1) averaged vectors the first
    // iteration cannot leave [-2^(Q-1), 2^(Q-1)-1]; the clamp before the
    // second iteration must therefore never act, while full-scale values occur.
    checks++; if (sat_events != 0) fail("first-iteration output outside the Q-bit range");
    checks++; if (full_scale == 0) fail("no full-scale value reached the inter-iteration clamp");
    checks++; if (corrections == 0) fail("no corrupted frame was sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCW * (PERIOD + 20) + 2 * LAT + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
