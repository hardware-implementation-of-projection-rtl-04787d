// tb_fod: checks the FHT first-order decoder against a brute-force
// maximum-correlation decoder on random inputs and on noisy RM(4,1)
// codewords, and checks its latency of 4 cycles with one input per cycle.
module tb_fod;
  import iupa_ref_pkg::*;
  localparam int N = 16, Q = 5, LAT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0] in_tag = 0, out_tag;
  logic signed [Q-1:0] l_in [N];
  logic out_valid;
  logic [N-1:0] c_out;
  int checks = 0, failures = 0, cycle = 0;
  int exp_q[$][], tag_q[$], t_q[$], sent_cw_q[$][];

  fod #(.N(N), .Q(Q), .TAGW(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .l_in, .out_valid, .out_tag, .c_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[], t, t0, cw[];
    e = exp_q.pop_front(); t = tag_q.pop_front(); t0 = t_q.pop_front(); cw = sent_cw_q.pop_front();
    for (int z = 0; z < N; z++) begin
      checks++;
      if (c_out[z] != e[z][0]) begin failures++; $display("FAIL bit %0d", z); end
    end
    checks++; if (out_tag != 8'(t)) begin failures++; $display("FAIL tag"); end
    checks++; if (cycle - t0 != LAT) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    if (cw.size() > 0) begin
      checks++;
      for (int z = 0; z < N; z++) if (c_out[z] != cw[z][0]) begin failures++; $display("FAIL not decoded"); break; end
    end
  end

  initial begin
    int l[], e[], cw[], none[];
    for (int z = 0; z < N; z++) l_in[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      if (it % 2) begin
        rm_codeword(4, 1, cw);
        noisy_llr(cw, 6, 2, Q, l);
        l[$urandom % N] *= -1;      // one error, RM(4,1) corrects up to 3
        sent_cw_q.push_back(cw);
      end else begin
        l = new[N];
        foreach (l[z]) l[z] = int'($urandom % 32) - 16;
        sent_cw_q.push_back(none);
      end
      fod_decode(l, e);
      exp_q.push_back(e); tag_q.push_back(it & 255); t_q.push_back(cycle);
      for (int z = 0; z < N; z++) l_in[z] = Q'(l[z]);
      in_valid = 1; in_tag = 8'(it);
      @(posedge clk); #1;
      in_valid = 0;
      if ($urandom % 4 == 0) begin @(posedge clk); #1; end
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
