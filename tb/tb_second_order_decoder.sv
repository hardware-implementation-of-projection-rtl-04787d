// tb_second_order_decoder: two groups of an RM(5,3) decoder with G = 2,
// lambda = 2 (group 0 with both segments, group 1 with only the right-half
// segment) decode random second-order vectors arriving every lambda cycles,
// and with gaps. The hard decisions are checked against the reference sum of
// pre-aggregated projections (adder-tree part exact, right-half part through
// the divider tree and scaled back), together with the tag and the latency
// lambda + 6.
module tb_second_order_decoder;
  import iupa_ref_pkg::*;
  localparam int M = 5, Q = 5, G = 2, LAMBDA = 2, OTW = 5;
  localparam int N = 1 << (M - 1), LAT = LAMBDA + 6;
  logic clk = 0, rst_n = 0, lj_valid = 0;
  logic [OTW-1:0] lj_tag = 0;
  logic signed [Q-1:0] lj [N];
  logic c_valid [2];
  logic [OTW-1:0] c_tag [2];
  logic [N-1:0] c_out [2];
  int checks = 0, failures = 0, cycle = 0, n_rows = 0;
  int exp_q [2][$][];
  int t_q[$], tag_q[$];

  second_order_decoder #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA), .GIDX(0), .OTW(OTW)) dut0 (
    .clk, .rst_n, .lj_valid, .lj_tag, .lj, .c_valid(c_valid[0]), .c_tag(c_tag[0]), .c_out(c_out[0]));
  second_order_decoder #(.M(M), .Q(Q), .G(G), .LAMBDA(LAMBDA), .GIDX(1), .OTW(OTW)) dut1 (
    .clk, .rst_n, .lj_valid, .lj_tag, .lj, .c_valid(c_valid[1]), .c_tag(c_tag[1]), .c_out(c_out[1]));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar g = 0; g < 2; g++) begin : g_chk
    always @(posedge clk) if (rst_n && c_valid[g]) begin
      int e[];
      e = exp_q[g].pop_front();
      for (int z = 0; z < N; z++) begin
        checks++;
        if (c_out[g][z] != (e[z] < 0)) begin failures++; $display("FAIL g%0d z=%0d", g, z); end
      end
      if (g == 0) begin
        int t0, tg;
        t0 = t_q.pop_front(); tg = tag_q.pop_front();
        checks++; if (cycle - t0 != LAT) begin failures++; $display("FAIL latency %0d", cycle - t0); end
        checks++; if (c_tag[g] != OTW'(tg)) begin failures++; $display("FAIL tag"); end
      end
    end
  end

  initial begin
    int l[], s[];
    for (int z = 0; z < N; z++) lj[z] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int row = 0; row < 60; row++) begin
      int c[];
      if (row % 3 == 0) begin
        rm_codeword(M - 1, 2, c);
        noisy_llr(c, 5, 4, Q, l);
        l[$urandom % N] *= -1;
      end else begin
        l = new[N];
        foreach (l[z]) l[z] = int'($urandom % 31) - 15;
      end
      for (int g = 0; g < 2; g++) begin
        dec2_sum(l, M, Q, G, LAMBDA, g, s);
        exp_q[g].push_back(s);
      end
      t_q.push_back(cycle); tag_q.push_back(row % 32);
      for (int z = 0; z < N; z++) lj[z] = Q'(l[z]);
      lj_valid = 1; lj_tag = OTW'(row);
      @(posedge clk); #1 lj_valid = 0;
      repeat (LAMBDA - 1 + ((row % 7 == 6) ? 3 : 0)) @(posedge clk);
      #1;
    end
    repeat (LAT + 3) @(posedge clk);
    checks++; if (exp_q[0].size() != 0 || exp_q[1].size() != 0) begin failures++; $display("FAIL missing"); end
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
