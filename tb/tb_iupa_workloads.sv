// tb_iupa_workloads: runs one IUPA iteration in the configurations of the
// paper's synthesis tables other than the default one: RM(6,3) with
// (G,lambda) = (2,8), (4,8), (2,2) and RM(7,3) with (2,16).
//
// Each configuration is an iupa_workload_runner (an iupa_decoder overridden
// to that size, with one iteration, plus its own checker) fed with a few
// back-to-back noisy codewords. Chaining two iterations is covered by
// tb_iupa_decoder at the default size; the RM(7,3) configurations with
// (2,8) and (2,4) differ from (2,16) only in lambda and are left out to keep
// the build small. The runners share the clock and reset and run side by
// side; this testbench adds up their tallies once all are done. A watchdog
// bounds the run by the slowest configuration, RM(7,3) with lambda = 16.
module tb_iupa_workloads;
  localparam int NCFG = 4;
  localparam int NF = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [NCFG];
  int   chk  [NCFG];
  int   fl   [NCFG];

  iupa_workload_runner #(.M(6), .G(2), .LAMBDA(8),  .PAPER_PUS(6),  .NITER(1), .NF(NF)) u_63_2_8  (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  iupa_workload_runner #(.M(6), .G(4), .LAMBDA(8),  .PAPER_PUS(12), .NITER(1), .NF(NF)) u_63_4_8  (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  iupa_workload_runner #(.M(6), .G(2), .LAMBDA(2),  .PAPER_PUS(24), .NITER(1), .NF(NF)) u_63_2_2  (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  iupa_workload_runner #(.M(7), .G(2), .LAMBDA(16), .PAPER_PUS(6),  .NITER(1), .NF(NF)) u_73_2_16 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fl[3]));

  task automatic report(input int extra_fail);
    int checks, failures;
    checks = 0; failures = extra_fail;
    for (int i = 0; i < NCFG; i++) begin checks += chk[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < NCFG; i++) wait (done[i]);
    report(0);
  end

  // slowest: RM(7,3), (2,16): interval 128*16/4 = 512, latency 512+5+11
  initial begin
    repeat (NF * 512 + 528 + 500) @(posedge clk);
    $display("FAIL: watchdog expired");
    report(1);
  end
endmodule
