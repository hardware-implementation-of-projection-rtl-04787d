// tb_iupa_ctrl: checks the third-order control unit for RM(5,3), G = 2,
// lambda = 2 (R = 8 rows per group): a codeword is accepted only when idle
// or in the last cycle of the previous one (so back-to-back codewords are
// R*lambda cycles apart), slot_valid marks the first cycle of each of the R
// slots in order, and each accepted codeword gets the other register-array
// entry than the one before.
module tb_iupa_ctrl;
  localparam int M = 5, G = 2, LAMBDA = 2;
  localparam int R = (1 << (M - 1)) / G, PERIOD = R * LAMBDA;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic in_ready, accept, wtag, slot_valid, cur_tag;
  logic [2:0] slot;
  int checks = 0, failures = 0, cycle = 0;
  int exp_slot = 0, exp_phase = -1, last_acc = -1, n_acc = 0, n_stall = 0;
  logic exp_tag = 1'b1;

  iupa_ctrl #(.M(M), .G(G), .LAMBDA(LAMBDA)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .accept, .wtag, .slot_valid, .slot, .cur_tag);

  always #5 clk = ~clk;

  // reference model of the slot sequence
  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (in_valid && !in_ready) n_stall++;
    checks++;
    if (slot_valid != (exp_phase >= 0 && exp_phase % LAMBDA == 0)) begin
      failures++; $display("FAIL slot_valid at cycle %0d", cycle);
    end
    if (slot_valid) begin
      checks++;
      if (slot != 3'(exp_phase / LAMBDA)) begin failures++; $display("FAIL slot %0d", slot); end
      checks++;
      if (cur_tag != exp_tag) begin failures++; $display("FAIL cur_tag"); end
    end
    checks++;
    if (in_ready != (exp_phase < 0 || exp_phase == PERIOD - 1)) begin failures++; $display("FAIL in_ready"); end
    if (accept) begin
      checks++;
      if (wtag != ~exp_tag) begin failures++; $display("FAIL wtag"); end
      if (last_acc >= 0) begin
        checks++;
        if (cycle - last_acc < PERIOD) begin failures++; $display("FAIL accept interval"); end
      end
      last_acc = cycle;
      n_acc++;
      exp_tag = ~exp_tag;
      exp_phase = 0;
    end else if (exp_phase >= 0) begin
      exp_phase = (exp_phase == PERIOD - 1) ? -1 : exp_phase + 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    in_valid = 1;                 // back to back
    repeat (5 * PERIOD) @(posedge clk);
    #1 in_valid = 0;
    repeat (PERIOD + 3) @(posedge clk);
    for (int i = 0; i < 4; i++) begin   // isolated codewords
      #1 in_valid = 1;
      @(posedge clk); #1 in_valid = 0;
      repeat (PERIOD + i) @(posedge clk);
    end
    checks++; if (n_acc != 9) begin failures++; $display("FAIL %0d accepts", n_acc); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
