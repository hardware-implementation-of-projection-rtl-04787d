// tb_reg_array: random writes and two random read ports checked against a
// model of the array.
module tb_reg_array;
  localparam int D = 3, N = 4, W = 5;
  logic clk = 0, we = 0;
  logic [1:0] waddr = 0;
  logic signed [W-1:0] wdata [N];
  logic [1:0] raddr [2];
  logic signed [W-1:0] rdata [2][N];
  int model [D][N];
  bit written [D];
  int checks = 0, failures = 0;

  reg_array #(.DEPTH(D), .N(N), .W(W), .NRD(2)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    for (int z = 0; z < N; z++) wdata[z] = '0;
    raddr[0] = 0; raddr[1] = 0;
    for (int it = 0; it < 300; it++) begin
      automatic int a = $urandom % D;
      we = ($urandom % 2) || it < D;
      if (it < D) a = it;
      waddr = 2'(a);
      for (int z = 0; z < N; z++) wdata[z] = W'($urandom);
      @(posedge clk); #1;
      if (we) begin
        for (int z = 0; z < N; z++) model[a][z] = int'(wdata[z]);
        written[a] = 1;
      end
      we = 0;
      raddr[0] = 2'($urandom % D); raddr[1] = 2'($urandom % D);
      #1;
      for (int r = 0; r < 2; r++)
        if (written[raddr[r]])
          for (int z = 0; z < N; z++) begin
            checks++;
            if (int'(rdata[r][z]) != model[raddr[r]][z]) begin failures++; $display("FAIL read"); end
          end
    end
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
