// reg_array: register array that keeps LLR vectors until the pre-aggregation
// step needs them (second-order and third-order register arrays).
//
// DEPTH entries of N words of W bits, one write port and NRD asynchronous
// read ports. The control unit writes a new vector at `waddr` when it enters
// the pipeline and the pre-aggregation stage reads it back by the tag that
// travelled with the data, so the vector itself need not be carried through
// the pipeline registers (the paper's reason for sharing one array per
// group). The depth follows the paper's rule
// ceil(pipeline length / issue interval) + 1 and is set by the instantiating
// module. Entries are not reset: an entry is always written before it is
// read.
module reg_array #(
  parameter int unsigned DEPTH = 2,
  parameter int unsigned N     = 32,
  parameter int unsigned W     = 5,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata [N],
  input  logic [AW-1:0]       raddr [NRD],
  output logic signed [W-1:0] rdata [NRD][N]
);
  logic signed [W-1:0] mem [DEPTH][N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) rdata[r] = mem[raddr[r]];
  end

endmodule
