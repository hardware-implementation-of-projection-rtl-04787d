// iupa_ctrl: third-order control unit of one IUPA iteration.
//
// A codeword is accepted when the unit is idle or in the last cycle of the
// previous codeword, so back-to-back codewords enter every R*LAMBDA cycles,
// R = 2^(m-1)/G rows per group; this is the paper's insertion interval
// n*lambda/(2G). While a codeword is being processed the unit steps through
// the rows: slot s = 0..R-1 lasts LAMBDA cycles and in its first cycle
// slot_valid is high, which loads the third-order projection registers of all
// G groups with row j = g*R + s. Each accepted codeword gets a one-bit tag,
// its entry in the two-deep third-order register array (the paper notes that
// a depth of 2 suffices in most configurations). The slot/tag scheme is this
// design's own; the paper names the unit and its role.
module iupa_ctrl #(
  parameter int unsigned M      = 6,
  parameter int unsigned G      = 2,
  parameter int unsigned LAMBDA = 4,
  localparam int unsigned R     = (1 << (M - 1)) / G,
  localparam int unsigned SW    = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned CW    = (LAMBDA > 1) ? $clog2(LAMBDA) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  output logic          accept,
  output logic          wtag,       // register-array entry of the accepted codeword
  output logic          slot_valid,
  output logic [SW-1:0] slot,
  output logic          cur_tag     // register-array entry of the codeword in progress
);
  logic          busy;
  logic [CW-1:0] c;
  logic          last;

  assign last       = busy && (32'(slot) == R - 1) && (32'(c) == LAMBDA - 1);
  assign in_ready   = !busy || last;
  assign accept     = in_valid && in_ready;
  assign wtag       = ~cur_tag;
  assign slot_valid = busy && (c == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      c       <= '0;
      slot    <= '0;
      cur_tag <= 1'b1;
    end else if (accept) begin
      busy    <= 1'b1;
      c       <= '0;
      slot    <= '0;
      cur_tag <= wtag;
    end else if (busy) begin
      if (32'(c) == LAMBDA - 1) begin
        c    <= '0;
        slot <= slot + 1'b1;
        if (last) busy <= 1'b0;
      end else begin
        c <= c + 1'b1;
      end
    end
  end

endmodule
