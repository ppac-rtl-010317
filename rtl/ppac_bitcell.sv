// ppac_bitcell: one PPAC bit-cell.
//
// The cell stores one bit a_mn of the matrix and multiplies it with the
// input bit x_n in one of two ways: XNOR (entries in {-1,+1}) or AND
// (entries in {0,1}). The column select s_n picks the operator through a
// multiplexer (s = 0: XNOR, s = 1: AND; the encoding is this design's
// choice). The result q is purely combinational in x, s and the stored bit.
//
// Storage: the design stores the bit in an active-low latch whose clock is
// gated by the row write enable (address decode AND wrEn). The clock gate
// plus latch pair is written here as a rising-edge register with a write
// enable, which is what a synthesis tool maps onto a gated register; a write
// asserted in cycle t is visible at q from cycle t+1. There is no reset: the
// matrix must be written before it is used, as in the design.
module ppac_bitcell (
  input  logic clk,
  input  logic we,   // row write enable
  input  logic d,    // data bit d_n
  input  logic x,    // input vector bit x_n
  input  logic s,    // operator select s_n (0 XNOR, 1 AND)
  output logic q     // bit-cell operation result
);
  import ppac_pkg::*;

  logic a;  // stored bit a_mn

  always_ff @(posedge clk) begin
    if (we) a <= d;
  end

  always_comb begin
    unique case (s)
      OP_XNOR: q = ~(x ^ a);
      OP_AND:  q = x & a;
      default: q = ~(x ^ a);
    endcase
  end

endmodule
