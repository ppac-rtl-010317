// ppac_pkg: types and width helpers shared by the PPAC array, its banks,
// rows and row ALUs.
//
// The row ALU is steered by twelve control bits, all taken by name from the
// row-ALU datapath of the design (weV, weN, weC, weM, weD, popX2, vAcc,
// vAccX-1, nOZ, cEn, mAcc, mAccX-1; "X-1" is spelled "Xm1" here). They are
// bundled in alu_ctrl_t. Bit order inside the struct is this design's own
// choice. The column operator select s_n uses OP_XNOR = 0 and OP_AND = 1,
// also this design's choice.
package ppac_pkg;

  // Column operator select encoding (s_n)
  localparam logic OP_XNOR = 1'b0;
  localparam logic OP_AND  = 1'b1;

  // Row ALU control word. All fields are active high; a zero word makes the
  // ALU pass the registered row population count r_m straight to y_m
  // (minus the stored threshold).
  typedef struct packed {
    logic weV;     // write vector accumulator (first accumulator)
    logic weN;     // write the stored "N-term" register (hsim with all-1 / all-0 input)
    logic weC;     // write the offset register c
    logic weM;     // write matrix accumulator (second accumulator)
    logic weD;     // write threshold delta_m (qualified by the row address)
    logic popX2;   // use 2*r_m instead of r_m
    logic vAcc;    // add the doubled vector accumulator
    logic vAccXm1; // negate the doubled vector accumulator (signed vector MSB)
    logic nOZ;     // add the stored N-term register
    logic cEn;     // subtract the offset c
    logic mAcc;    // add the doubled matrix accumulator
    logic mAccXm1; // negate the doubled matrix accumulator (signed matrix MSB)
  } alu_ctrl_t;

  // Width of a population count of n one-bit values: ceil(log2(n+1))
  function automatic int unsigned popw(input int unsigned n);
    return $clog2(n + 1);
  endfunction

  // Width of the signed row-ALU datapath for an N-bit row with up to
  // LMAX-bit vectors and KMAX-bit matrices: the population count (popw(N)),
  // one bit for popX2, one more for the +N-term / -c offsets, LMAX+KMAX
  // bits of accumulator growth and a sign bit.
  function automatic int unsigned accw(input int unsigned n,
                                       input int unsigned lmax,
                                       input int unsigned kmax);
    return popw(n) + lmax + kmax + 3;
  endfunction

endpackage
