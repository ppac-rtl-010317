// ppac_row_alu: the arithmetic unit at the end of every PPAC row.
//
// Datapath (all of it follows the row-ALU diagram of the design):
//   1. The B_s subrow counts are summed and registered: r_m. This register
//      is the pipeline stage after the row population count, so a result
//      for an input x applied in cycle t shows at y in cycle t+1 (the
//      two-cycle latency of 1-bit operations) and a new x can be applied
//      every cycle.
//   2. First adder:  v = (popX2 ? 2*r_m : r_m)
//                      + (vAcc ? ((2*V) ^ {vAccXm1}) : 0) + vAccXm1
//                      + (nOZ ? Nreg : 0) - (cEn ? Creg : 0)
//      V is the vector accumulator (written from v when weV), Nreg the
//      stored Hamming similarity with an all-one / all-zero input (written
//      from v when weN), Creg the offset c (written from input c when weC).
//      XOR with vAccXm1 and a carry-in of vAccXm1 form the 2's-complement
//      negation of the doubled accumulator used for the MSB of a signed
//      (int) vector.
//   3. Second adder: m = v + (mAcc ? ((2*M) ^ {mAccXm1}) : 0) + mAccXm1,
//      M the matrix accumulator (written from m when weM).
//   4. y = m - Dreg, Dreg the threshold delta_m (written from input delta
//      when we_d).
// Everything after the r_m register is combinational, so the control word
// must be applied in the cycle after the matching x, aligned with r_m; the
// accumulator registers capture at the end of that cycle.
//
// This design's own choices: a signed ACC_W-bit datapath (wide enough for
// L, K up to LMAX, KMAX bits), an asynchronous active-low reset that clears
// r_m and all ALU registers, the vAccXm1 / mAccXm1 carry-in being applied
// independent of vAcc / mAcc (the diagram draws it as a direct input of the
// adder), and c and delta carried as ACC_W-bit signed values. The weD bit
// of the shared control word is not read here: the array decodes it with the
// row address into we_d, so verilator reports that one struct bit as unused.
module ppac_row_alu #(
  parameter int unsigned N    = 256,  // bits per row
  parameter int unsigned BS   = 16,   // subrows per row
  parameter int unsigned LMAX = 4,    // largest vector bit-width supported
  parameter int unsigned KMAX = 4     // largest matrix bit-width supported
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic [BS-1:0][ppac_pkg::popw(N/BS)-1:0]      cnt,    // subrow counts
  input  ppac_pkg::alu_ctrl_t                          ctrl,
  input  logic                                         we_d,   // weD qualified for this row
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] c,      // offset c
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] delta,  // threshold delta_m
  output logic [ppac_pkg::popw(N)-1:0]                 r,      // registered row popcount r_m
  output logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] y       // row output y_m
);
  import ppac_pkg::*;

  localparam int unsigned RW = popw(N);
  localparam int unsigned AW = accw(N, LMAX, KMAX);
  typedef logic signed [AW-1:0] acc_t;

  logic [RW-1:0] rsum;
  acc_t vreg, nreg, creg, mreg, dreg;
  acc_t rsel, vfb, noff, coff, v, mfb, m;

  // Row population count: sum of the subrow counts
  always_comb begin
    rsum = '0;
    for (int b = 0; b < BS; b++) rsum += RW'(cnt[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r <= '0;
    else        r <= rsum;
  end

  always_comb begin
    rsel = ctrl.popX2 ? acc_t'({r, 1'b0}) : acc_t'(r);
    vfb  = ctrl.vAcc  ? ((vreg <<< 1) ^ {AW{ctrl.vAccXm1}}) : '0;
    noff = ctrl.nOZ   ? nreg : '0;
    coff = ctrl.cEn   ? creg : '0;
    v    = rsel + vfb + acc_t'(ctrl.vAccXm1) + (noff - coff);
    mfb  = ctrl.mAcc  ? ((mreg <<< 1) ^ {AW{ctrl.mAccXm1}}) : '0;
    m    = v + mfb + acc_t'(ctrl.mAccXm1);
    y    = m - dreg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vreg <= '0;
      nreg <= '0;
      creg <= '0;
      mreg <= '0;
      dreg <= '0;
    end else begin
      if (ctrl.weV) vreg <= v;
      if (ctrl.weN) nreg <= v;
      if (ctrl.weC) creg <= c;
      if (ctrl.weM) mreg <= m;
      if (we_d)     dreg <= delta;
    end
  end

endmodule
