// ppac_top: Parallel Processor in Associative CAM (PPAC), an M x N array of
// latch-style bit-cells with one ALU per row, organised in B banks.
//
// Operation. A matrix A (one N-bit word per row) is written row by row:
// wr_en = 1 stores d into the row given by addr at the rising clock edge.
// Each column n has an operator select s[n] (0 XNOR, 1 AND). Every cycle the
// array multiplies the input vector x bit-wise with every stored word, counts
// the ones per row (r_m) and registers that count. In the next cycle each row
// ALU combines r_m with its accumulators as told by the shared control word
// ctrl, giving y_m for all M rows, and each bank reports p_b, the number of
// its rows with y_m >= 0. Hamming similarity, complete- and similarity-match
// CAM, 1-bit and bit-serial multi-bit MVPs in uint / int / oddint formats,
// GF(2) MVPs (LSB of y_m) and PLA functions (p_b) are all configurations of
// this one datapath (see the row ALU).
//
// Interface timing: x and s in cycle t; ctrl (and the offset c, written with
// ctrl.weC) in cycle t+1, when y and p for that x are valid. Thresholds are
// written per row: ctrl.weD = 1 stores delta into the ALU of row addr.
// rst_n is an asynchronous active-low reset of the ALU registers; the matrix
// memory has no reset.
//
// Row m (0-based) is in bank m / (M/B). Parameter defaults are those of the
// largest array of the design: M = N = 256, B = 16 banks, BS = 16 subrows
// (V = 16 cells per subrow), vector and matrix entries of up to 4 bits.
module ppac_top #(
  parameter int unsigned M    = 256,
  parameter int unsigned N    = 256,
  parameter int unsigned B    = 16,
  parameter int unsigned BS   = 16,
  parameter int unsigned LMAX = 4,
  parameter int unsigned KMAX = 4
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  logic [$clog2(M)-1:0]                            addr,
  input  logic                                            wr_en,
  input  logic [N-1:0]                                    d,
  input  logic [N-1:0]                                    x,
  input  logic [N-1:0]                                    s,
  input  ppac_pkg::alu_ctrl_t                             ctrl,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0]    c,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0]    delta,
  output logic [M-1:0][ppac_pkg::accw(N,LMAX,KMAX)-1:0]   y,
  output logic [B-1:0][ppac_pkg::popw(M/B)-1:0]           p
);
  import ppac_pkg::*;

  localparam int unsigned R = M / B;

  logic [M-1:0] row_we, row_we_d;

  ppac_wr_decoder #(.M(M)) u_dec_mem (
    .addr   (addr),
    .en     (wr_en),
    .row_en (row_we)
  );

  ppac_wr_decoder #(.M(M)) u_dec_thr (
    .addr   (addr),
    .en     (ctrl.weD),
    .row_en (row_we_d)
  );

  for (genvar b = 0; b < B; b++) begin : g_bank
    ppac_bank #(.R(R), .N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) u_bank (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (row_we[b*R +: R]),
      .we_d  (row_we_d[b*R +: R]),
      .d     (d),
      .x     (x),
      .s     (s),
      .ctrl  (ctrl),
      .c     (c),
      .delta (delta),
      .y     (y[b*R +: R]),
      .p     (p[b])
    );
  end

  initial begin
    assert (M % B == 0) else $error("ppac_top: M must be a multiple of B");
  end

endmodule
