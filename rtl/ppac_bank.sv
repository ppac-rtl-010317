// ppac_bank: one PPAC bank of R = M/B rows and the bank adder.
//
// All rows of the bank share the column signals d, x and s and the ALU
// control word. Each row has its own memory write enable and threshold write
// enable, decoded from the row address outside the bank. The bank adder
// counts the rows whose output y_m is non-negative, i.e. it sums the
// negated MSBs of the R row outputs: p_b = sum_m ~y_m[MSB]. In PLA mode each
// row computes a min-term (y_m = 0 when true, negative otherwise) and
// p_b > 0 means the Boolean function of the bank is 1. p_b is
// combinational from the row outputs (cycle t+1 for an x in cycle t).
module ppac_bank #(
  parameter int unsigned R    = 16,   // rows per bank (M/B)
  parameter int unsigned N    = 256,
  parameter int unsigned BS   = 16,
  parameter int unsigned LMAX = 4,
  parameter int unsigned KMAX = 4
) (
  input  logic                                                 clk,
  input  logic                                                 rst_n,
  input  logic [R-1:0]                                         we,     // per-row memory write enable
  input  logic [R-1:0]                                         we_d,   // per-row threshold write enable
  input  logic [N-1:0]                                         d,
  input  logic [N-1:0]                                         x,
  input  logic [N-1:0]                                         s,
  input  ppac_pkg::alu_ctrl_t                                  ctrl,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0]         c,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0]         delta,
  output logic [R-1:0][ppac_pkg::accw(N,LMAX,KMAX)-1:0]        y,      // row outputs (signed values)
  output logic [ppac_pkg::popw(R)-1:0]                         p       // bank population count p_b
);
  import ppac_pkg::*;

  localparam int unsigned AW = accw(N, LMAX, KMAX);

  for (genvar i = 0; i < R; i++) begin : g_row
    ppac_row #(.N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) u_row (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (we[i]),
      .d     (d),
      .x     (x),
      .s     (s),
      .ctrl  (ctrl),
      .we_d  (we_d[i]),
      .c     (c),
      .delta (delta),
      .y     (y[i])
    );
  end

  // Bank adder over the negated MSBs of the row outputs
  always_comb begin
    p = '0;
    for (int i = 0; i < R; i++) p += popw(R)'(~y[i][AW-1]);
  end

endmodule
