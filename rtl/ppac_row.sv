// ppac_row: one PPAC row, i.e. an N-bit row memory split into BS subrows of
// V = N/BS bit-cells, and the row ALU that turns the subrow counts into the
// row output y_m.
//
// Bit n of the row (0-based here; n = 1..N in the design's notation) sits in
// subrow n / V, cell n % V. A write (we = 1) stores d into the whole row at
// the rising clock edge. Timing is that of ppac_row_alu: x in cycle t,
// control word and y in cycle t+1.
module ppac_row #(
  parameter int unsigned N    = 256,
  parameter int unsigned BS   = 16,
  parameter int unsigned LMAX = 4,
  parameter int unsigned KMAX = 4
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         we,     // row memory write enable
  input  logic [N-1:0]                                 d,
  input  logic [N-1:0]                                 x,
  input  logic [N-1:0]                                 s,
  input  ppac_pkg::alu_ctrl_t                          ctrl,
  input  logic                                         we_d,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] c,
  input  logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] delta,
  output logic signed [ppac_pkg::accw(N,LMAX,KMAX)-1:0] y
);
  import ppac_pkg::*;

  localparam int unsigned V = N / BS;

  logic [BS-1:0][popw(V)-1:0] cnt;

  for (genvar b = 0; b < BS; b++) begin : g_sub
    ppac_subrow #(.V(V)) u_sub (
      .clk (clk),
      .we  (we),
      .d   (d[b*V +: V]),
      .x   (x[b*V +: V]),
      .s   (s[b*V +: V]),
      .cnt (cnt[b])
    );
  end

  ppac_row_alu #(.N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) u_alu (
    .clk   (clk),
    .rst_n (rst_n),
    .cnt   (cnt),
    .ctrl  (ctrl),
    .we_d  (we_d),
    .c     (c),
    .delta (delta),
    .r     (),
    .y     (y)
  );

  initial begin
    assert (N % BS == 0) else $error("ppac_row: N must be a multiple of BS");
  end

endmodule
