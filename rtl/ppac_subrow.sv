// ppac_subrow: V bit-cells of one PPAC row and their local adder.
//
// Each row's memory is split into B_s subrows of V = N/B_s cells. The local
// adder population-counts the V bit-cell results, so only
// ceil(log2(V+1)) wires run from the subrow to the row ALU instead of V.
// The count is combinational: it reflects x and s in the same cycle. A write
// (we = 1) stores d into all V cells at the rising clock edge.
module ppac_subrow #(
  parameter int unsigned V = 16
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [V-1:0]                   d,
  input  logic [V-1:0]                   x,
  input  logic [V-1:0]                   s,
  output logic [ppac_pkg::popw(V)-1:0]   cnt   // number of ones among the V results
);
  import ppac_pkg::*;

  logic [V-1:0] q;

  for (genvar v = 0; v < V; v++) begin : g_cell
    ppac_bitcell u_cell (
      .clk (clk),
      .we  (we),
      .d   (d[v]),
      .x   (x[v]),
      .s   (s[v]),
      .q   (q[v])
    );
  end

  always_comb begin
    cnt = '0;
    for (int v = 0; v < V; v++) cnt += popw(V)'(q[v]);
  end

endmodule
