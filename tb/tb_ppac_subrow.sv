// tb_ppac_subrow: random test of a 16-cell subrow. It writes random words,
// applies random inputs and per-column operator selects, and compares the
// local population count with a count of the expected per-cell products
// (XNOR or AND). It also checks that a row not written keeps its word.
// Watchdog: 10000 cycles.
module tb_ppac_subrow;
  localparam int unsigned V = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [V-1:0] d, x, s, a;
  logic [ppac_pkg::popw(V)-1:0] cnt;
  int checks = 0, failures = 0;

  ppac_subrow #(.V(V)) dut (.clk, .we, .d, .x, .s, .cnt);

  initial begin
    we = 0; d = '0; x = '0; s = '0;
    for (int w = 0; w < 20; w++) begin
      @(negedge clk); we = 1; d = V'($urandom); a = d;
      @(negedge clk); we = 0; d = V'($urandom);
      for (int t = 0; t < 20; t++) begin
        int e;
        e = 0;
        x = V'($urandom);
        s = (t < 5) ? '0 : (t < 10) ? '1 : V'($urandom);
        #1;
        for (int v = 0; v < V; v++) e += s[v] ? ((x[v] && a[v]) ? 1 : 0) : ((x[v] == a[v]) ? 1 : 0);
        checks++;
        if (int'(cnt) != e) begin
          failures++;
          $display("FAIL a=%h x=%h s=%h cnt=%0d exp=%0d", a, x, s, cnt, e);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
