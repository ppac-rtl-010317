// tb_ppac_bitcell: exhaustive test of one bit-cell. For both stored values
// it checks the XNOR and the AND operator for both input values, and that a
// cell with its write enable low keeps its bit. Watchdog: 1000 cycles.
module tb_ppac_bitcell;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we, d, x, s, q;
  int checks = 0, failures = 0;

  ppac_bitcell dut (.clk, .we, .d, .x, .s, .q);

  task automatic chk(logic a);
    for (int si = 0; si < 2; si++)
      for (int xi = 0; xi < 2; xi++) begin
        s = 1'(si); x = 1'(xi); #1;
        checks++;
        if (q !== (si == 1 ? (1'(xi) & a) : ~(1'(xi) ^ a))) begin
          failures++;
          $display("FAIL a=%0d s=%0d x=%0d q=%0d", a, si, xi, q);
        end
      end
  endtask

  initial begin
    we = 0; d = 0; x = 0; s = 0;
    for (int rep = 0; rep < 4; rep++)
      for (int a = 0; a < 2; a++) begin
        @(negedge clk); we = 1; d = 1'(a);
        @(negedge clk); we = 0; d = ~1'(a);   // d changes, we low: no write
        chk(1'(a));
        @(negedge clk);
        chk(1'(a));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
