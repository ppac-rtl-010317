// tb_ppac_wr_decoder: exhaustive test of the row address decoder (M = 16):
// with the strobe high exactly the addressed row is enabled, with it low no
// row is. Watchdog: 1000 time steps.
module tb_ppac_wr_decoder;
  localparam int unsigned M = 16;
  logic [$clog2(M)-1:0] addr;
  logic en;
  logic [M-1:0] row_en;
  int checks = 0, failures = 0;

  ppac_wr_decoder #(.M(M)) dut (.addr, .en, .row_en);

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < M; a++) begin
        addr = ($clog2(M))'(a); en = 1'(e); #1;
        checks++;
        if (row_en !== (e == 1 ? (M'(1) << a) : '0)) begin
          failures++;
          $display("FAIL addr=%0d en=%0d row_en=%b", a, e, row_en);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
