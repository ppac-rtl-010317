// tb_ppac_bank: test of one bank of 8 rows (N = 16, 2 subrows). Rows hold
// random min-terms with their variable counts as thresholds; for random
// inputs it checks every row output y_m = (number of min-term variables
// that are 1) - (number of variables) and the bank adder p, the number of
// true min-terms. It also checks that per-row write enables reach only their
// row. Watchdog: 20000 cycles.
module tb_ppac_bank;
  import ppac_pkg::*;
  localparam int unsigned R = 8, N = 16, BS = 2, LMAX = 4, KMAX = 4;
  localparam int unsigned AW = accw(N, LMAX, KMAX);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [R-1:0] we, we_d;
  logic [N-1:0] d, x, s;
  alu_ctrl_t ctrl;
  logic signed [AW-1:0] c, delta;
  logic [R-1:0][AW-1:0] y;
  logic [popw(R)-1:0] p;
  logic [N-1:0] a [R];
  int checks = 0, failures = 0;
  int seen_true = 0, seen_false = 0;

  ppac_bank #(.R(R), .N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) dut (
    .clk, .rst_n, .we, .we_d, .d, .x, .s, .ctrl, .c, .delta, .y, .p);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    rst_n = 0; we = '0; we_d = '0; d = '0; x = '0; s = '0; ctrl = '0; c = '0; delta = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < R; i++) begin
        logic [N-1:0] w;
        w = '0;
        for (int k = 0; k < 2; k++) w[$urandom_range(0, N-1)] = 1'b1;
        @(negedge clk);
        we = '0; we_d = '0; we[i] = 1'b1; we_d[i] = 1'b1;
        d = w; delta = AW'($countones(w)); a[i] = w;
      end
      @(negedge clk); we = '0; we_d = '0; d = '1; delta = '0;
      for (int t = 0; t < 10; t++) begin
        int e, ev;
        // inputs applied in cycle t, results read in cycle t+1
        @(negedge clk);
        x = N'($urandom) | ((t % 2 == 0) ? N'($urandom) : '0);
        s = '1;
        @(negedge clk); #1;
        e = 0;
        for (int i = 0; i < R; i++) begin
          ev = $countones(a[i] & x) - $countones(a[i]);
          chk(int'($signed(y[i])), ev, $sformatf("row %0d output", i));
          if (ev == 0) e++;
        end
        chk(int'(p), e, "bank count of true min-terms");
        if (e > 0) seen_true++; else seen_false++;
      end
    end
    checks++;
    if (seen_true == 0 || seen_false == 0) begin
      failures++;
      $display("FAIL bank output never both true (%0d) and false (%0d)", seen_true, seen_false);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
