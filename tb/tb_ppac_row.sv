// tb_ppac_row: test of one PPAC row (N = 32, 4 subrows of 8 cells) with its
// row ALU. It writes random words and checks Hamming similarity, the 1-bit
// {-1,+1} inner product (2 r - N), the {0,1} inner product with mixed
// per-column operator selects, and a 2-bit uint vector computed bit-serially,
// all against sums over the represented numbers. A new input is applied
// every cycle and each result is checked one cycle after its input.
// Watchdog: 20000 cycles.
module tb_ppac_row;
  import ppac_pkg::*;
  localparam int unsigned N = 32, BS = 4, LMAX = 4, KMAX = 4;
  localparam int unsigned AW = accw(N, LMAX, KMAX);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, we, we_d;
  logic [N-1:0] d, x, s, a;
  alu_ctrl_t ctrl, z, cv;
  logic signed [AW-1:0] c, delta, y;
  int checks = 0, failures = 0;

  ppac_row #(.N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) dut (
    .clk, .rst_n, .we, .d, .x, .s, .ctrl, .we_d, .c, .delta, .y);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic step(logic [N-1:0] xv, logic [N-1:0] sv, alu_ctrl_t cv);
    @(negedge clk);
    we = 0; we_d = 0; x = xv; s = sv; ctrl = cv; #1;
  endtask

  logic [N-1:0] xp, xq, sp;
  int e, e2, x0 [N], x1 [N];

  initial begin
    z = '0;
    rst_n = 0; we = 0; we_d = 0; d = '0; x = '0; s = '0; ctrl = '0; c = '0; delta = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); c = AW'(N); ctrl = z; ctrl.weC = 1; we_d = 1; delta = '0;
    for (int w = 0; w < 10; w++) begin
      @(negedge clk); we = 1; d = N'($urandom); a = d; ctrl = z;
      @(negedge clk); we = 0; d = N'($urandom);   // not written
      xp = N'($urandom);
      step(xp, '0, z);
      for (int t = 0; t < 10; t++) begin
        // previous input was XNOR-mode xp; check Hamming similarity while
        // applying the next one
        xq = N'($urandom);
        step(xq, '0, z);
        chk(int'(y), N - $countones(a ^ xp), "hamming similarity");
        xp = xq;
      end
      // 1-bit {-1,+1} MVP
      step(xp, '0, z);
      cv = z; cv.popX2 = 1; cv.cEn = 1;
      step('0, '0, cv);
      e = 0;
      for (int n = 0; n < N; n++) e += (a[n] ? 1 : -1) * (xp[n] ? 1 : -1);
      chk(int'(y), e, "1-bit pm1 inner product");
      // mixed operator selects
      sp = N'($urandom);
      step(xp, sp, z);
      step('0, '0, z);
      e = 0;
      for (int n = 0; n < N; n++) e += sp[n] ? ((a[n] && xp[n]) ? 1 : 0) : ((a[n] == xp[n]) ? 1 : 0);
      chk(int'(y), e, "mixed operator selects");
      // 2-bit uint vector with a {0,1} row, MSB plane first
      for (int n = 0; n < N; n++) begin x0[n] = $urandom_range(0, 1); x1[n] = $urandom_range(0, 1); end
      for (int n = 0; n < N; n++) begin xp[n] = 1'(x1[n]); xq[n] = 1'(x0[n]); end
      step(xp, '1, z);
      cv = z; cv.weV = 1;
      step(xq, '1, cv);
      cv = z; cv.weV = 1; cv.vAcc = 1;
      step('0, '0, cv);
      e2 = 0;
      for (int n = 0; n < N; n++) e2 += int'(a[n]) * (2*x1[n] + x0[n]);
      chk(int'(y), e2, "2-bit uint vector");
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
