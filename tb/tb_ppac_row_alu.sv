// tb_ppac_row_alu: test of the row ALU alone (N = 64, 4 subrows).
//
// Part 1, directed: subrow counts that stand for a known row population
// count are fed through the operation-mode recipes (Hamming similarity,
// 1-bit {-1,+1} MVP 2r - N, stored N-term, threshold, a 3-bit uint and int
// bit-serial vector, and a 2-bit int matrix), with results worked out by
// hand from the represented numbers. It also checks the one-cycle delay of
// the r_m pipeline register.
// Part 2, random: random counts and random control words, compared with an
// integer model of the accumulators kept in the testbench.
// Watchdog: 20000 cycles.
module tb_ppac_row_alu;
  import ppac_pkg::*;
  localparam int unsigned N = 64, BS = 4, LMAX = 4, KMAX = 4;
  localparam int unsigned V = N / BS;
  localparam int unsigned AW = accw(N, LMAX, KMAX);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, we_d;
  logic [BS-1:0][popw(V)-1:0] cnt;
  alu_ctrl_t ctrl;
  logic signed [AW-1:0] c, delta, y;
  logic [popw(N)-1:0] r;
  int checks = 0, failures = 0;

  ppac_row_alu #(.N(N), .BS(BS), .LMAX(LMAX), .KMAX(KMAX)) dut (
    .clk, .rst_n, .cnt, .ctrl, .we_d, .c, .delta, .r, .y);

  // split a total count over the subrows
  function automatic logic [BS-1:0][popw(V)-1:0] split(int total);
    logic [BS-1:0][popw(V)-1:0] o;
    for (int b = 0; b < BS; b++) begin
      int part;
      part = (total > int'(V)) ? int'(V) : total;
      o[b] = popw(V)'(part);
      total -= part;
    end
    return o;
  endfunction

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // one cycle: present counts for the next cycle, control word for this one
  task automatic step(int total, alu_ctrl_t cv);
    @(negedge clk);
    cnt = split(total); ctrl = cv; we_d = 0; #1;
  endtask

  alu_ctrl_t z, cv;
  int vm, nm, cm, mm, dm, ym, rprev, rv, e;
  int xs [3];
  int rs [4];

  initial begin
    rst_n = 0; cnt = '0; ctrl = '0; we_d = 0; c = '0; delta = '0; z = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // offset c = N, threshold 0
    @(negedge clk); c = AW'(N); ctrl = z; ctrl.weC = 1; we_d = 1; delta = '0;
    // --- pipeline delay and Hamming similarity
    step(37, z);
    chk(int'(r), 0, "r before the register has seen 37");
    step(0, z);
    chk(int'(r), 37, "r one cycle later");
    chk(int'(y), 37, "hamming y = r");
    // --- 1-bit {-1,+1}: 2r - N
    step(40, z);
    cv = z; cv.popX2 = 1; cv.cEn = 1;
    step(0, cv);
    chk(int'(y), 2*40 - 64, "1-bit pm1 mvp");
    // --- threshold (CAM): delta = N, r = N gives 0, r = N-1 gives -1
    @(negedge clk); we_d = 1; delta = AW'(N); ctrl = z; #1;
    step(64, z);
    step(63, z);
    chk(int'(y), 0, "cam full match");
    step(0, z);
    chk(int'(y), -1, "cam one bit off");
    @(negedge clk); we_d = 1; delta = '0; ctrl = z;
    // --- stored N-term: N-term = 50, then r + Nterm - N with r = 30
    step(50, z);
    cv = z; cv.weN = 1;
    step(30, cv);
    cv = z; cv.nOZ = 1; cv.cEn = 1;
    step(0, cv);
    chk(int'(y), 30 + 50 - 64, "stored n-term");
    // --- 3-bit uint vector, 1-bit {0,1} matrix: plane counts 5 (MSB), 9, 2
    rs = '{5, 9, 2, 0};
    for (int i = 0; i < 4; i++) begin
      cv = z;
      if (i > 0) begin cv.weV = 1; cv.vAcc = (i > 1); end
      step(rs[i], cv);
    end
    chk(int'(y), 4*5 + 2*9 + 2, "3-bit uint vector");
    // --- same planes read as a 3-bit int vector: MSB weight -4
    for (int i = 0; i < 4; i++) begin
      cv = z;
      if (i > 0) begin cv.weV = 1; cv.vAcc = (i > 1); cv.vAccXm1 = (i == 2); end
      step(rs[i], cv);
    end
    chk(int'(y), -4*5 + 2*9 + 2, "3-bit int vector");
    // --- 2-bit int matrix, 1-bit vector: A_1 x = 7 (MSB), A_0 x = 11 -> -2*7 + 11
    step(7, z);
    cv = z; cv.weV = 1; cv.weM = 1;
    step(11, cv);
    cv = z; cv.weV = 1; cv.weM = 1; cv.mAcc = 1; cv.mAccXm1 = 1;
    step(0, cv);
    chk(int'(y), -2*7 + 11, "2-bit int matrix");
    // --- threshold as bias: y = r - 20
    @(negedge clk); we_d = 1; delta = AW'(20); ctrl = z;
    step(33, z);
    step(0, z);
    chk(int'(y), 13, "bias");
    // --- random control words against an integer model
    rst_n = 0; @(negedge clk); rst_n = 1;
    vm = 0; nm = 0; cm = 0; mm = 0; dm = 0; rprev = 0;
    for (int t = 0; t < 3000; t++) begin
      int tot;
      logic [11:0] bits;
      @(negedge clk);
      tot = $urandom_range(0, N);
      bits = 12'($urandom);
      cv = bits;
      cnt = split(tot); ctrl = cv; we_d = 1'($urandom);
      c = AW'($urandom_range(0, N)); delta = AW'($urandom_range(0, 2*N) - N);
      // keep the accumulators inside the datapath range
      if (vm > 4000 || vm < -4000) begin ctrl.vAcc = 0; cv.vAcc = 0; end
      if (mm > 4000 || mm < -4000) begin ctrl.mAcc = 0; cv.mAcc = 0; end
      #1;
      rv = (cv.popX2 ? 2*rprev : rprev)
         + (cv.vAcc ? (cv.vAccXm1 ? -2*vm - 1 : 2*vm) : 0) + (cv.vAccXm1 ? 1 : 0)
         + (cv.nOZ ? nm : 0) - (cv.cEn ? cm : 0);
      e  = rv + (cv.mAcc ? (cv.mAccXm1 ? -2*mm - 1 : 2*mm) : 0) + (cv.mAccXm1 ? 1 : 0);
      ym = e - dm;
      chk(int'(y), ym, $sformatf("random t=%0d ctrl=%b", t, cv));
      if (cv.weV) vm = rv;
      if (cv.weN) nm = rv;
      if (cv.weC) cm = int'(c);
      if (cv.weM) mm = e;
      if (we_d)   dm = int'(delta);
      rprev = tot;
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
