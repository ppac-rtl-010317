// ppac_tb_tasks.svh: end-to-end test procedures for ppac_top, shared by the
// reduced-size and the full-size testbench. The including module defines
// the localparams M, N, B, BS, LMAX, KMAX, the clock clk and the DUT port
// signals (rst_n, addr, wr_en, d, x, s, ctrl, c, delta, y, p).
//
// Every expected value is computed from the stored matrix and the input
// vector with plain integer arithmetic on the represented numbers ({-1,+1},
// {0,1}, uint, int, oddint, GF(2), Boolean min-terms), never by replaying
// the row-ALU equations.
//
// Timing convention of the DUT: drive() applies x and s for one cycle
// together with the control word for the x of the previous cycle, then
// waits 1 time unit so that y and p reflect that previous x. Checking y right
// after the drive() that follows an x therefore checks the two-cycle latency.

localparam int unsigned AW = ppac_pkg::accw(N, LMAX, KMAX);
localparam int unsigned R  = M / B;
typedef logic [N-1:0] word_t;
typedef enum int {F_UINT, F_INT, F_ODD} fmt_t;

word_t A [M];
int checks = 0;
int failures = 0;
int mech [string];

function automatic word_t rand_word();
  word_t w;
  for (int i = 0; i < N; i++) w[i] = 1'($urandom_range(0, 1));
  return w;
endfunction

function automatic int yv(int m);
  return int'($signed(y[m]));
endfunction

task automatic check(bit ok, string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures <= 20) $display("FAIL %s at %0t", what, $time);
  end
endtask

task automatic drive(word_t xv, word_t sv, ppac_pkg::alu_ctrl_t cv);
  @(negedge clk);
  wr_en = 1'b0;
  x     = xv;
  s     = sv;
  ctrl  = cv;
  #1;
endtask

task automatic write_row(int m, word_t val);
  @(negedge clk);
  addr  = ($clog2(M))'(m);
  d     = val;
  wr_en = 1'b1;
  ctrl  = '0;
  A[m]  = val;
endtask

task automatic write_delta(int m, int val);
  @(negedge clk);
  wr_en = 1'b0;
  addr  = ($clog2(M))'(m);
  delta = AW'(val);
  ctrl  = '0;
  ctrl.weD = 1'b1;
endtask

task automatic set_c(int val);
  @(negedge clk);
  wr_en = 1'b0;
  c     = AW'(val);
  ctrl  = '0;
  ctrl.weC = 1'b1;
endtask

task automatic load_random_matrix();
  for (int m = 0; m < M; m++) write_row(m, rand_word());
endtask

task automatic all_delta(int val);
  for (int m = 0; m < M; m++) write_delta(m, val);
endtask

function automatic int hsim(word_t a, word_t b);
  return N - $countones(a ^ b);
endfunction

// ---------------------------------------------------------------- Hamming
// A stream of back-to-back input words: one result per cycle.
task automatic test_hamming(int nvec);
  word_t xs [];
  xs = new[nvec];
  all_delta(0);
  for (int i = 0; i <= nvec; i++) begin
    if (i < nvec) xs[i] = rand_word();
    drive(i < nvec ? xs[i] : '0, '0, '0);
    if (i > 0)
      for (int m = 0; m < M; m++)
        check(yv(m) == hsim(A[m], xs[i-1]), $sformatf("hamming row %0d vec %0d", m, i-1));
  end
  mech["hamming"]++;
  if (nvec > 1) mech["back_to_back_stream"]++;
endtask

// ---------------------------------------------------------------- CAM
task automatic test_cam();
  word_t xv;
  int hit = 0, miss = 0;
  all_delta(N);
  xv = A[$urandom_range(0, M-1)];
  drive(xv, '0, '0);
  drive('0, '0, '0);
  for (int m = 0; m < M; m++) begin
    bit match = (A[m] == xv);
    check((y[m][AW-1] == 1'b0) == match, $sformatf("cam match row %0d", m));
    check(yv(m) == hsim(A[m], xv) - N, $sformatf("cam value row %0d", m));
    if (match) hit++; else miss++;
  end
  if (hit > 0)  mech["cam_complete_match"]++;
  if (miss > 0) mech["cam_mismatch"]++;
endtask

// ---------------------------------------------------------------- similarity match
task automatic test_similarity();
  word_t xv;
  int thr [M];
  int hit = 0, miss = 0;
  for (int m = 0; m < M; m++) begin
    thr[m] = N/2 + $urandom_range(0, N/8) - N/16;
    write_delta(m, thr[m]);
  end
  xv = rand_word();
  drive(xv, '0, '0);
  drive('0, '0, '0);
  for (int m = 0; m < M; m++) begin
    bit match = (hsim(A[m], xv) >= thr[m]);
    check((y[m][AW-1] == 1'b0) == match, $sformatf("similarity match row %0d", m));
    if (match) hit++; else miss++;
  end
  if (hit > 0 && miss > 0) mech["similarity_match"]++;
endtask

// ---------------------------------------------------------------- 1-bit MVPs
// mat_pm / vec_pm: entries in {-1,+1} (1) or {0,1} (0)
task automatic test_mvp1(bit mat_pm, bit vec_pm, int nvec);
  ppac_pkg::alu_ctrl_t cv;
  word_t xv, sv;
  all_delta(0);
  set_c(N);
  for (int i = 0; i < nvec; i++) begin
    xv = rand_word();
    cv = '0;
    if (mat_pm && vec_pm) begin
      sv = {N{ppac_pkg::OP_XNOR}};
      cv.popX2 = 1'b1; cv.cEn = 1'b1;
      drive(xv, sv, '0);
    end else if (!mat_pm && !vec_pm) begin
      sv = {N{ppac_pkg::OP_AND}};
      drive(xv, sv, '0);
    end else if (mat_pm && !vec_pm) begin
      // hsim(a, 1) into the N-term register, then hsim(a, x) + hsim(a,1) - N
      drive({N{1'b1}}, {N{ppac_pkg::OP_XNOR}}, '0);
      cv = '0; cv.weN = 1'b1;
      drive(xv, {N{ppac_pkg::OP_XNOR}}, cv);
      cv = '0; cv.nOZ = 1'b1; cv.cEn = 1'b1;
    end else begin
      // hsim(a, 0) into the N-term register, then 2<a,x~> + hsim(a,0) - N
      drive('0, {N{ppac_pkg::OP_XNOR}}, '0);
      cv = '0; cv.weN = 1'b1;
      drive(xv, {N{ppac_pkg::OP_AND}}, cv);
      cv = '0; cv.popX2 = 1'b1; cv.nOZ = 1'b1; cv.cEn = 1'b1;
    end
    drive('0, '0, cv);
    for (int m = 0; m < M; m++) begin
      int e = 0;
      for (int n = 0; n < N; n++) begin
        int av = mat_pm ? (A[m][n] ? 1 : -1) : int'(A[m][n]);
        int xe = vec_pm ? (xv[n] ? 1 : -1) : int'(xv[n]);
        e += av * xe;
      end
      check(yv(m) == e, $sformatf("mvp1 mat_pm=%0d vec_pm=%0d row %0d: got %0d exp %0d",
                                  mat_pm, vec_pm, m, yv(m), e));
    end
  end
  begin
    string ms, vs;
    ms = mat_pm ? "pm1" : "01";
    vs = vec_pm ? "pm1" : "01";
    mech[{"mvp1_mat", ms, "_vec", vs}]++;
  end
  if (mat_pm != vec_pm) mech["stored_n_term"]++;
endtask

// ---------------------------------------------------------------- GF(2)
task automatic test_gf2(int nvec);
  word_t xv;
  all_delta(0);
  for (int i = 0; i < nvec; i++) begin
    xv = rand_word();
    drive(xv, {N{ppac_pkg::OP_AND}}, '0);
    drive('0, '0, '0);
    for (int m = 0; m < M; m++)
      check(y[m][0] == ^(A[m] & xv), $sformatf("gf2 row %0d", m));
  end
  mech["gf2_mvp"]++;
endtask

// ---------------------------------------------------------------- PLA
// Each row holds a random sparse min-term; inputs are mostly ones so that
// some min-terms are true. Then the same rows are read as max-terms.
task automatic test_pla(int nvec);
  word_t xv;
  int ones = 0, zeros = 0;
  for (int m = 0; m < M; m++) begin
    word_t w = '0;
    for (int k = 0; k < 3; k++) w[$urandom_range(0, N-1)] = 1'b1;
    write_row(m, w);
    write_delta(m, $countones(w));
  end
  for (int i = 0; i < nvec; i++) begin
    // dense inputs make some min-terms true, sparse ones make banks false
    xv = (i % 2 == 0) ? (rand_word() | rand_word() | rand_word() | rand_word())
                      : (rand_word() & rand_word());
    drive(xv, {N{ppac_pkg::OP_AND}}, '0);
    drive('0, '0, '0);
    for (int b = 0; b < B; b++) begin
      int e = 0;
      for (int r = 0; r < R; r++) if ((A[b*R+r] & ~xv) == '0) e++;
      check(int'(p[b]) == e, $sformatf("pla min-term count bank %0d", b));
      if (e > 0) ones++; else zeros++;
    end
  end
  $display("pla: %0d bank outputs true, %0d false", ones, zeros);
  if (ones > 0 && zeros > 0) mech["pla_sum_of_minterms"]++;
  // max-terms: delta = 1, a row is true when any of its variables is 1
  all_delta(1);
  xv = '0;
  for (int k = 0; k < N/4; k++) xv[$urandom_range(0, N-1)] = 1'b1;
  drive(xv, {N{ppac_pkg::OP_AND}}, '0);
  drive('0, '0, '0);
  for (int b = 0; b < B; b++) begin
    int e = 0;
    for (int r = 0; r < R; r++) if ((A[b*R+r] & xv) != '0) e++;
    check(int'(p[b]) == e, $sformatf("pla max-term count bank %0d", b));
  end
  mech["pla_maxterm"]++;
endtask

// ---------------------------------------------------------------- multi-bit MVP
function automatic int fmt_val(int bits, int nb, fmt_t f);
  int v = 0;
  for (int i = 0; i < nb; i++) begin
    int bi = (bits >> i) & 1;
    case (f)
      F_UINT: v += bi << i;
      F_INT:  v += (i == nb-1) ? -(bi << i) : (bi << i);
      F_ODD:  v += (bi ? 1 : -1) * (1 << i);
    endcase
  end
  return v;
endfunction

// K-bit matrix entries (format mf), L-bit vector entries (format vf), G = N/K
// entries per row. Bit k of entry j sits in column k*G + j. Formats with LO = -1
// on one side and LO = 0 on the other use the stored N-term register and are
// only run with K = 1. Returns the number of cycles from the first bit-plane
// to the result.
task automatic test_mvp_multi(int K, int L, fmt_t mf, fmt_t vf, int nvec);
  int G;
  int ae [M][];
  int xe [];
  word_t xs [$];
  word_t ss [$];
  ppac_pkg::alu_ctrl_t cs [$];
  ppac_pkg::alu_ctrl_t base;
  bit mat_odd, vec_odd, use_n;
  int cycles;
  G = N / K;
  mat_odd = (mf == F_ODD);
  vec_odd = (vf == F_ODD);
  use_n   = (mat_odd != vec_odd);
  // write the matrix
  for (int m = 0; m < M; m++) begin
    word_t w = '0;
    ae[m] = new[G];
    for (int j = 0; j < G; j++) begin
      ae[m][j] = $urandom_range(0, (1 << K) - 1);
      for (int k = 0; k < K; k++) w[k*G + j] = 1'((ae[m][j] >> k) & 1);
    end
    write_row(m, w);
  end
  all_delta(0);
  set_c(G);
  base = '0;
  if (mat_odd && vec_odd) begin base.popX2 = 1'b1; base.cEn = 1'b1; end
  if (mat_odd && !vec_odd) begin base.nOZ = 1'b1; base.cEn = 1'b1; end
  if (!mat_odd && vec_odd) begin base.popX2 = 1'b1; base.nOZ = 1'b1; base.cEn = 1'b1; end
  for (int t = 0; t < nvec; t++) begin
    xe = new[G];
    for (int j = 0; j < G; j++) xe[j] = $urandom_range(0, (1 << L) - 1);
    xs.delete(); ss.delete(); cs.delete();
    if (use_n) begin
      ppac_pkg::alu_ctrl_t cn = '0;
      cn.weN = 1'b1;
      xs.push_back(mat_odd ? {N{1'b1}} : '0);
      ss.push_back({N{ppac_pkg::OP_XNOR}});
      cs.push_back(cn);
    end
    for (int k = K-1; k >= 0; k--) begin
      for (int l = L-1; l >= 0; l--) begin
        word_t xw = '0, sw = {N{ppac_pkg::OP_AND}};
        ppac_pkg::alu_ctrl_t cv = base;
        for (int j = 0; j < G; j++) begin
          xw[k*G + j] = 1'((xe[j] >> l) & 1);
          if (mat_odd) sw[k*G + j] = ppac_pkg::OP_XNOR;
        end
        cv.weV     = 1'b1;
        cv.vAcc    = (l != L-1);
        cv.vAccXm1 = (vf == F_INT) && (l == L-2);
        cv.weM     = (l == 0);
        cv.mAcc    = (l == 0) && (k != K-1);
        cv.mAccXm1 = (l == 0) && (mf == F_INT) && (k == K-2);
        if (cv.vAcc)    mech["vector_accumulate"]++;
        if (cv.vAccXm1) mech["vector_negate_msb"]++;
        if (cv.mAcc)    mech["matrix_accumulate"]++;
        if (cv.mAccXm1) mech["matrix_negate_msb"]++;
        xs.push_back(xw);
        ss.push_back(sw);
        cs.push_back(cv);
      end
    end
    cycles = 0;
    for (int i = 0; i <= xs.size(); i++) begin
      drive(i < xs.size() ? xs[i] : '0, i < ss.size() ? ss[i] : '0, i > 0 ? cs[i-1] : '0);
      cycles++;
    end
    // cycles = bit-planes + 1 (pipeline); K*L planes for the MVP itself
    check(cycles == K*L + 1 + (use_n ? 1 : 0), "multi-bit cycle count");
    for (int m = 0; m < M; m++) begin
      int e = 0;
      for (int j = 0; j < G; j++) e += fmt_val(ae[m][j], K, mf) * fmt_val(xe[j], L, vf);
      check(yv(m) == e, $sformatf("mvp K=%0d L=%0d mf=%0d vf=%0d row %0d: got %0d exp %0d",
                                  K, L, mf, vf, m, yv(m), e));
    end
  end
  mech[$sformatf("mvp_K%0d_L%0d_m%0d_v%0d", K, L, mf, vf)]++;
endtask

// ---------------------------------------------------------------- reset
task automatic do_reset();
  rst_n = 1'b0; wr_en = 1'b0; addr = '0; d = '0; x = '0; s = '0;
  ctrl = '0; c = '0; delta = '0;
  repeat (2) @(negedge clk);
  rst_n = 1'b1;
endtask

task automatic require(string names [$]);
  foreach (names[i]) begin
    checks++;
    if (!mech.exists(names[i]) || mech[names[i]] == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", names[i]);
    end else begin
      $display("mechanism %-28s exercised %0d times", names[i], mech[names[i]]);
    end
  end
endtask
