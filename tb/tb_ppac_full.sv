// tb_ppac_full: full-size testbench of ppac_top at its default parameters, M = N = 256, 16 banks, 16 subrows of 16 cells.
//
// It takes the PPAC array through every operation mode: Hamming similarity
// (as a back-to-back stream, one result per cycle), complete-match and
// similarity-match CAM, the four 1-bit MVP number-format combinations,
// bit-serial multi-bit MVPs (uint, int and oddint vectors and matrices,
// including the 4-bit x 4-bit {0,1} MVP of KL = 16 cycles), GF(2) MVPs and
// PLA sum-of-min-terms and max-term evaluation per bank. Expected values come
// from integer arithmetic on the represented numbers (see ppac_tb_tasks.svh).
// Each mechanism is counted; one that never happened is a failure. A
// watchdog ends the run with a failure if it does not finish in time.
module tb_ppac_full;
  import ppac_pkg::*;

  localparam int unsigned M    = 256;
  localparam int unsigned N    = 256;
  localparam int unsigned B    = 16;
  localparam int unsigned BS   = 16;
  localparam int unsigned LMAX = 4;
  localparam int unsigned KMAX = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                          rst_n;
  logic [$clog2(M)-1:0]          addr;
  logic                          wr_en;
  logic [N-1:0]                  d, x, s;
  alu_ctrl_t                     ctrl;
  logic signed [accw(N,LMAX,KMAX)-1:0] c, delta;
  logic [M-1:0][accw(N,LMAX,KMAX)-1:0] y;
  logic [B-1:0][popw(M/B)-1:0]   p;

  ppac_top  dut (
    .clk, .rst_n, .addr, .wr_en, .d, .x, .s, .ctrl, .c, .delta, .y, .p
  );

`include "tb/ppac_tb_tasks.svh"

  initial begin
    do_reset();
    load_random_matrix();
    test_hamming(8);
    test_cam();
    test_similarity();
    test_mvp1(1'b1, 1'b1, 3);
    test_mvp1(1'b0, 1'b0, 3);
    test_mvp1(1'b1, 1'b0, 3);
    test_mvp1(1'b0, 1'b1, 3);
    test_gf2(3);
    // 4-bit {0,1} (uint) matrix times 4-bit uint vector: K*L = 16 cycles
    test_mvp_multi(4, 4, F_UINT, F_UINT, 2);
    // signed 4-bit matrix and vector
    test_mvp_multi(4, 4, F_INT,  F_INT,  2);
    // oddint matrix and vector
    test_mvp_multi(2, 3, F_ODD,  F_ODD,  2);
    // 1-bit oddint matrix times 4-bit int vector (Hadamard-style transform)
    test_mvp_multi(1, 4, F_ODD,  F_INT,  2);
    // 1-bit {0,1} matrix times 4-bit oddint vector
    test_mvp_multi(1, 4, F_UINT, F_ODD,  2);
    test_pla(4);
    require('{"hamming", "back_to_back_stream", "cam_complete_match", "cam_mismatch",
              "similarity_match", "mvp1_matpm1_vecpm1", "mvp1_mat01_vec01",
              "mvp1_matpm1_vec01", "mvp1_mat01_vecpm1", "stored_n_term", "gf2_mvp",
              "vector_accumulate", "vector_negate_msb", "matrix_accumulate",
              "matrix_negate_msb", "pla_sum_of_minterms", "pla_maxterm"});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
