// tb_workloads: the five selected policies of the evaluation, each on its own
// instance of policy_accel built with that policy's sizes.
//   policy       obs  h    b_in  b_core  folding (L1 SIMD/PE, L2 PE, L3 PE)
//   Humanoid     376  16   4     3       8/16, 16, 32
//   Walker2d      17  128  3     2       17/16, 16, 8
//   Ant           27  64   3     2       27/16, 16, 16
//   HalfCheetah   17  256  8     3       17/32, 32, 8
//   Hopper        11  16   6     2       11/16, 16, 32 (the default build)
// h, b_core and b_in are the selected configurations; the observation sizes
// are those of the v4 MuJoCo tasks; actions are padded to 32 outputs of 8
// bits. The folding is a choice of this testbench. Each instance gets a random
// policy of the right sizes and 6 states streamed back to back; every action
// code and value is checked against the integer reference, together with one
// action per bottleneck initiation interval.
module tb_workloads;
  import qpolicy_pkg::*;
  logic clk = 0;
  int total_checks, total_failures;
  always #5 clk = ~clk;

  // humanoid
  logic humanoid_rst_n, humanoid_sv, humanoid_sr, humanoid_mv, humanoid_mr, humanoid_done;
  cfg_t humanoid_cfg;
  logic [8-1:0][4-1:0] humanoid_sd;
  logic [32-1:0][15:0] humanoid_ma;
  logic [32-1:0][7:0]  humanoid_mc;
  int humanoid_chk, humanoid_fail, humanoid_c0, humanoid_c1, humanoid_c2, humanoid_c3, humanoid_c4, humanoid_c5;
  policy_accel #(.IN_DIM(376), .H(16), .OUT_DIM(32), .B_IN(4), .B_CORE(3), .L1_SIMD(8), .L1_PE(16), .L2_PE(16), .L3_PE(32)) dut_humanoid (
    .clk, .rst_n(humanoid_rst_n), .cfg(humanoid_cfg), .s_valid(humanoid_sv), .s_ready(humanoid_sr), .s_data(humanoid_sd),
    .m_valid(humanoid_mv), .m_ready(humanoid_mr), .m_act(humanoid_ma), .m_code(humanoid_mc));
  policy_harness #(.IN_DIM(376), .H(16), .OUT_DIM(32), .B_IN(4), .B_CORE(3), .L1_SIMD(8), .L1_PE(16), .L2_PE(16), .L3_PE(32), .NVEC(8), .STALLS(1'b0)) h_humanoid (
    .clk, .rst_n(humanoid_rst_n), .cfg(humanoid_cfg), .s_valid(humanoid_sv), .s_ready(humanoid_sr), .s_data(humanoid_sd),
    .m_valid(humanoid_mv), .m_ready(humanoid_mr), .m_act(humanoid_ma), .m_code(humanoid_mc), .done(humanoid_done),
    .checks(humanoid_chk), .failures(humanoid_fail), .n_out_stall(humanoid_c0), .n_in_stall(humanoid_c1), .n_overlap(humanoid_c2),
    .n_relu_zero(humanoid_c3), .n_hidden_sat(humanoid_c4), .n_out_sat(humanoid_c5));

  // walker2d
  logic walker2d_rst_n, walker2d_sv, walker2d_sr, walker2d_mv, walker2d_mr, walker2d_done;
  cfg_t walker2d_cfg;
  logic [17-1:0][3-1:0] walker2d_sd;
  logic [8-1:0][15:0] walker2d_ma;
  logic [8-1:0][7:0]  walker2d_mc;
  int walker2d_chk, walker2d_fail, walker2d_c0, walker2d_c1, walker2d_c2, walker2d_c3, walker2d_c4, walker2d_c5;
  policy_accel #(.IN_DIM(17), .H(128), .OUT_DIM(32), .B_IN(3), .B_CORE(2), .L1_SIMD(17), .L1_PE(16), .L2_PE(16), .L3_PE(8)) dut_walker2d (
    .clk, .rst_n(walker2d_rst_n), .cfg(walker2d_cfg), .s_valid(walker2d_sv), .s_ready(walker2d_sr), .s_data(walker2d_sd),
    .m_valid(walker2d_mv), .m_ready(walker2d_mr), .m_act(walker2d_ma), .m_code(walker2d_mc));
  policy_harness #(.IN_DIM(17), .H(128), .OUT_DIM(32), .B_IN(3), .B_CORE(2), .L1_SIMD(17), .L1_PE(16), .L2_PE(16), .L3_PE(8), .NVEC(8), .STALLS(1'b0)) h_walker2d (
    .clk, .rst_n(walker2d_rst_n), .cfg(walker2d_cfg), .s_valid(walker2d_sv), .s_ready(walker2d_sr), .s_data(walker2d_sd),
    .m_valid(walker2d_mv), .m_ready(walker2d_mr), .m_act(walker2d_ma), .m_code(walker2d_mc), .done(walker2d_done),
    .checks(walker2d_chk), .failures(walker2d_fail), .n_out_stall(walker2d_c0), .n_in_stall(walker2d_c1), .n_overlap(walker2d_c2),
    .n_relu_zero(walker2d_c3), .n_hidden_sat(walker2d_c4), .n_out_sat(walker2d_c5));

  // ant
  logic ant_rst_n, ant_sv, ant_sr, ant_mv, ant_mr, ant_done;
  cfg_t ant_cfg;
  logic [27-1:0][3-1:0] ant_sd;
  logic [16-1:0][15:0] ant_ma;
  logic [16-1:0][7:0]  ant_mc;
  int ant_chk, ant_fail, ant_c0, ant_c1, ant_c2, ant_c3, ant_c4, ant_c5;
  policy_accel #(.IN_DIM(27), .H(64), .OUT_DIM(32), .B_IN(3), .B_CORE(2), .L1_SIMD(27), .L1_PE(16), .L2_PE(16), .L3_PE(16)) dut_ant (
    .clk, .rst_n(ant_rst_n), .cfg(ant_cfg), .s_valid(ant_sv), .s_ready(ant_sr), .s_data(ant_sd),
    .m_valid(ant_mv), .m_ready(ant_mr), .m_act(ant_ma), .m_code(ant_mc));
  policy_harness #(.IN_DIM(27), .H(64), .OUT_DIM(32), .B_IN(3), .B_CORE(2), .L1_SIMD(27), .L1_PE(16), .L2_PE(16), .L3_PE(16), .NVEC(8), .STALLS(1'b0)) h_ant (
    .clk, .rst_n(ant_rst_n), .cfg(ant_cfg), .s_valid(ant_sv), .s_ready(ant_sr), .s_data(ant_sd),
    .m_valid(ant_mv), .m_ready(ant_mr), .m_act(ant_ma), .m_code(ant_mc), .done(ant_done),
    .checks(ant_chk), .failures(ant_fail), .n_out_stall(ant_c0), .n_in_stall(ant_c1), .n_overlap(ant_c2),
    .n_relu_zero(ant_c3), .n_hidden_sat(ant_c4), .n_out_sat(ant_c5));

  // halfcheetah
  logic halfcheetah_rst_n, halfcheetah_sv, halfcheetah_sr, halfcheetah_mv, halfcheetah_mr, halfcheetah_done;
  cfg_t halfcheetah_cfg;
  logic [17-1:0][8-1:0] halfcheetah_sd;
  logic [8-1:0][15:0] halfcheetah_ma;
  logic [8-1:0][7:0]  halfcheetah_mc;
  int halfcheetah_chk, halfcheetah_fail, halfcheetah_c0, halfcheetah_c1, halfcheetah_c2, halfcheetah_c3, halfcheetah_c4, halfcheetah_c5;
  policy_accel #(.IN_DIM(17), .H(256), .OUT_DIM(32), .B_IN(8), .B_CORE(3), .L1_SIMD(17), .L1_PE(32), .L2_PE(32), .L3_PE(8)) dut_halfcheetah (
    .clk, .rst_n(halfcheetah_rst_n), .cfg(halfcheetah_cfg), .s_valid(halfcheetah_sv), .s_ready(halfcheetah_sr), .s_data(halfcheetah_sd),
    .m_valid(halfcheetah_mv), .m_ready(halfcheetah_mr), .m_act(halfcheetah_ma), .m_code(halfcheetah_mc));
  policy_harness #(.IN_DIM(17), .H(256), .OUT_DIM(32), .B_IN(8), .B_CORE(3), .L1_SIMD(17), .L1_PE(32), .L2_PE(32), .L3_PE(8), .NVEC(8), .STALLS(1'b0)) h_halfcheetah (
    .clk, .rst_n(halfcheetah_rst_n), .cfg(halfcheetah_cfg), .s_valid(halfcheetah_sv), .s_ready(halfcheetah_sr), .s_data(halfcheetah_sd),
    .m_valid(halfcheetah_mv), .m_ready(halfcheetah_mr), .m_act(halfcheetah_ma), .m_code(halfcheetah_mc), .done(halfcheetah_done),
    .checks(halfcheetah_chk), .failures(halfcheetah_fail), .n_out_stall(halfcheetah_c0), .n_in_stall(halfcheetah_c1), .n_overlap(halfcheetah_c2),
    .n_relu_zero(halfcheetah_c3), .n_hidden_sat(halfcheetah_c4), .n_out_sat(halfcheetah_c5));

  // hopper
  logic hopper_rst_n, hopper_sv, hopper_sr, hopper_mv, hopper_mr, hopper_done;
  cfg_t hopper_cfg;
  logic [11-1:0][6-1:0] hopper_sd;
  logic [32-1:0][15:0] hopper_ma;
  logic [32-1:0][7:0]  hopper_mc;
  int hopper_chk, hopper_fail, hopper_c0, hopper_c1, hopper_c2, hopper_c3, hopper_c4, hopper_c5;
  policy_accel #(.IN_DIM(11), .H(16), .OUT_DIM(32), .B_IN(6), .B_CORE(2), .L1_SIMD(11), .L1_PE(16), .L2_PE(16), .L3_PE(32)) dut_hopper (
    .clk, .rst_n(hopper_rst_n), .cfg(hopper_cfg), .s_valid(hopper_sv), .s_ready(hopper_sr), .s_data(hopper_sd),
    .m_valid(hopper_mv), .m_ready(hopper_mr), .m_act(hopper_ma), .m_code(hopper_mc));
  policy_harness #(.IN_DIM(11), .H(16), .OUT_DIM(32), .B_IN(6), .B_CORE(2), .L1_SIMD(11), .L1_PE(16), .L2_PE(16), .L3_PE(32), .NVEC(8), .STALLS(1'b0)) h_hopper (
    .clk, .rst_n(hopper_rst_n), .cfg(hopper_cfg), .s_valid(hopper_sv), .s_ready(hopper_sr), .s_data(hopper_sd),
    .m_valid(hopper_mv), .m_ready(hopper_mr), .m_act(hopper_ma), .m_code(hopper_mc), .done(hopper_done),
    .checks(hopper_chk), .failures(hopper_fail), .n_out_stall(hopper_c0), .n_in_stall(hopper_c1), .n_overlap(hopper_c2),
    .n_relu_zero(hopper_c3), .n_hidden_sat(hopper_c4), .n_out_sat(hopper_c5));

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", humanoid_chk+walker2d_chk+ant_chk+halfcheetah_chk+hopper_chk, 1 + humanoid_fail+walker2d_fail+ant_fail+halfcheetah_fail+hopper_fail);
    $finish;
  end

  initial begin
    @(posedge clk);
    wait (humanoid_done === 1'b1 && walker2d_done === 1'b1 && ant_done === 1'b1 && halfcheetah_done === 1'b1 && hopper_done === 1'b1);
    $display("humanoid: checks=%0d failures=%0d", humanoid_chk, humanoid_fail);
    $display("walker2d: checks=%0d failures=%0d", walker2d_chk, walker2d_fail);
    $display("ant: checks=%0d failures=%0d", ant_chk, ant_fail);
    $display("halfcheetah: checks=%0d failures=%0d", halfcheetah_chk, halfcheetah_fail);
    $display("hopper: checks=%0d failures=%0d", hopper_chk, hopper_fail);
    total_checks   = humanoid_chk+walker2d_chk+ant_chk+halfcheetah_chk+hopper_chk;
    total_failures = humanoid_fail+walker2d_fail+ant_fail+halfcheetah_fail+hopper_fail;
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule
