// tb_policy_accel: end-to-end test of policy_accel with folded layers.
// Two accelerators with the same reduced configuration (12 inputs of 5 bits,
// hidden width 8, 3-bit core, 8 outputs of 8 bits) folded so that every layer
// needs several cycles per vector: layer 0 SIMD 4 / PE 2 (12 cycles), layer 1
// SIMD 2 / PE 4 (8 cycles), layer 2 SIMD 4 / PE 2 (8 cycles).
//   dut_a: no stalls; checks every action, the idle latency (25 cycles, worked
//          out by hand from the fold schedule) and one action per 12 cycles.
//   dut_b: random input gaps and output back-pressure; checks every action.
// The test fails unless each mechanism happened at least once: output and
// input back-pressure, a FIFO filling up, states overlapping in the pipeline,
// ReLU zeros, clipping of hidden units and of output codes at either end.
module tb_policy_accel;
  import qpolicy_pkg::*;
  localparam int IN_DIM = 12, H = 8, OUT_DIM = 8, B_IN = 5, B_CORE = 3;
  localparam int L1_SIMD = 4, L1_PE = 2, L2_PE = 4, L3_PE = 2;
  logic clk = 0;

  logic a_rst_n, b_rst_n;
  cfg_t a_cfg, b_cfg;
  logic a_s_valid, a_s_ready, a_m_valid, a_m_ready, a_done;
  logic b_s_valid, b_s_ready, b_m_valid, b_m_ready, b_done;
  logic [L1_SIMD-1:0][B_IN-1:0] a_s_data, b_s_data;
  logic [L3_PE-1:0][15:0] a_m_act, b_m_act;
  logic [L3_PE-1:0][7:0]  a_m_code, b_m_code;
  int a_chk, a_fail, a_ost, a_ist, a_ovl, a_rz, a_hs, a_os;
  int b_chk, b_fail, b_ost, b_ist, b_ovl, b_rz, b_hs, b_os;
  int fifo_full = 0;

  always #5 clk = ~clk;

  policy_accel #(.IN_DIM(IN_DIM), .H(H), .OUT_DIM(OUT_DIM), .B_IN(B_IN), .B_CORE(B_CORE),
                 .L1_SIMD(L1_SIMD), .L1_PE(L1_PE), .L2_PE(L2_PE), .L3_PE(L3_PE)) dut_a (
    .clk, .rst_n(a_rst_n), .cfg(a_cfg), .s_valid(a_s_valid), .s_ready(a_s_ready), .s_data(a_s_data),
    .m_valid(a_m_valid), .m_ready(a_m_ready), .m_act(a_m_act), .m_code(a_m_code));
  policy_harness #(.IN_DIM(IN_DIM), .H(H), .OUT_DIM(OUT_DIM), .B_IN(B_IN), .B_CORE(B_CORE),
                   .L1_SIMD(L1_SIMD), .L1_PE(L1_PE), .L2_PE(L2_PE), .L3_PE(L3_PE),
                   .NVEC(30), .STALLS(1'b0), .EXP_LAT(25)) h_a (
    .clk, .rst_n(a_rst_n), .cfg(a_cfg), .s_valid(a_s_valid), .s_ready(a_s_ready), .s_data(a_s_data),
    .m_valid(a_m_valid), .m_ready(a_m_ready), .m_act(a_m_act), .m_code(a_m_code), .done(a_done),
    .checks(a_chk), .failures(a_fail), .n_out_stall(a_ost), .n_in_stall(a_ist), .n_overlap(a_ovl),
    .n_relu_zero(a_rz), .n_hidden_sat(a_hs), .n_out_sat(a_os));

  policy_accel #(.IN_DIM(IN_DIM), .H(H), .OUT_DIM(OUT_DIM), .B_IN(B_IN), .B_CORE(B_CORE),
                 .L1_SIMD(L1_SIMD), .L1_PE(L1_PE), .L2_PE(L2_PE), .L3_PE(L3_PE)) dut_b (
    .clk, .rst_n(b_rst_n), .cfg(b_cfg), .s_valid(b_s_valid), .s_ready(b_s_ready), .s_data(b_s_data),
    .m_valid(b_m_valid), .m_ready(b_m_ready), .m_act(b_m_act), .m_code(b_m_code));
  policy_harness #(.IN_DIM(IN_DIM), .H(H), .OUT_DIM(OUT_DIM), .B_IN(B_IN), .B_CORE(B_CORE),
                   .L1_SIMD(L1_SIMD), .L1_PE(L1_PE), .L2_PE(L2_PE), .L3_PE(L3_PE),
                   .NVEC(80), .STALLS(1'b1)) h_b (
    .clk, .rst_n(b_rst_n), .cfg(b_cfg), .s_valid(b_s_valid), .s_ready(b_s_ready), .s_data(b_s_data),
    .m_valid(b_m_valid), .m_ready(b_m_ready), .m_act(b_m_act), .m_code(b_m_code), .done(b_done),
    .checks(b_chk), .failures(b_fail), .n_out_stall(b_ost), .n_in_stall(b_ist), .n_overlap(b_ovl),
    .n_relu_zero(b_rz), .n_hidden_sat(b_hs), .n_out_sat(b_os));

  always @(posedge clk)
    if (b_rst_n && (dut_b.u_fifo0.count == 2 || dut_b.u_fifo1.count == 2 || dut_b.u_fifo2.count == 2))
      fifo_full++;

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_chk + b_chk, a_fail + b_fail + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (a_done === 1'b1 && b_done === 1'b1);
    checks   = a_chk + b_chk;
    failures = a_fail + b_fail;
    $display("output stalls=%0d input stalls=%0d fifo full=%0d overlap=%0d relu zero=%0d hidden clip=%0d output clip=%0d",
             b_ost, b_ist, fifo_full, a_ovl + b_ovl, a_rz + b_rz, a_hs + b_hs, a_os + b_os);
    checks += 7;
    if (b_ost == 0) failures++;
    if (b_ist == 0) failures++;
    if (fifo_full == 0) failures++;
    if (a_ovl == 0 || b_ovl == 0) failures++;
    if (a_rz + b_rz == 0) failures++;
    if (a_hs + b_hs == 0) failures++;
    if (a_os + b_os == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
