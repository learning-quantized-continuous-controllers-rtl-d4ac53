// tb_policy_full: end-to-end run of policy_accel at its default (Hopper)
// configuration: 11 inputs of 6 bits, two hidden layers of 16 units with
// 2-bit weights and activations, 32 padded 8-bit outputs, every layer fully
// parallel. Loads a random policy, streams 40 states back to back and checks
// every action, the latency of an idle pipeline (10 cycles: 3 per layer
// including its FIFO, 1 for the tanh table) and one action per cycle.
module tb_policy_full;
  import qpolicy_pkg::*;
  logic clk = 0, rst_n;
  cfg_t cfg;
  logic s_valid, s_ready, m_valid, m_ready, done;
  logic [10:0][5:0]  s_data;
  logic [31:0][15:0] m_act;
  logic [31:0][7:0]  m_code;
  int checks, failures, n_out_stall, n_in_stall, n_overlap, n_relu_zero, n_hidden_sat, n_out_sat;

  always #5 clk = ~clk;

  policy_accel dut (.clk, .rst_n, .cfg, .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_act, .m_code);

  policy_harness #(.NVEC(40), .STALLS(1'b0), .EXP_LAT(10)) h (.*);

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    wait (done === 1'b1);
    $display("overlap=%0d relu_zero=%0d hidden_sat=%0d out_sat=%0d", n_overlap, n_relu_zero, n_hidden_sat, n_out_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + ((n_overlap > 0) ? 0 : 1));
    $finish;
  end
endmodule
