// tanh_lut: maps the final layer's 8-bit codes to action values in [-1, 1].
//
// The output layer of the policy produces LANES signed B_CODE-bit codes per
// beat. Each code k stands for the pre-activation k*s_out/2^(B_CODE-1), and
// the action is tanh of that. Because s_out is a learned constant, the table
// of 2^B_CODE entries is written at run time through cfg (target CFG_TANH,
// index c = k + 2^(B_CODE-1)); entry k should hold round(tanh(k*s_out/128) *
// 2^(B_ACT-1)) clipped to the B_ACT-bit signed range, i.e. Q1.15 for B_ACT=16.
// All LANES lanes read the table in parallel; the result and the codes are
// registered, so an action leaves one cycle after its code is accepted, with
// one beat per cycle and valid/ready flow control.
// The paper gives the tanh lookup at the final layer; the table format, the
// Q1.15 output and the run-time loading are this design's choices.
module tanh_lut
  import qpolicy_pkg::*;
#(
  parameter int LANES  = 32,
  parameter int B_CODE = 8,
  parameter int B_ACT  = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  cfg_t                        cfg,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LANES-1:0][B_CODE-1:0] in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LANES-1:0][B_ACT-1:0]  out_act,
  output logic [LANES-1:0][B_CODE-1:0] out_code
);
  localparam int N = 1 << B_CODE;

  logic [B_ACT-1:0] lut [N];

  always_ff @(posedge clk) begin
    if (cfg.valid && cfg.target == CFG_TANH) lut[B_CODE'(cfg.c)] <= B_ACT'(cfg.data);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      for (int l = 0; l < LANES; l++) begin
        // Table index = code + 2^(B_CODE-1): flip the sign bit.
        out_act[l]  <= lut[in_data[l] ^ B_CODE'(1 << (B_CODE - 1))];
        out_code[l] <= in_data[l];
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_act));
endmodule
