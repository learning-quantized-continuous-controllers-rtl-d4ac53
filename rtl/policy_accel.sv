// policy_accel: integer-only streaming accelerator for a quantized SAC policy.
//
// The deployed policy is a three-layer perceptron that runs entirely on
// integers. A state vector of IN_DIM B_IN-bit signed codes (already quantized
// by the sensor side) flows through
//   layer 0: mvau IN_DIM -> H,  signed inputs,   B_CORE weights, ReLU + requant to B_CORE unsigned
//   layer 1: mvau H -> H,       unsigned inputs, B_CORE weights, ReLU + requant to B_CORE unsigned
//   layer 2: mvau H -> OUT_DIM, unsigned inputs, B_CORE weights, requant to B_OUT signed
//   tanh_lut: each B_OUT-bit code -> Q1.15 action value in [-1, 1]
// with a stream_fifo of FIFO_DEPTH beats between consecutive stages. OUT_DIM
// is the action count padded to a multiple of 32; only the first entries are
// real actions.
// Interface: s_* is the input stream, L1_SIMD codes per beat (IN_DIM/L1_SIMD
// beats per state); m_* is the output stream, L3_PE actions (and their codes)
// per beat (OUT_DIM/L3_PE beats per action vector). cfg loads weights,
// thresholds and the tanh table (see qpolicy_pkg) and must be used while no
// vector is in flight.
// Folding: layer l takes SIMD inputs and produces PE outputs per cycle. The
// SIMD width of layer l+1 equals the PE count of layer l, so no width
// converters are needed. With the default (Hopper) folding every layer does a
// vector in one cycle and a state becomes an action after 9 clock cycles.
// From the paper: the layer sequence, integer-only arithmetic, threshold
// requantization, FIFO streams, on-chip weights, the tanh lookup, the 8-bit
// output, padding to 32 actions, and the Hopper sizes (h=16, b_core=2,
// b_in=6). This design's own choices: two hidden layers (the common SAC actor
// layout), the folding, FIFO depths, handshake, configuration bus and Q1.15
// action format. The Hopper observation size (11) is not given by the paper.
module policy_accel
  import qpolicy_pkg::*;
#(
  parameter int IN_DIM     = 11,
  parameter int H          = 16,
  parameter int OUT_DIM    = 32,
  parameter int B_IN       = 6,
  parameter int B_CORE     = 2,
  parameter int B_OUT      = 8,
  parameter int B_ACT      = 16,
  parameter int L1_SIMD    = 11,
  parameter int L1_PE      = 16,
  parameter int L2_PE      = 16,
  parameter int L3_PE      = 32,
  parameter int FIFO_DEPTH = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  cfg_t                         cfg,
  input  logic                         s_valid,
  output logic                         s_ready,
  input  logic [L1_SIMD-1:0][B_IN-1:0] s_data,
  output logic                         m_valid,
  input  logic                         m_ready,
  output logic [L3_PE-1:0][B_ACT-1:0]  m_act,
  output logic [L3_PE-1:0][B_OUT-1:0]  m_code
);
  // Layer 0 -> FIFO -> layer 1 -> FIFO -> layer 2 -> FIFO -> tanh lookup
  logic                          l0_v, l0_r, f0_v, f0_r;
  logic [L1_PE-1:0][B_CORE-1:0]  l0_d, f0_d;
  logic                          l1_v, l1_r, f1_v, f1_r;
  logic [L2_PE-1:0][B_CORE-1:0]  l1_d, f1_d;
  logic                          l2_v, l2_r, f2_v, f2_r;
  logic [L3_PE-1:0][B_OUT-1:0]   l2_d, f2_d;

  mvau #(
    .MW(IN_DIM), .MH(H), .SIMD(L1_SIMD), .PE(L1_PE),
    .B_IN(B_IN), .IN_SIGNED(1'b1), .B_W(B_CORE), .B_OUT(B_CORE), .OUT_SIGNED(1'b0),
    .LAYER(2'd0)
  ) u_layer0 (
    .clk, .rst_n, .cfg,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(l0_v), .out_ready(l0_r), .out_data(l0_d)
  );

  stream_fifo #(.WIDTH(L1_PE * B_CORE), .DEPTH(FIFO_DEPTH)) u_fifo0 (
    .clk, .rst_n,
    .in_valid(l0_v), .in_ready(l0_r), .in_data(l0_d),
    .out_valid(f0_v), .out_ready(f0_r), .out_data(f0_d)
  );

  mvau #(
    .MW(H), .MH(H), .SIMD(L1_PE), .PE(L2_PE),
    .B_IN(B_CORE), .IN_SIGNED(1'b0), .B_W(B_CORE), .B_OUT(B_CORE), .OUT_SIGNED(1'b0),
    .LAYER(2'd1)
  ) u_layer1 (
    .clk, .rst_n, .cfg,
    .in_valid(f0_v), .in_ready(f0_r), .in_data(f0_d),
    .out_valid(l1_v), .out_ready(l1_r), .out_data(l1_d)
  );

  stream_fifo #(.WIDTH(L2_PE * B_CORE), .DEPTH(FIFO_DEPTH)) u_fifo1 (
    .clk, .rst_n,
    .in_valid(l1_v), .in_ready(l1_r), .in_data(l1_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d)
  );

  mvau #(
    .MW(H), .MH(OUT_DIM), .SIMD(L2_PE), .PE(L3_PE),
    .B_IN(B_CORE), .IN_SIGNED(1'b0), .B_W(B_CORE), .B_OUT(B_OUT), .OUT_SIGNED(1'b1),
    .LAYER(2'd2)
  ) u_layer2 (
    .clk, .rst_n, .cfg,
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(l2_v), .out_ready(l2_r), .out_data(l2_d)
  );

  stream_fifo #(.WIDTH(L3_PE * B_OUT), .DEPTH(FIFO_DEPTH)) u_fifo2 (
    .clk, .rst_n,
    .in_valid(l2_v), .in_ready(l2_r), .in_data(l2_d),
    .out_valid(f2_v), .out_ready(f2_r), .out_data(f2_d)
  );

  tanh_lut #(.LANES(L3_PE), .B_CODE(B_OUT), .B_ACT(B_ACT)) u_tanh (
    .clk, .rst_n, .cfg,
    .in_valid(f2_v), .in_ready(f2_r), .in_data(f2_d),
    .out_valid(m_valid), .out_ready(m_ready), .out_act(m_act), .out_code(m_code)
  );
endmodule
