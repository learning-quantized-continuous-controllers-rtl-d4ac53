// mvau: one fully-connected layer of the integer policy (matrix-vector-activation unit).
//
// Computes y = requant(W x) for an MH x MW signed weight matrix W and an input
// vector x of MW B_IN-bit codes (signed for the first layer, unsigned after a
// ReLU). The layer is folded onto PE rows x SIMD columns of multipliers: the
// input arrives as SF = MW/SIMD beats of SIMD codes, the output leaves as
// NF = MH/PE beats of PE codes, and one vector takes SF*NF cycles.
//   * Input: beat sf carries elements sf*SIMD .. sf*SIMD+SIMD-1. During the
//     first output fold (nf = 0) beats come from the stream and are also kept
//     in an input buffer; folds nf > 0 replay them from the buffer.
//   * MAC: each cycle every PE adds the dot product of the current input beat
//     with its SIMD weights (tile nf*SF+sf of weight_mem) to its accumulator.
//     The accumulators are ACC_W bits, wide enough that no sum can overflow.
//   * Requantization: after the last input beat of a fold, the PE sums are
//     registered (stage 2), compared with the stored thresholds and the codes
//     registered on the output (stage 3). Output beat nf carries elements
//     nf*PE .. nf*PE+PE-1.
// Timing: a vector entering at cycle t (last beat) leaves its first output
// beat two cycles later; without back-pressure the unit accepts a new input
// beat every cycle, one vector per SF*NF cycles. Back-pressure on the output
// stalls the MAC only when the final accumulation of a fold has nowhere to go.
// Weights and thresholds are written through cfg (see qpolicy_pkg) for the
// layer whose number equals LAYER.
// From the paper: integer matrix-vector product with overflow-free
// accumulators, PE/SIMD folding along rows/columns, requantization by stored
// thresholds, signed inputs and weights, unsigned post-ReLU activations.
// This design's own choices: the element order, the replay buffer, the
// three-stage pipeline, the valid/ready handshake and the configuration bus.
module mvau
  import qpolicy_pkg::*;
#(
  parameter int         MW         = 11,
  parameter int         MH         = 16,
  parameter int         SIMD       = 11,
  parameter int         PE         = 16,
  parameter int         B_IN       = 6,
  parameter bit         IN_SIGNED  = 1'b1,
  parameter int         B_W        = 2,
  parameter int         B_OUT      = 2,
  parameter bit         OUT_SIGNED = 1'b0,
  parameter logic [1:0] LAYER      = 2'd0,
  localparam int SF    = MW / SIMD,
  localparam int NF    = MH / PE,
  localparam int ACC_W = acc_width(MW, B_IN, IN_SIGNED, B_W)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  cfg_t                         cfg,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [SIMD-1:0][B_IN-1:0]    in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [PE-1:0][B_OUT-1:0]     out_data
);
  localparam int SFW = idx_w(SF);
  localparam int NFW = idx_w(NF);
  localparam int TW  = ACC_W + 1;

  // Parameter rules of the folding.
  initial begin
    assert (MW % SIMD == 0) else $error("mvau: SIMD must divide MW");
    assert (MH % PE == 0)   else $error("mvau: PE must divide MH");
  end

  // ---------------------------------------------------------------- control
  logic [SFW-1:0] sf;
  logic [NFW-1:0] nf;
  logic           last_sf, fire, s2_ready;

  assign last_sf  = (sf == SFW'(SF - 1));
  // The final beat of a fold needs room in stage 2.
  assign in_ready = (nf == '0) && (!last_sf || s2_ready);
  assign fire     = (nf == '0) ? (in_valid && in_ready) : (!last_sf || s2_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sf <= '0;
      nf <= '0;
    end else if (fire) begin
      if (last_sf) begin
        sf <= '0;
        nf <= (nf == NFW'(NF - 1)) ? '0 : nf + 1'b1;
      end else begin
        sf <= sf + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ input buffer
  logic [SIMD-1:0][B_IN-1:0] ibuf [SF];
  logic [SIMD-1:0][B_IN-1:0] x;

  always_ff @(posedge clk) begin
    if (fire && nf == '0) ibuf[sf] <= in_data;
  end
  assign x = (nf == '0) ? in_data : ibuf[sf];

  // ----------------------------------------------------------------- weights
  logic [PE-1:0][SIMD-1:0][B_W-1:0] wtile;

  weight_mem #(.DEPTH(NF * SF), .PE(PE), .SIMD(SIMD), .W_BITS(B_W)) u_wmem (
    .clk    (clk),
    .wr_en  (cfg.valid && cfg.target == CFG_WEIGHT && cfg.layer == LAYER),
    .wr_addr(idx_w(NF * SF)'(cfg.a)),
    .wr_pe  (idx_w(PE)'(cfg.b)),
    .wr_simd(idx_w(SIMD)'(cfg.c)),
    .wr_data(B_W'(cfg.data)),
    .rd_addr(idx_w(NF * SF)'(int'(nf) * SF + int'(sf))),
    .rd_data(wtile)
  );

  // --------------------------------------------------------------- MAC array
  logic [PE-1:0][ACC_W-1:0] acc, acc_next;

  always_comb begin
    for (int p = 0; p < PE; p++) begin
      logic signed [ACC_W-1:0] s;
      s = (sf == '0) ? '0 : $signed(acc[p]);
      for (int i = 0; i < SIMD; i++) begin
        logic signed [B_IN:0]  xi;
        logic signed [B_W-1:0] wi;
        xi = IN_SIGNED ? (B_IN+1)'($signed(x[i])) : $signed({1'b0, x[i]});
        wi = $signed(wtile[p][i]);
        s  = s + ACC_W'(xi * wi);
      end
      acc_next[p] = s;
    end
  end

  always_ff @(posedge clk) begin
    if (fire && !last_sf) acc <= acc_next;
  end

  // ------------------------------------------------- stage 2: finished sums
  logic                     s2_valid, s2_adv;
  logic [PE-1:0][ACC_W-1:0] s2_acc;
  logic [NFW-1:0]           s2_nf;

  assign s2_adv   = s2_valid && (!out_valid || out_ready);
  assign s2_ready = !s2_valid || s2_adv;

  always_ff @(posedge clk) begin
    if (!rst_n) s2_valid <= 1'b0;
    else if (fire && last_sf) s2_valid <= 1'b1;
    else if (s2_adv) s2_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (fire && last_sf) begin
      s2_acc <= acc_next;
      s2_nf  <= nf;
    end
  end

  // --------------------------------------- stage 3: requantization, output
  logic [PE-1:0][B_OUT-1:0] q;

  thresholding #(
    .PE(PE), .NF(NF), .ACC_W(ACC_W), .B_OUT(B_OUT), .OUT_SIGNED(OUT_SIGNED)
  ) u_thr (
    .clk    (clk),
    .wr_en  (cfg.valid && cfg.target == CFG_THRESH && cfg.layer == LAYER),
    .wr_nf  (NFW'(cfg.a)),
    .wr_pe  (idx_w(PE)'(cfg.b)),
    .wr_idx (B_OUT'(cfg.c)),
    .wr_data(TW'(cfg.data)),
    .nf     (s2_nf),
    .acc    (s2_acc),
    .q      (q)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (s2_adv) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (s2_adv) out_data <= q;
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
