// thresholding: threshold-based requantization of PE accumulators.
//
// After a layer's integer dot products, the accumulator of each output channel
// is mapped to a B_OUT-bit code by counting how many of its NT = 2^B_OUT - 1
// stored thresholds it reaches: q = #{ i : acc >= T_i }. With ascending
// thresholds this single step applies the bias, the ReLU (every threshold of a
// hidden layer is above the zero point, so negative sums give code 0), the
// rescaling to the next layer's scale and the clipping to [qmin, qmax]. For a
// signed output (the final layer) the count is shifted by -2^(B_OUT-1).
// Thresholds are held as NF words (one per output fold) of PE x NT fields of
// ACC_W+1 bits each, written one threshold per clock. The comparison is purely combinational:
// the caller presents the fold index and the accumulators and registers q.
// Requantization by stored thresholds is what the paper describes; the
// counting rule, the threshold width and the run-time write port are this
// design's choices.
module thresholding #(
  parameter int PE         = 2,
  parameter int NF         = 2,
  parameter int ACC_W      = 12,
  parameter int B_OUT      = 2,
  parameter bit OUT_SIGNED = 1'b0,
  localparam int NT  = (1 << B_OUT) - 1,
  localparam int TW  = ACC_W + 1,
  localparam int NFW = qpolicy_pkg::idx_w(NF),
  localparam int PW  = qpolicy_pkg::idx_w(PE)
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [NFW-1:0]                      wr_nf,
  input  logic [PW-1:0]                       wr_pe,
  input  logic [B_OUT-1:0]                    wr_idx,
  input  logic signed [TW-1:0]                wr_data,
  input  logic [NFW-1:0]                      nf,
  input  logic [PE-1:0][ACC_W-1:0]            acc,
  output logic [PE-1:0][B_OUT-1:0]            q
);
  // One word per output fold holds the thresholds of all PE lanes, so a fold
  // is read with a single read port.
  logic [PE-1:0][NT-1:0][TW-1:0] thr [NF];
  logic [PE-1:0][NT-1:0][TW-1:0] row;

  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_idx) < NT)) thr[wr_nf][wr_pe][wr_idx] <= wr_data;
  end

  assign row = thr[nf];

  for (genvar p = 0; p < PE; p++) begin : g_lane
    logic signed [TW-1:0] a;
    logic [B_OUT:0]       cnt;

    assign a = TW'($signed(acc[p]));

    always_comb begin
      cnt = '0;
      for (int t = 0; t < NT; t++) begin
        if (a >= $signed(row[p][t])) cnt = cnt + 1'b1;
      end
    end

    if (OUT_SIGNED) begin : g_signed
      assign q[p] = B_OUT'(cnt) ^ {1'b1, {(B_OUT-1){1'b0}}};
    end else begin : g_unsigned
      assign q[p] = B_OUT'(cnt);
    end
  end
endmodule
