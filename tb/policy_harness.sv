// policy_harness: stimulus and reference model for policy_accel.
//
// Connects to a policy_accel with the same parameters through its ports. It
// resets the accelerator, loads a random policy (weights of B_CORE bits,
// ascending thresholds placed around the spread of each layer's sums, and the
// tanh table for an output scale of 3.0), streams NVEC random quantized states
// and checks every action code and action value against an integer reference
// of the whole network computed here. With STALLS=0 the input is always
// offered and the output always taken, and the harness checks the latency of
// the first state (when EXP_LAT >= 0) and that, once the pipeline is full,
// actions leave exactly one per bottleneck initiation interval
// max_l(SF_l * NF_l). With STALLS=1 it inserts random input gaps and output
// back-pressure. It counts the mechanisms seen: output back-pressure, input
// back-pressure, vectors overlapping in the pipeline, hidden units cut to zero
// by the ReLU, hidden units and output codes clipped at either end.
// done goes high when all actions are checked.
module policy_harness
  import qpolicy_pkg::*;
#(
  parameter int IN_DIM  = 11,
  parameter int H       = 16,
  parameter int OUT_DIM = 32,
  parameter int B_IN    = 6,
  parameter int B_CORE  = 2,
  parameter int B_OUT   = 8,
  parameter int B_ACT   = 16,
  parameter int L1_SIMD = 11,
  parameter int L1_PE   = 16,
  parameter int L2_PE   = 16,
  parameter int L3_PE   = 32,
  parameter int NVEC    = 20,
  parameter bit STALLS  = 1'b0,
  parameter int EXP_LAT = -1
) (
  input  logic                         clk,
  output logic                         rst_n,
  output cfg_t                         cfg,
  output logic                         s_valid,
  input  logic                         s_ready,
  output logic [L1_SIMD-1:0][B_IN-1:0] s_data,
  input  logic                         m_valid,
  output logic                         m_ready,
  input  logic [L3_PE-1:0][B_ACT-1:0]  m_act,
  input  logic [L3_PE-1:0][B_OUT-1:0]  m_code,
  output logic                         done,
  output int                           checks,
  output int                           failures,
  output int                           n_out_stall,
  output int                           n_in_stall,
  output int                           n_overlap,
  output int                           n_relu_zero,
  output int                           n_hidden_sat,
  output int                           n_out_sat
);
  localparam int SF1 = IN_DIM / L1_SIMD, NF1 = H / L1_PE;
  localparam int SF2 = H / L1_PE,        NF2 = H / L2_PE;
  localparam int SF3 = H / L2_PE,        NF3 = OUT_DIM / L3_PE;
  localparam int II  = (SF1 * NF1 > SF2 * NF2) ?
                       ((SF1 * NF1 > SF3 * NF3) ? SF1 * NF1 : SF3 * NF3) :
                       ((SF2 * NF2 > SF3 * NF3) ? SF2 * NF2 : SF3 * NF3);
  localparam int NTC = (1 << B_CORE) - 1;
  localparam int NTO = (1 << B_OUT) - 1;
  localparam real SCALE = 3.0;

  int W0 [H][IN_DIM];
  int W1 [H][H];
  int W2 [OUT_DIM][H];
  int T0 [H][NTC];
  int T1 [H][NTC];
  int T2 [OUT_DIM][NTO];
  int lut [1 << B_OUT];
  int X [NVEC][IN_DIM];
  int expc [NVEC][OUT_DIM];

  int cyc = 0;
  int n_in_beats = 0, n_out_beats = 0;
  int first_in_cyc [NVEC];
  int first_out_cyc [NVEC];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %m: %s (cycle %0d)", what, cyc);
    end
  endtask

  task automatic cfg_write(input cfg_target_e tg, input int layer, input int a, input int b,
                           input int c, input int d);
    cfg = '{valid: 1'b1, target: tg, layer: 2'(layer), a: 16'(a), b: 16'(b), c: 16'(c), data: d};
    @(posedge clk); #1;
    cfg.valid = 1'b0;
  endtask

  // Ascending thresholds spread over [lo, hi] with small random jitter.
  function automatic void make_thresholds(input real lo, input real hi, input int n, ref int t[]);
    int prev;
    prev = -(1 << 30);
    for (int i = 0; i < n; i++) begin
      real v;
      int iv;
      v  = lo + (hi - lo) * (real'(i) + 0.5 + (real'($urandom_range(0, 100)) - 50.0) / 250.0) / real'(n);
      iv = $rtoi(v);
      if (iv < prev) iv = prev;
      t[i] = iv;
      prev = iv;
    end
  endfunction

  function automatic int requant(input int acc, input int t[], input int n);
    int q = 0;
    for (int i = 0; i < n; i++) if (acc >= t[i]) q++;
    return q;
  endfunction

  function automatic int q15(input int k);
    real v;
    v = $tanh(real'(k) * SCALE / real'(1 << (B_OUT - 1))) * real'((1 << (B_ACT - 1)) - 1);
    return $rtoi(v + ((v >= 0) ? 0.5 : -0.5));
  endfunction

  // Random weights; thresholds placed from the sums the random states
  // actually produce, so that every layer sees zeros and clipping.
  task automatic build_policy();
    int tmp [];
    int hmax, omin, omax;
    for (int r = 0; r < H; r++) for (int c = 0; c < IN_DIM; c++)
      W0[r][c] = int'($urandom_range(0, NTC)) - (1 << (B_CORE - 1));
    for (int r = 0; r < H; r++) for (int c = 0; c < H; c++)
      W1[r][c] = int'($urandom_range(0, NTC)) - (1 << (B_CORE - 1));
    for (int r = 0; r < OUT_DIM; r++) for (int c = 0; c < H; c++)
      W2[r][c] = int'($urandom_range(0, NTC)) - (1 << (B_CORE - 1));
    tmp = new[NTC];
    hmax = 1;
    for (int v = 0; v < NVEC; v++) for (int r = 0; r < H; r++) begin
      int acc = 0;
      for (int c = 0; c < IN_DIM; c++) acc += W0[r][c] * X[v][c];
      if (acc > hmax) hmax = acc;
    end
    for (int r = 0; r < H; r++) begin
      make_thresholds(0.02 * hmax, 0.6 * hmax, NTC, tmp);
      for (int i = 0; i < NTC; i++) T0[r][i] = tmp[i];
    end
    hmax = 1;
    for (int v = 0; v < NVEC; v++) begin
      int h0 [H];
      for (int r = 0; r < H; r++) begin
        int acc = 0;
        for (int c = 0; c < IN_DIM; c++) acc += W0[r][c] * X[v][c];
        for (int i = 0; i < NTC; i++) tmp[i] = T0[r][i];
        h0[r] = requant(acc, tmp, NTC);
      end
      for (int r = 0; r < H; r++) begin
        int acc = 0;
        for (int c = 0; c < H; c++) acc += W1[r][c] * h0[c];
        if (acc > hmax) hmax = acc;
      end
    end
    for (int r = 0; r < H; r++) begin
      make_thresholds(0.02 * hmax, 0.6 * hmax, NTC, tmp);
      for (int i = 0; i < NTC; i++) T1[r][i] = tmp[i];
    end
    // Output layer: the range of the sums seen, trimmed by a quarter at each end.
    omin = 0;
    omax = 0;
    for (int v = 0; v < NVEC; v++) begin
      int h0 [H];
      int h1 [H];
      for (int r = 0; r < H; r++) begin
        int acc = 0;
        for (int c = 0; c < IN_DIM; c++) acc += W0[r][c] * X[v][c];
        for (int i = 0; i < NTC; i++) tmp[i] = T0[r][i];
        h0[r] = requant(acc, tmp, NTC);
      end
      for (int r = 0; r < H; r++) begin
        int acc = 0;
        for (int c = 0; c < H; c++) acc += W1[r][c] * h0[c];
        for (int i = 0; i < NTC; i++) tmp[i] = T1[r][i];
        h1[r] = requant(acc, tmp, NTC);
      end
      for (int r = 0; r < OUT_DIM; r++) begin
        int acc = 0;
        for (int c = 0; c < H; c++) acc += W2[r][c] * h1[c];
        if (acc < omin) omin = acc;
        if (acc > omax) omax = acc;
      end
    end
    tmp = new[NTO];
    for (int r = 0; r < OUT_DIM; r++) begin
      make_thresholds(omin + 0.25 * (omax - omin), omax - 0.25 * (omax - omin), NTO, tmp);
      for (int i = 0; i < NTO; i++) T2[r][i] = tmp[i];
    end
    for (int k = 0; k < (1 << B_OUT); k++) lut[k] = q15(k - (1 << (B_OUT - 1)));
  endtask

  task automatic load_policy();
    for (int r = 0; r < H; r++) for (int c = 0; c < IN_DIM; c++)
      cfg_write(CFG_WEIGHT, 0, (r / L1_PE) * SF1 + c / L1_SIMD, r % L1_PE, c % L1_SIMD, W0[r][c]);
    for (int r = 0; r < H; r++) for (int c = 0; c < H; c++)
      cfg_write(CFG_WEIGHT, 1, (r / L2_PE) * SF2 + c / L1_PE, r % L2_PE, c % L1_PE, W1[r][c]);
    for (int r = 0; r < OUT_DIM; r++) for (int c = 0; c < H; c++)
      cfg_write(CFG_WEIGHT, 2, (r / L3_PE) * SF3 + c / L2_PE, r % L3_PE, c % L2_PE, W2[r][c]);
    for (int r = 0; r < H; r++) for (int i = 0; i < NTC; i++) begin
      cfg_write(CFG_THRESH, 0, r / L1_PE, r % L1_PE, i, T0[r][i]);
      cfg_write(CFG_THRESH, 1, r / L2_PE, r % L2_PE, i, T1[r][i]);
    end
    for (int r = 0; r < OUT_DIM; r++) for (int i = 0; i < NTO; i++)
      cfg_write(CFG_THRESH, 2, r / L3_PE, r % L3_PE, i, T2[r][i]);
    for (int k = 0; k < (1 << B_OUT); k++) cfg_write(CFG_TANH, 3, 0, 0, k, lut[k]);
  endtask

  // Integer reference of the whole network for state v.
  task automatic reference(input int v);
    int h0 [H];
    int h1 [H];
    int tc [];
    int to [];
    tc = new[NTC];
    to = new[NTO];
    for (int r = 0; r < H; r++) begin
      int acc = 0;
      for (int c = 0; c < IN_DIM; c++) acc += W0[r][c] * X[v][c];
      for (int i = 0; i < NTC; i++) tc[i] = T0[r][i];
      h0[r] = requant(acc, tc, NTC);
      if (acc < 0) n_relu_zero++;
      if (h0[r] == NTC) n_hidden_sat++;
    end
    for (int r = 0; r < H; r++) begin
      int acc = 0;
      for (int c = 0; c < H; c++) acc += W1[r][c] * h0[c];
      for (int i = 0; i < NTC; i++) tc[i] = T1[r][i];
      h1[r] = requant(acc, tc, NTC);
      if (acc < 0) n_relu_zero++;
      if (h1[r] == NTC) n_hidden_sat++;
    end
    for (int r = 0; r < OUT_DIM; r++) begin
      int acc = 0;
      for (int c = 0; c < H; c++) acc += W2[r][c] * h1[c];
      for (int i = 0; i < NTO; i++) to[i] = T2[r][i];
      expc[v][r] = requant(acc, to, NTO) - (1 << (B_OUT - 1));
      if (expc[v][r] == NTO - (1 << (B_OUT - 1)) || expc[v][r] == -(1 << (B_OUT - 1))) n_out_sat++;
    end
  endtask

  // Handshake monitor.
  always @(posedge clk) begin
    if (rst_n && !done) begin
      if (m_valid && !m_ready) n_out_stall++;
      if (s_valid && !s_ready) n_in_stall++;
      if (s_valid && s_ready) begin
        int v;
        v = n_in_beats / SF1;
        if (n_in_beats % SF1 == 0) begin
          first_in_cyc[v] = cyc;
          if (n_out_beats < v * NF3) n_overlap++;
        end
        n_in_beats++;
      end
      if (m_valid && m_ready) begin
        int v, f;
        v = n_out_beats / NF3;
        f = n_out_beats % NF3;
        if (f == 0) first_out_cyc[v] = cyc;
        for (int p = 0; p < L3_PE; p++) begin
          int e, got;
          e   = expc[v][f * L3_PE + p];
          got = int'($signed(m_code[p]));
          check(got == e, $sformatf("state %0d action %0d: code %0d, expected %0d", v, f * L3_PE + p, got, e));
          check(int'($signed(m_act[p])) == lut[got + (1 << (B_OUT - 1))],
                $sformatf("state %0d action %0d: value", v, f * L3_PE + p));
        end
        n_out_beats++;
      end
    end
  end

  initial begin
    rst_n = 0; cfg = '0; s_valid = 0; s_data = '0; m_ready = 1; done = 0;
    checks = 0; failures = 0;
    n_out_stall = 0; n_in_stall = 0; n_overlap = 0;
    n_relu_zero = 0; n_hidden_sat = 0; n_out_sat = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < NVEC; v++)
      for (int c = 0; c < IN_DIM; c++) X[v][c] = int'($urandom_range(0, (1 << B_IN) - 1)) - (1 << (B_IN - 1));
    build_policy();
    load_policy();
    for (int v = 0; v < NVEC; v++) reference(v);
    @(posedge clk); #1;
    fork
      for (int v = 0; v < NVEC; v++)
        for (int s = 0; s < SF1; s++) begin
          int n;
          if (STALLS) while ($urandom_range(0, 3) == 0) begin
            s_valid = 0;
            @(posedge clk); #1;
          end
          s_valid = 1;
          for (int i = 0; i < L1_SIMD; i++) s_data[i] = B_IN'(X[v][s * L1_SIMD + i]);
          n = n_in_beats;
          while (n_in_beats == n) begin
            @(posedge clk); #1;
          end
          s_valid = 0;
        end
      while (n_out_beats < NVEC * NF3) begin
        if (STALLS) m_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk); #1;
      end
    join
    m_ready = 1;
    if (!STALLS) begin
      if (EXP_LAT >= 0)
        check(first_out_cyc[0] - first_in_cyc[0] == EXP_LAT,
              $sformatf("latency %0d cycles, expected %0d", first_out_cyc[0] - first_in_cyc[0], EXP_LAT));
      if (NVEC >= 8)
        check(first_out_cyc[NVEC - 1] - first_out_cyc[NVEC - 2] == II,
              $sformatf("interval %0d cycles, expected %0d", first_out_cyc[NVEC - 1] - first_out_cyc[NVEC - 2], II));
      $display("%m: latency %0d cycles, last interval %0d cycles (II %0d)",
               first_out_cyc[0] - first_in_cyc[0], first_out_cyc[NVEC - 1] - first_out_cyc[NVEC - 2], II);
    end
    done = 1;
  end
endmodule
