// tb_mvau: self-checking test of one folded fully-connected layer.
// The layer has MW=12 signed 4-bit inputs, MH=8 outputs, 3-bit signed weights
// and 3-bit unsigned outputs, folded onto PE=2 x SIMD=4 (SF=3 input beats,
// NF=4 output folds, 12 cycles per vector). Random weights and ascending
// random thresholds are loaded through the configuration bus; the expected
// outputs are computed here from the integer matrix-vector product and the
// threshold count. Phase 1 streams vectors back to back with the output always
// ready and checks the timing: first output beat SF+1 cycles after the first
// input beat, output folds SF cycles apart, one vector every SF*NF cycles.
// Phase 2 adds random input gaps and output back-pressure.
module tb_mvau;
  import qpolicy_pkg::*;
  localparam int MW = 12, MH = 8, SIMD = 4, PE = 2, BI = 4, BW = 3, BO = 3;
  localparam int SF = MW / SIMD, NF = MH / PE, NT = (1 << BO) - 1;
  localparam int NVEC1 = 20, NVEC2 = 60;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD-1:0][BI-1:0] in_data;
  logic [PE-1:0][BO-1:0]   out_data;
  int checks = 0, failures = 0;

  int W [MH][MW];
  int T [MH][NT];
  int xq [$];          // flattened input vectors, in order
  int in_first_cyc [$]; // cycle of the first input beat of each vector
  int cyc = 0;
  int nout = 0;        // output beats seen
  int last_out_cyc = 0;
  int stalls = 0, relu_zero = 0, sat = 0;
  bit phase1 = 1;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .B_IN(BI), .IN_SIGNED(1'b1),
         .B_W(BW), .B_OUT(BO), .OUT_SIGNED(1'b0), .LAYER(2'd1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  task automatic cfg_write(input cfg_target_e tg, input logic [1:0] layer, input int a, input int b,
                           input int c, input int d);
    cfg = '{valid: 1'b1, target: tg, layer: layer, a: 16'(a), b: 16'(b), c: 16'(c), data: d};
    @(posedge clk); #1;
    cfg.valid = 1'b0;
  endtask

  function automatic int expected(input int v, input int r);
    int acc = 0, q = 0;
    for (int c = 0; c < MW; c++) acc += W[r][c] * xq[v * MW + c];
    for (int i = 0; i < NT; i++) if (acc >= T[r][i]) q++;
    return q;
  endfunction

  // Output monitor: compare every beat, check timing in phase 1.
  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid && out_ready) begin
      int v, f;
      v = nout / NF;
      f = nout % NF;
      for (int p = 0; p < PE; p++) begin
        int e;
        e = expected(v, f * PE + p);
        if (e == 0) relu_zero++;
        if (e == NT) sat++;
        check(int'(out_data[p]) == e, $sformatf("vector %0d row %0d: got %0d exp %0d", v, f * PE + p, out_data[p], e));
      end
      if (phase1 && v < NVEC1) begin
        if (f == 0) check(cyc == in_first_cyc[v] + SF + 1, $sformatf("latency of vector %0d", v));
        else        check(cyc == last_out_cyc + SF, "fold spacing");
        if (f == 0 && v > 0) check(in_first_cyc[v] - in_first_cyc[v - 1] == SF * NF, "initiation interval");
      end
      last_out_cyc = cyc;
      nout++;
    end
  end

  task automatic send_vector(input bit gaps);
    int base;
    base = xq.size();
    for (int c = 0; c < MW; c++) xq.push_back(int'($urandom_range(0, (1 << BI) - 1)) - (1 << (BI - 1)));
    for (int s = 0; s < SF; s++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(posedge clk); #1;
      end
      in_valid = 1;
      for (int i = 0; i < SIMD; i++) in_data[i] = BI'(xq[base + s * SIMD + i]);
      while (1) begin
        #0;
        if (in_ready) break;
        @(posedge clk); #1;
      end
      if (s == 0) in_first_cyc.push_back(cyc);
      @(posedge clk); #1;
    end
    in_valid = 0;
  endtask

  initial begin
    cfg = '0; in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < MH; r++) begin
      int t;
      for (int c = 0; c < MW; c++) begin
        W[r][c] = int'($urandom_range(0, 7)) - 4;
        cfg_write(CFG_WEIGHT, 2'd1, (r / PE) * SF + c / SIMD, r % PE, c % SIMD, W[r][c]);
      end
      t = int'($urandom_range(0, 10));
      for (int i = 0; i < NT; i++) begin
        t += int'($urandom_range(2, 14));
        T[r][i] = t;
        cfg_write(CFG_THRESH, 2'd1, r / PE, r % PE, i, t);
      end
    end
    // A write to another layer must not disturb this one.
    cfg_write(CFG_WEIGHT, 2'd0, 0, 0, 0, 1);
    cfg_write(CFG_THRESH, 2'd2, 0, 0, 0, -100);
    // Phase 1: back to back, no stalls.
    for (int v = 0; v < NVEC1; v++) send_vector(1'b0);
    while (nout < NVEC1 * NF) @(posedge clk);
    #1 phase1 = 0;
    // Phase 2: random gaps and back-pressure.
    fork
      begin
        for (int v = 0; v < NVEC2; v++) send_vector(1'b1);
      end
      begin
        while (nout < (NVEC1 + NVEC2) * NF) begin
          out_ready = ($urandom_range(0, 2) != 0);
          @(posedge clk); #1;
        end
      end
    join
    check(stalls > 0, "back-pressure exercised");
    check(relu_zero > 0, "zero outputs exercised");
    check(sat > 0, "saturated outputs exercised");
    $display("beats=%0d stalls=%0d relu_zero=%0d saturated=%0d", nout, stalls, relu_zero, sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
