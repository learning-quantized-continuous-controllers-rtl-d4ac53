// tb_thresholding: self-checking test of thresholding.
// Two instances: a 3-bit unsigned requantizer (7 thresholds, hidden-layer
// style) and a 4-bit signed one (15 thresholds, output-layer style), each with
// 3 lanes and 2 folds. Ascending random thresholds are loaded, then random
// accumulators, including values equal to a threshold and values outside the
// threshold range, are compared with a count computed in the testbench.
module tb_thresholding;
  localparam int PE = 3, NF = 2, AW = 10;
  logic clk = 0;
  int checks = 0, failures = 0;

  // Unsigned 3-bit instance
  logic       u_we;  logic u_wnf; logic [1:0] u_wpe; logic [2:0] u_widx;
  logic signed [AW:0] u_wd;
  logic       nf;
  logic [PE-1:0][AW-1:0] acc;
  logic [PE-1:0][2:0] u_q;
  // Signed 4-bit instance
  logic       s_we;  logic [3:0] s_widx;
  logic [PE-1:0][3:0] s_q;

  int thr_u [NF][PE][7];
  int thr_s [NF][PE][15];

  thresholding #(.PE(PE), .NF(NF), .ACC_W(AW), .B_OUT(3), .OUT_SIGNED(1'b0)) dut_u (
    .clk, .wr_en(u_we), .wr_nf(u_wnf), .wr_pe(u_wpe), .wr_idx(u_widx), .wr_data(u_wd),
    .nf, .acc, .q(u_q));
  thresholding #(.PE(PE), .NF(NF), .ACC_W(AW), .B_OUT(4), .OUT_SIGNED(1'b1)) dut_s (
    .clk, .wr_en(s_we), .wr_nf(u_wnf), .wr_pe(u_wpe), .wr_idx(s_widx), .wr_data(u_wd),
    .nf, .acc, .q(s_q));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_ge(input int a, input int t[], input int n);
    int c = 0;
    for (int i = 0; i < n; i++) if (a >= t[i]) c++;
    return c;
  endfunction

  initial begin
    int sat_hi = 0, sat_lo = 0;
    u_we = 0; s_we = 0; u_wnf = 0; u_wpe = 0; u_widx = 0; s_widx = 0; u_wd = 0; nf = 0; acc = '0;
    @(posedge clk); #1;
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < PE; p++) begin
        int v;
        v = $urandom_range(0, 30);
        for (int i = 0; i < 7; i++) begin
          v += $urandom_range(1, 40);
          thr_u[f][p][i] = v;
          u_we = 1; u_wnf = f[0]; u_wpe = 2'(p); u_widx = 3'(i); u_wd = (AW+1)'(v);
          @(posedge clk); #1;
        end
        u_we = 0;
        v = -$urandom_range(150, 250);
        for (int i = 0; i < 15; i++) begin
          v += $urandom_range(1, 30);
          thr_s[f][p][i] = v;
          s_we = 1; u_wnf = f[0]; u_wpe = 2'(p); s_widx = 4'(i); u_wd = (AW+1)'(v);
          @(posedge clk); #1;
        end
        s_we = 0;
      end
    for (int k = 0; k < 2000; k++) begin
      int a [PE];
      nf = 1'($urandom);
      for (int p = 0; p < PE; p++) begin
        if (k % 4 == 0) a[p] = thr_u[nf][p][$urandom_range(0, 6)];       // exactly on a threshold
        else if (k % 4 == 1) a[p] = thr_s[nf][p][$urandom_range(0, 14)];
        else a[p] = $urandom_range(0, 1000) - 500;
        acc[p] = AW'(a[p]);
      end
      #1;
      for (int p = 0; p < PE; p++) begin
        int eu, es;
        eu = count_ge(a[p], thr_u[nf][p], 7);
        es = count_ge(a[p], thr_s[nf][p], 15) - 8;
        if (es == 7) sat_hi++;
        if (es == -8) sat_lo++;
        checks += 2;
        if (int'(u_q[p]) != eu) begin
          failures++;
          $display("FAIL unsigned acc=%0d got %0d exp %0d", a[p], u_q[p], eu);
        end
        if (int'($signed(s_q[p])) != es) begin
          failures++;
          $display("FAIL signed acc=%0d got %0d exp %0d", a[p], $signed(s_q[p]), es);
        end
      end
      @(posedge clk);
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("saturated high=%0d low=%0d", sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
