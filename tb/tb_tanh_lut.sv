// tb_tanh_lut: self-checking test of tanh_lut.
// Loads the table for an output scale of 3.0 (entry k = round(tanh(3k/128) *
// 32767)), then streams random 8-bit codes on 4 lanes with random gaps and
// back-pressure. Each action is compared with tanh computed here for the same
// code; the code itself must come out unchanged. The extreme codes -128 and
// 127 are always included. Checks the one-cycle latency when the output is free.
module tb_tanh_lut;
  import qpolicy_pkg::*;
  localparam int L = 4;
  localparam real SCALE = 3.0;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [L-1:0][7:0]  in_data, out_code;
  logic [L-1:0][15:0] out_act;
  int checks = 0, failures = 0;
  logic [L-1:0][7:0] sent [$];
  int cyc = 0, last_in_cyc = -10, nbeats = 0, stalls = 0;

  tanh_lut #(.LANES(L), .B_CODE(8), .B_ACT(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q15(input int k);
    real v;
    int r;
    v = $tanh(real'(k) * SCALE / 128.0) * 32767.0;
    r = $rtoi(v + ((v >= 0) ? 0.5 : -0.5));
    return r;
  endfunction

  int accepted = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      sent.push_back(in_data);
      accepted++;
    end
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid && out_ready) begin
      logic [L-1:0][7:0] c;
      c = sent.pop_front();
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (out_code[l] != c[l]) failures++;
        if (int'($signed(out_act[l])) != q15(int'($signed(c[l])))) begin
          failures++;
          $display("FAIL code %0d: got %0d exp %0d", $signed(c[l]), $signed(out_act[l]), q15(int'($signed(c[l]))));
        end
      end
      nbeats++;
    end
  end

  initial begin
    cfg = '0; in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = -128; k < 128; k++) begin
      cfg = '{valid: 1'b1, target: CFG_TANH, layer: 2'd3, a: 16'd0, b: 16'd0, c: 16'(k + 128), data: q15(k)};
      @(posedge clk); #1;
    end
    cfg.valid = 0;
    // Latency: one beat into an idle unit.
    in_valid = 1; in_data = {8'h80, 8'h7f, 8'h00, 8'hff};
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!out_valid) failures++;
    @(posedge clk); #1;
    fork
      for (int b = 0; b < 500; b++) begin
        in_valid = ($urandom_range(0, 3) != 0);
        for (int l = 0; l < L; l++) in_data[l] = 8'($urandom);
        if (in_valid) begin
          int n;
          n = accepted;
          while (accepted == n) begin
            @(posedge clk); #1;
          end
        end else begin
          @(posedge clk); #1;
        end
      end
      for (int b = 0; b < 520; b++) begin
        out_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk); #1;
      end
    join
    in_valid = 0; out_ready = 1;
    repeat (4) @(posedge clk);
    checks += 2;
    if (sent.size() != 0) failures++;
    if (stalls == 0) failures++;
    $display("beats=%0d stalls=%0d", nbeats, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
