// tb_stream_fifo: self-checking test of stream_fifo.
// Random valid and ready patterns push numbered words through a 4-deep FIFO.
// A queue model checks order and contents of every word read, that the FIFO
// reports full exactly when it holds DEPTH words, and that it accepts a write
// when full if a read happens in the same cycle.
module tb_stream_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  logic [W-1:0] next_word;
  int full_seen = 0, full_pass = 0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0; next_word = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // Phases: filling (rare reads), draining (rare writes), random.
      int ph;
      ph = (cyc / 300) % 3;
      in_valid  = (ph == 1) ? ($urandom_range(0, 9) < 2) : ($urandom_range(0, 9) < 7);
      out_ready = (ph == 0) ? ($urandom_range(0, 9) < 2) : ($urandom_range(0, 9) < 6);
      in_data   = next_word;
      #1;
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() < D || out_ready), "in_ready");
      if (model.size() == D) begin
        full_seen++;
        if (in_valid && out_ready) full_pass++;
      end
      if (out_valid && out_ready) begin
        check(model.size() != 0 && out_data == model[0], "data order");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) begin
        model.push_back(in_data);
        next_word++;
      end
      @(posedge clk);
      #1;
    end
    check(full_seen > 0, "full state reached");
    check(full_pass > 0, "write while full with read");
    $display("words=%0d full_cycles=%0d full_passthrough=%0d", next_word - 1, full_seen, full_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
