// tb_weight_mem: self-checking test of weight_mem.
// Writes every weight of a 6-tile, 3 x 4 memory with random 3-bit values one
// at a time, then reads every tile and compares each lane with a model array.
// Overwrites a random subset and reads everything again, to show that a write
// touches exactly one lane.
module tb_weight_mem;
  localparam int DEPTH = 6, PE = 3, SIMD = 4, WB = 3;
  logic clk = 0;
  logic wr_en;
  logic [2:0] wr_addr, rd_addr;
  logic [1:0] wr_pe, wr_simd;
  logic [WB-1:0] wr_data;
  logic [PE-1:0][SIMD-1:0][WB-1:0] rd_data;
  logic [WB-1:0] model [DEPTH][PE][SIMD];
  int checks = 0, failures = 0;

  weight_mem #(.DEPTH(DEPTH), .PE(PE), .SIMD(SIMD), .W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int a, input int p, input int s, input logic [WB-1:0] v);
    wr_en = 1; wr_addr = 3'(a); wr_pe = 2'(p); wr_simd = 2'(s); wr_data = v;
    @(posedge clk); #1;
    wr_en = 0;
    model[a][p][s] = v;
  endtask

  task automatic read_all();
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = 3'(a);
      #1;
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) begin
          checks++;
          if (rd_data[p][s] !== model[a][p][s]) begin
            failures++;
            $display("FAIL tile %0d lane %0d,%0d: %0d vs %0d", a, p, s, rd_data[p][s], model[a][p][s]);
          end
        end
    end
  endtask

  initial begin
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_pe = 0; wr_simd = 0; wr_data = 0;
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++)
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) write(a, p, s, WB'($urandom));
    read_all();
    for (int k = 0; k < 20; k++)
      write($urandom_range(0, DEPTH - 1), $urandom_range(0, PE - 1), $urandom_range(0, SIMD - 1), WB'($urandom));
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
