// weight_mem: on-chip weight store of one fully-connected layer.
//
// A layer of MH outputs and MW inputs folded onto PE x SIMD multipliers needs
// NF*SF = (MH/PE)*(MW/SIMD) weight tiles, one per cycle of a matrix-vector
// product. This memory holds DEPTH such tiles; a read returns a whole tile of
// PE*SIMD signed W_BITS-bit weights combinationally (distributed-RAM style) so
// the MAC array uses it in the same cycle. Weight (row r, column c) lives in
// tile (r/PE)*SF + c/SIMD, lane [r%PE][c%SIMD]. Writes store one weight per
// clock, which lets a host load a trained policy at run time.
// Keeping weights on chip follows the paper; the tile layout, the run-time
// write port and the combinational read are this design's choices.
module weight_mem #(
  parameter int DEPTH  = 4,
  parameter int PE     = 2,
  parameter int SIMD   = 2,
  parameter int W_BITS = 2,
  localparam int AW = qpolicy_pkg::idx_w(DEPTH),
  localparam int PW = qpolicy_pkg::idx_w(PE),
  localparam int SW = qpolicy_pkg::idx_w(SIMD)
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [AW-1:0]                       wr_addr,
  input  logic [PW-1:0]                       wr_pe,
  input  logic [SW-1:0]                       wr_simd,
  input  logic [W_BITS-1:0]                   wr_data,
  input  logic [AW-1:0]                       rd_addr,
  output logic [PE-1:0][SIMD-1:0][W_BITS-1:0] rd_data
);
  logic [PE-1:0][SIMD-1:0][W_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_pe][wr_simd] <= wr_data;
  end

  assign rd_data = mem[rd_addr];
endmodule
