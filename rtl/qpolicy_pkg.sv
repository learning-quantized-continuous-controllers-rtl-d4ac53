// qpolicy_pkg: types and constants shared by the integer policy accelerator.
//
// The accelerator is programmed through one configuration bus (cfg_t). A
// write carries a target (weight, threshold or tanh table entry), the layer it
// belongs to, three index fields whose meaning depends on the target, and a
// 32-bit signed value that the receiving block truncates to its own width.
//   CFG_WEIGHT : a = weight tile (nf*SF + sf), b = PE lane, c = SIMD lane
//   CFG_THRESH : a = output fold nf,           b = PE lane, c = threshold index
//   CFG_TANH   : c = table index (code + 2^(B_CODE-1)), layer ignored
// The bus, its layout and run-time loading are this design's own choice; the
// paper only says that weights and thresholds are stored on chip.
package qpolicy_pkg;

  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,
    CFG_THRESH = 2'd1,
    CFG_TANH   = 2'd2
  } cfg_target_e;

  typedef struct packed {
    logic               valid;
    cfg_target_e        target;
    logic [1:0]         layer;   // 0, 1, 2 = first, second, output layer
    logic [15:0]        a;
    logic [15:0]        b;
    logic [15:0]        c;
    logic signed [31:0] data;
  } cfg_t;

  // Largest magnitude of a b-bit code.
  function automatic longint code_max(input int bits, input bit is_signed);
    return is_signed ? (longint'(1) <<< (bits - 1)) : ((longint'(1) <<< bits) - 1);
  endfunction

  // Accumulator width that holds any dot product of MW inputs and MW signed
  // weights without overflow, sign bit included.
  function automatic int acc_width(input int mw, input int b_in, input bit in_signed,
                                   input int b_w);
    longint bound;
    int     w;
    bound = longint'(mw) * code_max(b_in, in_signed) * code_max(b_w, 1'b1);
    w = 1;
    while ((longint'(1) <<< w) <= bound) w++;
    return w + 1;
  endfunction

  // Index width that is at least one bit.
  function automatic int idx_w(input int n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
