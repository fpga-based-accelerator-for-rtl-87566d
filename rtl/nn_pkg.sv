// nn_pkg: word widths shared by every stage of the layer-pipelined CNN
// accelerator.
//
// Activations and weights are 8-bit signed fixed-point numbers. A product is
// 16 bits. Partial sums are 32 bits wide, which is the width the accelerator
// uses for 8-bit operands to avoid overflow. Fixed-point formats may differ
// per channel: a product is aligned by a left shift of up to 31 bits before
// it is summed, and a finished sum is scaled back to 8 bits by a right shift.
// Both shift amounts are 5-bit fields. The 8/32-bit widths and the 5-bit
// shift fields follow the published design; the 16-bit product width follows
// from the operands.
package nn_pkg;
  localparam int unsigned ACT_W   = 8;   // activation word
  localparam int unsigned WGT_W   = 8;   // weight word
  localparam int unsigned PROD_W  = ACT_W + WGT_W;
  localparam int unsigned PSUM_W  = 32;  // partial sum / accumulator
  localparam int unsigned SHIFT_W = 5;   // left / right shift amount

  typedef logic signed [ACT_W-1:0]   act_t;
  typedef logic signed [WGT_W-1:0]   wgt_t;
  typedef logic signed [PROD_W-1:0]  prod_t;
  typedef logic signed [PSUM_W-1:0]  psum_t;
  typedef logic        [SHIFT_W-1:0] shamt_t;

  // Scale a finished 32-bit sum down to an 8-bit activation: ReLU, arithmetic
  // right shift, then saturation to the signed 8-bit range.
  function automatic act_t requant(input psum_t sum, input shamt_t rs);
    psum_t r;
    r = (sum < 0) ? '0 : sum;
    r = r >>> rs;
    if (r > psum_t'(127)) return act_t'(127);
    return act_t'(r);
  endfunction
endpackage
