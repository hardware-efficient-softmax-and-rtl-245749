// sm_exp_unit: max subtraction and the two-table exponential of the Softmax.
//
// For a logit x and the vector maximum m (both signed INT8 with 3 fractional bits)
// it forms delta = m - x >= 0, then splits it with the radix R = 8:
//   frac = delta >> 3          (index of LUT_init, which holds e^-frac)
//   rem  = delta - (frac << 3) (index of LUT_rem,  which holds e^-(rem/8))
// so that e^-(delta/8) = LUT_init[frac] * LUT_rem[rem]. The product is formed without
// a multiplier: for every set bit j of the LUT_init word, a copy of the LUT_rem word
// shifted left by j is added, and the sum is shifted right by EXP_F. A frac of 7 or more lies
// beyond LUT_init and yields y = 0 (e^-7 < 0.001). The output y is unsigned with
// EXP_F = 12 fractional bits (4096 = 1.0). Purely combinational.
//
// The split, R = 8, the table sizes (7 and 8 entries) and the shift-and-add product
// follow the architecture. The table word width, the input scaling (1 LSB = 1/R) and
// the cut-off for frac >= 7 are this design's choices.
module sm_exp_unit
  import nl_pkg::*;
(
  input  logic signed [SM_X_W-1:0] x_i,
  input  logic signed [SM_X_W-1:0] max_i,
  output exp_t                     y_o
);

  logic [SM_X_W:0]            delta;   // m - x, 0..255
  logic [SM_X_W-SM_X_FRAC:0]  frac;
  logic [SM_X_W:0]            rem_full;  // < R by construction
  logic [SM_X_FRAC-1:0]       rem;
  exp_t                       a, b;
  logic [2*EXP_W-1:0]         acc;

  always_comb begin
    // the difference of two INT8 values fits in 9 bits
    delta    = (SM_X_W+1)'($signed({max_i[SM_X_W-1], max_i}) - $signed({x_i[SM_X_W-1], x_i}));
    frac     = (SM_X_W-SM_X_FRAC+1)'(delta >> SM_X_FRAC);
    rem_full = delta - ((SM_X_W+1)'(frac) << SM_X_FRAC);
    rem      = rem_full[SM_X_FRAC-1:0];
    a        = (32'(frac) < LUT_INIT_N) ? lut_init(frac[2:0]) : '0;
    b        = lut_rem(rem);
    // shift-and-add product a * b / 2^EXP_F
    acc = '0;
    for (int j = 0; j < EXP_W; j++) begin
      if (a[j]) acc = acc + ((2*EXP_W)'(b) << j);
    end
    y_o = exp_t'(acc >> EXP_F);
  end

endmodule
