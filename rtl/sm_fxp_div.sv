// sm_fxp_div: fixed-point divider of the Softmax (FxP_Div), which turns an
// unnormalised exponential y into a probability p = y * D_max / Z without a divider
// or a multiplier.
//
// Restoring shift-subtract division, unrolled into DIV_STAGES stages: the remainder
// starts at D_max = 2^SM_P_FRAC and stage k (k = 1..DIV_STAGES) compares it with the
// sum Z shifted right by k; when the remainder is not smaller, quotient bit q_k = 1
// and Z >> k is subtracted (compare, subtract and multiplexer of each stage). The
// quotient bits are the binary digits of the scaling factor S = D_max / Z, with q_k
// worth 2^-k. Each stage also adds y >> k to the output when q_k is set, so the
// output is y * S formed by shift-and-add. All shifts are kept exact by carrying
// DIV_STAGES extra fraction bits; the sum is rounded to the nearest output LSB.
// Combinational: Z is constant for a whole vector, y changes every cycle.
//
// Requires Z >= 2^EXP_F, which holds because the largest element of every vector
// gives y = 1.0; then S <= 2^(SM_P_FRAC - EXP_F) < 1 and stage 0 is never needed.
//
// The stage structure (shifted Z, compare with D_max, subtract, multiplexer, quotient
// bit selecting a shifted y, final adder) follows the architecture. The number of
// stages, the extra fraction bits and the rounding are this design's choices.
module sm_fxp_div
  import nl_pkg::*;
#(
  parameter int unsigned Z_W        = EXP_W + 11,
  parameter int unsigned DIV_STAGES = 24
) (
  input  logic [Z_W-1:0]     z_i,
  input  exp_t               y_i,
  output logic [SM_P_W-1:0]  p_o,
  output logic [DIV_STAGES-1:0] q_o  // D_max / Z with DIV_STAGES fraction bits
);

  localparam int unsigned W = Z_W + DIV_STAGES + 2;

  logic [W-1:0] rem_q, div_k, sum, rounded;

  always_comb begin
    rem_q = W'(1) << (SM_P_FRAC + DIV_STAGES);   // D_max, scaled by 2^DIV_STAGES
    sum   = '0;
    q_o   = '0;
    for (int k = 1; k <= DIV_STAGES; k++) begin
      div_k = W'(z_i) << (DIV_STAGES - k);          // Z >> k, scaled
      q_o[DIV_STAGES-k] = (rem_q >= div_k);         // Comp: digit q_k
      if (q_o[DIV_STAGES-k]) begin
        rem_q = rem_q - div_k;                      // subtract + MUX
        sum   = sum + (W'(y_i) << (DIV_STAGES - k)); // y >> k, selected by q_k
      end
    end
    rounded = (sum + (W'(1) << (DIV_STAGES - 1))) >> DIV_STAGES;
    p_o = (rounded > W'((1 << SM_P_W) - 1)) ? '1 : SM_P_W'(rounded);
  end

endmodule
