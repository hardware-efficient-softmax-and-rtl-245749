// corn_init_est: initial guess of the reciprocal square root for the Newton unit
// (the Init-Estimator of CoRN-LN).
//
// A leading-one detector finds the position L of the most significant set bit of the
// variance (unsigned, LN_VF = 16 fractional bits), so var lies in [2^(L-16), 2^(L-15)).
// The guess is the power of two 1 << ((2*LN_YF + LN_VF - L) >> 1), i.e. about
// 2^-(L-16)/2 in a format with LN_YF = 16 fractional bits: an adder forms the exponent,
// a right shift halves it and a left shift of a single 1 bit builds the result. The
// guess is within a factor sqrt(2) of 1/sqrt(var), so two Newton steps reach about
// 0.2 %. Combinational.
//
// The LOD, adder, halving shift and shifted 1'b1 follow the architecture; the
// constant added and the number formats are this design's choices.
module corn_init_est
  import nl_pkg::*;
(
  input  logic [LN_VAR_W-1:0] var_i,
  output logic [LN_R_W-1:0]   r0_o,
  output logic [4:0]          lod_o
);

  logic [6:0] e;

  // leading-one detector
  always_comb begin
    lod_o = '0;
    for (int i = 0; i < LN_VAR_W; i++) begin
      if (var_i[i]) lod_o = 5'(i);
    end
  end

  always_comb begin
    e    = 7'(2*LN_YF + LN_VF) - 7'(lod_o);   // adder
    e    = e >> 1;                            // halve the exponent
    r0_o = LN_R_W'(1) << e;                   // shift a single 1 into place
  end

endmodule
