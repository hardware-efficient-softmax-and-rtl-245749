// ln_stats: mean and variance of a LayerNorm vector in one pass.
//
// Two accumulators run while the vector streams in, one element per cycle: ACC1
// sums x, ACC2 sums x*x. The first element of a vector (first_i = 1) loads the
// accumulators instead of adding, so no clear cycle is needed. From the registered
// sums the outputs are formed combinationally, as E[x] = sum * (1/C) and
// E[x^2] = sumsq * (1/C), var = E[x^2] - E[x]^2 (the mean is squared with 32
// fractional bits so that the difference keeps its precision), with the length C entering
// as its reciprocal inv_len_i (unsigned, LN_RL = 48 fractional bits). mean_o is
// signed with LN_MF = 16 fractional bits, var_o unsigned with LN_VF = 16 fractional
// bits. They are valid from the clock after the last element and stay valid until
// the next vector starts. A variance that rounds to zero or below is reported as the
// smallest positive value (one LSB), which keeps the Newton step's divisor non-zero.
//
// The two accumulator paths, the multiplications by 1/C, the squaring of the mean and
// the final subtraction follow the architecture. The fixed-point formats, the 1/C
// input and the variance floor are this design's choices.
module ln_stats
  import nl_pkg::*;
#(
  parameter int unsigned MAX_LEN = 2048,
  localparam int unsigned AW    = $clog2(MAX_LEN),
  localparam int unsigned SUM_W = LN_X_W + AW + 1,
  localparam int unsigned SQ_W  = 2*LN_X_W + AW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       valid_i,
  input  logic                       first_i,
  input  logic signed [LN_X_W-1:0]   x_i,
  input  logic [LN_RL:0]             inv_len_i,
  output logic signed [LN_MEAN_W-1:0] mean_o,
  output logic [LN_VAR_W-1:0]        var_o
);

  localparam int unsigned MW = SUM_W + LN_RL + 2;
  localparam int unsigned EW = SQ_W + LN_RL + 1;

  logic signed [SUM_W-1:0]   sum_q;
  logic [SQ_W-1:0]           sq_q;
  logic signed [2*LN_X_W-1:0] xx;
  logic signed [MW-1:0]      mean_full;
  logic [EW-1:0]             ex2_full;
  localparam int unsigned HF = 32;                 // fraction bits of the mean that is squared
  localparam int unsigned HW = LN_X_W + HF + 1;
  logic signed [HW-1:0]      mean_hi;
  logic signed [2*HW-1:0]    msq_full;
  logic signed [EW:0]        var_full;

  assign xx = x_i * x_i;

  // ACC1 (sum x) and ACC2 (sum x^2)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q <= '0;
      sq_q  <= '0;
    end else if (valid_i) begin
      sum_q <= first_i ? SUM_W'(x_i) : sum_q + SUM_W'(x_i);
      sq_q  <= first_i ? SQ_W'($unsigned(xx)) : sq_q + SQ_W'($unsigned(xx));
    end
  end

  always_comb begin
    mean_full = MW'(sum_q) * $signed(MW'({1'b0, inv_len_i}));
    mean_o    = LN_MEAN_W'(mean_full >>> (LN_RL - LN_MF));
    ex2_full  = EW'(sq_q) * EW'(inv_len_i);
    mean_hi   = HW'(mean_full >>> (LN_RL - HF));
    msq_full  = (2*HW)'(mean_hi) * (2*HW)'(mean_hi);
    var_full  = $signed({1'b0, ex2_full >> (LN_RL - LN_VF)})
              - $signed((EW+1)'(msq_full >>> (2*HF - LN_VF)));
    if (var_full < (EW+1)'(1))                       var_o = LN_VAR_W'(1);
    else if (var_full > (EW+1)'((1 << LN_VAR_W) - 1)) var_o = '1;
    else                                              var_o = LN_VAR_W'(var_full);
  end

endmodule
