// corn_ln: reciprocal Newton unit of the LayerNorm (CoRN-LN), giving r ~ 1/sqrt(var).
//
// Each step applies r <- (r + S_max / (r * var)) / 2, the Newton (Heron) iteration
// whose fixed point is r = 1/sqrt(var). A multiplexer feeds the first step with the
// power-of-two guess from corn_init_est and later steps with the register D; the
// loop multiplies r by var, divides the constant S_max by that product, adds r and
// halves the sum with a right shift before D. With LN_YF = 16 fractional bits in r
// and LN_VF = 16 in var, S_max = 2^(2*LN_YF + LN_VF) = 2^48.
//
// Timing: start_i is a one-cycle pulse while var_i is valid (var_i must stay stable
// for the two following clocks). The first step is taken at the first clock edge,
// the second at the next one; done_o is high in the cycle after the second step,
// with the result on r_o, which holds until the next start.
//
// The iteration of Eq. 5, the S_max constant, the init multiplexer, the register D
// and the two-cycle estimation follow the architecture; the fixed-point formats and
// the use of a combinational divider for the S_max division are this design's own.
module corn_ln
  import nl_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_i,
  input  logic [LN_VAR_W-1:0] var_i,
  output logic [LN_R_W-1:0]   r_o,
  output logic                done_o
);

  localparam int unsigned PW = LN_R_W + LN_VAR_W;
  localparam logic [PW-1:0] S_MAX = PW'(1) << (2*LN_YF + LN_VF);

  logic [LN_R_W-1:0] r0, x, nxt;
  logic [4:0]        lod_unused;
  logic [PW-1:0]     prod, quo;
  logic [PW:0]       sum;
  logic              step2;

  corn_init_est u_init (.var_i(var_i), .r0_o(r0), .lod_o(lod_unused));

  always_comb begin
    x    = start_i ? r0 : r_o;                      // MUX
    prod = PW'(x) * PW'(var_i);                     // r * var
    quo  = (prod == '0) ? S_MAX : S_MAX / prod;     // S_max / (r * var)
    sum  = (PW+1)'(x) + (PW+1)'(quo);
    nxt  = LN_R_W'(sum >> 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_o    <= '0;
      step2  <= 1'b0;
      done_o <= 1'b0;
    end else begin
      step2  <= start_i;
      done_o <= step2;
      if (start_i || step2) r_o <= nxt;            // register D
    end
  end

endmodule
