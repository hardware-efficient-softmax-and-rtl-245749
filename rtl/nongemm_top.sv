// nongemm_top: the two normalisation-guaranteed non-GEMM units of a Transformer
// accelerator, side by side: the multiplier-/divider-free Softmax (attention scores,
// output distribution) and the Newton LayerNorm (after every residual addition).
//
// Both units are independent streaming engines with their own valid/ready inputs and
// valid-only outputs, and can work at the same time. Softmax: INT8 logits with 3
// fractional bits in, INT8 probabilities with 7 fractional bits out, vectors of up
// to SM_MAX_LEN elements, one vector of N elements per N cycles when vectors come
// back to back, 2N + 2 cycles from the last input to the last output.
// LayerNorm: INT8 in, INT8 with 4 fractional bits out, vectors of up to LN_MAX_LEN
// elements presented twice (statistics pass, then normalisation pass), the
// normalisation pass accepted from the third cycle after the statistics pass ends. See the
// two units for the exact timing.
//
// Placing the two units next to each other follows the architecture, which presents
// them as separate blocks; the shared clock and reset and the port grouping are this
// design's choices.
module nongemm_top
  import nl_pkg::*;
#(
  parameter int unsigned SM_MAX_LEN    = 2048,
  parameter int unsigned SM_DIV_STAGES = 24,
  parameter int unsigned LN_MAX_LEN    = 2048
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Softmax
  input  logic                        sm_in_valid,
  output logic                        sm_in_ready,
  input  logic signed [SM_X_W-1:0]    sm_in_data,
  input  logic                        sm_in_last,
  output logic                        sm_out_valid,
  output logic [SM_P_W-1:0]           sm_out_data,
  output logic                        sm_out_last,
  // LayerNorm
  input  logic                        ln_in_valid,
  output logic                        ln_in_ready,
  input  logic signed [LN_X_W-1:0]    ln_in_data,
  input  logic                        ln_in_last,
  input  logic [LN_RL:0]              ln_inv_len,
  output logic                        ln_out_valid,
  output logic signed [LN_OUT_W-1:0]  ln_out_data,
  output logic                        ln_out_last
);

  logic [EXP_W+$clog2(SM_MAX_LEN)-1:0] z_unused;
  logic signed [LN_MEAN_W-1:0]         mean_unused;
  logic [LN_R_W-1:0]                   rstd_unused;

  softmax_unit #(.MAX_LEN(SM_MAX_LEN), .DIV_STAGES(SM_DIV_STAGES)) u_softmax (
    .clk(clk), .rst_n(rst_n),
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in_data),
    .in_last(sm_in_last), .out_valid(sm_out_valid), .out_data(sm_out_data),
    .out_last(sm_out_last), .z_sum(z_unused)
  );

  layernorm_unit #(.MAX_LEN(LN_MAX_LEN)) u_layernorm (
    .clk(clk), .rst_n(rst_n),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_data(ln_in_data),
    .in_last(ln_in_last), .inv_len(ln_inv_len), .out_valid(ln_out_valid),
    .out_data(ln_out_data), .out_last(ln_out_last),
    .mean_o(mean_unused), .rstd_o(rstd_unused)
  );

endmodule
