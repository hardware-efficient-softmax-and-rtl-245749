// layernorm_unit: Newton LayerNorm with unit-variance output, Y = (X - mean) / std.
//
// Signed INT8 inputs; signed INT8 outputs with LN_OUT_F = 4 fractional bits (range
// -8 .. +7.9375, saturating, rounded to nearest). The vector is streamed in twice:
//   STATS   first pass, one element per cycle; ln_stats accumulates sum(x) and
//           sum(x^2). The vector ends with in_last (or after MAX_LEN elements). The
//           length C is given as its reciprocal inv_len (LN_RL = 48 fractional bits),
//           sampled throughout the pass.
//   NEWTON  corn_ln turns the variance into r = 1/sqrt(var) in two Newton steps,
//           one per cycle; in_ready is low for those two cycles and rises with
//           corn_ln's done flag, when r is final.
//   NORM    second pass of the same elements in the same order; each is reduced by
//           the mean and multiplied by r (a multiplier, no divider), and the result
//           appears on out_data one cycle after the element is accepted. out_last
//           marks the C-th output; in_last is ignored in this pass.
// The first element of the second pass can be accepted three clocks after the last
// element of the first pass, and the first output follows one clock later. mean_o and rstd_o expose the statistics of the current vector.
// There is no back-pressure on the output.
//
// The two-stage structure (statistics, then normalisation), the reciprocal Newton
// unit and the output multiplier follow the architecture, which streams the input
// into the subtractor of the output stage without a buffer; reading the vector twice
// from the source follows from that. The affine gamma/beta step of the LayerNorm
// definition is not part of the described datapath and is left to the caller. The
// number formats and the handshake are this design's choices.
module layernorm_unit
  import nl_pkg::*;
#(
  parameter int unsigned MAX_LEN = 2048,
  localparam int unsigned AW = $clog2(MAX_LEN)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic signed [LN_X_W-1:0]    in_data,
  input  logic                        in_last,
  input  logic [LN_RL:0]              inv_len,
  output logic                        out_valid,
  output logic signed [LN_OUT_W-1:0]  out_data,
  output logic                        out_last,
  output logic signed [LN_MEAN_W-1:0] mean_o,
  output logic [LN_R_W-1:0]           rstd_o
);

  typedef enum logic [1:0] {S_STATS, S_NEWTON, S_NORM} ln_state_e;

  localparam int unsigned DW = LN_MEAN_W + 1;
  localparam int unsigned PW = DW + LN_R_W + 1;
  localparam int unsigned SH = LN_MF + LN_YF - LN_OUT_F;

  ln_state_e              state;
  logic [AW:0]            cnt, len;
  logic                   accept, end_in, start_q, done, norm_acc;
  logic [LN_VAR_W-1:0]    var_v;
  logic signed [DW-1:0]   diff;
  logic signed [PW-1:0]   prod, rnd;
  logic signed [LN_OUT_W-1:0] y;

  assign in_ready = (state != S_NEWTON) || done;
  assign accept   = in_valid && in_ready;
  assign end_in   = in_last || (cnt == (AW+1)'(MAX_LEN - 1));
  assign norm_acc = accept && (state != S_STATS);

  ln_stats #(.MAX_LEN(MAX_LEN)) u_stats (
    .clk(clk), .rst_n(rst_n),
    .valid_i(accept && (state == S_STATS)), .first_i(cnt == '0),
    .x_i(in_data), .inv_len_i(inv_len), .mean_o(mean_o), .var_o(var_v)
  );

  corn_ln u_corn (
    .clk(clk), .rst_n(rst_n), .start_i(start_q), .var_i(var_v),
    .r_o(rstd_o), .done_o(done)
  );

  // output stage: (x - mean) * r
  always_comb begin
    diff = (DW'(in_data) <<< LN_MF) - DW'(mean_o);
    prod = PW'(diff) * $signed(PW'({1'b0, rstd_o}));
    rnd  = (prod + (PW'(1) <<< (SH - 1))) >>> SH;
    if (rnd > PW'(2**(LN_OUT_W-1) - 1))       y = {1'b0, {(LN_OUT_W-1){1'b1}}};
    else if (rnd < -PW'(2**(LN_OUT_W-1)))     y = {1'b1, {(LN_OUT_W-1){1'b0}}};
    else                                      y = LN_OUT_W'(rnd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_STATS;
      cnt       <= '0;
      len       <= '0;
      start_q   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      start_q   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_STATS: if (accept) begin
          if (end_in) begin
            len     <= cnt + 1'b1;
            cnt     <= '0;
            start_q <= 1'b1;
            state   <= S_NEWTON;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_NEWTON: if (done) state <= S_NORM;
        default: ;
      endcase
      // normalisation pass, from the cycle in which r is final
      if (norm_acc) begin
        out_valid <= 1'b1;
        out_data  <= y;
        if (cnt == len - 1'b1) begin
          out_last <= 1'b1;
          cnt      <= '0;
          state    <= S_STATS;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // The Newton unit is started exactly once per vector, from the statistics pass.
  a_start_once: assert property (@(posedge clk) disable iff (!rst_n)
    start_q |-> (state == S_NEWTON));

endmodule
