// softmax_unit: multiplier- and divider-free Softmax with guaranteed normalisation.
//
// Vectors of signed INT8 logits (3 fractional bits, so 1 LSB = 1/8) stream in one
// element per cycle and leave as unsigned INT8 probabilities with 7 fractional bits
// (128 = 1.0) whose sum is 1.0 up to the rounding of each element. The datapath is a
// three-stage pipeline over whole vectors, so three vectors can be in flight:
//   A  load       logits are written to an in_ram bank while sm_max_unit keeps the
//                 vector's maximum in max_ram; N cycles, ended by in_last.
//   B  exponent   the bank is read back, sm_exp_unit forms y = e^-(max - x) from
//                 the two tables, y goes to a norm_ram bank and is summed into the
//                 accumulator ACC, giving Z = sum(y); N cycles.
//   C  normalise  the norm_ram bank is read back and sm_fxp_div scales every y by
//                 D_max / Z with its shift-subtract stages; one probability per cycle
//                 on out_data, out_last on the final one; N cycles.
// in_ram and norm_ram each have two banks (ping-pong), and max, length and Z are kept
// per bank, so stage A fills one in_ram bank while stage B empties the other, and B
// fills one norm_ram bank while C empties the other. A bank is handed on by a full
// flag: set by the stage that filled it when it writes the last element, cleared by
// the stage that empties it when it reads the last element. Stages B and C are each
// two cycles deep (read, then compute and write), so a stage starts its next vector
// in the cycle after it has read the last element of the previous one.
//
// Timing: an isolated vector's last probability appears 2N + 2 clocks after its last
// logit is accepted (first output N + 3 clocks after). With vectors sent back to
// back, every stage takes exactly N clocks per vector of N elements, so the unit
// delivers one probability per clock with no gap between vectors. in_ready is low
// only while both in_ram banks hold vectors that stage B has not finished reading.
// Vectors may be 1 to MAX_LEN long; an element arriving when MAX_LEN are held ends
// the vector as if in_last were set. There is no back-pressure on the output.
//
// The three stages (max subtraction, exponential, normalisation), the buffers, the
// tables, ACC and the divider follow the architecture, as does the rate of one vector
// of N elements per N clocks. Reaching that rate by overlapping the stages of
// successive vectors with two banks per buffer is this design's own choice.
module softmax_unit
  import nl_pkg::*;
#(
  parameter int unsigned MAX_LEN    = 2048,
  parameter int unsigned DIV_STAGES = 24,
  localparam int unsigned AW  = $clog2(MAX_LEN),
  localparam int unsigned Z_W = EXP_W + AW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [SM_X_W-1:0] in_data,
  input  logic                     in_last,
  output logic                     out_valid,
  output logic [SM_P_W-1:0]        out_data,
  output logic                     out_last,
  output logic [Z_W-1:0]           z_sum      // ACC result of the vector being normalised
);

  typedef logic [AW:0] len_t;

  // ---------------- bank hand-over state ----------------
  logic [1:0]  in_full, nr_full;
  logic [1:0]  set_in, clr_in, set_nr, clr_nr;
  len_t        len_in [2];
  len_t        len_nr [2];
  logic [Z_W-1:0] z_ram [2];

  // ---------------- stage A ----------------
  logic        wa;
  len_t        cnt;
  logic        accept, end_in;

  // ---------------- stage B ----------------
  // issue side: bank ib of in_ram is read, bank iwb of norm_ram will be written
  logic        ib, iwb, b_active, start_b, issue_b, b_last;
  len_t        b_len, b_cur_len;
  logic [AW-1:0] b_ptr;
  logic [AW-1:0] b_addr;
  // write-back side, one cycle later
  logic        b_v1, b_last1, b_rbank1, b_wbank1;
  logic [AW-1:0] b_idx1;
  logic [Z_W-1:0] z_acc, z_new;
  logic signed [SM_X_W-1:0] max_v;
  exp_t        y;

  // ---------------- stage C ----------------
  logic        ic, c_active, start_c, issue_c, c_last;
  len_t        c_len, c_cur_len;
  logic [AW-1:0] c_ptr;
  logic [AW-1:0] c_addr;
  logic        c_v1, c_last1, c_bank1;
  logic [SM_P_W-1:0] p;
  logic [DIV_STAGES-1:0] q_unused;

  // RAM ports
  logic              in_we    [2];
  logic [AW-1:0]     in_addr  [2];
  logic [SM_X_W-1:0] in_rdata [2];
  logic              nr_we    [2];
  logic [AW-1:0]     nr_addr  [2];
  exp_t              nr_rdata [2];

  // ---------------- stage A: load ----------------
  assign in_ready = !in_full[wa];
  assign accept   = in_valid && in_ready;
  assign end_in   = in_last || (cnt == len_t'(MAX_LEN - 1));

  sm_max_unit #(.X_W(SM_X_W)) u_max (
    .clk(clk), .rst_n(rst_n), .valid_i(accept), .first_i(cnt == '0), .wbank_i(wa),
    .x_i(in_data), .rbank_i(b_rbank1), .max_o(max_v)
  );

  // ---------------- stage B: exponential ----------------
  // A norm_ram bank may be claimed in the cycle in which stage C issues its last
  // read from it: the first write into it comes one clock later.
  assign start_b   = !b_active && in_full[ib] && (!nr_full[iwb] || clr_nr[iwb]);
  assign issue_b   = start_b || b_active;
  assign b_addr    = start_b ? '0 : b_ptr;
  assign b_cur_len = start_b ? len_in[ib] : b_len;
  assign b_last    = issue_b && (len_t'(b_addr) == b_cur_len - 1'b1);

  sm_exp_unit u_exp (.x_i(in_rdata[b_rbank1]), .max_i(max_v), .y_o(y));

  assign z_new = ((b_idx1 == '0) ? '0 : z_acc) + Z_W'(y);   // ACC

  // ---------------- stage C: normalisation ----------------
  assign start_c   = !c_active && nr_full[ic];
  assign issue_c   = start_c || c_active;
  assign c_addr    = start_c ? '0 : c_ptr;
  assign c_cur_len = start_c ? len_nr[ic] : c_len;
  assign c_last    = issue_c && (len_t'(c_addr) == c_cur_len - 1'b1);
  assign z_sum     = z_ram[c_bank1];

  sm_fxp_div #(.Z_W(Z_W), .DIV_STAGES(DIV_STAGES)) u_div (
    .z_i(z_ram[c_bank1]), .y_i(nr_rdata[c_bank1]), .p_o(p), .q_o(q_unused)
  );

  // ---------------- buffers: in_ram and norm_ram, two banks each ----------------
  for (genvar i = 0; i < 2; i++) begin : g_bank
    assign in_we[i]   = accept && (wa == 1'(i));
    assign in_addr[i] = (issue_b && (ib == 1'(i))) ? b_addr : cnt[AW-1:0];
    assign nr_we[i]   = b_v1 && (b_wbank1 == 1'(i));
    assign nr_addr[i] = nr_we[i] ? b_idx1 : c_addr;

    sm_ram #(.DEPTH(MAX_LEN), .WIDTH(SM_X_W)) u_in_ram (
      .clk(clk), .we(in_we[i]), .addr(in_addr[i]), .wdata(in_data), .rdata(in_rdata[i])
    );
    sm_ram #(.DEPTH(MAX_LEN), .WIDTH(EXP_W)) u_norm_ram (
      .clk(clk), .we(nr_we[i]), .addr(nr_addr[i]), .wdata(y), .rdata(nr_rdata[i])
    );
  end

  // ---------------- full flags ----------------
  // A bank is released when its last element is read (the data is then held in the
  // RAM's output register); it is handed on when its last element is written.
  always_comb begin
    set_in = '0; clr_in = '0; set_nr = '0; clr_nr = '0;
    if (accept && end_in)  set_in[wa]       = 1'b1;
    if (b_last)            clr_in[ib]       = 1'b1;
    if (b_v1 && b_last1)   set_nr[b_wbank1] = 1'b1;
    if (c_last)            clr_nr[ic]       = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full <= '0;
      nr_full <= '0;
    end else begin
      in_full <= (in_full | set_in) & ~clr_in;
      nr_full <= (nr_full | set_nr) & ~clr_nr;
    end
  end

  // ---------------- stage registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wa        <= 1'b0;
      cnt       <= '0;
      len_in[0] <= '0;
      len_in[1] <= '0;
      ib        <= 1'b0;
      iwb       <= 1'b0;
      b_active  <= 1'b0;
      b_ptr     <= '0;
      b_len     <= '0;
      b_v1      <= 1'b0;
      b_last1   <= 1'b0;
      b_rbank1  <= 1'b0;
      b_wbank1  <= 1'b0;
      b_idx1    <= '0;
      z_acc     <= '0;
      len_nr[0] <= '0;
      len_nr[1] <= '0;
      z_ram[0]  <= '0;
      z_ram[1]  <= '0;
      ic        <= 1'b0;
      c_active  <= 1'b0;
      c_ptr     <= '0;
      c_len     <= '0;
      c_v1      <= 1'b0;
      c_last1   <= 1'b0;
      c_bank1   <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      // A
      if (accept) begin
        if (end_in) begin
          len_in[wa] <= cnt + 1'b1;
          cnt        <= '0;
          wa         <= ~wa;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      // B, issue side
      b_v1     <= issue_b;
      b_idx1   <= b_addr;
      b_last1  <= b_last;
      b_rbank1 <= ib;
      b_wbank1 <= iwb;
      if (issue_b) begin
        if (start_b) b_len <= len_in[ib];
        if (b_last) begin
          b_active <= 1'b0;
          ib       <= ~ib;
          iwb      <= ~iwb;
        end else begin
          b_active <= 1'b1;
          b_ptr    <= b_addr + 1'b1;
        end
      end
      // B, write-back side
      if (b_v1) begin
        z_acc <= z_new;
        if (b_last1) begin
          z_ram[b_wbank1]  <= z_new;
          len_nr[b_wbank1] <= len_t'(b_idx1) + 1'b1;
        end
      end
      // C, issue side
      c_v1    <= issue_c;
      c_last1 <= c_last;
      c_bank1 <= ic;
      if (issue_c) begin
        if (start_c) c_len <= len_nr[ic];
        if (c_last) begin
          c_active <= 1'b0;
          ic       <= ~ic;
        end else begin
          c_active <= 1'b1;
          c_ptr    <= c_addr + 1'b1;
        end
      end
      // C, output register
      out_valid <= c_v1;
      out_data  <= p;
      out_last  <= c_v1 && c_last1;
    end
  end

  // The largest element always contributes 1.0, so the divider never sees Z < 1.0.
  a_z_floor: assert property (@(posedge clk) disable iff (!rst_n)
    c_v1 |-> (z_ram[c_bank1] >= Z_W'(1 << EXP_F)));
  // Stage A never writes the in_ram bank that stage B is reading.
  a_bank_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(accept && issue_b && (wa == ib)));
  // Stage B never writes the norm_ram bank that stage C is reading.
  a_nbank_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(b_v1 && issue_c && (b_wbank1 == ic)));

endmodule
