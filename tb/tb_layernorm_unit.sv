// tb_layernorm_unit: self-checking end-to-end test of the LayerNorm unit at a reduced
// maximum length (MAX_LEN = 128). Each random vector is sent twice, as the unit
// expects (statistics pass, then normalisation pass), with random gaps in in_valid.
// The expected outputs (x - mean) / std * 16, rounded and saturated to INT8, come
// from real arithmetic in the testbench; every output must be within one LSB, and
// out_last must mark the last one. For vectors that do not saturate, the standard
// deviation of the outputs must be within 6 % of 1 (unit-variance normalisation).
// Also checked: two cycles of in_ready low between the passes, one cycle from an
// accepted element to its output, the zero-variance case (constant vector, all
// outputs zero), output saturation, and a vector longer than MAX_LEN, which is cut
// after MAX_LEN elements.
module tb_layernorm_unit;
  import nl_pkg::*;
  localparam int MAX_LEN = 128;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic signed [7:0] in_data = '0;
  logic [LN_RL:0] inv_len = '0;
  logic out_valid, out_last;
  logic signed [7:0] out_data;
  logic signed [LN_MEAN_W-1:0] mean_o;
  logic [LN_R_W-1:0] rstd_o;
  int checks = 0, failures = 0;
  int n_sat = 0, n_const = 0, n_cut = 0;
  longint cycle = 0;

  layernorm_unit #(.MAX_LEN(MAX_LEN)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint recip(input int len);
    return ((longint'(1) << LN_RL) + longint'(len) / 2) / longint'(len);
  endfunction

  // One pass over v. gaps: random idle cycles. Returns cycle of the last acceptance.
  // In the normalisation pass every output is checked in the cycle after its element.
  task automatic pass(input int v[$], input bit mark_last, input bit gaps,
                      input bit check_out, input real mean, input real sd,
                      output longint t_first, output longint t_end, output bit sat);
    sat = 0;
    foreach (v[i]) begin
      @(negedge clk);
      while (gaps && $urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = 8'(v[i]); in_last = mark_last && (i == v.size() - 1);
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1;
      if (i == 0) t_first = cycle;
      t_end = cycle;
      if (check_out) begin
        real r;
        int e;
        r = (sd == 0.0) ? 0.0 : (v[i] - mean) / sd * 16.0;
        e = int'($floor(r + 0.5));
        if (e > 127) begin e = 127; sat = 1; end
        if (e < -128) begin e = -128; sat = 1; end
        checks++;
        if (!out_valid || int'(out_data) > e + 1 || int'(out_data) < e - 1) begin
          failures++;
          $display("FAIL out[%0d]: valid=%0d got %0d exp %0d", i, out_valid, out_data, e);
        end
        checks++;
        if (out_last != (i == v.size() - 1)) begin
          failures++;
          $display("FAIL out_last at %0d", i);
        end
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  task automatic run_vector(input int v[$], input bit mark_last, input bit gaps);
    real mean, sd, s, ss;
    longint t1, t_end1, t_first2, t_end2;
    bit sat;
    int got[$];
    s = 0; ss = 0;
    foreach (v[i]) begin s += v[i]; s = s; end
    mean = s / v.size();
    foreach (v[i]) ss += (v[i] - mean) * (v[i] - mean);
    sd = $sqrt(ss / v.size());
    inv_len = (LN_RL+1)'(recip(v.size()));
    pass(v, mark_last, gaps, 0, mean, sd, t1, t_end1, sat);
    if (!gaps) begin
      // normalisation pass offered at once: first acceptance 3 edges after the last
      in_valid = 1; in_data = 8'(v[0]);
    end
    pass(v, 1, gaps, 1, mean, sd, t_first2, t_end2, sat);
    if (!gaps) begin
      checks++;
      if (t_first2 - t_end1 != 3) begin
        failures++;
        $display("FAIL gap between passes: %0d cycles", t_first2 - t_end1);
      end
    end
    if (sat) n_sat++;
    if (sd == 0.0) n_const++;
  endtask

  // unit-variance check on the outputs of the last vector
  real o_s = 0, o_ss = 0;
  int o_n = 0;
  bit o_sat = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    o_s += real'(out_data); o_ss += real'(out_data) * real'(out_data); o_n++;
    if (out_data == 127 || out_data == -128) o_sat = 1;
    if (out_last) begin
      real m, sd;
      m = o_s / o_n; sd = $sqrt(o_ss / o_n - m * m) / 16.0;
      if (!o_sat && o_n >= 16 && o_ss > 0) begin
        checks++;
        if (sd > 1.06 || sd < 0.94) begin
          failures++;
          $display("FAIL output sigma %f over %0d elements", sd, o_n);
        end
      end
      o_s = 0; o_ss = 0; o_n = 0; o_sat = 0;
    end
  end

  initial begin
    int v[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      int len, base, spread;
      v = {};
      len = (t % 11 == 5) ? MAX_LEN : $urandom_range(2, MAX_LEN);
      base = int'($urandom_range(0, 100)) - 50;
      spread = (t % 3 == 0) ? 60 : $urandom_range(1, 20);
      for (int i = 0; i < len; i++) begin
        int x;
        x = base + int'($urandom_range(0, 2 * spread)) - spread;
        if (t % 9 == 4) x = base;                                  // constant vector
        if (t % 11 == 5 && i == 0) x = 127;                        // outlier -> saturation
        if (t % 11 == 5 && i != 0) x = 0;
        v.push_back(x > 127 ? 127 : (x < -128 ? -128 : x));
      end
      run_vector(v, 1, t % 2 == 0);
    end
    // over-long first pass: cut after MAX_LEN elements, the rest is ignored
    v = {};
    for (int i = 0; i < MAX_LEN; i++) v.push_back(int'($urandom_range(0, 40)) - 20);
    run_vector(v, 0, 0);
    n_cut++;
    repeat (5) @(negedge clk);
    checks++;
    if (n_sat == 0 || n_const == 0 || n_cut == 0) begin
      failures++;
      $display("FAIL coverage: sat=%0d const=%0d cut=%0d", n_sat, n_const, n_cut);
    end
    $display("LN vectors: saturating=%0d constant=%0d cut=%0d", n_sat, n_const, n_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
