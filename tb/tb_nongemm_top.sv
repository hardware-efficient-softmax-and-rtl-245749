// tb_nongemm_top: end-to-end test of both units at their default sizes (vectors of up
// to 2048 elements), running at the same time. The vector lengths are those of the
// Transformer layers the design is meant for: attention rows of 128, 384 and 512
// scores and a 2048-entry row (a 2048-token context), LayerNorm over 768 and 2048
// features. Every output is checked against a reference computed in real arithmetic
// in the testbench (Softmax within one LSB of the fixed-point model and 0.03 of the
// exact softmax; LayerNorm within one LSB of (x - mean) / std), together with the
// normalisation of each vector (sum of probabilities, unit output deviation).
// Four Softmax rows of 512 are also sent back to back: from the second on, each must
// complete exactly 512 cycles after the one before.
// It counts, and requires at least once each: Softmax inputs below the table range
// (exponential of zero), Softmax stage overlap (a row loading while an earlier one
// is still being normalised), Softmax and LayerNorm input stalls (in_ready low with data
// waiting), over-long vectors cut at 2048 in both units, a zero-variance LayerNorm
// vector, a saturated LayerNorm output, and cycles in which both units deliver
// results together.
module tb_nongemm_top;
  import nl_pkg::*;
  localparam int MAXL = 2048;
  logic clk = 0, rst_n = 0;
  logic sm_in_valid = 0, sm_in_ready, sm_in_last = 0;
  logic signed [7:0] sm_in_data = '0;
  logic sm_out_valid, sm_out_last;
  logic [7:0] sm_out_data;
  logic ln_in_valid = 0, ln_in_ready, ln_in_last = 0;
  logic signed [7:0] ln_in_data = '0;
  logic [LN_RL:0] ln_inv_len = '0;
  logic ln_out_valid, ln_out_last;
  logic signed [7:0] ln_out_data;
  int checks = 0, failures = 0;
  int n_cutoff = 0, n_sm_stall = 0, n_ln_stall = 0, n_sm_split = 0, n_ln_split = 0;
  int n_zero_var = 0, n_sat = 0, n_both = 0, n_sm_overlap = 0, cyc = 0;
  int sm_tlast[$];
  bit sm_done = 0, ln_done = 0;

  nongemm_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (sm_out_valid && ln_out_valid) n_both++;
  always @(negedge clk) if (sm_in_valid && sm_in_ready && sm_out_valid) n_sm_overlap++;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- Softmax
  int sm_exp[$];
  real sm_soft[$];
  bit sm_lastq[$];
  int psum = 0, plen = 0;

  function automatic int y_model(input int d);
    int f, r, a, b;
    f = d / 8; r = d % 8;
    a = (f < 7) ? int'($floor($exp(-1.0 * f) * 4096.0 + 0.5)) : 0;
    b = int'($floor($exp(-r / 8.0) * 4096.0 + 0.5));
    return (a * b) / 4096;
  endfunction

  task automatic sm_predict(input int v[$]);
    int m, z, ys[$];
    real zr;
    m = -1000; z = 0; zr = 0.0;
    foreach (v[i]) if (v[i] > m) m = v[i];
    foreach (v[i]) begin
      ys.push_back(y_model(m - v[i])); z += ys[i]; zr += $exp(-(m - v[i]) / 8.0);
      if (m - v[i] >= 56) n_cutoff++;
    end
    foreach (v[i]) begin
      sm_exp.push_back((m - v[i] >= 56) ? 0 : int'($floor(real'(ys[i]) * 128.0 / real'(z) + 0.5)));
      sm_soft.push_back($exp(-(m - v[i]) / 8.0) / zr);
      sm_lastq.push_back(i == v.size() - 1);
    end
  endtask

  task automatic sm_send(input int v[$], input bit mark_last);
    foreach (v[i]) begin
      @(negedge clk);
      sm_in_valid = 1; sm_in_data = 8'(v[i]); sm_in_last = mark_last && (i == v.size() - 1);
      if (!sm_in_ready) n_sm_stall++;
      while (!sm_in_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    @(negedge clk); sm_in_valid = 0; sm_in_last = 0;
  endtask

  always @(negedge clk) if (rst_n && sm_out_valid) begin
    int e;
    real s;
    e = sm_exp.pop_front();
    s = sm_soft.pop_front();
    checks++;
    if (int'(sm_out_data) > e + 1 || int'(sm_out_data) < e - 1 ||
        real'(sm_out_data) / 128.0 - s > 0.03 || s - real'(sm_out_data) / 128.0 > 0.03) begin
      failures++;
      if (failures < 20) $display("FAIL softmax: got %0d exp %0d (true %f)", sm_out_data, e, s * 128.0);
    end
    psum += int'(sm_out_data); plen++;
    checks++;
    if (sm_out_last != sm_lastq.pop_front()) begin
      failures++;
      $display("FAIL softmax out_last");
    end
    if (sm_out_last) begin
      sm_tlast.push_back(cyc);
      checks++;
      if (psum > 128 + plen / 2 + 1 || psum < 128 - plen / 2 - 1) begin
        failures++;
        $display("FAIL softmax sum %0d over %0d", psum, plen);
      end
      psum = 0; plen = 0;
    end
  end

  // n vectors of len elements with in_valid held high from the first to the last
  task automatic sm_burst(input int n, input int len);
    int v[$], flat[$];
    bit lastf[$];
    for (int k = 0; k < n; k++) begin
      v = {};
      for (int i = 0; i < len; i++) v.push_back(int'($urandom_range(0, 255)) - 128);
      sm_predict(v);
      foreach (v[i]) begin flat.push_back(v[i]); lastf.push_back(i == len - 1); end
    end
    foreach (flat[i]) begin
      @(negedge clk);
      sm_in_valid = 1; sm_in_data = 8'(flat[i]); sm_in_last = lastf[i];
      if (!sm_in_ready) n_sm_stall++;
      while (!sm_in_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    @(negedge clk); sm_in_valid = 0; sm_in_last = 0;
  endtask

  task automatic sm_thread();
    int lens[6] = '{128, 384, 512, 1, MAXL, 300};
    int v[$], w[$];
    foreach (lens[k]) begin
      v = {};
      for (int i = 0; i < lens[k]; i++) v.push_back(int'($urandom_range(0, 255)) - 128);
      sm_predict(v);
      sm_send(v, 1);
    end
    // back-to-back rows (vectors 6 to 9): one row of 512 per 512 cycles
    sm_burst(4, 512);
    while (sm_tlast.size() < 10) @(negedge clk);
    for (int k = 8; k <= 9; k++) begin
      checks++;
      if (sm_tlast[k] - sm_tlast[k-1] != 512) begin
        failures++;
        $display("FAIL softmax back-to-back spacing %0d", sm_tlast[k] - sm_tlast[k-1]);
      end
    end
    // over-long row: split after MAXL elements
    v = {};
    for (int i = 0; i < MAXL + 5; i++) v.push_back(int'($urandom_range(0, 100)) - 50);
    w = v[0:MAXL-1];
    sm_predict(w); sm_send(w, 0);
    w = v[MAXL:MAXL+4];
    sm_predict(w); sm_send(w, 1);
    n_sm_split++;
    while (sm_exp.size() != 0) @(negedge clk);
    sm_done = 1;
  endtask

  // ---------------------------------------------------------------- LayerNorm
  real o_s = 0, o_ss = 0;
  int o_n = 0;
  bit o_sat = 0;

  task automatic ln_pass(input int v[$], input bit mark_last, input bit check_out,
                         input real mean, input real sd);
    foreach (v[i]) begin
      @(negedge clk);
      ln_in_valid = 1; ln_in_data = 8'(v[i]); ln_in_last = mark_last && (i == v.size() - 1);
      if (!ln_in_ready) n_ln_stall++;
      while (!ln_in_ready) @(negedge clk);
      @(posedge clk); #1;
      if (check_out) begin
        real r;
        int e;
        r = (sd == 0.0) ? 0.0 : (v[i] - mean) / sd * 16.0;
        e = int'($floor(r + 0.5));
        if (e > 127) begin e = 127; n_sat++; end
        if (e < -128) begin e = -128; n_sat++; end
        checks++;
        if (!ln_out_valid || int'(ln_out_data) > e + 1 || int'(ln_out_data) < e - 1 ||
            ln_out_last != (i == v.size() - 1)) begin
          failures++;
          if (failures < 20) $display("FAIL layernorm[%0d]: got %0d exp %0d", i, ln_out_data, e);
        end
        o_s += real'(ln_out_data); o_ss += real'(ln_out_data) * real'(ln_out_data); o_n++;
        if (e == 127 || e == -128) o_sat = 1;
      end
    end
    @(negedge clk); ln_in_valid = 0; ln_in_last = 0;
  endtask

  task automatic ln_vector(input int v[$], input bit mark_last);
    real mean, sd, s, ss;
    s = 0; ss = 0;
    foreach (v[i]) s += v[i];
    mean = s / v.size();
    foreach (v[i]) ss += (v[i] - mean) * (v[i] - mean);
    sd = $sqrt(ss / v.size());
    if (sd == 0.0) n_zero_var++;
    ln_inv_len = (LN_RL+1)'(((longint'(1) << LN_RL) + longint'(v.size()) / 2) / longint'(v.size()));
    ln_pass(v, mark_last, 0, mean, sd);
    o_s = 0; o_ss = 0; o_n = 0; o_sat = 0;
    ln_pass(v, 1, 1, mean, sd);
    if (!o_sat && sd > 0.0) begin
      real m, so;
      m = o_s / o_n; so = $sqrt(o_ss / o_n - m * m) / 16.0;
      checks++;
      if (so > 1.03 || so < 0.97) begin
        failures++;
        $display("FAIL layernorm output sigma %f", so);
      end
    end
  endtask

  task automatic ln_thread();
    int v[$];
    for (int k = 0; k < 5; k++) begin
      int len;
      len = (k % 2 == 0) ? 768 : MAXL;
      v = {};
      for (int i = 0; i < len; i++) begin
        int x;
        x = int'($urandom_range(0, 120)) - 60 + 10 * k;
        if (k == 2) x = -17;                               // zero variance
        if (k == 3) x = (i == 5) ? 127 : 0;                // outlier: saturates
        v.push_back(x);
      end
      ln_vector(v, 1);
    end
    // over-long first pass: the unit ends the vector after MAXL elements
    v = {};
    for (int i = 0; i < MAXL; i++) v.push_back(int'($urandom_range(0, 30)) - 15);
    ln_vector(v, 0);
    n_ln_split++;
    ln_done = 1;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      sm_thread();
      ln_thread();
    join
    repeat (5) @(negedge clk);
    $display("mechanisms: sm_cutoff=%0d sm_overlap=%0d sm_stall=%0d sm_split=%0d ln_stall=%0d ln_split=%0d zero_var=%0d ln_sat=%0d both_active=%0d",
             n_cutoff, n_sm_overlap, n_sm_stall, n_sm_split, n_ln_stall, n_ln_split, n_zero_var, n_sat, n_both);
    checks++;
    if (n_cutoff == 0 || n_sm_overlap == 0 || n_sm_stall == 0 || n_sm_split == 0 || n_ln_stall == 0 ||
        n_ln_split == 0 || n_zero_var == 0 || n_sat == 0 || n_both == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
