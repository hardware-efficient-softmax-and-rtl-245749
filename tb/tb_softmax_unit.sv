// tb_softmax_unit: self-checking end-to-end test of the Softmax unit at a reduced
// buffer depth (MAX_LEN = 64). Random vectors of random length, with random gaps in
// in_valid, go through the unit; for each the testbench computes the expected
// output independently (exponentials from $exp rounded as the tables are, the sum Z,
// then y * 128 / Z) and checks every probability to within one LSB, the position of
// out_last, the sum of the probabilities (normalisation: within len/2 + 1 LSB of
// 128), closeness to the exact real-valued softmax, and, for a vector sent into an
// empty pipeline, the latency of 2N + 2 cycles from the last input to the last
// output. Bursts of vectors sent back to back check that the three stages overlap:
// with equal lengths N a vector must complete every N cycles, and the input must
// stall when both input banks are occupied. It also sends a vector longer
// than MAX_LEN, which must be split after MAX_LEN elements.
module tb_softmax_unit;
  import nl_pkg::*;
  localparam int MAX_LEN = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic signed [7:0] in_data = '0;
  logic out_valid, out_last;
  logic [7:0] out_data;
  logic [EXP_W+$clog2(MAX_LEN)-1:0] z_sum;
  int checks = 0, failures = 0;
  longint cycle = 0, t_last_in = 0;
  int exp_q[$];
  bit last_q[$];
  int lat_q[$];
  real soft_q[$];
  int psum = 0, pexp_sum = 0, plen = 0;
  int sp_q[$];
  longint prev_last = 0;
  int n_stall = 0, n_spacing = 0;

  softmax_unit #(.MAX_LEN(MAX_LEN), .DIV_STAGES(24)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int y_model(input int d);
    int f, r, a, b;
    f = d / 8; r = d % 8;
    a = (f < 7) ? int'($floor($exp(-1.0 * f) * 4096.0 + 0.5)) : 0;
    b = int'($floor($exp(-r / 8.0) * 4096.0 + 0.5));
    return (a * b) / 4096;
  endfunction

  // expected outputs of one vector
  task automatic predict(input int v[$], input int lat, input int spacing);
    int m, z, ys[$];
    real zr;
    m = -1000; z = 0; zr = 0.0;
    foreach (v[i]) if (v[i] > m) m = v[i];
    foreach (v[i]) begin ys.push_back(y_model(m - v[i])); z += ys[i]; zr += $exp(-(m - v[i]) / 8.0); end
    foreach (v[i]) begin
      exp_q.push_back(int'($floor(real'(ys[i]) * 128.0 / real'(z) + 0.5)));
      soft_q.push_back($exp(-(m - v[i]) / 8.0) / zr);
      last_q.push_back(i == v.size() - 1);
    end
    lat_q.push_back(lat);
    sp_q.push_back(spacing);
  endtask

  task automatic send(input int v[$], input bit mark_last);
    foreach (v[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = 8'(v[i]); in_last = mark_last && (i == v.size() - 1);
      if (!in_ready) n_stall++;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1;
      t_last_in = cycle;
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  // no gaps in in_valid: the input is limited only by in_ready
  task automatic send_fast(input int v[$]);
    foreach (v[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = 8'(v[i]); in_last = (i == v.size() - 1);
      if (!in_ready) n_stall++;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1;
      t_last_in = cycle;
    end
  endtask

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    int e;
    real s;
    e = exp_q.pop_front();
    checks++;
    if (int'(out_data) > e + 1 || int'(out_data) < e - 1) begin
      failures++;
      $display("FAIL p: got %0d exp %0d", out_data, e);
    end
    s = soft_q.pop_front();
    checks++;
    if (real'(out_data) / 128.0 - s > 0.03 || s - real'(out_data) / 128.0 > 0.03) begin
      failures++;
      $display("FAIL accuracy: got %0d/128 true %f", out_data, s);
    end
    psum += int'(out_data); plen++;
    if (out_last != last_q.pop_front()) begin
      failures++;
      $display("FAIL out_last misplaced");
    end
    if (out_last) begin
      int l, sp;
      l = lat_q.pop_front();
      sp = sp_q.pop_front();
      if (sp >= 0) begin
        checks++; n_spacing++;
        if (int'(cycle - prev_last) != sp) begin
          failures++;
          $display("FAIL throughput: vector done %0d cycles after the previous, exp %0d", cycle - prev_last, sp);
        end
      end
      prev_last = cycle;
      if (l >= 0) checks++;
      if (l >= 0 && int'(cycle - t_last_in) != l) begin
        failures++;
        $display("FAIL latency: got %0d exp %0d", cycle - t_last_in, l);
      end
      checks++;
      if (psum > 128 + plen / 2 + 1 || psum < 128 - plen / 2 - 1) begin
        failures++;
        $display("FAIL sum of p = %0d over %0d elements", psum, plen);
      end
      psum = 0; plen = 0;
    end
  end

  initial begin
    int v[$], w[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int len;
      v = {};
      len = (t == 0) ? 1 : $urandom_range(1, MAX_LEN);
      for (int i = 0; i < len; i++) begin
        if (t % 4 == 1) v.push_back(int'($urandom_range(0, 40)) - 20);   // narrow range
        else            v.push_back(int'($urandom_range(0, 255)) - 128);
      end
      predict(v, 2 * v.size() + 2, -1);
      send(v, 1);
      while (exp_q.size() != 0) @(posedge clk);
    end
    // bursts: vectors back to back, stages overlapped
    for (int burst = 0; burst < 4; burst++) begin
      int len;
      len = (burst == 0) ? 1 : $urandom_range(2, MAX_LEN);
      for (int k = 0; k < 6; k++) begin
        v = {};
        for (int i = 0; i < len; i++) v.push_back(int'($urandom_range(0, 255)) - 128);
        predict(v, -1, (k >= 2) ? len : -1);
        send_fast(v);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      while (exp_q.size() != 0) @(posedge clk);
    end
    // random lengths back to back
    for (int k = 0; k < 20; k++) begin
      v = {};
      for (int i = 0; i < $urandom_range(1, MAX_LEN); i++) v.push_back(int'($urandom_range(0, 255)) - 128);
      predict(v, -1, -1);
      send(v, 1);
    end
    while (exp_q.size() != 0) @(posedge clk);
    // an over-long vector: split after MAX_LEN elements
    v = {}; w = {};
    for (int i = 0; i < MAX_LEN + 6; i++) v.push_back(int'($urandom_range(0, 60)) - 30);
    w = v[0:MAX_LEN-1];
    predict(w, 2 * w.size() + 2, -1);
    send(w, 0);
    while (exp_q.size() != 0) @(posedge clk);
    w = v[MAX_LEN:MAX_LEN+5];
    predict(w, 2 * w.size() + 2, -1);
    send(w, 1);
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_stall == 0 || n_spacing == 0) begin
      failures++;
      $display("FAIL coverage: stalls=%0d spacing checks=%0d", n_stall, n_spacing);
    end
    $display("stalls=%0d spacing checks=%0d", n_stall, n_spacing);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
