// tb_ln_stats: self-checking test of the LayerNorm statistics. Streams random INT8
// vectors of random length (wide and narrow spreads, offset means, constant vectors)
// with 1/C = round(2^48 / C), and compares mean and variance, after the last
// element, with the population mean and variance computed in real arithmetic in the
// testbench. A constant vector must give the one-LSB variance floor.
module tb_ln_stats;
  import nl_pkg::*;
  localparam int MAX_LEN = 2048;
  logic clk = 0, rst_n = 0, valid_i = 0, first_i = 0;
  logic signed [7:0] x_i = '0;
  logic [LN_RL:0] inv_len_i = '0;
  logic signed [LN_MEAN_W-1:0] mean_o;
  logic [LN_VAR_W-1:0] var_o;
  int checks = 0, failures = 0;

  ln_stats #(.MAX_LEN(MAX_LEN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int len, base, spread, v;
      real s, ss, mean, var_r, m_got, v_got;
      len = (t % 10 == 0) ? MAX_LEN : $urandom_range(1, 800);
      base = int'($urandom_range(0, 200)) - 100;
      spread = (t % 3 == 0) ? 127 : $urandom_range(0, 10);
      inv_len_i = (LN_RL+1)'((64'd1 << LN_RL) / 64'(len) + (((64'd1 << LN_RL) % 64'(len)) * 2 >= 64'(len) ? 1 : 0));
      s = 0.0; ss = 0.0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        v = base + int'($urandom_range(0, 2 * spread)) - spread;
        if (t % 7 == 3) v = base;                 // constant vector
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        valid_i = 1; first_i = (i == 0); x_i = 8'(v);
        s += v; ss += v * v;
      end
      @(negedge clk); valid_i = 0;
      mean = s / len; var_r = ss / len - mean * mean;
      m_got = real'(mean_o) / 65536.0;
      v_got = real'(var_o) / 65536.0;
      checks++;
      if (m_got - mean > 1e-4 || mean - m_got > 1e-4) begin
        failures++;
        $display("FAIL mean t=%0d: got %f exp %f", t, m_got, mean);
      end
      checks++;
      if (var_r < 1e-9) begin
        if (var_o != 1) begin
          failures++;
          $display("FAIL zero-variance floor t=%0d: got %0d", t, var_o);
        end
      end else if (v_got - var_r > 1e-4 + 1e-6 * var_r || var_r - v_got > 1e-4 + 1e-6 * var_r) begin
        failures++;
        $display("FAIL var t=%0d len=%0d: got %f exp %f", t, len, v_got, var_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
