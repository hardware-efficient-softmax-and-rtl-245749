// tb_sm_fxp_div: self-checking test of the shift-subtract divider. For random sums Z
// (from 1.0 up to 2048 x 1.0 in the 12-fraction-bit format) and random y <= 1.0 it
// checks that the quotient digits equal the binary expansion of D_max / Z computed
// with integer division in the testbench, and that the output p lies within one LSB
// of y * 128 / Z. It also checks the corner Z = 1.0 (p = 128 for y = 1.0).
module tb_sm_fxp_div;
  import nl_pkg::*;
  localparam int Z_W = 24, K = 24;
  logic [Z_W-1:0] z_i;
  exp_t y_i;
  logic [7:0] p_o;
  logic [K-1:0] q_o;
  int checks = 0, failures = 0;

  sm_fxp_div #(.Z_W(Z_W), .DIV_STAGES(K)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint z, input int y);
    longint q_ref;
    real p_ref;
    z_i = Z_W'(z); y_i = exp_t'(y);
    #1;
    q_ref = (longint'(128) << K) / z;          // D_max / Z with K fraction bits
    checks++;
    if (longint'(q_o) != q_ref) begin
      failures++;
      if (failures < 10) $display("FAIL q z=%0d: got %0h exp %0h", z, q_o, q_ref);
    end
    p_ref = real'(y) * 128.0 / real'(z);
    checks++;
    if (real'(p_o) > p_ref + 1.0 || real'(p_o) < p_ref - 1.0) begin
      failures++;
      if (failures < 10) $display("FAIL p z=%0d y=%0d: got %0d exp %f", z, y, p_o, p_ref);
    end
  endtask

  initial begin
    check(4096, 4096);
    checks++; if (p_o != 8'd128) failures++;
    check(8192, 4096);
    checks++; if (p_o != 8'd64) failures++;
    for (int n = 0; n < 20000; n++) begin
      longint z;
      z = longint'($urandom_range(4096, 4096 * 2048));
      if (n % 4 == 0) z = longint'($urandom_range(4096, 4 * 4096));
      check(z, int'($urandom_range(0, 4096)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
