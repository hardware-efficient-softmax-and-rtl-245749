// tb_sm_exp_unit: exhaustive self-checking test of the two-table exponential. For
// every pair (max, x) with max >= x over the whole INT8 range, the expected output is
// computed in the testbench from e^-(delta/8) split as e^-frac * e^-(rem/8), with the
// two table words rounded to 12 fractional bits as real numbers and the product
// truncated; it must match exactly. The result is also checked to lie within 1 %
// (or 2 LSB) of the true exponential, and to be zero beyond the table (frac >= 7).
module tb_sm_exp_unit;
  import nl_pkg::*;
  logic signed [7:0] x_i, max_i;
  exp_t y_o;
  int checks = 0, failures = 0;

  sm_exp_unit dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int delta, f, r, a, b, expect_y;
    real truth;
    for (int m = -128; m < 128; m++)
      for (int x = -128; x <= m; x++) begin
        max_i = 8'(m); x_i = 8'(x);
        #1;
        delta = m - x; f = delta / 8; r = delta % 8;
        a = (f < 7) ? int'($floor($exp(-1.0 * f) * 4096.0 + 0.5)) : 0;
        b = int'($floor($exp(-r / 8.0) * 4096.0 + 0.5));
        expect_y = (a * b) / 4096;
        truth = $exp(-delta / 8.0) * 4096.0;
        checks++;
        if (int'(y_o) != expect_y) begin
          failures++;
          if (failures < 10) $display("FAIL m=%0d x=%0d: got %0d exp %0d", m, x, y_o, expect_y);
        end
        if (f < 7) begin
          checks++;
          if ((real'(y_o) - truth > 0.01 * truth + 2.0) || (truth - real'(y_o) > 0.01 * truth + 2.0)) begin
            failures++;
            if (failures < 10) $display("FAIL accuracy m=%0d x=%0d: got %0d true %f", m, x, y_o, truth);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
