// tb_corn_ln: self-checking test of the reciprocal Newton unit. For variances spread
// over the whole range (2^-16 .. 2^14, logarithmically) it pulses start, checks that
// done rises exactly two clock edges later (the two Newton steps) and that the result
// is within 0.3 % of 1/sqrt(var) computed with $sqrt, and that r^2 * var, the
// variance of a normalised output, is within 0.6 % of 1.
module tb_corn_ln;
  import nl_pkg::*;
  logic clk = 0, rst_n = 0, start_i = 0;
  logic [LN_VAR_W-1:0] var_i = '0;
  logic [LN_R_W-1:0] r_o;
  logic done_o;
  int checks = 0, failures = 0;

  corn_ln dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      longint v;
      real vr, r, truth;
      int waited;
      v = longint'($floor($pow(2.0, 30.0 * $urandom_range(0, 100000) / 100000.0)));
      if (v < 1) v = 1;
      if (v >= (longint'(1) << LN_VAR_W)) v = (longint'(1) << LN_VAR_W) - 1;
      @(negedge clk);
      var_i = LN_VAR_W'(v); start_i = 1;
      @(negedge clk);
      start_i = 0;
      waited = 0;
      while (!done_o && waited < 10) begin @(negedge clk); waited++; end
      checks++;
      if (waited != 1) begin
        failures++;
        $display("FAIL timing: done after %0d extra cycles", waited);
      end
      vr = real'(v) / 65536.0;
      truth = 1.0 / $sqrt(vr);
      r = real'(r_o) / 65536.0;
      checks++;
      if (r > truth * 1.003 || r < truth * 0.997) begin
        failures++;
        $display("FAIL var=%f: r=%f exp %f", vr, r, truth);
      end
      checks++;
      if (r * r * vr > 1.006 || r * r * vr < 0.994) begin
        failures++;
        $display("FAIL sigma: r^2 var = %f", r * r * vr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
