// tb_corn_init_est: self-checking test of the LOD initial guess. For every leading-
// one position and random lower bits of the variance, checks that the guess is the
// power of two 2^((48 - L) >> 1), with L found by the testbench from the real
// logarithm, and that it lies within a factor sqrt(2) of the true 1/sqrt(var).
module tb_corn_init_est;
  import nl_pkg::*;
  logic [LN_VAR_W-1:0] var_i;
  logic [LN_R_W-1:0] r0_o;
  logic [4:0] lod_o;
  int checks = 0, failures = 0;

  corn_init_est dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int L = 0; L < LN_VAR_W; L++)
      for (int n = 0; n < 50; n++) begin
        longint v;
        int l_ref;
        real truth, ratio;
        v = (longint'(1) << L) | (longint'($urandom) & ((longint'(1) << L) - 1));
        if (n == 0) v = longint'(1) << L;
        var_i = LN_VAR_W'(v);
        #1;
        l_ref = int'($floor($ln(real'(v)) / $ln(2.0) + 1e-9));
        checks++;
        if (longint'(r0_o) != (longint'(1) << ((48 - l_ref) >> 1))) begin
          failures++;
          $display("FAIL v=%0d: got %0d", v, r0_o);
        end
        truth = 65536.0 / $sqrt(real'(v) / 65536.0);
        ratio = real'(r0_o) / truth;
        checks++;
        if (ratio > 1.4143 || ratio < 0.7070) begin
          failures++;
          $display("FAIL ratio v=%0d: %f", v, ratio);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
