// tb_sm_max_unit: self-checking test of the running-maximum finder with its two-entry
// max_ram. Streams random signed INT8 vectors of random length (including
// all-negative ones and vectors whose first element is the largest) into alternate
// entries, and checks after each vector that the entry just written holds the
// maximum computed in the testbench and that the other entry still holds the
// maximum of the previous vector.
module tb_sm_max_unit;
  logic clk = 0, rst_n = 0, valid_i = 0, first_i = 0, wbank_i = 0, rbank_i = 0;
  logic signed [7:0] x_i = '0, max_o;
  int checks = 0, failures = 0;
  int ref_max [2] = '{0, 0};

  sm_max_unit #(.X_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, m, v, bank;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bank = t % 2;
      len = $urandom_range(1, 40);
      m = -1000;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        case (t % 3)
          0: v = int'($urandom_range(0, 255)) - 128;
          1: v = -int'($urandom_range(1, 128));          // all negative
          default: v = (i == 0) ? 127 : int'($urandom_range(0, 200)) - 128;
        endcase
        valid_i = 1; first_i = (i == 0); x_i = 8'(v); wbank_i = 1'(bank);
        rbank_i = 1'(1 - bank);
        if (v > m) m = v;
      end
      @(negedge clk); valid_i = 0; first_i = 0;
      ref_max[bank] = m;
      rbank_i = 1'(bank);
      #1;
      checks++;
      if (int'(max_o) != ref_max[bank]) begin
        failures++;
        $display("FAIL vec %0d: got %0d exp %0d", t, max_o, ref_max[bank]);
      end
      if (t > 0) begin
        rbank_i = 1'(1 - bank);
        #1;
        checks++;
        if (int'(max_o) != ref_max[1 - bank]) begin
          failures++;
          $display("FAIL vec %0d: other entry changed", t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
