// tb_sm_ram: self-checking test of the Softmax vector buffer. Writes random words to
// random addresses, keeps a shadow copy in the testbench, and reads every written
// address back, checking the data one clock after the address (synchronous read)
// and that a read does not disturb the contents.
module tb_sm_ram;
  localparam int DEPTH = 64, WIDTH = 13;
  logic clk = 0, we = 0;
  logic [5:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  sm_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1; addr = 6'($urandom_range(0, DEPTH-1)); wdata = WIDTH'($urandom);
      shadow[addr] = wdata; written[addr] = 1;
    end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < DEPTH; i++) begin
        if (!written[i]) continue;
        addr = 6'(i);
        @(posedge clk); #1;
        checks++;
        if (rdata !== shadow[i]) begin
          failures++;
          $display("FAIL addr %0d: got %0h exp %0h", i, rdata, shadow[i]);
        end
        @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
