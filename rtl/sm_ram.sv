// sm_ram: single-port vector buffer of the Softmax unit, used twice: as in_ram (the
// raw INT8 logits, kept until the maximum of the vector is known) and as norm_ram
// (the unnormalised exponentials, kept until their sum Z is known).
//
// Written as a plain array so that synthesis can map it to a memory macro. One port:
// a write when we is high, otherwise a read whose data appears on rdata one clock
// after addr (synchronous read). The contents are not reset.
//
// The architecture names the two buffers but gives neither their depth nor their
// port style; depth, width and the synchronous-read port are this design's choices.
module sm_ram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    else    rdata     <= mem[addr];
  end

endmodule
