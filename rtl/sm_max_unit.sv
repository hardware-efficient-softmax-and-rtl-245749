// sm_max_unit: running maximum of the Softmax input vectors (the "Comp" and
// "max_ram" pair of the Softmax datapath).
//
// max_ram has one entry per in_ram bank, so that the maximum of the vector being
// loaded (bank wbank_i) can be found while the maximum of the previous vector (bank
// rbank_i) is still used by the exponential stage. While the logits stream in, a
// signed comparator checks each accepted element against max_ram[wbank_i] and
// replaces the entry when the element is larger; the first element of a vector
// (first_i = 1) is stored unconditionally, so no reset value is needed. max_o shows
// max_ram[rbank_i]; an entry is complete from the clock after the last element of
// its vector. One element per cycle, no stall.
//
// The comparator and the max_ram storage follow the architecture; the two-entry
// organisation matches the two-bank buffering chosen for softmax_unit.
module sm_max_unit #(
  parameter int unsigned X_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  logic                  first_i,
  input  logic                  wbank_i,
  input  logic signed [X_W-1:0] x_i,
  input  logic                  rbank_i,
  output logic signed [X_W-1:0] max_o
);

  logic signed [X_W-1:0] max_ram [2];
  logic gt;

  // Comp
  assign gt    = (x_i > max_ram[wbank_i]);
  assign max_o = max_ram[rbank_i];

  // max_ram
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_ram[0] <= '0;
      max_ram[1] <= '0;
    end else if (valid_i && (first_i || gt)) begin
      max_ram[wbank_i] <= x_i;
    end
  end

endmodule
