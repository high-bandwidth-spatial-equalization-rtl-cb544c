// ppac_bitcell: one processing-in-memory bit-cell.
//
// The cell stores one bit of the equalizer matrix and multiplies it with one
// bit of the current input bit plane by an XNOR, which is the product of the
// two bits read as bipolar values (0 -> -1, 1 -> +1). This follows the paper.
// The paper's cell is a latch clocked through a row clock gate; here the
// storage is an edge-triggered flop with a synchronous write enable, which has
// the same function (this design's choice). The stored bit has no reset: the
// matrix is written before use.
//
// Timing: a write with we=1 takes effect at the rising edge; p is
// combinational in the stored bit and y.
module ppac_bitcell (
  input  logic clk,
  input  logic we,
  input  logic x,   // write data
  input  logic y,   // input bit of the current bit plane
  output logic p    // XNOR(stored bit, y)
);
  logic q;

  always_ff @(posedge clk)
    if (we) q <= x;

  assign p = ~(q ^ y);
endmodule
