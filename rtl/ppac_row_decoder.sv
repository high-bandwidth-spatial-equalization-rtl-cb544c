// ppac_row_decoder: write-address decoder of the PPAC array.
//
// Turns a row address and a write enable into a one-hot row write enable
// (the paper draws a demultiplexer driving the row clock gates). An address
// at or above ROWS enables no row. Row addresses are laid out as
// (u*2 + part)*K + k: user u, part 0 for the real output row and 1 for the
// imaginary one, bit significance k (this layout is this design's choice).
//
// Timing: purely combinational.
module ppac_row_decoder #(
  parameter int unsigned ROWS = 2 * ppac_pkg::K_DEF * ppac_pkg::U_DEF
) (
  input  logic [$clog2(ROWS)-1:0] addr,
  input  logic                    we,
  output logic [ROWS-1:0]         row_we
);
  always_comb begin
    row_we = '0;
    for (int r = 0; r < ROWS; r++)
      row_we[r] = we && (int'(addr) == r);
  end
endmodule
