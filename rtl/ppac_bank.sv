// ppac_bank: a group of BANK_W bit-cells of one PPAC row with its local adder.
//
// All cells of a bank share the row's write enable (the paper draws one clock
// gate per group). The local adder counts the XNOR products that equal 1,
// giving a partial population count that the row ALU adds up. Grouping the
// popcount this way follows the drawing of the paper; the group size BANK_W
// is this design's choice.
//
// Interface: we/wdata write the bank's bits at the rising edge; cnt is
// combinational in the stored bits and y.
module ppac_bank #(
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF
) (
  input  logic                                 clk,
  input  logic                                 we,
  input  logic [BANK_W-1:0]                    wdata,
  input  logic [BANK_W-1:0]                    y,
  output logic [ppac_pkg::cnt_w(BANK_W)-1:0]   cnt
);
  localparam int unsigned CW = ppac_pkg::cnt_w(BANK_W);

  logic [BANK_W-1:0] p;

  for (genvar i = 0; i < BANK_W; i++) begin : g_cell
    ppac_bitcell u_cell (.clk(clk), .we(we), .x(wdata[i]), .y(y[i]), .p(p[i]));
  end

  always_comb begin
    cnt = '0;
    for (int i = 0; i < BANK_W; i++) cnt = cnt + CW'(p[i]);
  end
endmodule
