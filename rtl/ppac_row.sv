// ppac_row: one PPAC memory row of N = 2B bit-cells.
//
// The row is split into N/BANK_W banks; each bank holds BANK_W bit-cells and
// produces a partial count of the XNOR products that are 1. The row ALU that
// follows adds the partial counts. A row holds one bit significance of one
// row of the real-valued equalizer matrix, as in the paper.
//
// Interface: we writes all N bits of wdata at the rising edge. bank_cnt is
// combinational in the stored bits and the bit plane y. N must be a multiple
// of BANK_W.
module ppac_row #(
  parameter int unsigned N      = 2 * ppac_pkg::B_DEF,
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF
) (
  input  logic                                    clk,
  input  logic                                    we,
  input  logic [N-1:0]                            wdata,
  input  logic [N-1:0]                            y,
  output logic [ppac_pkg::cnt_w(BANK_W)-1:0]      bank_cnt [N/BANK_W]
);
  localparam int unsigned NB = N / BANK_W;

  initial assert (N % BANK_W == 0) else $error("N must be a multiple of BANK_W");

  for (genvar b = 0; b < NB; b++) begin : g_bank
    ppac_bank #(.BANK_W(BANK_W)) u_bank (
      .clk  (clk),
      .we   (we),
      .wdata(wdata[b*BANK_W +: BANK_W]),
      .y    (y[b*BANK_W +: BANK_W]),
      .cnt  (bank_cnt[b])
    );
  end
endmodule
