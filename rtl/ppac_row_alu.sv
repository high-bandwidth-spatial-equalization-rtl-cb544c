// ppac_row_alu: row ALU of one PPAC row.
//
// The ALU adds the partial popcounts of the row's banks into the row
// popcount p. As drawn in the paper, the sum feeds two registers: the first
// is loaded every cycle, the second (the offset register) only when ld_ofs is
// high. The output is  result = p_reg + (ofs_reg - N),  with N = 2B.
//
// The controller loads the offset register once, while the all-ones bit plane
// is applied, so ofs_reg = p1 = number of stored ones. For a stored row with
// bipolar entries x_i = 2a_i - 1 and a unipolar input bit plane y_i in {0,1},
// p + p1 - N = sum_i x_i*y_i, the inner product the equalizer needs. The
// registers, the subtraction of 2B and the output adder follow the paper's
// row ALU drawing; using the offset register for p1, and the ld_ofs strobe,
// are this design's reading of it. Both registers reset to 0.
//
// Timing: bank_cnt is sampled at the rising edge; result is combinational
// from the registers, so it is valid one cycle after the bit plane.
module ppac_row_alu #(
  parameter int unsigned N      = 2 * ppac_pkg::B_DEF,
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic [ppac_pkg::cnt_w(BANK_W)-1:0]      bank_cnt [N/BANK_W],
  input  logic                                    ld_ofs,
  output logic signed [ppac_pkg::row_w(N)-1:0]    result
);
  localparam int unsigned NB = N / BANK_W;
  localparam int unsigned PW = ppac_pkg::cnt_w(N);
  localparam int unsigned RW = ppac_pkg::row_w(N);

  logic [PW-1:0] pcnt, p_q, ofs_q;

  always_comb begin
    pcnt = '0;
    for (int b = 0; b < NB; b++) pcnt = pcnt + PW'(bank_cnt[b]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      p_q   <= '0;
      ofs_q <= '0;
    end else begin
      p_q <= pcnt;
      if (ld_ofs) ofs_q <= pcnt;
    end

  assign result = $signed(RW'(p_q)) + ($signed(RW'(ofs_q)) - $signed(RW'(N)));
endmodule
