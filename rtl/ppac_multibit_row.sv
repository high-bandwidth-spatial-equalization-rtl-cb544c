// ppac_multibit_row: one row of a K-bit equalizer matrix spread over K PPAC rows.
//
// A K-bit mid-rise entry has the value sum_k 2^k (2 b_k - 1). PPAC row k holds
// the bits b_k of all 2B entries; its row ALU returns r_k = sum_i (2 b_k,i - 1)
// y_i for the current input bit plane. The multi-bit row adds the row ALU
// results with arithmetic shifts, result = sum_k (r_k <<< k), which is the
// K-bit inner product with the bit plane. This follows the paper, which draws
// two rows with a '<<1' on the more significant one.
//
// Interface: we[k] writes PPAC row k (significance k). ld_ofs loads the row
// ALU offset registers. result is valid one cycle after the bit plane.
module ppac_multibit_row #(
  parameter int unsigned K      = ppac_pkg::K_DEF,
  parameter int unsigned N      = 2 * ppac_pkg::B_DEF,
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic [K-1:0]                             we,
  input  logic [N-1:0]                             wdata,
  input  logic [N-1:0]                             y,
  input  logic                                     ld_ofs,
  output logic signed [ppac_pkg::mrow_w(N,K)-1:0]  result
);
  localparam int unsigned NB = N / BANK_W;
  localparam int unsigned CW = ppac_pkg::cnt_w(BANK_W);
  localparam int unsigned RW = ppac_pkg::row_w(N);
  localparam int unsigned MW = ppac_pkg::mrow_w(N, K);

  logic signed [RW-1:0] r [K];

  for (genvar k = 0; k < K; k++) begin : g_sig
    logic [CW-1:0] bank_cnt [NB];

    ppac_row #(.N(N), .BANK_W(BANK_W)) u_row (
      .clk(clk), .we(we[k]), .wdata(wdata), .y(y), .bank_cnt(bank_cnt)
    );

    ppac_row_alu #(.N(N), .BANK_W(BANK_W)) u_alu (
      .clk(clk), .rst_n(rst_n), .bank_cnt(bank_cnt), .ld_ofs(ld_ofs), .result(r[k])
    );
  end

  always_comb begin
    result = '0;
    for (int k = 0; k < K; k++) result = result + (MW'(r[k]) <<< k);
  end
endmodule
