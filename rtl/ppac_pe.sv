// ppac_pe: processing element of one user u.
//
// The equalizer works on the real-valued decomposition: y_R = [Re y; Im y]
// (2B entries) and, for user u, the two rows
//   real row: [Re(x_u^H), -Im(x_u^H)]   -> Re(x_u^H y)
//   imag row: [Im(x_u^H),  Re(x_u^H)]   -> Im(x_u^H y)
// Each of them is a multi-bit row of K PPAC rows. Each multi-bit row result
// goes to its own bit-serial accumulator; after L bit planes the two sums are
// x_u^H y, which the beta multiplier scales by beta*_u to give s_hat_u.
// The paper draws one multi-bit row per PE and states the 2KU-row array, so
// the pair of multi-bit rows per PE is how this design reads it.
//
// Interface: we[part*K + k] writes PPAC row k of part (0 real, 1 imag).
// ld_ofs, acc and acc_neg come from the controller (acc/acc_neg one cycle
// after the bit plane they belong to). s_re/s_im are combinational from the
// accumulator output registers and the beta register.
module ppac_pe #(
  parameter int unsigned K      = ppac_pkg::K_DEF,
  parameter int unsigned L      = ppac_pkg::L_DEF,
  parameter int unsigned N      = 2 * ppac_pkg::B_DEF,
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF,
  parameter int unsigned BETA_W = ppac_pkg::BETA_W_DEF
) (
  input  logic                                                    clk,
  input  logic                                                    rst_n,
  input  logic [2*K-1:0]                                          we,
  input  logic [N-1:0]                                            wdata,
  input  logic [N-1:0]                                            y,
  input  logic                                                    ld_ofs,
  input  logic                                                    acc,
  input  logic                                                    acc_neg,
  input  logic                                                    beta_we,
  input  logic signed [BETA_W-1:0]                                beta_re,
  input  logic signed [BETA_W-1:0]                                beta_im,
  output logic signed [ppac_pkg::acc_w(N,K,L)+BETA_W:0]           s_re,
  output logic signed [ppac_pkg::acc_w(N,K,L)+BETA_W:0]           s_im
);
  localparam int unsigned MW = ppac_pkg::mrow_w(N, K);
  localparam int unsigned AW = ppac_pkg::acc_w(N, K, L);

  logic signed [MW-1:0] m_re, m_im;
  logic signed [AW-1:0] a_re, a_im;

  ppac_multibit_row #(.K(K), .N(N), .BANK_W(BANK_W)) u_row_re (
    .clk(clk), .rst_n(rst_n), .we(we[K-1:0]), .wdata(wdata), .y(y), .ld_ofs(ld_ofs), .result(m_re)
  );
  ppac_multibit_row #(.K(K), .N(N), .BANK_W(BANK_W)) u_row_im (
    .clk(clk), .rst_n(rst_n), .we(we[2*K-1:K]), .wdata(wdata), .y(y), .ld_ofs(ld_ofs), .result(m_im)
  );

  ppac_bitserial_acc #(.IN_W(MW), .ACC_W(AW)) u_acc_re (
    .clk(clk), .rst_n(rst_n), .din(m_re), .acc(acc), .acc_neg(acc_neg), .sum(a_re)
  );
  ppac_bitserial_acc #(.IN_W(MW), .ACC_W(AW)) u_acc_im (
    .clk(clk), .rst_n(rst_n), .din(m_im), .acc(acc), .acc_neg(acc_neg), .sum(a_im)
  );

  ppac_cmul #(.A_W(AW), .BETA_W(BETA_W)) u_beta (
    .clk(clk), .rst_n(rst_n), .beta_we(beta_we), .beta_re(beta_re), .beta_im(beta_im),
    .a_re(a_re), .a_im(a_im), .p_re(s_re), .p_im(s_im)
  );
endmodule
