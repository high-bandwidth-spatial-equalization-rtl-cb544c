// ppac_cmul: per-user beta scaling of a PPAC processing element.
//
// A register holds the user's complex scale factor beta*_u (already
// conjugated), loaded with beta_we. The complex product
//   p = a * beta*_u = (a_re*b_re - a_im*b_im) + j (a_re*b_im + a_im*b_re)
// is formed with four real multipliers at full precision. The register and
// the multiplier follow the paper; the word width BETA_W, the four-multiplier
// form and the absence of rounding are this design's choices. The register
// resets to 0.
//
// Timing: beta is loaded at the rising edge; p is combinational in a and the
// register, as in the paper's drawing (no register after the multiplier).
module ppac_cmul #(
  parameter int unsigned A_W    = ppac_pkg::acc_w(2 * ppac_pkg::B_DEF, ppac_pkg::K_DEF,
                                                  ppac_pkg::L_DEF),
  parameter int unsigned BETA_W = ppac_pkg::BETA_W_DEF
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           beta_we,
  input  logic signed [BETA_W-1:0]       beta_re,
  input  logic signed [BETA_W-1:0]       beta_im,
  input  logic signed [A_W-1:0]          a_re,
  input  logic signed [A_W-1:0]          a_im,
  output logic signed [A_W+BETA_W:0]     p_re,
  output logic signed [A_W+BETA_W:0]     p_im
);
  localparam int unsigned PW = A_W + BETA_W + 1;

  logic signed [BETA_W-1:0] b_re_q, b_im_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      b_re_q <= '0;
      b_im_q <= '0;
    end else if (beta_we) begin
      b_re_q <= beta_re;
      b_im_q <= beta_im;
    end

  always_comb begin
    p_re = PW'(a_re * b_re_q) - PW'(a_im * b_im_q);
    p_im = PW'(a_re * b_im_q) + PW'(a_im * b_re_q);
  end
endmodule
