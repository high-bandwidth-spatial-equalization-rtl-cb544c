// ppac_equalizer: one PPAC finite-alphabet spatial equalizer instance.
//
// Computes s_hat = diag(beta*) X^H y for a B-antenna, U-user uplink, where
// X^H has K-bit mid-rise complex entries and y has L-bit two's complement
// complex entries. X^H is stored, in real-valued form, in a processing-in-
// memory array of 2KU rows of 2B bit-cells; every bit-cell multiplies its bit
// with one input bit (XNOR) and every row counts its products. The received
// vector is applied one bit plane per cycle, MSB first, so one vector takes
// L cycles and the U users are served in parallel by U processing elements.
//
// Interface:
//   mem_we/mem_addr/mem_wdata  write one PPAC row; address (u*2+part)*K + k,
//                              part 0 = [Re x_u^H, -Im x_u^H] (real output),
//                              part 1 = [Im x_u^H,  Re x_u^H] (imag output),
//                              bit k of each entry in its mid-rise code;
//                              wdata[i] for i < B belongs to Re y_i,
//                              wdata[B+i] to Im y_i.
//   beta_we/beta_addr/beta_re/beta_im  load beta*_u of user beta_addr.
//   in_valid/in_ready/y_re/y_im  received vector (valid/ready handshake).
//   out_valid/s_re/s_im         equalized vector, valid for one cycle.
//   busy, calib                 a vector is in flight; a calibration cycle runs.
// Writes are allowed only while busy=0 (asserted).
//
// Timing: a vector accepted at a rising edge gives out_valid L+1 edges
// later; with in_valid held high a new vector is accepted every L cycles.
// After reset and after matrix writes one calibration cycle (in_ready low)
// precedes the next vector.
//
// The array organisation, bit-serial MSB-first schedule, row ALU, multi-bit
// rows and PE follow the paper; write interface, address map, handshake,
// calibration cycle, BANK_W and BETA_W are this design's choices.
module ppac_equalizer #(
  parameter int unsigned B      = ppac_pkg::B_DEF,
  parameter int unsigned U      = ppac_pkg::U_DEF,
  parameter int unsigned L      = ppac_pkg::L_DEF,
  parameter int unsigned K      = ppac_pkg::K_DEF,
  parameter int unsigned BANK_W = ppac_pkg::BANK_W_DEF,
  parameter int unsigned BETA_W = ppac_pkg::BETA_W_DEF
) (
  input  logic                                               clk,
  input  logic                                               rst_n,
  // matrix memory write port
  input  logic                                               mem_we,
  input  logic [$clog2(2*K*U)-1:0]                           mem_addr,
  input  logic [2*B-1:0]                                     mem_wdata,
  // beta* write port
  input  logic                                               beta_we,
  input  logic [(U > 1 ? $clog2(U) : 1)-1:0]                 beta_addr,
  input  logic signed [BETA_W-1:0]                           beta_re,
  input  logic signed [BETA_W-1:0]                           beta_im,
  // received vector
  input  logic                                               in_valid,
  output logic                                               in_ready,
  input  logic signed [L-1:0]                                y_re [B],
  input  logic signed [L-1:0]                                y_im [B],
  // equalized vector
  output logic                                               out_valid,
  output logic signed [ppac_pkg::acc_w(2*B,K,L)+BETA_W:0]    s_re [U],
  output logic signed [ppac_pkg::acc_w(2*B,K,L)+BETA_W:0]    s_im [U],
  output logic                                               busy,
  output logic                                               calib
);
  localparam int unsigned N    = 2 * B;
  localparam int unsigned ROWS = 2 * K * U;

  logic [ROWS-1:0] row_we;
  logic [N-1:0]    plane;
  logic            load, shift, ones, ld_ofs, acc, acc_neg;

  ppac_row_decoder #(.ROWS(ROWS)) u_dec (.addr(mem_addr), .we(mem_we), .row_we(row_we));

  ppac_ctrl #(.L(L)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .mem_we(mem_we),
    .load(load), .shift(shift), .ones(ones), .ld_ofs(ld_ofs), .acc(acc), .acc_neg(acc_neg),
    .out_valid(out_valid), .busy(busy), .calib(calib)
  );

  ppac_plane_serializer #(.B(B), .L(L)) u_ser (
    .clk(clk), .load(load), .shift(shift), .ones(ones), .y_re(y_re), .y_im(y_im), .plane(plane)
  );

  for (genvar u = 0; u < U; u++) begin : g_pe
    ppac_pe #(.K(K), .L(L), .N(N), .BANK_W(BANK_W), .BETA_W(BETA_W)) u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .we     (row_we[u*2*K +: 2*K]),
      .wdata  (mem_wdata),
      .y      (plane),
      .ld_ofs (ld_ofs),
      .acc    (acc),
      .acc_neg(acc_neg),
      .beta_we(beta_we && (int'(beta_addr) == u)),
      .beta_re(beta_re),
      .beta_im(beta_im),
      .s_re   (s_re[u]),
      .s_im   (s_im[u])
    );
  end

  a_no_beta_busy: assert property (@(posedge clk) disable iff (!rst_n) beta_we |-> !busy)
    else $error("beta write while a vector is in flight");
  a_valid_held: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid && !in_ready |=> in_valid)
    else $error("in_valid dropped before the vector was taken");
endmodule
