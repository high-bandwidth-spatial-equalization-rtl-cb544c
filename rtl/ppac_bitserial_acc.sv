// ppac_bitserial_acc: bit-serial accumulator of a PPAC processing element.
//
// The received samples are applied one bit plane per cycle, most significant
// first. Each cycle the accumulator adds the multi-bit row result din to the
// previous sum shifted left by one (Horner's rule). As drawn in the paper,
// the fed-back sum passes a '<<1', an XOR with 'accX-1' (port acc_neg), an AND
// with 'acc' (port acc), and acc_neg also enters the adder as a carry, so
//   sum_next = din + (acc ? (acc_neg ? -(2*fb) : 2*fb) : 0).
// The adder output loads two registers every cycle: the feedback register and
// the output register that feeds the beta multiplier.
//
// Schedule (derived here from two's complement arithmetic; the paper names
// the controls but gives no schedule): acc=0 on the MSB plane, acc=1 with
// acc_neg=1 on the second plane, which gives the MSB plane its weight
// -2^(L-1), and acc=1, acc_neg=0 afterwards. Registers reset to 0.
//
// Timing: din is sampled at the rising edge; sum is the output register.
module ppac_bitserial_acc #(
  parameter int unsigned IN_W  = ppac_pkg::mrow_w(2 * ppac_pkg::B_DEF, ppac_pkg::K_DEF),
  parameter int unsigned ACC_W = ppac_pkg::acc_w(2 * ppac_pkg::B_DEF, ppac_pkg::K_DEF,
                                                 ppac_pkg::L_DEF)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  din,
  input  logic                    acc,      // 'acc' in the paper
  input  logic                    acc_neg,  // 'accX-1' in the paper
  output logic signed [ACC_W-1:0] sum
);
  logic signed [ACC_W-1:0] fb_q, fb_term, nxt;

  always_comb begin
    fb_term = ((fb_q <<< 1) ^ {ACC_W{acc_neg}}) & {ACC_W{acc}};
    nxt     = ACC_W'(din) + fb_term + ACC_W'({1'b0, acc_neg});
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      fb_q <= '0;
      sum  <= '0;
    end else begin
      fb_q <= nxt;
      sum  <= nxt;
    end
endmodule
