// tb_ppac_bitserial_acc: feeds L = 7 random multi-bit row results per vector,
// MSB plane first, with the acc/accX-1 schedule, and checks the sum against
// -2^(L-1) d_(L-1) + sum_(l<L-1) 2^l d_l. Vectors follow back to back, so
// the result must be ready exactly L cycles after the first input.
module tb_ppac_bitserial_acc;
  localparam int unsigned L = 7, IN_W = 13, ACC_W = 19;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, acc, acc_neg;
  logic signed [IN_W-1:0] din;
  logic signed [ACC_W-1:0] sum;
  int d [L];
  int expv;

  ppac_bitserial_acc dut (.clk(clk), .rst_n(rst_n), .din(din), .acc(acc), .acc_neg(acc_neg), .sum(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0; acc = 0; acc_neg = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < 200; v++) begin
      expv = 0;
      for (int l = 0; l < int'(L); l++) begin
        // realisable plane sums: |X y| <= 2B * 7 * 64 must fit ACC_W bits
        d[l] = $urandom_range(0, 3584) - 1792;
        if (v == 1) d[l] = (l == 0) ? 3584 : 0;      // y = -64, all entries +7
        if (v == 2) d[l] = (l == 0) ? 0 : 3584;      // y = +63, all entries +7
        if (v == 3) d[l] = (l == 0) ? -3584 : 0;     // y = -64, all entries -7
        // l counts planes in time order: 0 is the MSB plane (weight -2^(L-1))
        expv += (l == 0) ? -(d[l] << (L - 1)) : (d[l] << (L - 1 - l));
      end
      for (int l = 0; l < int'(L); l++) begin
        din = IN_W'(d[l]); acc = (l != 0); acc_neg = (l == 1);
        @(posedge clk); #1;
      end
      checks++;
      if (int'(sum) != expv) begin
        failures++;
        $display("mismatch v=%0d sum=%0d exp=%0d", v, sum, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
