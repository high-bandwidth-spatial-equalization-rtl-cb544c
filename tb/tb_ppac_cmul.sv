// tb_ppac_cmul: loads random beta* values and checks the complex product with
// random accumulator values, including the extremes of both operands, and
// that beta holds while beta_we is low.
module tb_ppac_cmul;
  localparam int unsigned A_W = 19, BW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, beta_we;
  logic signed [BW-1:0] beta_re, beta_im;
  logic signed [A_W-1:0] a_re, a_im;
  logic signed [A_W+BW:0] p_re, p_im;
  longint br, bi, ar, ai;

  ppac_cmul dut (.clk(clk), .rst_n(rst_n), .beta_we(beta_we), .beta_re(beta_re), .beta_im(beta_im),
                 .a_re(a_re), .a_im(a_im), .p_re(p_re), .p_im(p_im));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beta_we = 0; beta_re = '0; beta_im = '0; a_re = '0; a_im = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      br = longint'($urandom_range(0, 4095)) - 2048;
      bi = longint'($urandom_range(0, 4095)) - 2048;
      if (rep == 1) begin br = -2048; bi = -2048; end
      beta_re = BW'(br); beta_im = BW'(bi); beta_we = 1;
      @(posedge clk); #1 beta_we = 0;
      beta_re = BW'($urandom); beta_im = BW'($urandom);   // must be ignored
      for (int t = 0; t < 20; t++) begin
        ar = longint'($urandom_range(0, 524287)) - 262144;
        ai = longint'($urandom_range(0, 524287)) - 262144;
        if (t == 0) begin ar = -262144; ai = 262143; end
        a_re = A_W'(ar); a_im = A_W'(ai);
        @(posedge clk); #1;
        checks++;
        if (longint'(p_re) != ar * br - ai * bi || longint'(p_im) != ar * bi + ai * br) begin
          failures++;
          $display("mismatch rep=%0d t=%0d", rep, t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
