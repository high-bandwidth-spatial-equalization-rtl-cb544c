// tb_ppac_pe: one processing element at reduced size (B=16, so 2B=32
// bit-cells per row, K=2, L=4, BANK_W=8). The testbench plays the controller:
// it writes the 2K rows of a random complex user row x_u^H, calibrates the
// row ALU offsets with an all-ones plane, applies the L bit planes of y_R MSB
// first with acc/accX-1 one cycle later, and checks s_hat_u = beta*_u x_u^H y
// in the cycle after the last accumulation.
module tb_ppac_pe;
  localparam int unsigned B = 16, N = 2 * B, K = 2, L = 4, BW = 8, BETA_W = 12;
  localparam int VMAX = (1 << K) - 1;
  localparam int unsigned SW = ppac_pkg::acc_w(N, K, L) + BETA_W + 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ld_ofs = 0, acc = 0, acc_neg = 0, beta_we = 0;
  logic [2*K-1:0] we = '0;
  logic [N-1:0] wdata = '0, y = '0;
  logic signed [BETA_W-1:0] beta_re = '0, beta_im = '0;
  logic signed [SW-1:0] s_re, s_im;
  int xr [B], xi [B], yr [B], yi [B];
  longint br, bi, ar, ai;
  logic [L-1:0] yl [N];

  ppac_pe #(.K(K), .L(L), .N(N), .BANK_W(BW), .BETA_W(BETA_W)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .y(y), .ld_ofs(ld_ofs), .acc(acc),
    .acc_neg(acc_neg), .beta_we(beta_we), .beta_re(beta_re), .beta_im(beta_im),
    .s_re(s_re), .s_im(s_im));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, code;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 30; rep++) begin
      for (int b = 0; b < int'(B); b++) begin
        xr[b] = 2 * $urandom_range(0, VMAX) - VMAX;
        xi[b] = 2 * $urandom_range(0, VMAX) - VMAX;
      end
      br = longint'($urandom_range(0, 4095)) - 2048;
      bi = longint'($urandom_range(0, 4095)) - 2048;
      for (int part = 0; part < 2; part++)
        for (int k = 0; k < int'(K); k++) begin
          for (int i = 0; i < int'(N); i++) begin
            if (part == 0) v = (i < int'(B)) ? xr[i] : -xi[i - B];
            else           v = (i < int'(B)) ? xi[i] :  xr[i - B];
            code = (v + VMAX) / 2;
            wdata[i] = code[k];
          end
          we = '0; we[part*K + k] = 1'b1;
          @(negedge clk);
        end
      we = '0;
      beta_we = 1; beta_re = BETA_W'(br); beta_im = BETA_W'(bi);
      y = '1; ld_ofs = 1;
      @(negedge clk);
      beta_we = 0; ld_ofs = 0;
      for (int vec = 0; vec < 5; vec++) begin
        for (int b = 0; b < int'(B); b++) begin
          yr[b] = $urandom_range(0, (1 << L) - 1) - (1 << (L - 1));
          yi[b] = $urandom_range(0, (1 << L) - 1) - (1 << (L - 1));
          if (vec == 0 && rep == 0) begin yr[b] = -(1 << (L - 1)); yi[b] = -(1 << (L - 1)); end
          yl[b] = L'(yr[b]); yl[B + b] = L'(yi[b]);
        end
        ar = 0; ai = 0;
        for (int b = 0; b < int'(B); b++) begin
          ar += xr[b] * yr[b] - xi[b] * yi[b];
          ai += xi[b] * yr[b] + xr[b] * yi[b];
        end
        // plane l (MSB first) in cycle l; its accumulation in cycle l+1
        for (int l = 0; l <= int'(L); l++) begin
          if (l < int'(L)) for (int i = 0; i < int'(N); i++) y[i] = yl[i][L - 1 - l];
          acc = (l != 1); acc_neg = (l == 2);
          @(negedge clk);
        end
        checks++;
        if (longint'(s_re) != ar * br - ai * bi || longint'(s_im) != ar * bi + ai * br) begin
          failures++;
          $display("rep %0d vec %0d: got (%0d,%0d) expected (%0d,%0d)", rep, vec, s_re, s_im,
                   ar * br - ai * bi, ar * bi + ai * br);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
