// tb_ppac_row_decoder: exhaustive check of the one-hot row write enables.
module tb_ppac_row_decoder;
  localparam int unsigned ROWS = 96;
  int checks = 0, failures = 0;
  logic [$clog2(ROWS)-1:0] addr;
  logic we;
  logic [ROWS-1:0] row_we, exp_we;

  ppac_row_decoder dut (.addr(addr), .we(we), .row_we(row_we));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < 2; w++)
      for (int a = 0; a < (1 << $clog2(ROWS)); a++) begin
        we = w[0]; addr = $clog2(ROWS)'(a);
        #1;
        exp_we = '0;
        if (w == 1 && a < int'(ROWS)) exp_we[a] = 1'b1;
        checks++;
        if (row_we !== exp_we) begin
          failures++;
          $display("mismatch we=%0d addr=%0d", w, a);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
