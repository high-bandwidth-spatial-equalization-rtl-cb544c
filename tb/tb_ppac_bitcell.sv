// tb_ppac_bitcell: checks that the bit-cell stores a bit only when written and
// that its output is the XNOR of the stored bit and the input bit.
module tb_ppac_bitcell;
  int checks = 0, failures = 0;
  logic clk = 0, we, x, y, p;
  logic model;

  ppac_bitcell dut (.clk(clk), .we(we), .x(x), .y(y), .p(p));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1; x = 0; y = 0;
    @(posedge clk); #1 model = 0;
    for (int t = 0; t < 200; t++) begin
      we = $urandom_range(0, 1); x = $urandom_range(0, 1);
      @(posedge clk); #1;
      if (we) model = x;
      for (int yy = 0; yy < 2; yy++) begin
        y = yy[0]; #1;
        checks++;
        if (p !== (model == y)) begin
          failures++;
          $display("mismatch t=%0d stored=%0d y=%0d p=%0d", t, model, y, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
