// tb_ppac_bank: writes random words into a bank, applies random bit planes and
// compares the partial popcount with the number of matching bits.
module tb_ppac_bank;
  localparam int unsigned W = 16;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [W-1:0] wdata, y, model;
  logic [$clog2(W+1)-1:0] cnt;

  ppac_bank #(.BANK_W(W)) dut (.clk(clk), .we(we), .wdata(wdata), .y(y), .cnt(cnt));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1; wdata = '0; y = '0;
    @(posedge clk); #1 model = '0;
    for (int t = 0; t < 300; t++) begin
      we = ($urandom_range(0, 3) != 0);
      wdata = W'($urandom);
      if (t == 5) wdata = '1;
      @(posedge clk); #1;
      if (we) model = wdata;
      y = W'($urandom);
      if (t == 7) y = model;      // all bits match
      if (t == 9) y = ~model;     // no bit matches
      #1;
      checks++;
      if (int'(cnt) != $countones(~(model ^ y))) begin
        failures++;
        $display("mismatch t=%0d cnt=%0d exp=%0d", t, cnt, $countones(~(model ^ y)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
