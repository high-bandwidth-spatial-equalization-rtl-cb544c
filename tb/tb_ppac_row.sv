// tb_ppac_row: a full 2B = 512-bit row; checks every bank's partial popcount
// against the matches between the stored row and random bit planes.
module tb_ppac_row;
  localparam int unsigned N = 512, W = 16, NB = N / W;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [N-1:0] wdata, y, model;
  logic [$clog2(W+1)-1:0] bank_cnt [NB];

  ppac_row dut (.clk(clk), .we(we), .wdata(wdata), .y(y), .bank_cnt(bank_cnt));

  always #5 clk = ~clk;

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++) begin
      we = (t == 0) || ($urandom_range(0, 1) == 1);
      wdata = rnd();
      @(posedge clk); #1;
      if (we) model = wdata;
      we = 0;
      y = rnd();
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (int'(bank_cnt[b]) != $countones(~(model[b*W +: W] ^ y[b*W +: W]))) begin
          failures++;
          $display("mismatch t=%0d bank=%0d cnt=%0d", t, b, bank_cnt[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
