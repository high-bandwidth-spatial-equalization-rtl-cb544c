// tb_ppac_row_alu: drives partial popcounts directly, loads the offset
// register once, and checks result = p + p1 - 2B one cycle after each input,
// and that the offset register holds while ld_ofs is low.
module tb_ppac_row_alu;
  localparam int unsigned N = 512, W = 16, NB = N / W;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ld_ofs;
  logic [$clog2(W+1)-1:0] bank_cnt [NB];
  logic signed [$clog2(N)+1:0] result;
  int p1, p, psum;

  ppac_row_alu dut (.clk(clk), .rst_n(rst_n), .bank_cnt(bank_cnt), .ld_ofs(ld_ofs), .result(result));

  always #5 clk = ~clk;

  task automatic drive(output int s);
    s = 0;
    for (int b = 0; b < NB; b++) begin
      bank_cnt[b] = $clog2(W+1)'($urandom_range(0, W));
      s += int'(bank_cnt[b]);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_ofs = 0;
    for (int b = 0; b < NB; b++) bank_cnt[b] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      drive(p1); ld_ofs = 1;
      @(posedge clk); #1 ld_ofs = 0;
      for (int t = 0; t < 50; t++) begin
        drive(psum);
        if (t == 3) begin
          for (int b = 0; b < NB; b++) bank_cnt[b] = $clog2(W+1)'(W);
          psum = N;
        end
        @(posedge clk); #1;
        p = psum;
        checks++;
        if (int'(result) != p + p1 - int'(N)) begin
          failures++;
          $display("mismatch rep=%0d t=%0d result=%0d exp=%0d", rep, t, result, p + p1 - int'(N));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
