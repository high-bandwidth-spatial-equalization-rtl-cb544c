// tb_ppac_multibit_row: stores random K-bit mid-rise entries (K=3, 2B=512
// entries) across the K PPAC rows, calibrates the row ALU offsets with an
// all-ones plane, then applies random bit planes and checks, one cycle
// later, result = sum_i v_i * y_i with v_i the mid-rise value of entry i.
module tb_ppac_multibit_row;
  localparam int unsigned K = 3, N = 512;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ld_ofs;
  logic [K-1:0] we;
  logic [N-1:0] wdata, y;
  logic signed [$clog2(N)+K:0] result;
  int v [N];
  int code, expv;

  ppac_multibit_row dut (.clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .y(y),
                         .ld_ofs(ld_ofs), .result(result));

  always #5 clk = ~clk;

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] r;
    for (int i = 0; i < N / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; ld_ofs = 0; y = '0; wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      // random odd values in -(2^K-1)..(2^K-1); extremes forced in rep 1 and 2
      for (int i = 0; i < int'(N); i++) begin
        code = $urandom_range(0, (1 << K) - 1);
        if (rep == 1) code = (1 << K) - 1;
        if (rep == 2) code = 0;
        v[i] = 2 * code - ((1 << K) - 1);
      end
      for (int k = 0; k < int'(K); k++) begin
        for (int i = 0; i < int'(N); i++) wdata[i] = ((v[i] + (1 << K) - 1) / 2 >> k) & 1;
        we = '0; we[k] = 1'b1;
        @(posedge clk); #1;
      end
      we = '0;
      y = '1; ld_ofs = 1;
      @(posedge clk); #1 ld_ofs = 0;
      for (int t = 0; t < 40; t++) begin
        y = rnd();
        if (t == 0) y = '1;
        if (t == 1) y = '0;
        expv = 0;
        for (int i = 0; i < int'(N); i++) if (y[i]) expv += v[i];
        @(posedge clk); #1;
        checks++;
        if (int'(result) != expv) begin
          failures++;
          $display("mismatch rep=%0d t=%0d result=%0d exp=%0d", rep, t, result, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
