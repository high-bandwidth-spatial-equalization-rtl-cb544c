// tb_ppac_ctrl: runs the controller through reset calibration, a stream of
// back-to-back vectors, idle gaps and matrix writes, records every cycle and
// checks the schedule relative to each accepted vector (accepted in cycle c):
//   busy in c+1..c+L, shift in c+1..c+L-1, acc=0 in c+2, acc_neg=1 only in
//   c+3, out_valid in c+L+2; one vector every L cycles while in_valid is held;
//   one calibration cycle (ones = ld_ofs = 1, in_ready = 0) after reset and
//   after each matrix write.
module tb_ppac_ctrl;
  localparam int unsigned L = 7;
  localparam int NC = 400;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, mem_we = 0;
  logic in_ready, load, shift, ones, ld_ofs, acc, acc_neg, out_valid, busy, calib;
  logic [NC-1:0] r_load, r_shift, r_acc, r_neg, r_ov, r_busy, r_cal, r_we, r_rdy, r_iv;
  int nload, nout, ncal, nwe, b2b;

  ppac_ctrl #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .mem_we(mem_we), .load(load), .shift(shift), .ones(ones), .ld_ofs(ld_ofs), .acc(acc),
    .acc_neg(acc_neg), .out_valid(out_valid), .busy(busy), .calib(calib));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what, input int c);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", c, what); end
  endtask

  initial begin
    repeat (NC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      // stimulus: streams, gaps and writes (writes only while idle)
      in_valid = (c >= 3 && c < 80) || (c >= 120 && c < 125) || (c >= 200 && c < 300 && c % 3 != 0);
      if (in_valid == 0 && r_iv[c > 0 ? c - 1 : 0] && c > 0 && !in_ready && !r_load[c-1])
        in_valid = 1;  // keep an offered vector until it is taken
      mem_we = (c == 100 || c == 101 || c == 150) && !busy;
      #1;
      r_load[c] = load; r_shift[c] = shift; r_acc[c] = acc; r_neg[c] = acc_neg;
      r_ov[c] = out_valid; r_busy[c] = busy; r_cal[c] = calib; r_we[c] = mem_we;
      r_rdy[c] = in_ready; r_iv[c] = in_valid;
      chk(load == (in_valid && in_ready), "load != in_valid && in_ready", c);
      chk(ones == calib && ld_ofs == calib, "ones/ld_ofs differ from calib", c);
      chk(!(calib && in_ready), "ready during calibration", c);
      @(posedge clk); #1;
    end
    // schedule relative to each accepted vector
    nload = 0; nout = 0; ncal = 0; nwe = 0; b2b = 0;
    for (int c = 0; c < NC - int'(L) - 3; c++) begin
      if (r_ov[c]) nout++;
      if (r_cal[c]) ncal++;
      if (r_we[c]) nwe++;
      if (!r_load[c]) continue;
      nload++;
      for (int i = 1; i <= int'(L); i++) chk(r_busy[c+i], "busy missing", c + i);
      for (int i = 1; i < int'(L); i++) chk(r_shift[c+i], "shift missing", c + i);
      chk(!r_shift[c+L], "shift on last plane", c + L);
      chk(!r_acc[c+2], "acc not cleared on MSB plane", c + 2);
      for (int i = 3; i <= int'(L) + 1; i++) chk(r_acc[c+i], "acc missing", c + i);
      chk(r_neg[c+3], "accX-1 missing on second plane", c + 3);
      for (int i = 4; i <= int'(L) + 1; i++) chk(!r_neg[c+i], "accX-1 extra", c + i);
      chk(r_ov[c+L+2], "out_valid not L+2 cycles after accept", c + L + 2);
      chk(!r_ov[c+L+1], "out_valid early", c + L + 1);
      for (int i = 1; i < int'(L); i++) chk(!r_load[c+i], "accepted while busy", c + i);
      if (r_iv[c+L] && r_load[c+L]) b2b++;
      if (r_iv[c+L] && !r_we[c+L]) chk(r_load[c+L], "back-to-back vector not taken after L cycles", c + L);
    end
    chk(r_cal[0], "no calibration right after reset", 0);
    chk(ncal == 1 + 2, "calibration count (reset + two write bursts)", ncal);
    chk(nout == nload || nout == nload - 1, "out_valid count", nout);
    chk(b2b > 5, "too few back-to-back vectors", b2b);
    $display("vectors=%0d back_to_back=%0d calibrations=%0d writes=%0d", nload, b2b, ncal, nwe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
