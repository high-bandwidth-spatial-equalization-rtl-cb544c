// tb_ppac_equalizer_full: end-to-end test of the equalizer with every parameter
// at its default (B=256, U=16, L=7, K=3): the whole 96 x 512 array is written.
//
// The testbench draws a random complex equalizer matrix X^H with K-bit
// mid-rise entries (odd values -(2^K-1)..2^K-1) and random beta*, writes them
// through the row and beta write ports, then streams random received vectors
// with L-bit two's complement entries. Each output is compared with
// s_u = beta*_u * sum_b X^H[u][b] * y_b computed here in integer arithmetic.
// It exercises and counts: calibration stalls after reset and matrix reloads,
// back-to-back vectors (one every L cycles, checked), idle gaps, matrix and
// beta reloads between vectors, the alphabet and sample widths of the paper's
// evaluation (1-, 2- and K-bit matrices; L-bit and 4-bit samples, the latter
// sign-extended to L bits), extreme vectors (all entries -2^(L-1) with
// the largest matrix entries), and the latency of L+1 cycles (checked).
module tb_ppac_equalizer_full;
  localparam int unsigned B = ppac_pkg::B_DEF, U = ppac_pkg::U_DEF, L = ppac_pkg::L_DEF,
                          K = ppac_pkg::K_DEF, BETA_W = ppac_pkg::BETA_W_DEF;
  localparam int NVEC = 200;
  localparam int unsigned N = 2 * B, ROWS = 2 * K * U;
  localparam int unsigned SW = ppac_pkg::acc_w(N, K, L) + BETA_W + 1;
  localparam int VMAX = (1 << K) - 1;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic mem_we = 0, beta_we = 0, in_valid = 0;
  logic [$clog2(ROWS)-1:0] mem_addr = '0;
  logic [N-1:0] mem_wdata = '0;
  logic [(U > 1 ? $clog2(U) : 1)-1:0] beta_addr = '0;
  logic signed [BETA_W-1:0] beta_re = '0, beta_im = '0;
  logic signed [L-1:0] y_re [B], y_im [B];
  logic in_ready, out_valid, busy, calib;
  logic signed [SW-1:0] s_re [U], s_im [U];

  ppac_equalizer dut (
    .clk(clk), .rst_n(rst_n), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata),
    .beta_we(beta_we), .beta_addr(beta_addr), .beta_re(beta_re), .beta_im(beta_im),
    .in_valid(in_valid), .in_ready(in_ready), .y_re(y_re), .y_im(y_im),
    .out_valid(out_valid), .s_re(s_re), .s_im(s_im), .busy(busy), .calib(calib)
  );

  always #5 clk = ~clk;

  // reference data
  int xr [U][B], xi [U][B];
  longint br [U], bi [U];
  longint exp_q [$];      // per vector: U real parts, then U imaginary parts
  longint acc_t [$];
  longint cyc = 0;
  int ka_now = K, la_now = L, n_phase = 0;
  int n_out = 0, n_cal = 0, n_stall = 0, n_b2b = 0, n_gap = 0, n_reload = 0, n_extreme = 0;
  longint last_acc_cyc = -1;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int rnd_val(input int ka);
    return 2 * $urandom_range(0, (1 << ka) - 1) - ((1 << ka) - 1);
  endfunction

  // random la-bit two's complement sample, sign-extended to L bits
  function automatic logic [L-1:0] rnd_y(input int la);
    return L'($urandom_range(0, (1 << la) - 1) - (1 << (la - 1)));
  endfunction

  function automatic logic [N-1:0] row_bits(int u, int part, int k);
    logic [N-1:0] r;
    int v, code;
    for (int i = 0; i < int'(N); i++) begin
      if (part == 0) v = (i < int'(B)) ? xr[u][i] : -xi[u][i - B];
      else           v = (i < int'(B)) ? xi[u][i] :  xr[u][i - B];
      code = (v + VMAX) / 2;                 // mid-rise code: v = sum 2^k (2 b_k - 1)
      r[i] = code[k];
    end
    return r;
  endfunction

  // ka: bits of the alphabet actually used (1..K); a ka-bit mid-rise value is
  // also a K-bit one, so the K-bit array holds every smaller alphabet
  task automatic load_matrix(input bit extreme, input int ka);
    for (int u = 0; u < int'(U); u++) begin
      for (int b = 0; b < int'(B); b++) begin
        xr[u][b] = extreme ? VMAX : rnd_val(ka);
        xi[u][b] = extreme ? -VMAX : rnd_val(ka);
      end
      br[u] = longint'($urandom_range(0, (1 << BETA_W) - 1)) - (1 << (BETA_W - 1));
      bi[u] = longint'($urandom_range(0, (1 << BETA_W) - 1)) - (1 << (BETA_W - 1));
      if (extreme) begin br[u] = -(1 << (BETA_W - 1)); bi[u] = -(1 << (BETA_W - 1)); end
    end
    @(negedge clk);
    for (int u = 0; u < int'(U); u++)
      for (int part = 0; part < 2; part++)
        for (int k = 0; k < int'(K); k++) begin
          mem_we = 1;
          mem_addr = $clog2(ROWS)'(ppac_pkg::row_addr(u, part, k, K));
          mem_wdata = row_bits(u, part, k);
          @(negedge clk);
        end
    mem_we = 0;
    for (int u = 0; u < int'(U); u++) begin
      beta_we = 1; beta_addr = $bits(beta_addr)'(u);
      beta_re = BETA_W'(br[u]); beta_im = BETA_W'(bi[u]);
      @(negedge clk);
    end
    beta_we = 0;
    n_reload++;
  endtask

  // offer one vector and wait until it is taken; expected result queued
  task automatic send(input bit extreme, input int la);
    longint ar, ai;
    longint er [U], ei [U];
    for (int b = 0; b < int'(B); b++) begin
      y_re[b] = extreme ? L'(1 << (L - 1)) : rnd_y(la);
      y_im[b] = extreme ? L'(1 << (L - 1)) : rnd_y(la);
    end
    for (int u = 0; u < int'(U); u++) begin
      ar = 0; ai = 0;
      for (int b = 0; b < int'(B); b++) begin
        ar += longint'(xr[u][b]) * longint'(y_re[b]) - longint'(xi[u][b]) * longint'(y_im[b]);
        ai += longint'(xi[u][b]) * longint'(y_re[b]) + longint'(xr[u][b]) * longint'(y_im[b]);
      end
      er[u] = ar * br[u] - ai * bi[u];
      ei[u] = ar * bi[u] + ai * br[u];
    end
    for (int u = 0; u < int'(U); u++) exp_q.push_back(er[u]);
    for (int u = 0; u < int'(U); u++) exp_q.push_back(ei[u]);
    if (extreme) n_extreme++;
    in_valid = 1;
    #1;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk); #1;
    end
    // accepted at the next rising edge
    if (busy) begin
      n_b2b++;
      checks++;
      if (cyc + 1 - last_acc_cyc != longint'(L)) begin
        failures++;
        $display("back-to-back spacing %0d, expected %0d", cyc + 1 - last_acc_cyc, L);
      end
    end
    last_acc_cyc = cyc + 1;
    acc_t.push_back(cyc + 1);
    @(negedge clk);
    in_valid = 0;
  endtask

  // output checker, sampling between rising edges
  always @(negedge clk) begin
    if (calib) n_cal++;
    if (out_valid) begin
      longint er [U], ei [U], t0;
      n_out++;
      checks++;
      if (exp_q.size() < 2 * int'(U)) begin
        failures++;
        $display("unexpected output");
      end else begin
        for (int u = 0; u < int'(U); u++) er[u] = exp_q.pop_front();
        for (int u = 0; u < int'(U); u++) ei[u] = exp_q.pop_front();
        t0 = acc_t.pop_front();
        if (cyc - t0 != longint'(L) + 1) begin
          failures++;
          $display("latency %0d, expected %0d", cyc - t0, L + 1);
        end
        for (int u = 0; u < int'(U); u++) begin
          checks++;
          if (longint'(s_re[u]) != er[u] || longint'(s_im[u]) != ei[u]) begin
            failures++;
            if (failures < 10)
              $display("out %0d user %0d: got (%0d,%0d) expected (%0d,%0d)", n_out, u,
                       s_re[u], s_im[u], er[u], ei[u]);
          end
        end
      end
    end
  end

  initial begin
    repeat (NVEC * (L + 4) * 2 + 40 * ROWS + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < int'(B); b++) begin y_re[b] = '0; y_im[b] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // four phases: (alphabet bits, sample bits) = (K, L), (1, L), (2, L), (K, 4)
    for (int v = 0; v < NVEC; v++) begin
      if (v % (NVEC / 4) == 0 && v < 4 * (NVEC / 4)) begin
        int ph;
        ph = v / (NVEC / 4);
        ka_now = (ph == 1) ? 1 : (ph == 2) ? ((K > 1) ? 2 : 1) : int'(K);
        la_now = (ph == 3 && L > 4) ? 4 : int'(L);
        // wait for the pipeline to drain, then reload matrix and beta
        while (busy || exp_q.size() > 0) @(negedge clk);
        load_matrix(0, ka_now);
        n_phase++;
      end
      if (v == NVEC - 3) begin
        while (busy || exp_q.size() > 0) @(negedge clk);
        load_matrix(1, K);
        la_now = L;
      end
      if ($urandom_range(0, 5) == 0) begin
        n_gap++;
        repeat ($urandom_range(1, 2 * L)) @(negedge clk);
      end
      send(v >= NVEC - 3 && v != NVEC - 2, la_now);
    end
    while (exp_q.size() > 0) @(negedge clk);
    repeat (4) @(negedge clk);
    $display("vectors=%0d outputs=%0d calibrations=%0d stall_cycles=%0d back_to_back=%0d gaps=%0d reloads=%0d extreme=%0d",
             NVEC, n_out, n_cal, n_stall, n_b2b, n_gap, n_reload, n_extreme);
    checks++; if (n_out != NVEC) begin failures++; $display("output count"); end
    checks++; if (n_cal < 3)     begin failures++; $display("calibration never after reload"); end
    checks++; if (n_stall == 0)  begin failures++; $display("no stall seen"); end
    checks++; if (n_b2b == 0)    begin failures++; $display("no back-to-back vectors"); end
    checks++; if (n_gap == 0)    begin failures++; $display("no idle gap"); end
    checks++; if (n_reload < 5)  begin failures++; $display("too few matrix reloads"); end
    checks++; if (n_phase != 4)  begin failures++; $display("not all alphabet/sample-width phases ran"); end
    checks++; if (n_extreme == 0) begin failures++; $display("no extreme vector"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
