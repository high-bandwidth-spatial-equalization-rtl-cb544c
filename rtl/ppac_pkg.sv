// ppac_pkg: constants shared by the PPAC finite-alphabet equalizer.
//
// The defaults are the single-instance configuration of the design: B = 256
// base-station antennas, U = 16 users, L = 7-bit received samples and K = 3-bit
// mid-rise equalizer entries. A K-bit mid-rise entry with stored bits b_k has
// the value sum_k 2^k * (2*b_k - 1), so K = 3 covers the odd values -7..7 and
// also holds the 1-bit ({-1,1}) and 2-bit ({-3,-1,1,3}) alphabets.
// BANK_W (bit-cells per clock-gated group) and BETA_W (width of the real and
// imaginary parts of the per-user scale factor) are this design's own choices.
// The helper functions give the word widths along the datapath.
package ppac_pkg;

  localparam int unsigned B_DEF      = 256;
  localparam int unsigned U_DEF      = 16;
  localparam int unsigned L_DEF      = 7;
  localparam int unsigned K_DEF      = 3;
  localparam int unsigned BANK_W_DEF = 16;
  localparam int unsigned BETA_W_DEF = 12;

  // Bits of a partial popcount over w bit-cells (0..w).
  function automatic int unsigned cnt_w(input int unsigned w);
    return $clog2(w + 1);
  endfunction

  // Signed width of a row ALU result over n bit-cells (-n..n).
  function automatic int unsigned row_w(input int unsigned n);
    return $clog2(n) + 2;
  endfunction

  // Signed width of a multi-bit row result: |sum_k 2^k r_k| <= n*(2^K-1).
  function automatic int unsigned mrow_w(input int unsigned n, input int unsigned k);
    return $clog2(n) + k + 1;
  endfunction

  // Signed width of the bit-serial accumulator: |X y| <= n*(2^K-1)*2^(L-1).
  function automatic int unsigned acc_w(input int unsigned n, input int unsigned k,
                                        input int unsigned l);
    return $clog2(n) + k + l;
  endfunction

  // Address of a PPAC row: user u, part (0 real output row, 1 imaginary), significance k.
  function automatic int unsigned row_addr(input int unsigned u, input int unsigned part,
                                           input int unsigned k, input int unsigned kk);
    return (u * 2 + part) * kk + k;
  endfunction

endpackage
