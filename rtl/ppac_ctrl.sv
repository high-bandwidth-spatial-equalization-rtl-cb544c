// ppac_ctrl: sequencer of the PPAC equalizer.
//
// A vector takes L cycles, one per bit plane, most significant first, and
// the next vector may follow without a gap (one vector every L cycles).
// Stage 0 applies a bit plane to the array and the row ALUs register the
// popcounts; stage 1, one cycle later, adds the row results into the
// bit-serial accumulators. The controller therefore drives the serializer
// (load, shift, ones) for stage 0 and the accumulator controls acc and
// acc_neg (the paper's 'acc' and 'accX-1') for stage 1:
//   MSB plane: acc=0; second plane: acc=1, acc_neg=1; later planes: acc=1.
// out_valid is high for the one cycle in which the accumulator output
// registers hold x_u^H y of the last vector.
//
// After reset or any matrix write the row ALU offset registers are stale
// (the 'dirty' flag); before the next vector the controller spends one idle
// cycle on calibration: it drives the all-ones plane and pulses ld_ofs, and
// holds in_ready low meanwhile (a stall). Matrix writes are only allowed
// while no vector is in flight (busy=0).
// The paper names acc and accX-1 and gives the L-cycle bit-serial order; the
// state machine, handshake and calibration are this design's own.
module ppac_ctrl #(
  parameter int unsigned L = ppac_pkg::L_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic mem_we,
  output logic load,
  output logic shift,
  output logic ones,
  output logic ld_ofs,
  output logic acc,
  output logic acc_neg,
  output logic out_valid,
  output logic busy,
  output logic calib     // a calibration cycle is running (for observation)
);
  localparam int unsigned CW = (L > 1) ? $clog2(L) : 1;

  initial assert (L >= 2) else $error("L must be at least 2");

  logic [CW-1:0] cnt;
  logic          dirty;
  logic          last;
  logic          s1_first, s1_second, s1_last;

  assign last     = busy && (cnt == CW'(L - 1));
  assign calib    = !busy && dirty && !mem_we;
  assign in_ready = !dirty && !mem_we && (!busy || last);
  assign load     = in_valid && in_ready;
  assign shift    = busy && !last;
  assign ones     = calib;
  assign ld_ofs   = calib;
  assign acc      = !s1_first;
  assign acc_neg  = s1_second;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      dirty     <= 1'b1;
      s1_first  <= 1'b0;
      s1_second <= 1'b0;
      s1_last   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (load) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (last) begin
        busy <= 1'b0;
      end else if (busy) begin
        cnt <= cnt + 1'b1;
      end

      if (mem_we)     dirty <= 1'b1;
      else if (calib) dirty <= 1'b0;

      s1_first  <= busy && (cnt == '0);
      s1_second <= busy && (cnt == CW'(1));
      s1_last   <= last;
      out_valid <= s1_last;
    end

  // Matrix rows must not change under a vector in flight.
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n) mem_we |-> !busy)
    else $error("matrix write while a vector is in flight");
endmodule
