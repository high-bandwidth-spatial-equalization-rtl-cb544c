// ppac_plane_serializer: presents the received vector one bit plane per cycle.
//
// On load it takes the complex vector y (B entries of L-bit two's complement
// real and imaginary parts) and forms the real-valued input
// y_R = [Re y; Im y] of 2B entries. The current bit plane holds one bit of
// every entry, starting with the most significant bit; each shift moves on
// to the next lower bit. With ones=1 the plane is all ones, which the
// controller uses to load the row ALU offset registers. MSB-first bit-serial
// input follows the paper; taking a whole vector at once and the all-ones
// plane are this design's choices.
//
// Timing: load/shift act at the rising edge (load wins); plane is
// combinational from the shift registers and ones.
module ppac_plane_serializer #(
  parameter int unsigned B = ppac_pkg::B_DEF,
  parameter int unsigned L = ppac_pkg::L_DEF
) (
  input  logic                clk,
  input  logic                load,
  input  logic                shift,
  input  logic                ones,
  input  logic signed [L-1:0] y_re [B],
  input  logic signed [L-1:0] y_im [B],
  output logic [2*B-1:0]      plane
);
  logic [L-1:0] sh [2*B];
  logic [L-1:0] din [2*B];

  for (genvar i = 0; i < B; i++) begin : g_in
    assign din[i]     = y_re[i];
    assign din[B + i] = y_im[i];
  end

  always_ff @(posedge clk)
    for (int i = 0; i < 2 * B; i++)
      if (load)       sh[i] <= din[i];
      else if (shift) sh[i] <= sh[i] << 1;

  always_comb
    for (int i = 0; i < 2 * B; i++)
      plane[i] = ones | sh[i][L-1];
endmodule
