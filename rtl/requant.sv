// requant: maps an accumulated layer output to the activation code that
// addresses the B-spline tables of the next layer.
//
// It applies the uniform quantizer of the paper,
//     x_q = clip(round(x / s) + z, alpha_q, beta_q),
// with the real factor 1/s (accumulator LSB over activation step) given as a
// fixed-point multiplier: round(x / s) = (acc * mult + 2^(shift-1)) >>> shift.
// The zero point z places the grid origin, and the clip range is the code
// range of the extended grid, 0 .. (G+2P)*2^K_BITS - 1. Because every
// B-spline is zero outside the grid, clipping there loses nothing. The paper
// notes that all layers usually share one grid, so one setting of
// mult/shift/zero can serve the whole network.
//
// This design's own choices: 16-bit unsigned multiplier, 6-bit shift,
// round-half-up, signed zero point. Purely combinational.
module requant
  import kan_pkg::*;
#(
  parameter int unsigned G        = G_DEF,
  parameter int unsigned P        = P_DEF,
  parameter int unsigned K_BITS   = K_BITS_DEF,
  parameter int unsigned ACC_BITS = ACC_BITS_DEF,
  localparam int unsigned A_BITS  = idx_bits(G, P) + K_BITS
) (
  input  logic signed [ACC_BITS-1:0] acc,
  input  logic        [15:0]         mult,
  input  logic        [5:0]          shift,
  input  logic signed [A_BITS:0]     zero,
  output logic        [A_BITS-1:0]   code,
  output logic                       clipped
);

  localparam int unsigned PW = ACC_BITS + 18;
  localparam int unsigned CODE_MAX = ((G + 2 * P) << K_BITS) - 1;

  logic signed [PW-1:0] prod, rnd, scaled, shifted;

  always_comb begin
    prod    = PW'(acc) * $signed({1'b0, mult});
    rnd     = (shift == 0) ? '0 : (PW'(1) <<< (shift - 1));
    scaled  = prod + rnd;
    shifted = (scaled >>> shift) + PW'(zero);
    if (shifted < 0) begin
      code    = '0;
      clipped = 1'b1;
    end else if (shifted > $signed(PW'(CODE_MAX))) begin
      code    = A_BITS'(CODE_MAX);
      clipped = 1'b1;
    end else begin
      code    = A_BITS'(shifted);
      clipped = 1'b0;
    end
  end

endmodule
