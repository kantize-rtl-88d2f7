// bspline_lut: quantized B-spline lookup table with translation and
// mirror-symmetry addressing.
//
// On a uniform grid every B-spline b_{i,P} is a shifted copy of one canonical
// B-spline B(x) whose support is [0, P+1], and B is symmetric about (P+1)/2.
// For an input x in knot interval j, with fraction f = x - t_j in [0,1), the
// only non-zero basis functions are b_{j-s,P}(x) = B(s + f) for s = 0..P.
// This block returns those P+1 values for a given fraction, all in the same
// cycle (purely combinational, P+1 read ports on one table).
//
// Storage follows the paper: only the first half of B is kept, ceil((P+1)/2)
// knot intervals with 2^K_BITS entries each, each entry B_BITS wide, so the
// ROM holds 2^K * ceil((P+1)/2) * B_BITS bits (512 x 3 bits at the defaults).
// The position of B(s+f) is u = s*2^K + f. Positions in the stored half are
// read directly (translation); positions in the second half read the mirror
// entry (P+1)*2^K - 1 - u (symmetry).
//
// This design's own choices: entries sample B at the middle of each sub-step,
// (u + 1/2)/2^K, which makes the mirror address an exact integer and reads
// the same staircase as the paper's tabulation figure; values are min-max
// quantized to [0, peak of B] with zero point 0. The ROM contents are computed
// at elaboration by kan_pkg::bspline_code.
//
// Interface: frac (K_BITS) in, vals[s] = code of B(s + frac) out, s = 0..P.
module bspline_lut
  import kan_pkg::*;
#(
  parameter int unsigned P      = P_DEF,
  parameter int unsigned K_BITS = K_BITS_DEF,
  parameter int unsigned B_BITS = B_BITS_DEF
) (
  input  logic [K_BITS-1:0]       frac,
  output logic [P:0][B_BITS-1:0]  vals
);

  localparam int unsigned SEG   = 1 << K_BITS;
  localparam int unsigned DEPTH = half_intervals(P) * SEG;  // stored entries
  localparam int unsigned FULL  = (P + 1) * SEG;            // whole support
  localparam int unsigned AW    = $clog2(FULL);

  typedef logic [DEPTH*B_BITS-1:0] rom_t;

  function automatic rom_t build_rom();
    rom_t r;
    for (int unsigned u = 0; u < DEPTH; u++)
      r[u*B_BITS +: B_BITS] = B_BITS'(bspline_code(u, P, K_BITS, B_BITS));
    return r;
  endfunction

  localparam rom_t ROM = build_rom();

  logic [P:0][AW-1:0] pos;
  logic [P:0][AW-1:0] addr;

  always_comb begin
    for (int unsigned s = 0; s <= P; s++) begin
      pos[s]  = AW'(s * SEG) + AW'(frac);
      addr[s] = (pos[s] < AW'(DEPTH)) ? pos[s] : AW'(FULL - 1) - pos[s];
      vals[s] = ROM[addr[s]*B_BITS +: B_BITS];
    end
  end

endmodule
