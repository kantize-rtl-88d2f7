// kan_systolic_array: ROWS x COLS grid of kan_pe, weight-stationary.
//
// Row r of the array serves input neuron r of the current tile and column c
// output neuron c, so PE(r,c) holds the G+P coefficients of spline phi_{r,c}.
// Activation codes enter at the left edge (one per row, already skewed so
// that row r is one cycle behind row r-1) and move one PE to the right per
// cycle. Partial sums start at zero at the top edge and move one PE down per
// cycle; column c delivers at its bottom edge
//     psum[c] = sum_r sum_s B(s + f_r) * w_{r, j_r - s, c}
// for each sample, one cycle after the sample's activation reached PE(ROWS-1,c).
// out_valid[c] marks those cycles.
//
// Preload: while w_shift is high, each PE takes the coefficient bank of the
// PE above it and row 0 takes w_row. After ROWS shifts, the row fed first
// sits in row ROWS-1. The caller must not shift while activations are in
// flight (see kan_sa_ctrl), as in the paper's sequential preload-then-compute
// operation.
module kan_systolic_array
  import kan_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned COLS     = COLS_DEF,
  parameter int unsigned G        = G_DEF,
  parameter int unsigned P        = P_DEF,
  parameter int unsigned K_BITS   = K_BITS_DEF,
  parameter int unsigned B_BITS   = B_BITS_DEF,
  parameter int unsigned W_BITS   = W_BITS_DEF,
  parameter int unsigned ACC_BITS = ACC_BITS_DEF,
  localparam int unsigned NB      = G + P,
  localparam int unsigned A_BITS  = idx_bits(G, P) + K_BITS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  w_shift,
  input  logic [COLS-1:0][NB-1:0][W_BITS-1:0]   w_row,
  input  logic [ROWS-1:0]                       act_valid,
  input  logic [ROWS-1:0][A_BITS-1:0]           act,
  output logic [COLS-1:0]                       out_valid,
  output logic [COLS-1:0][ACC_BITS-1:0]         psum
);

  // horizontal links: column index 0..COLS (COLS = right edge, unused)
  logic [ROWS-1:0][COLS:0]             av;
  logic [ROWS-1:0][COLS:0][A_BITS-1:0] ad;
  // vertical links: row index 0..ROWS
  logic [ROWS:0][COLS-1:0][ACC_BITS-1:0]         ps;
  logic [ROWS:0][COLS-1:0][NB-1:0][W_BITS-1:0]   wl;

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      av[r][0] = act_valid[r];
      ad[r][0] = act[r];
    end
    for (int unsigned c = 0; c < COLS; c++) begin
      ps[0][c] = '0;
      wl[0][c] = w_row[c];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      kan_pe #(
        .G(G), .P(P), .K_BITS(K_BITS), .B_BITS(B_BITS),
        .W_BITS(W_BITS), .ACC_BITS(ACC_BITS)
      ) u_pe (
        .clk           (clk),
        .rst_n         (rst_n),
        .w_shift       (w_shift),
        .w_in          (wl[r][c]),
        .w_out         (wl[r+1][c]),
        .act_valid_in  (av[r][c]),
        .act_in        (ad[r][c]),
        .act_valid_out (av[r][c+1]),
        .act_out       (ad[r][c+1]),
        .psum_in       (ps[r][c]),
        .psum_out      (ps[r+1][c])
      );
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      psum[c]      = ps[ROWS][c];
      out_valid[c] = av[ROWS-1][c+1];
    end
  end

endmodule
