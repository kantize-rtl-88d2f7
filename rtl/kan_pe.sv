// kan_pe: weight-stationary processing element of the KAN systolic array.
//
// A PE owns one spline connection phi_{i,j} between input neuron i (its row)
// and output neuron j (its column) and holds that connection's NB = G+P
// B-spline coefficients w_{i,0..NB-1,j}. Each cycle it takes an activation
// code from the left, evaluates the P+1 non-zero B-splines of that activation
// with its own copy of the B-spline table (bspline_lut), multiplies them with
// the matching coefficients, adds the result to the partial sum arriving from
// above and passes both activation (right) and partial sum (down) on through
// registers. All P+1 products are formed in the same cycle, so one activation
// is consumed per cycle.
//
// Activation code = {j, f}: j is the knot interval of the extended grid
// [t_0, t_{G+2P}) (IDX bits), f the position inside it (K_BITS bits). For
// interval j the non-zero basis functions are b_{j-s} = B(s+f), s = 0..P;
// those with index outside 0..NB-1 are dropped, and a code with j >= G+2P
// (outside the grid) contributes zero.
//
// Coefficient preload: while w_shift is high the coefficient bank loads w_in
// and the old bank is visible on w_out, so a column of PEs forms a shift
// register that is filled from the top.
//
// Follows the paper: weight-stationary dataflow, a local B-spline table in
// every PE, evaluation of only the non-zero B-splines. This design's own
// choices: P+1 parallel multipliers, the code format, the preload chain.
//
// Timing: act_out/act_valid_out and psum_out are registered (1 cycle per hop).
module kan_pe
  import kan_pkg::*;
#(
  parameter int unsigned G        = G_DEF,
  parameter int unsigned P        = P_DEF,
  parameter int unsigned K_BITS   = K_BITS_DEF,
  parameter int unsigned B_BITS   = B_BITS_DEF,
  parameter int unsigned W_BITS   = W_BITS_DEF,
  parameter int unsigned ACC_BITS = ACC_BITS_DEF,
  localparam int unsigned NB      = G + P,
  localparam int unsigned IDX     = idx_bits(G, P),
  localparam int unsigned A_BITS  = IDX + K_BITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // coefficient preload chain
  input  logic                          w_shift,
  input  logic [NB-1:0][W_BITS-1:0]     w_in,
  output logic [NB-1:0][W_BITS-1:0]     w_out,
  // activations, left to right
  input  logic                          act_valid_in,
  input  logic [A_BITS-1:0]             act_in,
  output logic                          act_valid_out,
  output logic [A_BITS-1:0]             act_out,
  // partial sums, top to bottom
  input  logic signed [ACC_BITS-1:0]    psum_in,
  output logic signed [ACC_BITS-1:0]    psum_out
);

  logic [NB-1:0][W_BITS-1:0] w_q;
  logic [P:0][B_BITS-1:0]    bvals;
  logic [IDX-1:0]            j_idx;
  logic [K_BITS-1:0]         frac;
  logic signed [ACC_BITS-1:0] contrib;

  assign j_idx = act_in[A_BITS-1 -: IDX];
  assign frac  = act_in[K_BITS-1:0];

  bspline_lut #(.P(P), .K_BITS(K_BITS), .B_BITS(B_BITS)) u_lut (
    .frac (frac),
    .vals (bvals)
  );

  // sum_s B(s+f) * w[j-s], only over basis indices inside 0..NB-1
  always_comb begin
    int signed bi;
    logic signed [W_BITS+B_BITS:0] prod;
    contrib = '0;
    prod    = '0;
    bi      = 0;
    for (int unsigned s = 0; s <= P; s++) begin
      bi = int'(j_idx) - int'(s);
      if (int'(j_idx) < int'(G + 2 * P) && bi >= 0 && bi < int'(NB))
      begin
        prod    = $signed(w_q[bi]) * $signed({1'b0, bvals[s]});
        contrib = contrib + ACC_BITS'(prod);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q           <= '0;
      act_valid_out <= 1'b0;
      act_out       <= '0;
      psum_out      <= '0;
    end else begin
      if (w_shift) w_q <= w_in;
      act_valid_out <= act_valid_in;
      act_out       <= act_in;
      psum_out      <= psum_in + (act_valid_in ? contrib : '0);
    end
  end

  assign w_out = w_q;

endmodule
