// kantize_top: KAN layer accelerator built around a weight-stationary
// systolic array whose PEs evaluate B-splines from small quantized tables.
//
// A KAN layer computes a_out[j] = sum_i sum_k b_k(a_in[i]) * w[i,k,j]. The
// array holds a ROWS x COLS tile of spline connections (G+P coefficients per
// PE); each input activation code is expanded into its P+1 non-zero B-spline
// values inside every PE by a local lookup table, so only the activation code
// travels along a row instead of G+P B-spline values.
//
// Data path:
//   act_vec -> input register -> row skew (row r delayed r cycles)
//           -> kan_systolic_array -> column de-skew (column c delayed
//           COLS-1-c cycles) -> acc_buffer (overwrite or accumulate)
//   acc_buffer read port -> requant -> next-layer activation codes
// Control (kan_sa_ctrl): coefficient rows are accepted only while idle; a
// start command then streams batch_len activation vectors, and the n-th
// result goes to accumulator entry acc_base + n. A layer with more than ROWS
// inputs is run as several input tiles into the same accumulator entries
// (accumulate = 1 after the first); more than COLS outputs use further
// column tiles. That tiling loop, and moving data in and out, is left to the
// host.
//
// Interface timing: an activation vector accepted (act_valid && act_ready) in
// cycle t is written to the accumulator buffer at the clock edge that ends
// cycle t + ROWS + COLS. done pulses one cycle after the last write of the
// batch. Coefficient rows: the row for array row ROWS-1 is sent first, the
// row for row 0 last (ROWS accepted rows per tile). rd_acc/rd_code are valid
// one cycle after rd_en (rd_valid).
//
// Activation code: {interval index j (idx_bits(G,P) bits), fraction
// (K_BITS bits)} over the extended grid [t_0, t_{G+2P}).
//
// Follows the paper: 16x16 weight-stationary array, per-PE half B-spline
// table with 2^8 entries per knot interval, 3-bit table values, 8-bit
// coefficients, G = 5, P = 3, preload and compute not overlapped. This
// design's own choices: everything about buffers, handshakes, code format,
// accumulator width and depth, and requantization parameters.
module kantize_top
  import kan_pkg::*;
#(
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter int unsigned G         = G_DEF,
  parameter int unsigned P         = P_DEF,
  parameter int unsigned K_BITS    = K_BITS_DEF,
  parameter int unsigned B_BITS    = B_BITS_DEF,
  parameter int unsigned W_BITS    = W_BITS_DEF,
  parameter int unsigned ACC_BITS  = ACC_BITS_DEF,
  parameter int unsigned ACC_DEPTH = ACC_DEPTH_DEF,
  parameter int unsigned CNT_BITS  = 16,
  localparam int unsigned NB       = G + P,
  localparam int unsigned A_BITS   = idx_bits(G, P) + K_BITS,
  localparam int unsigned AW       = $clog2(ACC_DEPTH)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // coefficient preload
  input  logic                                w_valid,
  output logic                                w_ready,
  input  logic [COLS-1:0][NB-1:0][W_BITS-1:0] w_row,
  // batch command
  input  logic                                start,
  input  logic [CNT_BITS-1:0]                 batch_len,
  input  logic [AW-1:0]                       acc_base,
  input  logic                                accumulate,
  output logic                                busy,
  output logic                                done,
  // activation stream
  input  logic                                act_valid,
  output logic                                act_ready,
  input  logic [ROWS-1:0][A_BITS-1:0]         act_vec,
  // result readout and requantization to next-layer codes
  input  logic                                rd_en,
  input  logic [AW-1:0]                       rd_addr,
  input  logic [15:0]                         rq_mult,
  input  logic [5:0]                          rq_shift,
  input  logic signed [A_BITS:0]              rq_zero,
  output logic                                rd_valid,
  output logic [COLS-1:0][ACC_BITS-1:0]       rd_acc,
  output logic [COLS-1:0][A_BITS-1:0]         rd_code,
  output logic [COLS-1:0]                     rd_clipped
);

  logic                           w_shift, act_fire;
  logic                           res_valid, wr_en, wr_acc;
  logic [AW-1:0]                  wr_addr;

  kan_sa_ctrl #(.CNT_BITS(CNT_BITS), .AW(AW)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .batch_len     (batch_len),
    .acc_base      (acc_base),
    .accumulate    (accumulate),
    .busy          (busy),
    .done          (done),
    .w_valid       (w_valid),
    .w_ready       (w_ready),
    .w_shift       (w_shift),
    .act_valid     (act_valid),
    .act_ready     (act_ready),
    .act_fire      (act_fire),
    .res_valid     (res_valid),
    .wr_en         (wr_en),
    .wr_addr       (wr_addr),
    .wr_accumulate (wr_acc)
  );

  // ---- input register and row skew ----
  logic                        in_v_q;
  logic [ROWS-1:0][A_BITS-1:0] in_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_v_q <= 1'b0;
      in_q   <= '0;
    end else begin
      in_v_q <= act_fire;
      if (act_fire) in_q <= act_vec;
    end
  end

  logic [ROWS-1:0]             sk_v;
  logic [ROWS-1:0][A_BITS-1:0] sk_a;

  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    delay_line #(.WIDTH(A_BITS + 1), .DEPTH(r)) u_dl (
      .clk   (clk),
      .rst_n (rst_n),
      .d     ({in_v_q, in_q[r]}),
      .q     ({sk_v[r], sk_a[r]})
    );
  end

  // ---- array ----
  logic [COLS-1:0]                 arr_v;
  logic [COLS-1:0][ACC_BITS-1:0]   arr_ps;

  kan_systolic_array #(
    .ROWS(ROWS), .COLS(COLS), .G(G), .P(P), .K_BITS(K_BITS),
    .B_BITS(B_BITS), .W_BITS(W_BITS), .ACC_BITS(ACC_BITS)
  ) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .w_shift   (w_shift),
    .w_row     (w_row),
    .act_valid (sk_v),
    .act       (sk_a),
    .out_valid (arr_v),
    .psum      (arr_ps)
  );

  // ---- column de-skew ----
  logic [COLS-1:0]               ds_v;
  logic [COLS-1:0][ACC_BITS-1:0] ds_ps;

  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    delay_line #(.WIDTH(ACC_BITS + 1), .DEPTH(COLS - 1 - c)) u_dl (
      .clk   (clk),
      .rst_n (rst_n),
      .d     ({arr_v[c], arr_ps[c]}),
      .q     ({ds_v[c], ds_ps[c]})
    );
  end

  assign res_valid = ds_v[0];

  // ---- accumulator buffer ----
  acc_buffer #(.COLS(COLS), .ACC_BITS(ACC_BITS), .DEPTH(ACC_DEPTH)) u_acc (
    .clk        (clk),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .accumulate (wr_acc),
    .wr_data    (ds_ps),
    .rd_en      (rd_en),
    .rd_addr    (rd_addr),
    .rd_data    (rd_acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

  // ---- requantization of the read-out results ----
  for (genvar c = 0; c < COLS; c++) begin : g_rq
    requant #(.G(G), .P(P), .K_BITS(K_BITS), .ACC_BITS(ACC_BITS)) u_rq (
      .acc     ($signed(rd_acc[c])),
      .mult    (rq_mult),
      .shift   (rq_shift),
      .zero    (rq_zero),
      .code    (rd_code[c]),
      .clipped (rd_clipped[c])
    );
  end

  // All columns of one sample leave the de-skew stage together.
  a_deskew_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    ds_v == '0 || ds_v == '1);

endmodule
