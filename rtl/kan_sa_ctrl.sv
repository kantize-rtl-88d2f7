// kan_sa_ctrl: sequencing of the systolic array.
//
// The array works in two phases that never overlap, as in the paper's
// TPUv1-like accelerator: first the coefficient tile is preloaded, then a
// batch of activation vectors is streamed through.
//
//   IDLE   coefficient rows are accepted (w_ready = 1); each accepted row
//          shifts the array's coefficient banks down by one row. A start
//          pulse latches batch_len, acc_base and accumulate and moves to
//          STREAM (batch_len = 0 is treated as 1).
//   STREAM activation vectors are accepted (act_ready = 1) until batch_len
//          have been issued; coefficient rows are held off (w_ready = 0).
//   DRAIN  waits until batch_len results have left the array and have been
//          written to the accumulator buffer, then pulses done and returns
//          to IDLE.
//
// Result bookkeeping: the n-th result (res_valid) of the batch is written at
// accumulator address acc_base + n (wrapping at the buffer size), added to the
// stored value when accumulate was set at start, otherwise overwriting it.
// Gaps in act_valid simply leave bubbles in the array.
//
// The paper gives the sequential preload/compute order; the state machine,
// handshakes and address scheme are this design's own.
module kan_sa_ctrl #(
  parameter int unsigned CNT_BITS = 16,
  parameter int unsigned AW       = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic [CNT_BITS-1:0] batch_len,
  input  logic [AW-1:0]       acc_base,
  input  logic                accumulate,
  output logic                busy,
  output logic                done,
  // coefficient preload handshake
  input  logic                w_valid,
  output logic                w_ready,
  output logic                w_shift,
  // activation handshake
  input  logic                act_valid,
  output logic                act_ready,
  output logic                act_fire,
  // results leaving the array
  input  logic                res_valid,
  output logic                wr_en,
  output logic [AW-1:0]       wr_addr,
  output logic                wr_accumulate
);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_DRAIN} state_t;

  state_t              state;
  logic [CNT_BITS-1:0] len_q, issued, retired;
  logic [AW-1:0]       base_q;
  logic                accum_q;

  assign w_ready       = (state == S_IDLE);
  assign w_shift       = w_valid && w_ready;
  assign act_ready     = (state == S_STREAM) && (issued != len_q);
  assign act_fire      = act_valid && act_ready;
  assign busy          = (state != S_IDLE);
  assign wr_en         = res_valid && (state != S_IDLE);
  assign wr_addr       = base_q + AW'(retired);
  assign wr_accumulate = accum_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      len_q   <= '0;
      issued  <= '0;
      retired <= '0;
      base_q  <= '0;
      accum_q <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            state   <= S_STREAM;
            len_q   <= (batch_len == '0) ? CNT_BITS'(1) : batch_len;
            base_q  <= acc_base;
            accum_q <= accumulate;
            issued  <= '0;
            retired <= '0;
          end
        end
        S_STREAM: begin
          if (act_fire) begin
            issued <= issued + 1'b1;
            if (issued + 1'b1 == len_q) state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (retired == len_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (wr_en) retired <= retired + 1'b1;
    end
  end

  // A result can only come back for an activation that was issued.
  a_no_extra_result: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> retired < issued);
  // Coefficients never move while a batch is in the array.
  a_no_shift_in_batch: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !w_shift);

endmodule
