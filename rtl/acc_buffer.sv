// acc_buffer: output accumulator memory, DEPTH entries of COLS partial sums.
//
// Write port (read-modify-write in one cycle): when wr_en is high the entry at
// wr_addr becomes wr_data, or the stored value plus wr_data when accumulate is
// high. This lets a layer whose input count exceeds the array height be
// computed tile by tile, the partial sums of successive input tiles adding up
// in place. Read port: registered, rd_data holds entry rd_addr one cycle
// after rd_en. A read of the entry being written in the same cycle returns
// the old value.
//
// The paper only calls the accelerator "TPUv1-like"; this buffer, its depth
// and its ports are this design's own choices. Contents are not reset.
module acc_buffer #(
  parameter int unsigned COLS     = 16,
  parameter int unsigned ACC_BITS = 32,
  parameter int unsigned DEPTH    = 1024,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic                          accumulate,
  input  logic [COLS-1:0][ACC_BITS-1:0] wr_data,
  input  logic                          rd_en,
  input  logic [AW-1:0]                 rd_addr,
  output logic [COLS-1:0][ACC_BITS-1:0] rd_data
);

  logic [COLS-1:0][ACC_BITS-1:0] mem [DEPTH];
  logic [COLS-1:0][ACC_BITS-1:0] sum;

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      sum[c] = (accumulate ? mem[wr_addr][c] : '0) + wr_data[c];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= sum;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
