// delay_line: DEPTH-stage register pipeline of WIDTH bits; DEPTH = 0 is a
// plain wire. Used to skew activations into the systolic array and to
// de-skew its column outputs. Registers reset to zero.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [DEPTH-1:0][WIDTH-1:0] stage;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) stage <= '0;
      else begin
        stage[0] <= d;
        for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end

endmodule
