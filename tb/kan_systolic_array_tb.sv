// kan_systolic_array_tb: a reduced 4 x 5 array (other sizes at their
// defaults). The bench preloads random coefficients row by row (last row
// first), then drives a batch of random activation vectors with the row skew
// the array expects (row r one cycle behind row r-1), with a bubble in the
// middle of the batch. Each column output is compared with the reference
// sum over rows, and the cycle it appears in must be
// (issue cycle of the sample) + ROWS + c.
module kan_systolic_array_tb;
  import kan_pkg::*;
  import kan_ref_pkg::*;

  localparam int ROWS = 4, COLS = 5;
  localparam int G = G_DEF, P = P_DEF, K = K_BITS_DEF, HB = B_BITS_DEF;
  localparam int WB = W_BITS_DEF, ACC = ACC_BITS_DEF;
  localparam int NB = G + P;
  localparam int AB = idx_bits(G, P) + K;
  localparam int M = 12;          // samples
  localparam int BUBBLE_AT = 5;   // one idle slot before this sample

  logic clk = 0, rst_n = 0;
  logic w_shift = 0;
  logic [COLS-1:0][NB-1:0][WB-1:0] w_row = '0;
  logic [ROWS-1:0] act_valid = '0;
  logic [ROWS-1:0][AB-1:0] act = '0;
  logic [COLS-1:0] out_valid;
  logic [COLS-1:0][ACC-1:0] psum;

  int wt [ROWS][COLS][];
  int aj [M][ROWS], af [M][ROWS];
  int issue_cyc [M];
  int cyc = 0;
  int checks = 0, failures = 0;
  int seen [COLS];

  kan_systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < COLS; c++) if (out_valid[c]) begin
      int m;
      longint exp_v;
      m = seen[c];
      exp_v = 0;
      for (int r = 0; r < ROWS; r++) exp_v += conn(aj[m][r], af[m][r], wt[r][c], G, P, K, HB);
      checks++;
      if (longint'($signed(psum[c])) != exp_v) begin
        failures++;
        if (failures < 10) $display("MISMATCH m=%0d c=%0d got=%0d exp=%0d", m, c, $signed(psum[c]), exp_v);
      end
      checks++;
      if (cyc != issue_cyc[m] + ROWS + c) begin
        failures++;
        if (failures < 10) $display("LATENCY m=%0d c=%0d at %0d issued %0d", m, c, cyc, issue_cyc[m]);
      end
      seen[c]++;
    end
  end

  initial begin
    int slot [M];
    int t;
    for (int c = 0; c < COLS; c++) seen[c] = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        wt[r][c] = new[NB];
        for (int i = 0; i < NB; i++) wt[r][c][i] = $signed(8'($urandom));
      end
    for (int m = 0; m < M; m++)
      for (int r = 0; r < ROWS; r++) begin
        aj[m][r] = (m == 0) ? r : $urandom_range(0, 12);
        af[m][r] = $urandom_range(0, (1 << K) - 1);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // preload: row ROWS-1 first
    for (int r = ROWS - 1; r >= 0; r--) begin
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < NB; i++) w_row[c][i] = WB'(wt[r][c][i]);
      w_shift = 1;
      @(negedge clk);
    end
    w_shift = 0;
    w_row = '0;
    // schedule: sample m in slot slot[m] (a bubble before BUBBLE_AT)
    for (int m = 0; m < M; m++) slot[m] = m + ((m >= BUBBLE_AT) ? 1 : 0);
    t = 0;
    while (t < slot[M-1] + ROWS) begin
      for (int r = 0; r < ROWS; r++) begin
        int m;
        m = -1;
        for (int q = 0; q < M; q++) if (slot[q] == t - r) m = q;
        act_valid[r] = (m >= 0);
        act[r] = (m >= 0) ? {4'(aj[m][r]), K'(af[m][r])} : '0;
        if (m >= 0 && r == 0) issue_cyc[m] = cyc;
      end
      @(negedge clk);
      t++;
    end
    act_valid = '0;
    repeat (ROWS + COLS + 4) @(negedge clk);
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (seen[c] != M) begin
        failures++;
        $display("column %0d produced %0d of %0d results", c, seen[c], M);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
