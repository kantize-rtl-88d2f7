// kan_mlp_workload_tb: a whole two-layer KAN MLP of the paper's FPGA
// workload family [784, n, 10] (here n = 32, batch 2) run through the
// accelerator on a reduced 8 x 8 array. The bench plays the host: it tiles
// each layer into 8-input x 8-output tiles, preloads each coefficient tile,
// streams the batch with overwrite for the first input tile and accumulate
// for the others, reads the layer results back through the requantizer and
// feeds the resulting codes to the second layer. Both layers' raw sums and
// codes are compared with a floating-point Cox-de Boor reference; the
// reference requantizes its own layer-1 sums, so layer 2 is checked against
// values that never passed through the design. Coefficients are random
// 8-bit values, inputs random codes on the grid (G = 5, P = 3).
module kan_mlp_workload_tb;
  import kan_pkg::*;
  import kan_ref_pkg::*;

  localparam int ROWS = 8, COLS = 8;
  localparam int N0 = 784, N1 = 32, N2 = 10, M = 2;
  localparam int G = G_DEF, P = P_DEF, K = K_BITS_DEF, HB = B_BITS_DEF;
  localparam int WB = W_BITS_DEF, ACC = ACC_BITS_DEF;
  localparam int NB = G + P;
  localparam int AB = idx_bits(G, P) + K;
  localparam int AW = $clog2(ACC_DEPTH_DEF);
  localparam int RQ_MULT = 1, RQ_SHIFT = 3, RQ_ZERO = 1408;
  localparam longint CMAX = longint'(G + 2 * P) * (1 << K) - 1;

  logic clk = 0, rst_n = 0;
  logic w_valid = 0, w_ready;
  logic [COLS-1:0][NB-1:0][WB-1:0] w_row = '0;
  logic start = 0, accumulate = 0, busy, done;
  logic [15:0] batch_len = '0;
  logic [AW-1:0] acc_base = '0;
  logic act_valid = 0, act_ready;
  logic [ROWS-1:0][AB-1:0] act_vec = '0;
  logic rd_en = 0, rd_valid;
  logic [AW-1:0] rd_addr = '0;
  logic [15:0] rq_mult = 16'(RQ_MULT);
  logic [5:0] rq_shift = 6'(RQ_SHIFT);
  logic signed [AB:0] rq_zero = (AB+1)'(RQ_ZERO);
  logic [COLS-1:0][ACC-1:0] rd_acc;
  logic [COLS-1:0][AB-1:0] rd_code;
  logic [COLS-1:0] rd_clipped;

  int w1 [N0][N1][];
  int w2 [N1][N2][];
  int x0 [M][N0];           // input codes
  int x1 [M][N1];           // reference layer-1 codes
  int checks = 0, failures = 0;
  int n_tiles = 0;
  int cyc = 0, cyc_start = 0;

  kantize_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ck(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got=%0d exp=%0d", what, got, exp_v);
    end
  endtask

  function automatic longint rq(longint e);
    longint q;
    q = e * RQ_MULT + (1 << (RQ_SHIFT - 1));
    q = (q >= 0) ? q / (1 << RQ_SHIFT) : -((-q + (1 << RQ_SHIFT) - 1) / (1 << RQ_SHIFT));
    q = q + RQ_ZERO;
    return (q < 0) ? 0 : (q > CMAX) ? CMAX : q;
  endfunction

  // One layer: nin inputs (codes in xin), nout outputs; coefficient of
  // (i, k, j) from wsel. Results go to the accumulator at ct*M + m.
  task automatic run_layer(int layer, int nin, int nout, ref int xin [M][N0]);
    int itiles, ctiles;
    itiles = (nin + ROWS - 1) / ROWS;
    ctiles = (nout + COLS - 1) / COLS;
    for (int ct = 0; ct < ctiles; ct++)
      for (int it = 0; it < itiles; it++) begin
        for (int r = ROWS - 1; r >= 0; r--) begin
          int i;
          i = it * ROWS + r;
          for (int c = 0; c < COLS; c++) begin
            int j;
            j = ct * COLS + c;
            for (int k = 0; k < NB; k++)
              if (i < nin && j < nout) w_row[c][k] = WB'((layer == 1) ? w1[i][j][k] : w2[i][j][k]);
              else w_row[c][k] = '0;
          end
          w_valid = 1;
          while (!w_ready) @(negedge clk);
          @(negedge clk);
        end
        w_valid = 0;
        start = 1; batch_len = 16'(M); acc_base = AW'(ct * M); accumulate = (it > 0);
        @(negedge clk);
        start = 0;
        for (int m = 0; m < M; m++) begin
          act_valid = 1;
          for (int r = 0; r < ROWS; r++) begin
            int i;
            i = it * ROWS + r;
            act_vec[r] = (i < nin) ? AB'(xin[m][i]) : AB'(15 << K);
          end
          while (!act_ready) @(negedge clk);
          @(negedge clk);
        end
        act_valid = 0;
        while (!done) @(negedge clk);
        @(negedge clk);
        n_tiles++;
      end
  endtask

  initial begin
    int xin [M][N0];
    for (int i = 0; i < N0; i++)
      for (int j = 0; j < N1; j++) begin
        w1[i][j] = new[NB];
        for (int k = 0; k < NB; k++) w1[i][j][k] = $signed(8'($urandom)) / 8;
      end
    for (int i = 0; i < N1; i++)
      for (int j = 0; j < N2; j++) begin
        w2[i][j] = new[NB];
        for (int k = 0; k < NB; k++) w2[i][j][k] = $signed(8'($urandom));
      end
    for (int m = 0; m < M; m++)
      for (int i = 0; i < N0; i++)
        x0[m][i] = $urandom_range(0, int'(CMAX));
    // reference layer 1 and its codes
    for (int m = 0; m < M; m++)
      for (int j = 0; j < N1; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < N0; i++) e += conn(x0[m][i] >> K, x0[m][i] % (1 << K), w1[i][j], G, P, K, HB);
        x1[m][j] = int'(rq(e));
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cyc_start = cyc;
    // ---- layer 1 ----
    xin = x0;
    run_layer(1, N0, N1, xin);
    for (int ct = 0; ct < (N1 + COLS - 1) / COLS; ct++)
      for (int m = 0; m < M; m++) begin
        rd_en = 1; rd_addr = AW'(ct * M + m);
        @(negedge clk);
        rd_en = 0;
        for (int c = 0; c < COLS; c++) begin
          int j;
          j = ct * COLS + c;
          if (j < N1) begin
            ck("layer1 code", rd_code[c], x1[m][j]);
            xin[m][j] = int'(rd_code[c]);
          end
        end
      end
    // ---- layer 2, fed with the codes read back from layer 1 ----
    run_layer(2, N1, N2, xin);
    for (int ct = 0; ct < (N2 + COLS - 1) / COLS; ct++)
      for (int m = 0; m < M; m++) begin
        rd_en = 1; rd_addr = AW'(ct * M + m);
        @(negedge clk);
        rd_en = 0;
        for (int c = 0; c < COLS; c++) begin
          int j;
          longint e;
          j = ct * COLS + c;
          e = 0;
          if (j < N2) begin
            for (int i = 0; i < N1; i++) e += conn(x1[m][i] >> K, x1[m][i] % (1 << K), w2[i][j], G, P, K, HB);
            ck("layer2 sum", longint'($signed(rd_acc[c])), e);
          end
        end
      end
    ck("tiles run", n_tiles, ((N0 + ROWS - 1) / ROWS) * ((N1 + COLS - 1) / COLS)
                            + ((N1 + ROWS - 1) / ROWS) * ((N2 + COLS - 1) / COLS));
    $display("workload [%0d,%0d,%0d] batch %0d on %0dx%0d: %0d tiles, %0d cycles",
             N0, N1, N2, M, ROWS, COLS, n_tiles, cyc - cyc_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
