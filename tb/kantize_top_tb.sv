// kantize_top_tb: end-to-end run of one KAN layer on a reduced 4 x 3 array.
//
// The layer has NIN = 10 inputs and NOUT = 5 outputs, batch M = 6. The bench
// acts as the host: for every column tile and input tile it preloads the
// coefficient tile (last array row first), starts a batch into accumulator
// entries ct*M .. ct*M+M-1 (overwrite for the first input tile, accumulate
// for the rest) and streams the activation vectors, with a bubble. Rows past
// the last input get a code outside the grid and zero coefficients. Then it
// reads every accumulator entry back (twice, with two requantizer settings)
// and compares both the raw sum and the requantized next-layer code with a floating-point reference of
//     a_out[j] = sum_i sum_k b_k(a_in[i]) * w[i,k,j].
// It also checks the accept-to-write latency ROWS + COLS and counts each
// mechanism (preload, refused coefficient rows during a batch, refused
// activations while idle, bubbles, overwrite, accumulate, edge-of-grid
// codes, out-of-grid codes, requantization clipping on both sides); one that
// never happened is a failure.
module kantize_top_tb;
  import kan_pkg::*;
  import kan_ref_pkg::*;

  localparam int ROWS = 4, COLS = 3;
  localparam int NIN = 10, NOUT = 5, M = 6;
  localparam int G = G_DEF, P = P_DEF, K = K_BITS_DEF, HB = B_BITS_DEF;
  localparam int WB = W_BITS_DEF, ACC = ACC_BITS_DEF;
  localparam int NB = G + P;
  localparam int AB = idx_bits(G, P) + K;
  localparam int AW = $clog2(ACC_DEPTH_DEF);
  localparam int ITILES = (NIN + ROWS - 1) / ROWS;
  localparam int CTILES = (NOUT + COLS - 1) / COLS;
  localparam int RQ_MULT = 1, RQ_SHIFT = 4, RQ_ZERO = 1408;
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

  int wt [NIN][NOUT][];
  int aj [M][NIN], af [M][NIN];
  int zero_w [];
  int checks = 0, failures = 0;
  int cyc = 0;
  int first_fire = -1, first_write = -1;
  // mechanism counters
  int n_preload = 0, n_wstall = 0, n_astall = 0, n_bubble = 0;
  int n_overwrite = 0, n_accum = 0, n_edge = 0, n_outside = 0;
  int n_clip_lo = 0, n_clip_hi = 0, n_in_range = 0;

  kantize_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (w_valid && w_ready) n_preload++;
    if (w_valid && !w_ready) n_wstall++;
    if (act_valid && !act_ready) n_astall++;
    if (act_valid && act_ready && first_fire < 0) first_fire = cyc;
    if (dut.wr_en && first_write < 0) first_write = cyc;
    if (dut.wr_en && dut.wr_acc) n_accum++;
    if (dut.wr_en && !dut.wr_acc) n_overwrite++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic int code_of(int m, int i);
    if (i >= NIN) return 15 << K;           // padding: outside the grid
    return (aj[m][i] << K) | af[m][i];
  endfunction

  task automatic run_tile(int ct, int it);
    // preload, array row ROWS-1 first
    for (int r = ROWS - 1; r >= 0; r--) begin
      int i;
      i = it * ROWS + r;
      for (int c = 0; c < COLS; c++) begin
        int j;
        j = ct * COLS + c;
        for (int k = 0; k < NB; k++)
          w_row[c][k] = (i < NIN && j < NOUT) ? WB'(wt[i][j][k]) : '0;
      end
      w_valid = 1;
      while (!w_ready) @(negedge clk);
      @(negedge clk);
    end
    w_valid = 0;
    // an activation offered before the batch starts is refused
    act_valid = 1;
    for (int r = 0; r < ROWS; r++) act_vec[r] = AB'(code_of(0, it * ROWS + r));
    @(negedge clk);
    start = 1; batch_len = 16'(M); acc_base = AW'(ct * M); accumulate = (it > 0);
    @(negedge clk);
    start = 0;
    for (int m = 0; m < M; m++) begin
      if (m == 2) begin            // bubble, with a refused coefficient row
        act_valid = 0;
        w_valid = 1;
        n_bubble++;
        @(negedge clk);
        w_valid = 0;
      end
      act_valid = 1;
      for (int r = 0; r < ROWS; r++) act_vec[r] = AB'(code_of(m, it * ROWS + r));
      while (!act_ready) @(negedge clk);
      @(negedge clk);
    end
    act_valid = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    zero_w = new[NB];
    foreach (zero_w[k]) zero_w[k] = 0;
    for (int i = 0; i < NIN; i++)
      for (int j = 0; j < NOUT; j++) begin
        wt[i][j] = new[NB];
        for (int k = 0; k < NB; k++) wt[i][j][k] = $signed(8'($urandom));
      end
    for (int m = 0; m < M; m++)
      for (int i = 0; i < NIN; i++) begin
        aj[m][i] = $urandom_range(0, G + 2 * P - 1);
        af[m][i] = $urandom_range(0, (1 << K) - 1);
        if (aj[m][i] < P || aj[m][i] >= G + P) n_edge++;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int ct = 0; ct < CTILES; ct++)
      for (int it = 0; it < ITILES; it++) begin
        run_tile(ct, it);
        if (it * ROWS + ROWS > NIN) n_outside++;
      end
    ck("latency accept->write", first_write - first_fire, ROWS + COLS);
    // read back and compare, with two requantization settings
    for (int pass = 0; pass < 2; pass++)
    for (int ct = 0; ct < CTILES; ct++)
      for (int m = 0; m < M; m++) begin
        rq_mult  = 16'(pass ? 4 : RQ_MULT);
        rq_shift = 6'(pass ? 0 : RQ_SHIFT);
        rq_zero  = (AB+1)'(pass ? 0 : RQ_ZERO);
        rd_en = 1; rd_addr = AW'(ct * M + m);
        @(negedge clk);
        rd_en = 0;
        ck("rd_valid", rd_valid, 1);
        for (int c = 0; c < COLS; c++) begin
          int j;
          longint e, q;
          j = ct * COLS + c;
          e = 0;
          if (j < NOUT)
            for (int i = 0; i < NIN; i++) e += conn(aj[m][i], af[m][i], wt[i][j], G, P, K, HB);
          ck("acc", longint'($signed(rd_acc[c])), e);
          // reference requantization: floor((e*mult + 2^(shift-1)) / 2^shift) + zero
          if (pass == 0) begin
            q = e * RQ_MULT + (1 << (RQ_SHIFT - 1));
            q = (q >= 0) ? q / (1 << RQ_SHIFT) : -((-q + (1 << RQ_SHIFT) - 1) / (1 << RQ_SHIFT));
            q = q + RQ_ZERO;
          end else q = 4 * e;
          if (q < 0) begin q = 0; n_clip_lo++; end
          else if (q > CMAX) begin q = CMAX; n_clip_hi++; end
          else n_in_range++;
          ck("code", longint'(rd_code[c]), q);
        end
      end
    $display("mechanisms: preload=%0d wstall=%0d astall=%0d bubble=%0d overwrite=%0d accumulate=%0d edge=%0d outside=%0d clip_lo=%0d clip_hi=%0d in_range=%0d",
             n_preload, n_wstall, n_astall, n_bubble, n_overwrite, n_accum, n_edge, n_outside,
             n_clip_lo, n_clip_hi, n_in_range);
    ck("preload happened", n_preload > 0, 1);
    ck("coefficient stall happened", n_wstall > 0, 1);
    ck("activation stall happened", n_astall > 0, 1);
    ck("bubble happened", n_bubble > 0, 1);
    ck("overwrite happened", n_overwrite > 0, 1);
    ck("accumulate happened", n_accum > 0, 1);
    ck("edge code happened", n_edge > 0, 1);
    ck("outside code happened", n_outside > 0, 1);
    ck("clip low happened", n_clip_lo > 0, 1);
    ck("clip high happened", n_clip_hi > 0, 1);
    ck("in-range code happened", n_in_range > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
