// kan_sa_ctrl_tb: drives the controller with a model of the array in which
// every issued activation returns as a result LAT cycles later. Checks:
// coefficient rows shift only while idle (w_valid held high during batches
// must be refused), activations are accepted only in a batch and never more
// than batch_len, results are written to acc_base, acc_base+1, ... with the
// latched accumulate flag, done pulses once per batch after the last write,
// and batch_len = 0 runs one sample.
module kan_sa_ctrl_tb;
  localparam int CNT = 16, AW = 10, LAT = 7;

  logic clk = 0, rst_n = 0;
  logic start = 0, accumulate = 0, busy, done;
  logic [CNT-1:0] batch_len = '0;
  logic [AW-1:0]  acc_base = '0;
  logic w_valid = 0, w_ready, w_shift;
  logic act_valid = 0, act_ready, act_fire;
  logic res_valid, wr_en, wr_accumulate;
  logic [AW-1:0] wr_addr;
  logic [LAT-1:0] pipe = '0;
  int checks = 0, failures = 0;
  int n_wstall = 0, n_astall = 0, n_shift = 0;

  kan_sa_ctrl #(.CNT_BITS(CNT), .AW(AW)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) pipe <= {pipe[LAT-2:0], act_fire};
  assign res_valid = pipe[LAT-1];

  always @(negedge clk) if (rst_n) begin
    if (w_valid && !w_ready) n_wstall++;
    if (act_valid && !act_ready) n_astall++;
    if (w_shift) n_shift++;
    checks++;
    if (w_shift && busy) begin failures++; $display("shift during batch"); end
  end

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic batch(int len, int base, bit accu);
    int issued, written, cycles, dones;
    @(negedge clk);
    start = 1; batch_len = CNT'(len); acc_base = AW'(base); accumulate = accu;
    @(negedge clk);
    start = 0; accumulate = ~accu;   // must have been latched
    ck("busy", busy, 1);
    issued = 0; written = 0; cycles = 0; dones = 0;
    w_valid = 1;                      // coefficient rows offered all batch long
    while (dones == 0 && cycles < 500) begin
      act_valid = ($urandom_range(0, 3) != 0);
      #1;
      ck("w_ready low in batch", w_ready, 0);
      if (act_fire) issued++;
      if (wr_en) begin
        ck("wr_addr", wr_addr, (base + written) % (1 << AW));
        ck("wr_accumulate", wr_accumulate, accu);
        written++;
      end
      @(posedge clk);
      #1;
      if (done) dones++;
      @(negedge clk);
      cycles++;
    end
    act_valid = 0;
    w_valid = 0;
    ck("issued", issued, (len == 0) ? 1 : len);
    ck("written", written, (len == 0) ? 1 : len);
    ck("done seen", dones, 1);
    @(negedge clk);
    ck("idle after done", busy, 0);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    ck("idle after reset", busy, 0);
    // activations offered while idle are refused
    act_valid = 1;
    @(negedge clk);
    ck("act_ready idle", act_ready, 0);
    act_valid = 0;
    // preload 4 rows with a gap
    for (int i = 0; i < 5; i++) begin
      w_valid = (i != 2);
      #1;
      ck("w_shift", w_shift, (i != 2));
      @(negedge clk);
    end
    w_valid = 0;
    batch(9, 5, 0);
    batch(3, 1022, 1);     // wraps the address
    batch(0, 7, 1);
    ck("weight stall seen", n_wstall > 0, 1);
    ck("act stall seen", n_astall > 0, 1);
    ck("rows shifted", n_shift, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
