// kan_pe_tb: one processing element at the default sizes. Random coefficient
// banks are preloaded through w_in/w_shift; then random activation codes
// (including the grid edges, where some basis functions fall outside
// 0..G+P-1, and codes outside the grid) and random partial sums are driven.
// Each cycle's psum_out must equal psum_in + sum_s B(s+f) * w[j-s] one cycle
// later, computed with the floating-point reference; act_out must follow
// act_in by one cycle and w_out must show the loaded bank.
module kan_pe_tb;
  import kan_pkg::*;
  import kan_ref_pkg::*;

  localparam int G = G_DEF, P = P_DEF, K = K_BITS_DEF, HB = B_BITS_DEF;
  localparam int WB = W_BITS_DEF, ACC = ACC_BITS_DEF;
  localparam int NB = G + P;
  localparam int AB = idx_bits(G, P) + K;

  logic clk = 0, rst_n = 0;
  logic w_shift = 0;
  logic [NB-1:0][WB-1:0] w_in, w_out;
  logic act_valid_in = 0, act_valid_out;
  logic [AB-1:0] act_in = '0, act_out;
  logic signed [ACC-1:0] psum_in = '0, psum_out;
  int checks = 0, failures = 0;
  int w [];
  int n_edge = 0, n_outside = 0, n_bubble = 0;

  kan_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got=%0d exp=%0d", what, got, exp_v);
    end
  endtask

  initial begin
    w = new[NB];
    w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int bank = 0; bank < 8; bank++) begin
      // preload
      @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        w[i] = (bank == 0) ? ((i % 2) ? -128 : 127) : $signed(8'($urandom));
        w_in[i] = WB'(w[i]);
      end
      w_shift = 1;
      @(negedge clk);
      w_shift = 0;
      w_in = '0;
      for (int i = 0; i < NB; i++) check("w_out", $signed(w_out[i]), w[i]);
      // stream
      for (int n = 0; n < 400; n++) begin
        int j, f;
        longint pin, exp_v;
        bit v;
        j   = $urandom_range(0, 15);
        f   = $urandom_range(0, (1 << K) - 1);
        v   = ($urandom_range(0, 9) != 0);
        pin = $signed(ACC'($urandom)) >>> 4;
        act_valid_in = v;
        act_in  = {4'(j), K'(f)};
        psum_in = ACC'(pin);
        if (!v) n_bubble++;
        else if (j >= G + 2 * P) n_outside++;
        else if (j < P || j >= G + P) n_edge++;
        exp_v = pin + (v ? conn(j, f, w, G, P, K, HB) : 0);
        @(negedge clk);
        check("psum", longint'(psum_out), exp_v);
        check("act", act_out, {4'(j), K'(f)});
        check("valid", act_valid_out, v);
      end
    end
    check("edge codes seen", n_edge > 0, 1);
    check("outside codes seen", n_outside > 0, 1);
    check("bubbles seen", n_bubble > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
