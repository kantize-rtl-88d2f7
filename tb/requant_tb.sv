// requant_tb: random and corner-case check of the requantizer at the default
// grid (G = 5, P = 3, K = 8: codes 0..2815). The reference computes
// floor((acc*mult + 2^(shift-1)) / 2^shift) + zero with 64-bit integers and
// clips it to the code range; both clipping sides must be exercised.
module requant_tb;
  import kan_pkg::*;

  localparam int G = G_DEF, P = P_DEF, K = K_BITS_DEF, ACC = ACC_BITS_DEF;
  localparam int AB = idx_bits(G, P) + K;
  localparam longint CMAX = longint'(G + 2 * P) * (1 << K) - 1;

  logic signed [ACC-1:0] acc;
  logic [15:0] mult;
  logic [5:0]  shift;
  logic signed [AB:0] zero;
  logic [AB-1:0] code;
  logic clipped;
  bit clk = 0;
  int checks = 0, failures = 0, n_lo = 0, n_hi = 0, n_in = 0;

  requant dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(longint a, longint sh);
    longint d;
    d = longint'(1) << sh;
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  task automatic one(longint a, int m, int sh, int z);
    longint v, e;
    bit ec;
    acc = ACC'(a); mult = 16'(m); shift = 6'(sh); zero = (AB+1)'(z);
    @(posedge clk);
    v = fdiv(a * m + ((sh == 0) ? 0 : (longint'(1) << (sh - 1))), sh) + z;
    ec = 0;
    if (v < 0) begin e = 0; ec = 1; n_lo++; end
    else if (v > CMAX) begin e = CMAX; ec = 1; n_hi++; end
    else begin e = v; n_in++; end
    checks++;
    if (longint'(code) != e || clipped != ec) begin
      failures++;
      if (failures < 10) $display("MISMATCH acc=%0d m=%0d sh=%0d z=%0d got=%0d/%0d exp=%0d/%0d",
                                  a, m, sh, z, code, clipped, e, ec);
    end
  endtask

  initial begin
    one(0, 1, 0, 0);
    one(CMAX, 1, 0, 0);
    one(CMAX + 1, 1, 0, 0);
    one(-1, 1, 0, 0);
    one(-3, 1, 1, 1);       // -1.5 rounds to -1, + 1 = 0
    one(3, 1, 1, 0);        // 1.5 rounds to 2
    one(1000, 3, 2, 100);
    for (int n = 0; n < 20000; n++) begin
      longint a;
      a = $signed(ACC'($urandom)) >>> $urandom_range(0, 24);
      one(a, $urandom_range(0, 65535), $urandom_range(0, 40), $urandom_range(0, 4000) - 1000);
    end
    checks++;
    if (n_lo == 0 || n_hi == 0 || n_in == 0) begin
      failures++;
      $display("coverage lo=%0d hi=%0d in=%0d", n_lo, n_hi, n_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
