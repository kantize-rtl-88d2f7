// bspline_lut_tb: exhaustive check of the B-spline table at the default
// sizes (P = 3, 2^8 entries per knot interval, 3-bit values). For every
// fraction and every s = 0..P the output must equal the floating-point
// Cox-de Boor value of B(s + (frac+1/2)/2^K), quantized to [0, peak].
// It also checks the symmetry B(s+f) = B(P+1-s-f) seen at the ports.
module bspline_lut_tb;
  import kan_pkg::*;
  import kan_ref_pkg::*;

  localparam int P = P_DEF;
  localparam int K = K_BITS_DEF;
  localparam int HB = B_BITS_DEF;

  logic [K-1:0]          frac;
  logic [P:0][HB-1:0]    vals;
  logic [P:0][HB-1:0]    vals_m;   // vals for the mirrored fraction
  int checks = 0, failures = 0;
  bit clk = 0;

  bspline_lut #(.P(P), .K_BITS(K), .B_BITS(HB)) dut (.frac(frac), .vals(vals));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nz = 0;
    for (int f = 0; f < (1 << K); f++) begin
      frac = K'(f);
      @(posedge clk);
      for (int s = 0; s <= P; s++) begin
        int exp_v;
        exp_v = bcode(s, f, P, K, HB);
        checks++;
        if (int'(vals[s]) != exp_v) begin
          failures++;
          if (failures < 10) $display("MISMATCH frac=%0d s=%0d got=%0d exp=%0d", f, s, vals[s], exp_v);
        end
        if (vals[s] != 0) nz++;
      end
      // mirror: B(s + f) with fraction f' = 2^K-1-f equals B(P - s + f)
      frac = K'((1 << K) - 1 - f);
      @(posedge clk);
      vals_m = vals;
      for (int s = 0; s <= P; s++) begin
        checks++;
        if (vals_m[P-s] != bcode(s, f, P, K, HB)) failures++;
      end
    end
    // the largest code must be reached near the peak
    frac = '1;
    @(posedge clk);
    checks++;
    if (vals[1] != HB'((1 << HB) - 1)) begin
      failures++;
      $display("peak code not reached: %0d", vals[1]);
    end
    checks++;
    if (nz == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
