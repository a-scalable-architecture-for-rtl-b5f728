// Testbench for fft_b: random 128-point vectors through a forward unscaled
// instance and an inverse scaled instance, with the radix-2 stage in use and
// bypassed (two 64-point transforms); compared with direct DFTs in real
// arithmetic within a small tolerance. Latency 4 cycles, one vector per cycle,
// and the bypass setting travels with its vector.
module tb_fft_b;
  import taurus_pkg::*;
  localparam int P = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid, bypass_r2, ov_f, ov_i;
  cplx_t din [P], df [P], di [P];
  real xr [10][P], xi [10][P];
  int checks = 0, failures = 0, bypassed = 0;
  real maxerr_f = 0, maxerr_i = 0;
  fft_b #(.INVERSE(1'b0), .SCALE(1'b0)) u_f (.clk, .in_valid, .bypass_r2, .din, .out_valid(ov_f), .dout(df));
  fft_b #(.INVERSE(1'b1), .SCALE(1'b1)) u_i (.clk, .in_valid, .bypass_r2, .din, .out_valid(ov_i), .dout(di));
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(int v, bit byp);
    int len;
    len = byp ? 64 : 128;
    for (int k = 0; k < P; k++) begin
      real sr, si, ir, ii, e;
      int base, kk;
      base = byp ? (k / 64) * 64 : 0; kk = k - base;
      sr = 0; si = 0; ir = 0; ii = 0;
      for (int n = 0; n < len; n++) begin
        real c, s;
        c = $cos(2.0 * 3.14159265358979323846 * n * kk / len);
        s = $sin(2.0 * 3.14159265358979323846 * n * kk / len);
        sr += xr[v][base+n] * c + xi[v][base+n] * s;  si += xi[v][base+n] * c - xr[v][base+n] * s;
        ir += xr[v][base+n] * c - xi[v][base+n] * s;  ii += xi[v][base+n] * c + xr[v][base+n] * s;
      end
      ir /= len; ii /= len;
      e = ((sr - real'(df[k].re)) ** 2 + (si - real'(df[k].im)) ** 2) ** 0.5;
      if (e > maxerr_f) maxerr_f = e;
      checks++; if (e > 256.0) failures++;
      e = ((ir - real'(di[k].re)) ** 2 + (ii - real'(di[k].im)) ** 2) ** 0.5;
      if (e > maxerr_i) maxerr_i = e;
      checks++; if (e > 8.0) failures++;
    end
  endtask
  bit byps [10];
  initial begin
    in_valid = 0; bypass_r2 = 0;
    for (int n = 0; n < P; n++) din[n] = '0;
    @(negedge clk);
    for (int v = 0; v < 10; v++) begin
      for (int n = 0; n < P; n++) begin
        int a, b;
        a = $signed($urandom) >>> 2; b = $signed($urandom) >>> 2;
        xr[v][n] = a; xi[v][n] = b;
        din[n].re = 48'(a); din[n].im = 48'(b);
      end
      byps[v] = v[0]; bypass_r2 = v[0]; if (v[0]) bypassed++;
      in_valid = 1;
      @(negedge clk);
      if (v >= 3) begin checks++; if (!ov_f || !ov_i) failures++; check(v - 3, byps[v - 3]); end
    end
    in_valid = 0;
    for (int v = 7; v < 10; v++) begin
      @(negedge clk);
      checks++; if (!ov_f || !ov_i) failures++;
      check(v, byps[v]);
    end
    @(negedge clk); checks++; if (ov_f) failures++;
    checks++; if (bypassed == 0) failures++;
    $display("max error forward %f inverse %f", maxerr_f, maxerr_i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
