// Testbench for fft_a: random 256-point vectors go through a forward unscaled
// instance and an inverse instance with per-stage scaling; outputs are
// compared with a direct DFT computed in real arithmetic, within a tolerance
// of a few units of the 48-bit fixed point. Also checks the 4-cycle latency
// and one transform per cycle.
module tb_fft_a;
  import taurus_pkg::*;
  localparam int P = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid, ov_f, ov_i;
  cplx_t din [P], df [P], di [P];
  real xr [8][P], xi [8][P];
  int checks = 0, failures = 0;
  real maxerr_f = 0, maxerr_i = 0;
  fft_a #(.INVERSE(1'b0), .SCALE(1'b0)) u_f (.clk, .in_valid, .din, .out_valid(ov_f), .dout(df));
  fft_a #(.INVERSE(1'b1), .SCALE(1'b1)) u_i (.clk, .in_valid, .din, .out_valid(ov_i), .dout(di));
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(int v);
    for (int k = 0; k < P; k++) begin
      real sr, si, ir, ii, e;
      sr = 0; si = 0; ir = 0; ii = 0;
      for (int n = 0; n < P; n++) begin
        real c, s;
        c = $cos(2.0 * 3.14159265358979323846 * n * k / P);
        s = $sin(2.0 * 3.14159265358979323846 * n * k / P);
        sr += xr[v][n] * c + xi[v][n] * s;  si += xi[v][n] * c - xr[v][n] * s;
        ir += xr[v][n] * c - xi[v][n] * s;  ii += xi[v][n] * c + xr[v][n] * s;
      end
      ir /= P; ii /= P;
      e = (sr - real'(df[k].re)) ** 2 + (si - real'(df[k].im)) ** 2;
      e = e ** 0.5; if (e > maxerr_f) maxerr_f = e;
      checks++; if (e > 256.0) failures++;
      e = (ir - real'(di[k].re)) ** 2 + (ii - real'(di[k].im)) ** 2;
      e = e ** 0.5; if (e > maxerr_i) maxerr_i = e;
      checks++; if (e > 8.0) failures++;
    end
  endtask
  initial begin
    in_valid = 0;
    for (int n = 0; n < P; n++) din[n] = '0;
    @(negedge clk);
    for (int v = 0; v < 8; v++) begin
      for (int n = 0; n < P; n++) begin
        int a, b;
        a = (v == 0) ? ((n == 3) ? 1000000 : 0) : $signed($urandom) >>> 2;
        b = (v == 0) ? 0 : $signed($urandom) >>> 2;
        xr[v][n] = a; xi[v][n] = b;
        din[n].re = 48'(a); din[n].im = 48'(b);
      end
      in_valid = 1;
      @(negedge clk);
      if (v >= 3) begin
        checks++; if (!ov_f || !ov_i) failures++;
        check(v - 3);
      end
    end
    in_valid = 0;
    for (int v = 5; v < 8; v++) begin
      @(negedge clk);
      checks++; if (!ov_f || !ov_i) failures++;
      check(v);
    end
    @(negedge clk); checks++; if (ov_f) failures++;
    $display("max error forward %f inverse %f", maxerr_f, maxerr_i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
