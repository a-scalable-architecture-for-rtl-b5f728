// Testbench for complex_mac: accumulates four random complex products per
// lane and column and checks against 64-bit integer arithmetic with the same
// round-half-up scaling by 2^-SHIFT; 'first' restarts the sum.
module tb_complex_mac;
  import taurus_pkg::*;
  localparam int L = 4, C = 2, SH = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid, first, out_valid;
  cplx_t x [L], key [C][L], acc_in [C][L], acc_out [C][L];
  longint er [C][L], ei [C][L];
  int checks = 0, failures = 0;
  complex_mac #(.LANES(L), .COLS(C), .SHIFT(SH)) dut (.*);
  function automatic longint rnd(longint v); return (v + (64'sd1 <<< (SH - 1))) >>> SH; endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; first = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = 1; first = (t % 4 == 0);
      for (int i = 0; i < L; i++) begin
        longint xr, xi;
        xr = longint'($signed($urandom)) >>> 2; xi = longint'($signed($urandom)) >>> 2;
        x[i].re = 48'(xr); x[i].im = 48'(xi);
        for (int c = 0; c < C; c++) begin
          longint kr, ki;
          kr = longint'($signed($urandom)) >>> 3; ki = longint'($signed($urandom)) >>> 3;
          key[c][i].re = 48'(kr); key[c][i].im = 48'(ki);
          acc_in[c][i] = first ? '{re: 48'h5a5a5a, im: 48'h1234} : acc_out[c][i];
          if (first) begin er[c][i] = 0; ei[c][i] = 0; end
          er[c][i] += rnd(xr * kr - xi * ki);
          ei[c][i] += rnd(xr * ki + xi * kr);
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int c = 0; c < C; c++) for (int i = 0; i < L; i++) begin
        checks++;
        if (longint'(acc_out[c][i].re) != er[c][i] || longint'(acc_out[c][i].im) != ei[c][i]) begin
          failures++; if (failures < 5) $display("t=%0d c=%0d i=%0d got %0d,%0d exp %0d,%0d", t, c, i, acc_out[c][i].re, acc_out[c][i].im, er[c][i], ei[c][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
