// Testbench for shutter_transpose: streams random polynomials of S lines
// (S cells of G values each) with random input gaps and checks that each
// polynomial leaves transposed (output line r, cell i = input line i, cell r),
// in order, and that writing and reading overlap: back-to-back input loses no
// cycle, so a steady stream takes one cycle per line.
module tb_shutter_transpose;
  import taurus_pkg::*;
  localparam int S = 8, G = 2, NP = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid; logic [2:0] out_line;
  cplx_t din [S][G], dout [S][G];
  cplx_t polys [NP][S][S][G];
  int checks = 0, failures = 0, pin = 0, pout = 0, lin = 0, lout = 0, cyc = 0, both = 0, mode_sw = 0;
  shutter_transpose #(.S(S), .G(G)) dut (.*);
  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (out_valid && in_valid && in_ready) both++;
    if (out_valid) begin
      checks++; if (int'(out_line) != lout) failures++;
      for (int i = 0; i < S; i++) for (int g = 0; g < G; g++) begin
        checks++;
        if (dout[i][g] != polys[pout][i][lout][g]) begin failures++; if (failures < 5) $display("poly %0d line %0d cell %0d", pout, lout, i); end
      end
      lout++; if (lout == S) begin lout = 0; pout++; end
    end
    if (in_valid && in_ready) begin lin++; if (lin == S) begin lin = 0; pin++; end end
  end
  initial begin
    int t0;
    for (int p = 0; p < NP; p++) for (int l = 0; l < S; l++) for (int i = 0; i < S; i++) for (int g = 0; g < G; g++)
      polys[p][l][i][g] = '{re: 48'({$urandom, $urandom}), im: 48'({$urandom, $urandom})};
    in_valid = 0;
    for (int i = 0; i < S; i++) for (int g = 0; g < G; g++) din[i][g] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    t0 = 0;
    while (pin < NP) begin
      @(negedge clk);
      if (pin == 6 && lin == 0 && t0 == 0) t0 = cyc;
      in_valid = (pin >= 6) ? 1'b1 : ($urandom_range(0, 3) != 0);
      for (int i = 0; i < S; i++) for (int g = 0; g < G; g++) din[i][g] = polys[pin][lin][i][g];
    end
    @(negedge clk); in_valid = 0;
    // last six polynomials were sent back to back: S lines each, no bubbles
    checks++; if (cyc - t0 > 6 * S + 1) begin failures++; $display("stream took %0d cycles", cyc - t0); end
    repeat (3 * S) @(posedge clk);
    checks++; if (pout != NP) failures++;
    checks++; if (both == 0) failures++;
    $display("overlapped write+read cycles: %0d", both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
