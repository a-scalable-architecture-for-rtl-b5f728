// Testbench for sample_extract: a random GLWE body polynomial sits in a
// word-organised memory with one-cycle reads; every output word of the
// extracted long LWE mask is requested and compared with
// a'[0] = A[0], a'[i] = -A[N-i] (output word w, lane m holds a'[128m+w]).
module tb_sample_extract;
  import taurus_pkg::*;
  localparam int L = 4, N = 128 * L;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] out_word, src_word; logic in_valid, out_valid;
  torus_t din [L], dout [L];
  torus_t A [N];
  int checks = 0, failures = 0;
  sample_extract #(.LANES(L)) dut (.*);
  logic vq;
  always_ff @(posedge clk) begin
    vq <= 0;
    for (int m = 0; m < L; m++) din[m] <= A[128 * m + src_word];
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < N; i++) A[i] = {$urandom, $urandom};
    in_valid = 0; out_word = 0;
    for (int w = 0; w < 130; w++) begin
      @(negedge clk);
      in_valid = (w > 0);
      out_word = 7'(w);
      if (w >= 2) begin
        int ww; ww = w - 2;
        checks++; if (!out_valid) failures++;
        for (int m = 0; m < L; m++) begin
          int i; torus_t e;
          i = 128 * m + ww;
          e = (i == 0) ? A[0] : -A[N - i];
          checks++;
          if (dout[m] != e) begin failures++; if (failures < 5) $display("w=%0d m=%0d got %h exp %h", ww, m, dout[m], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
