// Testbench for round_unit: drives random 64-bit torus words with random
// base/level settings and checks each output lane against round-to-nearest
// of the top B*d bits, computed here with a plain 128-bit sum.
// Latency must be one cycle.
module tb_round_unit;
  import taurus_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] base_log; logic [2:0] levels;
  logic in_valid; logic [15:0] in_tag; torus_t din [L];
  logic out_valid; logic [15:0] out_tag; torus_t dout [L];
  int checks = 0, failures = 0;
  round_unit #(.LANES(L)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    torus_t ref_in [L];
    int bl, lv, drop;
    logic [127:0] wide, expv;
    in_valid = 0; base_log = 23; levels = 1; in_tag = 0;
    for (int i = 0; i < L; i++) din[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      bl = 1 + $urandom_range(0, 30); lv = 1 + $urandom_range(0, 1);
      @(negedge clk);
      base_log = 6'(bl); levels = 3'(lv); in_valid = 1; in_tag = 16'(t);
      for (int i = 0; i < L; i++) begin din[i] = {$urandom, $urandom}; ref_in[i] = din[i]; end
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid || out_tag != 16'(t)) failures++;
      drop = 64 - bl * lv;
      for (int i = 0; i < L; i++) begin
        wide = {64'd0, ref_in[i]} + (128'd1 << (drop - 1));
        expv = (wide >> drop) % (128'd1 << (bl * lv));
        checks++;
        if (dout[i] != expv[63:0]) begin
          failures++;
          if (failures < 5) $display("lane %0d B=%0d d=%0d in=%h got %h exp %h", i, bl, lv, ref_in[i], dout[i], expv[63:0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
