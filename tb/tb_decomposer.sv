// Testbench for decomposer: feeds random rounded coefficients and checks that
// the signed digits recompose to the input modulo 2^(B*d), that every digit
// lies in [-2^(B-1), 2^(B-1)], that digits leave least significant first
// (out_level counting down) and that the input stalls for d-1 cycles per
// word while the output produces one digit word per cycle.
module tb_decomposer;
  import taurus_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] base_log; logic [2:0] levels;
  logic in_valid, in_ready; logic [15:0] in_tag; torus_t din [L];
  logic out_valid; logic [2:0] out_level; logic [15:0] out_tag;
  logic signed [31:0] dout [L];
  int checks = 0, failures = 0, stalls = 0, words_in = 0, digits_out = 0;
  decomposer #(.LANES(L)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // reference queue of accepted words
  torus_t q_in [$][L]; int q_lv [$];
  logic [127:0] recomp [L]; int nd;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) stalls++;
    if (out_valid) begin
      digits_out++;
      if (nd == 0) for (int i = 0; i < L; i++) recomp[i] = 0;
      for (int i = 0; i < L; i++) begin
        recomp[i] = recomp[i] + ({{96{dout[i][31]}}, dout[i]} << (int'(base_log) * nd));
        checks++;
        if ($signed(dout[i]) > (32'sd1 <<< (base_log - 1)) || $signed(dout[i]) < -(32'sd1 <<< (base_log - 1))) failures++;
      end
      checks++; if (int'(out_level) != q_lv[0] - 1 - nd) failures++;
      nd++;
      if (nd == q_lv[0]) begin
        for (int i = 0; i < L; i++) begin
          logic [127:0] m; m = (128'd1 << (int'(base_log) * q_lv[0])) - 1;
          checks++;
          if ((recomp[i] & m) != ({64'd0, q_in[0][i]} & m)) begin
            failures++;
            if (failures < 5) $display("lane %0d in %h recomposed %h", i, q_in[0][i], recomp[i][63:0]);
          end
        end
        void'(q_in.pop_front()); void'(q_lv.pop_front()); nd = 0;
      end
    end
    if (in_valid && in_ready) begin
      torus_t w [L];
      words_in++;
      for (int i = 0; i < L; i++) w[i] = din[i];
      q_in.push_back(w); q_lv.push_back(int'(levels));
    end
  end
  initial begin
    int t0, t1;
    nd = 0; in_valid = 0; base_log = 8; levels = 1; in_tag = 0;
    for (int i = 0; i < L; i++) din[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cfg = 0; cfg < 6; cfg++) begin
      @(negedge clk);
      base_log = 6'(cfg < 3 ? 23 : 4 + $urandom_range(0, 10));
      levels   = 3'(1 + cfg % 3);
      // stream 40 words; measure cycles
      t0 = $time / 10;
      for (int t = 0; t < 40; t++) begin
        in_valid = 1;
        for (int i = 0; i < L; i++) din[i] = {$urandom, $urandom} & ((64'd1 << (base_log * levels)) - 1);
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      t1 = $time / 10;
      checks++;
      if (t1 - t0 > 40 * int'(levels) + 2) begin failures++; $display("rate: %0d cycles for 40 words d=%0d", t1 - t0, levels); end
      repeat (10) @(posedge clk);
    end
    checks++; if (stalls == 0) failures++;
    checks++; if (q_in.size() != 0) failures++;
    $display("words %0d digits %0d stall cycles %0d", words_in, digits_out, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
