// Testbench for lpu: random vector instructions (add, sub, plaintext
// multiply, modulus switch) checked against 64-bit arithmetic done here, and
// sequences of key-switching steps whose accumulator is compared with a
// reference that decomposes the scalars itself (rounding to B*d bits, balanced
// base-2^B digits, level 0 most significant). One-cycle result latency.
module tb_lpu;
  import taurus_pkg::*;
  localparam int NL = 4, E = 8, KC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; lpu_op_e op; torus_t a_in [NL][E], b_in [NL][E]; torus_t scalar; logic [4:0] log_n2;
  logic [1:0] chunk, acc_rd_chunk; logic ks_clear; torus_t ks_scalar [NL]; logic [2:0] ks_level [NL];
  logic [5:0] ks_base_log; logic [2:0] ks_levels; logic [NL-1:0] ks_lane_en; torus_t ksk [NL][E];
  torus_t acc_rd_data [E]; logic out_valid; torus_t dout [NL][E];
  int checks = 0, failures = 0;
  torus_t model [KC][E];
  lpu #(.NLANE(NL), .ELEMS(E), .KS_CHUNKS(KC)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint digit(torus_t x, int bl, int lv, int level);
    longint st, r, dg;
    int drop;
    drop = 64 - bl * lv;
    st = longint'((x >> drop) + ((x >> (drop - 1)) & 64'd1));
    if (bl * lv < 64) st = st & ((64'sd1 <<< (bl * lv)) - 1);
    dg = 0;
    for (int k = lv - 1; k >= 0; k--) begin
      r = st & ((64'sd1 <<< bl) - 1); st = longint'(unsigned'(st) >> bl);
      if (r > (64'sd1 <<< (bl - 1)) || (r == (64'sd1 <<< (bl - 1)) && ((st >>> (bl - 1)) & 1) == 1)) begin
        r -= (64'sd1 <<< bl); st += 1;
      end
      if (k == level) dg = r;
    end
    return dg;
  endfunction
  initial begin
    in_valid = 0; op = LPU_ADD; scalar = 0; log_n2 = 17; chunk = 0; acc_rd_chunk = 0; ks_clear = 0;
    ks_base_log = 3; ks_levels = 5; ks_lane_en = 0;
    for (int l = 0; l < NL; l++) begin ks_scalar[l] = 0; ks_level[l] = 0; for (int e = 0; e < E; e++) begin a_in[l][e] = 0; b_in[l][e] = 0; ksk[l][e] = 0; end end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      torus_t expv [NL][E];
      int o;
      o = $urandom_range(0, 3);
      op = lpu_op_e'(o); in_valid = 1;
      scalar = {$urandom, $urandom}; log_n2 = 5'($urandom_range(10, 20));
      for (int l = 0; l < NL; l++) for (int e = 0; e < E; e++) begin
        a_in[l][e] = {$urandom, $urandom}; b_in[l][e] = {$urandom, $urandom};
        case (o)
          0: expv[l][e] = a_in[l][e] + b_in[l][e];
          1: expv[l][e] = a_in[l][e] - b_in[l][e];
          2: expv[l][e] = a_in[l][e] * scalar;
          default: begin
            // nearest multiple of 2^(64-log_n2), taken modulo 2N
            logic [127:0] w;
            w = ({64'd0, a_in[l][e]} + (128'd1 << (63 - log_n2))) >> (64 - log_n2);
            expv[l][e] = w[63:0] & ((64'd1 << log_n2) - 1);
          end
        endcase
      end
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int l = 0; l < NL; l++) for (int e = 0; e < E; e++) begin
        checks++; if (dout[l][e] != expv[l][e]) begin failures++; if (failures < 5) $display("op %0d got %h exp %h", o, dout[l][e], expv[l][e]); end
      end
    end
    // key switching: random steps on random chunks
    for (int t = 0; t < 300; t++) begin
      int ch, bl, lv;
      ch = $urandom_range(0, KC - 1);
      bl = (t < 150) ? 3 : $urandom_range(2, 8); lv = (t < 150) ? 5 : $urandom_range(1, 4);
      ks_base_log = 6'(bl); ks_levels = 3'(lv);
      op = LPU_KS; in_valid = 1; chunk = 2'(ch); ks_clear = (t < KC) || ($urandom_range(0, 9) == 0);
      if (t < KC) begin ch = t; chunk = 2'(t); end
      ks_lane_en = 4'($urandom);
      for (int e = 0; e < E; e++) a_in[0][e] = {$urandom, $urandom};
      for (int e = 0; e < E; e++) begin
        torus_t s;
        s = ks_clear ? a_in[0][e] : model[ch][e];
        model[ch][e] = s;
      end
      for (int l = 0; l < NL; l++) begin
        ks_scalar[l] = {$urandom, $urandom}; ks_level[l] = 3'($urandom_range(0, lv - 1));
        for (int e = 0; e < E; e++) begin
          ksk[l][e] = {$urandom, $urandom};
          if (ks_lane_en[l]) model[ch][e] = model[ch][e] - torus_t'(digit(ks_scalar[l], bl, lv, int'(ks_level[l]))) * ksk[l][e];
        end
      end
      @(negedge clk); in_valid = 0; ks_clear = 0;
      checks++; if (out_valid) failures++;
      acc_rd_chunk = 2'(ch); #1;
      for (int e = 0; e < E; e++) begin
        checks++; if (acc_rd_data[e] != model[ch][e]) begin failures++; if (failures < 5) $display("ks t=%0d e=%0d got %h exp %h", t, e, acc_rd_data[e], model[ch][e]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
