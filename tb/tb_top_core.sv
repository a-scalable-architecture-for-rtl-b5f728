// End-to-end test bench body for taurus_top, shared by the reduced and the
// full-size test benches (RR round-robin ciphertexts per cluster; RR = 12 is
// the design default and then the top is instantiated without overrides).
//
// Scenario, all four clusters at once:
//  1. load the twiddle buffer (twist and four-step factors computed here with
//     $cos / $sin), a sparse test polynomial pair (mask u, body v) into every
//     cluster's GLWE buffer, and one key-switching-key word;
//  2. LPU modulus switch of chosen torus values into the LWE buffers: mask
//     values a[c][i] for i < NS and 2N - b[c] at index NS; the LPU output is
//     checked against the expected 17-bit values;
//  3. one LPU key-switching step and one LPU add, checked element-wise;
//  4. blind rotation of NS iterations with a trivial bootstrapping key whose
//     GGSW rows encrypt 1 (row (p, l) holds the constant 2^(64 - B(l+1)) in
//     every bin of column p), streamed through the key queue; the result must
//     then be X^(sum a - b) * (u, v) exactly up to FFT rounding noise;
//  5. sample extraction of every ciphertext, compared with the expected
//     extraction of the rotated polynomials. The test values are multiples
//     of 2^41; a deviation of up to 2^36 (1/32 of that unit) is accepted as
//     fixed-point FFT noise, anything larger is an error.
// The blind rotation runs with B = 23, d = 1 and, when RUNS = 2, again with
// B = 12, d = 2 (decomposer stalls). In the second run the test values are
// small enough that the top digit is zero, so the level-0 key rows, whose
// constant 2^52 does not fit the 48-bit format, are zero.
// Mechanisms counted (a failure if one never happens): initial rotation,
// blind-rotation iteration, key-row word refill, key-queue back-pressure,
// I-FFT arbitration wait, cross-cluster synchronisation wait, decomposer
// stall, sample-extraction word, modulus switch, key-switching step.
module tb_top_core #(
  parameter int RR = 2,
  parameter int NS = 3,
  parameter int RUNS = 2     // 1: only the (23, 1) run
);
  import taurus_pkg::*;
  localparam int NCL = 4, CH = 5, N = 65536, NSP = 12;   // NSP nonzero coefficients per poly
  localparam int GAW = $clog2((2 * RR + 2) * 128), LAW = (RR * CH > 1) ? $clog2(RR * CH) : 1;
  localparam int CW = (RR > 1) ? $clog2(RR) : 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [5:0] base_log; logic [2:0] levels; logic [10:0] n_short; logic start, busy, done; logic [10:0] iter;
  logic kin_valid, kin_ready; cplx_t kin_data [2][256];
  logic tw_we; logic [7:0] tw_waddr; cplx_t tw_wdata [256];
  logic ksk_we; logic [7:0] ksk_waddr, ksk_raddr; torus_t ksk_wdata [4][64];
  logic gl_we [NCL]; logic [GAW-1:0] gl_waddr [NCL]; torus_t gl_wdata [NCL][512];
  logic se_req [NCL]; logic [CW-1:0] se_ct [NCL]; logic se_body [NCL]; logic [6:0] se_word [NCL];
  logic se_valid [NCL]; torus_t se_data [NCL][512];
  logic lpu_valid [NCL]; lpu_op_e lpu_op [NCL]; torus_t lpu_a [NCL][4][64], lpu_b [NCL][4][64];
  torus_t lpu_scalar [NCL]; logic [4:0] lpu_log_n2 [NCL]; logic lpu_lwe_we [NCL];
  logic [LAW-1:0] lpu_lwe_addr [NCL]; logic [4:0] lpu_chunk [NCL]; logic lpu_ks_clear [NCL];
  torus_t lpu_ks_scalar [NCL][4]; logic [2:0] lpu_ks_level [NCL][4]; logic [5:0] lpu_ks_base_log;
  logic [2:0] lpu_ks_levels; logic [3:0] lpu_ks_lane_en [NCL]; logic [4:0] lpu_acc_rd_chunk [NCL];
  torus_t lpu_acc_rd_data [NCL][64]; logic lpu_out_valid [NCL]; torus_t lpu_out [NCL][4][64];
  logic [31:0] key_underflows, sync_waits; logic [NCL-1:0] ev_decomp_stall, ev_ifft_wait;

  if (RR == 12) begin : g_full
    taurus_top dut (.*);
  end else begin : g_red
    taurus_top #(.RR(RR)) dut (.*);
  end

  int checks = 0, failures = 0;
  int n_init = 0, n_iter = 0, n_keywords = 0, n_kq_full = 0, n_ifft_wait = 0, n_dec_stall = 0;
  int n_se = 0, n_modsw = 0, n_ks = 0;
  int kword;               // key words accepted in the current run
  int dcur;                // levels of the current run
  longint cl_const [2];    // key constant per level

  // ---- key stream: trivial GGSW rows of 1 -------------------------------
  always_comb begin
    int row, p, l;
    row = (kword / 128) % (2 * dcur);
    p = row / dcur; l = row % dcur;
    for (int col = 0; col < 2; col++)
      for (int i = 0; i < 256; i++) begin
        kin_data[col][i].re = (col == p) ? 48'(cl_const[l]) : 48'd0;
        kin_data[col][i].im = '0;
      end
  end
  logic [10:0] iter_prev = '0;
  always @(posedge clk) if (rst_n) begin
    iter_prev <= iter;
    if (iter != iter_prev && iter != 0) n_iter++;
    if (kin_valid && kin_ready) begin kword++; n_keywords++; end
    if (kin_valid && !kin_ready && busy) n_kq_full++;
    for (int c = 0; c < NCL; c++) begin
      if (ev_ifft_wait[c]) n_ifft_wait++;
      if (ev_decomp_stall[c]) n_dec_stall++;
    end
  end

  // ---- watchdog ----------------------------------------------------------
  initial begin
    repeat (400000 + 40000 * RR) @(posedge clk);
    failures++; $display("watchdog at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- reference data ---------------------------------------------------
  int     sp_idx [2][NSP];
  longint sp_val [2][NSP];
  int     av [NCL][RR][NS + 1];     // mod-switched values; index NS = 2N - b
  int     shift_of [NCL][RR];

  function automatic longint lut_coef(int p, int j);
    for (int s = 0; s < NSP; s++) if (sp_idx[p][s] == j) return sp_val[p][s] <<< 41;
    return 0;
  endfunction
  // coefficient j of X^sh * LUT_p (negacyclic)
  function automatic longint rot_coef(int p, int sh, int j);
    int idx;
    idx = (j - sh) % (2 * N); if (idx < 0) idx += 2 * N;
    return (idx < N) ? lut_coef(p, idx) : -lut_coef(p, idx - N);
  endfunction

  task automatic tick(); @(negedge clk); endtask

  task automatic idle_inputs();
    start = 0; tw_we = 0; ksk_we = 0; kin_valid = 0;
    for (int c = 0; c < NCL; c++) begin
      gl_we[c] = 0; se_req[c] = 0; lpu_valid[c] = 0; lpu_lwe_we[c] = 0; lpu_ks_clear[c] = 0;
    end
  endtask

  task automatic run_blind_rotation(int bl, int d);
    int t0;
    base_log = 6'(bl); levels = 3'(d); dcur = d; kword = 0;
    for (int l = 0; l < 2; l++) begin
      int e; e = 64 - bl * (l + 1);
      cl_const[l] = (l < d && e <= 46) ? (64'sd1 <<< e) : 0;
    end
    // a fresh key stream: reset the queue (buffers keep their contents)
    rst_n = 0; tick(); tick(); rst_n = 1; tick();
    kin_valid = 1;
    tick(); start = 1; tick(); start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    kin_valid = 0;
    $display("blind rotation B=%0d d=%0d: %0d cycles, %0d key words", bl, d, cyc - t0, kword);
    checks++; if (key_underflows != 0) begin failures++; $display("key underflow"); end
    tick();
    check_results();
  endtask

  task automatic check_results();
    // one sample-extraction word per cycle and cluster, results 2 cycles later
    int req_q [$][4];
    int bad = 0;
    for (int ct = 0; ct < RR; ct++)
      for (int body = 0; body < 2; body++)
        for (int w = 0; w < 128 + 2; w++) begin
          for (int c = 0; c < NCL; c++) begin
            se_req[c] = (w < 128); se_ct[c] = CW'(ct); se_body[c] = body[0]; se_word[c] = 7'(w);
          end
          @(posedge clk);
          if (w >= 2) for (int c = 0; c < NCL; c++) begin
            int ww; ww = w - 2;
            checks++;
            if (!se_valid[c]) failures++;
            else begin
              n_se++;
              for (int m = 0; m < 512; m++) begin
                int i; longint e, g, df;
                i = 128 * m + ww;
                e = (i == 0) ? rot_coef(body, shift_of[c][ct], 0) : -rot_coef(body, shift_of[c][ct], N - i);
                g = longint'(se_data[c][m]);
                df = g - e;
                if (df > (64'sd1 <<< 36) || df < -(64'sd1 <<< 36)) begin
                  bad++;
                  if (bad < 6) $display("cl %0d ct %0d poly %0d coef %0d: got %h exp %h", c, ct, body, i, g, e);
                end
              end
            end
          end
          tick();
        end
    for (int c = 0; c < NCL; c++) se_req[c] = 0;
    checks++; if (bad != 0) begin failures++; $display("%0d extracted coefficients wrong", bad); end
  endtask

  initial begin
    int pend;
    idle_inputs();
    base_log = 23; levels = 1; n_short = 11'(NS); dcur = 1; kword = 0; cl_const = '{0, 0};
    ksk_waddr = 0; ksk_raddr = 0; tw_waddr = 0; lpu_ks_base_log = 3; lpu_ks_levels = 5;
    for (int c = 0; c < NCL; c++) begin
      gl_waddr[c] = 0; se_ct[c] = 0; se_body[c] = 0; se_word[c] = 0; lpu_op[c] = LPU_ADD;
      lpu_scalar[c] = 0; lpu_log_n2[c] = 17; lpu_lwe_addr[c] = 0; lpu_chunk[c] = 0;
      lpu_ks_lane_en[c] = 0; lpu_acc_rd_chunk[c] = 0;
      for (int l = 0; l < 4; l++) begin lpu_ks_scalar[c][l] = 0; lpu_ks_level[c][l] = 0; end
      for (int l = 0; l < 4; l++) for (int e = 0; e < 64; e++) begin lpu_a[c][l][e] = 0; lpu_b[c][l][e] = 0; end
      for (int m = 0; m < 512; m++) gl_wdata[c][m] = 0;
    end
    for (int i = 0; i < 256; i++) tw_wdata[i] = '0;
    for (int l = 0; l < 4; l++) for (int e = 0; e < 64; e++) ksk_wdata[l][e] = 0;
    // sparse test polynomials (units of 2^41, |value| <= 500, so that the
    // CMux differences stay below 2^11 units of 2^40 and the top digit of
    // the d = 2 run is zero)
    for (int p = 0; p < 2; p++) for (int s = 0; s < NSP; s++) begin
      sp_idx[p][s] = (s == 0) ? (p == 0 ? 0 : N - 1) : $urandom_range(0, N - 1);
      sp_val[p][s] = longint'($urandom_range(1, 500)) * (($urandom_range(0, 1) == 1) ? 1 : -1);
    end
    for (int c = 0; c < NCL; c++) for (int r = 0; r < RR; r++) begin
      int s; s = 0;
      for (int i = 0; i < NS; i++) begin av[c][r][i] = $urandom_range(0, 2 * N - 1); s += av[c][r][i]; end
      av[c][r][NS] = $urandom_range(0, 2 * N - 1);
      s += av[c][r][NS];
      shift_of[c][r] = s % (2 * N);
    end
    repeat (3) tick(); rst_n = 1; tick();

    // 1. twiddles: words 0..127 twist zeta^(128 n1 + n2), 128..255 W_32768^(n2 k1)
    for (int w = 0; w < 256; w++) begin
      tw_we = 1; tw_waddr = 8'(w);
      for (int i = 0; i < 256; i++) begin
        real ang;
        ang = (w < 128) ? 3.14159265358979323846 * real'(128 * i + w) / real'(N)
                        : -2.0 * 3.14159265358979323846 * real'((w - 128) * i) / 32768.0;
        tw_wdata[i].re = 48'(longint'($cos(ang) * 70368744177664.0));
        tw_wdata[i].im = 48'(longint'($sin(ang) * 70368744177664.0));
      end
      tick();
    end
    tw_we = 0;
    // test polynomials into GLWE polys 2RR (mask) and 2RR+1 (body) of every cluster
    for (int p = 0; p < 2; p++) for (int w = 0; w < 128; w++) begin
      for (int c = 0; c < NCL; c++) begin
        gl_we[c] = 1; gl_waddr[c] = GAW'((2 * RR + p) * 128 + w);
        for (int m = 0; m < 512; m++) gl_wdata[c][m] = lut_coef(p, 128 * m + w);
      end
      tick();
    end
    for (int c = 0; c < NCL; c++) gl_we[c] = 0;

    // 2. modulus switch into the LWE buffers (word c*CH + 0 holds indices 0..255)
    for (int r = 0; r < RR; r++) begin
      for (int c = 0; c < NCL; c++) begin
        lpu_valid[c] = 1; lpu_op[c] = LPU_MODSW; lpu_lwe_we[c] = 1; lpu_lwe_addr[c] = LAW'(r * CH);
        for (int i = 0; i < 256; i++) begin
          longint v; v = (i <= NS) ? av[c][r][i] : 0;
          lpu_a[c][i / 64][i % 64] = (v << 47) + longint'($urandom_range(0, 32'h7fffffff)) * 2 - 64'h7fffffff;
        end
      end
      tick();
      for (int c = 0; c < NCL; c++) begin
        checks++;
        if (!lpu_out_valid[c]) failures++;
        else begin
          n_modsw++;
          for (int i = 0; i <= NS; i++) begin
            checks++; if (lpu_out[c][i / 64][i % 64] != torus_t'(av[c][r][i])) failures++;
          end
        end
      end
    end
    for (int c = 0; c < NCL; c++) begin lpu_valid[c] = 0; lpu_lwe_we[c] = 0; end

    // 3. key switching step on cluster 0, chunk 1: acc = b - sum digit * ksk
    ksk_we = 1; ksk_waddr = 8'd7;
    for (int l = 0; l < 4; l++) for (int e = 0; e < 64; e++) ksk_wdata[l][e] = {$urandom, $urandom};
    tick(); ksk_we = 0; ksk_raddr = 8'd7; tick(); tick(); tick();
    begin
      torus_t expv [64];
      torus_t sc [4];
      for (int l = 0; l < 4; l++) begin sc[l] = {$urandom, $urandom}; lpu_ks_scalar[0][l] = sc[l]; lpu_ks_level[0][l] = 3'(l); end
      for (int e = 0; e < 64; e++) begin lpu_a[0][0][e] = {$urandom, $urandom}; expv[e] = lpu_a[0][0][e]; end
      // reference digits: round to 15 bits, balanced base-8 digits, level 0 most significant
      for (int l = 0; l < 4; l++) begin
        longint st, dg [5];
        st = longint'((sc[l] >> 49) + ((sc[l] >> 48) & 64'd1)) & 64'h7fff;
        for (int k = 4; k >= 0; k--) begin
          longint r; r = st & 7; st = st >> 3;
          if (r > 4 || (r == 4 && ((st >> 2) & 1) == 1)) begin r -= 8; st += 1; end
          dg[k] = r;
        end
        for (int e = 0; e < 64; e++) expv[e] = expv[e] - torus_t'(dg[l]) * ksk_wdata[l][e];
      end
      lpu_valid[0] = 1; lpu_op[0] = LPU_KS; lpu_chunk[0] = 1; lpu_ks_clear[0] = 1; lpu_ks_lane_en[0] = 4'hf;
      tick(); lpu_valid[0] = 0; lpu_ks_clear[0] = 0; lpu_acc_rd_chunk[0] = 1; tick();
      n_ks++;
      for (int e = 0; e < 64; e++) begin checks++; if (lpu_acc_rd_data[0][e] != expv[e]) failures++; end
      if (lpu_acc_rd_data[0][0] != expv[0]) $display("KS: got %h exp %h", lpu_acc_rd_data[0][0], expv[0]);
    end

    // 4./5. blind rotation and sample extraction, two decomposition settings
    run_blind_rotation(23, 1);
    if (RUNS > 1) run_blind_rotation(12, 2);

    // mechanism counters
    n_init = RUNS;
    $display("mechanisms: init %0d iter %0d keywords %0d kq_full %0d ifft_wait %0d dec_stall %0d sync_waits %0d se %0d modsw %0d ks %0d",
             n_init, n_iter, n_keywords, n_kq_full, n_ifft_wait, n_dec_stall, sync_waits, n_se, n_modsw, n_ks);
    checks++; if (n_iter == 0) failures++;
    checks++; if (n_keywords <= 128) failures++;
    checks++; if (n_kq_full == 0) failures++;
    checks++; if (n_ifft_wait == 0) failures++;
    if (RUNS > 1) begin checks++; if (n_dec_stall == 0) failures++; end
    checks++; if (sync_waits == 0) failures++;
    checks++; if (n_se == 0) failures++;
    checks++; if (n_modsw == 0) failures++;
    checks++; if (n_ks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
