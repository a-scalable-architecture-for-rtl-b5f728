// Testbench for fft_cluster and ifft_cluster (degree N = 65536).
// A sparse digit polynomial (a few random coefficients, some in the upper
// half so the double-real folding is exercised) goes through the forward
// cluster; every one of the 32768 bins is compared with the negacyclic
// transform worked out here in real arithmetic,
//   Z[k] = sum_n 2^IN_SHIFT (a[n] + j a[n+N/2]) e^(j pi n / N) e^(-2 pi j n k / 32768),
// using the word layout of the cluster (word j: k1 = 2j, 2j+1; lane k2).
// The 128 result words are then offered by both requesters of the inverse
// cluster at the same time: one must wait for the other (arbitration), and
// both results must give back a[n] * 2^(IN_SHIFT + OUT_SHIFT - 0) within FFT
// rounding noise. Twiddle words are computed here and served one cycle
// after their address, like the twiddle buffer. Also checks that the forward
// cluster takes one word per cycle.
module tb_fft_cluster;
  import taurus_pkg::*;
  localparam int N = 65536, NZ = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  // forward
  logic in_valid; logic [6:0] in_word; logic signed [31:0] din [512];
  logic [7:0] tw_addr [2]; cplx_t tw_data [2][256];
  logic out_valid; logic [6:0] out_word; cplx_t dout [256];
  // inverse
  logic [1:0] req_valid, req_ready; logic [6:0] req_word [2]; cplx_t req_data [2][256];
  logic [7:0] itw_addr [2]; cplx_t itw_data [2][256];
  logic iout_valid, iout_src; logic [6:0] iout_word; torus_t idout [512];

  fft_cluster u_fwd (.clk, .rst_n, .in_valid, .in_word, .din, .tw_addr, .tw_data, .out_valid, .out_word, .dout);
  ifft_cluster u_inv (.clk, .rst_n, .req_valid, .req_ready, .req_word, .req_data, .tw_addr(itw_addr),
                      .tw_data(itw_data), .out_valid(iout_valid), .out_src(iout_src), .out_word(iout_word), .dout(idout));

  cplx_t twtab [256][256];
  always_ff @(posedge clk)
    for (int p = 0; p < 2; p++) begin tw_data[p] <= twtab[tw_addr[p]]; itw_data[p] <= twtab[itw_addr[p]]; end

  int checks = 0, failures = 0;
  int nz_idx [NZ]; int nz_val [NZ];
  cplx_t fwd_out [128][256];
  int fwd_cnt = 0, inv_cnt [2] = '{0, 0}, waits = 0, first_src = -1, t_in0, t_out_last;
  real maxerr = 0;
  int maxrt = 0;

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint coef(int n);
    for (int i = 0; i < NZ; i++) if (nz_idx[i] == n) return nz_val[i];
    return 0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      for (int i = 0; i < 256; i++) fwd_out[out_word][i] = dout[i];
      checks++; if (int'(out_word) != fwd_cnt) failures++;
      fwd_cnt++; t_out_last = cyc;
    end
    if (req_valid != 0 && req_ready != req_valid) waits++;
    if (iout_valid) begin
      int s; s = int'(iout_src);
      if (first_src < 0) first_src = s;
      checks++; if (int'(iout_word) != inv_cnt[s]) failures++;
      for (int m = 0; m < 512; m++) begin
        longint e, d;
        e = coef(128 * m + int'(iout_word)) <<< 24;
        d = longint'(idout[m]) - e; if (d < 0) d = -d;
        if (d > maxrt) maxrt = int'(d > 64'h7fffffff ? 64'h7fffffff : d);
        checks++; if (d > (64'sd1 <<< 21)) begin failures++; if (failures < 5) $display("rt src %0d n=%0d got %0d exp %0d", s, 128*m+iout_word, longint'(idout[m]), e); end
      end
      inv_cnt[s]++;
    end
  end

  initial begin
    for (int w = 0; w < 256; w++) for (int i = 0; i < 256; i++) begin
      real ang;
      ang = (w < 128) ? 3.14159265358979323846 * real'(128 * i + w) / real'(N)
                      : -2.0 * 3.14159265358979323846 * real'((w - 128) * i) / 32768.0;
      twtab[w][i].re = 48'(longint'($cos(ang) * 70368744177664.0));
      twtab[w][i].im = 48'(longint'($sin(ang) * 70368744177664.0));
    end
    for (int i = 0; i < NZ; i++) begin
      nz_idx[i] = (i == 0) ? 5 : (i == 1) ? N / 2 + 77 : $urandom_range(0, N - 1);
      nz_val[i] = $urandom_range(1, 2000) - 1000;
    end
    in_valid = 0; in_word = 0; req_valid = 0;
    for (int m = 0; m < 512; m++) din[m] = 0;
    for (int s = 0; s < 2; s++) begin req_word[s] = 0; for (int i = 0; i < 256; i++) req_data[s][i] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    t_in0 = cyc;
    for (int w = 0; w < 128; w++) begin
      in_valid = 1; in_word = 7'(w);
      for (int m = 0; m < 512; m++) din[m] = 32'(coef(128 * m + w));
      @(negedge clk);
    end
    in_valid = 0;
    while (fwd_cnt < 128) @(negedge clk);
    checks++; if (t_out_last - t_in0 > 128 + 150) begin failures++; $display("forward took %0d cycles", t_out_last - t_in0); end
    // check every bin
    for (int j = 0; j < 128; j++) for (int h = 0; h < 2; h++) for (int k2 = 0; k2 < 128; k2++) begin
      int k; real er, ei, e;
      k = 2 * j + h + 256 * k2;
      er = 0; ei = 0;
      for (int i = 0; i < NZ; i++) begin
        int n; real vr, vi, ang;
        n = nz_idx[i] % (N / 2);
        vr = (nz_idx[i] < N / 2) ? 256.0 * nz_val[i] : 0.0;
        vi = (nz_idx[i] < N / 2) ? 0.0 : 256.0 * nz_val[i];
        ang = 3.14159265358979323846 * n / N - 2.0 * 3.14159265358979323846 * real'((longint'(n) * k) % 32768) / 32768.0;
        er += vr * $cos(ang) - vi * $sin(ang);
        ei += vr * $sin(ang) + vi * $cos(ang);
      end
      e = ((er - real'(fwd_out[j][128 * h + k2].re)) ** 2 + (ei - real'(fwd_out[j][128 * h + k2].im)) ** 2) ** 0.5;
      if (e > maxerr) maxerr = e;
      checks++; if (e > 64.0) begin failures++; if (failures < 5) $display("bin %0d got %0d,%0d exp %f,%f", k, fwd_out[j][128*h+k2].re, fwd_out[j][128*h+k2].im, er, ei); end
    end
    // inverse, both requesters at once
    begin
      int wn [2];
      wn = '{0, 0};
      while (wn[0] < 128 || wn[1] < 128) begin
        for (int s = 0; s < 2; s++) begin
          req_valid[s] = (wn[s] < 128);
          req_word[s] = 7'(wn[s] % 128);
          for (int i = 0; i < 256; i++) req_data[s][i] = fwd_out[wn[s] % 128][i];
        end
        @(posedge clk);
        for (int s = 0; s < 2; s++) if (req_valid[s] && req_ready[s]) wn[s]++;
        @(negedge clk);
      end
      req_valid = 0;
    end
    while (inv_cnt[0] < 128 || inv_cnt[1] < 128) @(negedge clk);
    checks++; if (waits == 0) failures++;
    $display("forward max bin error %f, round-trip max error %0d, arbitration wait cycles %0d", maxerr, maxrt, waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
