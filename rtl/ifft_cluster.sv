// Inverse FFT cluster, shared by the two blind-rotation units of a cluster group.
//
// It undoes fft_cluster: a polynomial in the Fourier layout (word j holds bins
// k1 = 2j in lanes 0..127 and k1 = 2j+1 in lanes 128..255, k2 = lane index)
// goes through two inverse FFT-B units over k2, the shutter transpose back to
// rows n2, the conjugate four-step twiddle conj(W_32768^(n2*k1)), an inverse
// FFT-A over k1, and the conjugate twist conj(zeta^(128*n1+n2)). Every
// butterfly stage divides by its radix, which yields the 1/32768 factor of the
// inverse transform. Real parts become coefficients a[128*n1 + n2], imaginary
// parts a[128*(n1+256) + n2]; each is sign-extended and shifted left by
// OUT_SHIFT into a 64-bit torus value (the shift undoes the fixed-point scale
// of the forward path and of the key).
// Sharing: two requesters (the two BRUs) offer whole polynomials, 128 words in
// order j = 0..127. A round-robin grant is held for a full polynomial; the
// other requester waits (its ready is low). out_src tells which BRU a result
// word belongs to. One word per cycle; latency 4 + 128 + 2 + 4 + 2 cycles.
// The sharing of one inverse unit by two BRUs follows the paper; arbitration,
// data layout and scaling are this design's.
module ifft_cluster
  import taurus_pkg::*;
#(
  parameter int OUT_SHIFT = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  req_valid,
  output logic [1:0]  req_ready,
  input  logic [6:0]  req_word [2],
  input  cplx_t       req_data [2][256],
  output logic [7:0]  tw_addr [2],
  input  cplx_t       tw_data [2][256],
  output logic        out_valid,
  output logic        out_src,
  output logic [6:0]  out_word,          // n2
  output torus_t      dout [512]
);
  // ---- arbitration: hold the grant for one whole polynomial --------------
  logic       busy, grant, last_grant;
  logic       sel;
  logic       in_valid;
  cplx_t      in_data [256];

  always_comb begin
    if (busy) sel = grant;
    else if (req_valid[0] && req_valid[1]) sel = ~last_grant;
    else sel = req_valid[1];
  end
  assign req_ready[0] = (sel == 1'b0);
  assign req_ready[1] = (sel == 1'b1);
  assign in_valid     = req_valid[sel];
  assign in_data      = req_data[sel];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; grant <= 1'b0; last_grant <= 1'b1;
    end else if (in_valid) begin
      grant <= sel;
      if (req_word[sel] == 7'd127) begin
        busy <= 1'b0; last_grant <= sel;
      end else begin
        busy <= 1'b1;
      end
    end
  end

  // ---- inverse FFT-B over k2 (two units) ---------------------------------
  cplx_t xb0 [128], xb1 [128], yb0 [128], yb1 [128];
  logic  vb0, vb1;
  logic  srcq [4];
  always_comb
    for (int i = 0; i < 128; i++) begin
      xb0[i] = in_data[i];
      xb1[i] = in_data[128 + i];
    end
  fft_b #(.INVERSE(1'b1), .SCALE(1'b1)) u_ifft_b0
    (.clk, .in_valid, .bypass_r2(1'b0), .din(xb0), .out_valid(vb0), .dout(yb0));
  fft_b #(.INVERSE(1'b1), .SCALE(1'b1)) u_ifft_b1
    (.clk, .in_valid, .bypass_r2(1'b0), .din(xb1), .out_valid(vb1), .dout(yb1));
  always_ff @(posedge clk) begin
    srcq[0] <= sel;
    for (int i = 1; i < 4; i++) srcq[i] <= srcq[i-1];
  end

  // ---- transpose back: column j (cells n2) -> row n2 (cells k1/2) --------
  cplx_t tin [128][2], tout [128][2];
  logic  tv, t_ready, tsrc_in, tsrc_out;
  logic [6:0] tline;
  always_comb
    for (int i = 0; i < 128; i++) begin
      tin[i][0] = yb0[i];
      tin[i][1] = yb1[i];
    end
  shutter_transpose #(.S(128), .G(2)) u_tr
    (.clk, .rst_n, .in_valid(vb0 && rst_n), .in_ready(t_ready), .din(tin),
     .out_valid(tv), .out_line(tline), .dout(tout));
  // the source tag of a polynomial follows it through the transpose: it is
  // taken with the last line written and held while that polynomial drains
  logic [6:0] wcnt;
  always_ff @(posedge clk) begin
    if (!rst_n) wcnt <= '0;
    else if (vb0) wcnt <= wcnt + 1'b1;
    if (vb0 && wcnt == 7'd127) tsrc_in <= srcq[3];
  end
  assign tsrc_out = tsrc_in;

  // ---- register, conjugate four-step twiddle -------------------------------
  logic  v1, v2;
  logic [6:0] n1q, n2q;
  logic  s1q, s2q;
  cplx_t r1 [256], r2 [256];
  assign tw_addr[1] = {1'b1, tline};
  always_ff @(posedge clk) begin
    v1  <= tv && rst_n;
    n1q <= tline;
    s1q <= tsrc_out;
    for (int k = 0; k < 256; k++) r1[k] <= tout[k/2][k%2];
    v2  <= v1 && rst_n;
    n2q <= n1q;
    s2q <= s1q;
    for (int k = 0; k < 256; k++) r2[k] <= cmul(r1[k], cconj(tw_data[1][k]), TW_FRAC);
  end

  // ---- inverse FFT-A over k1 -------------------------------------------
  logic  va;
  cplx_t za [256];
  logic [6:0] nq [4];
  logic  sq [4];
  fft_a #(.INVERSE(1'b1), .SCALE(1'b1)) u_ifft_a
    (.clk, .in_valid(v2), .din(r2), .out_valid(va), .dout(za));
  always_ff @(posedge clk) begin
    nq[0] <= n2q; sq[0] <= s2q;
    for (int i = 1; i < 4; i++) begin
      nq[i] <= nq[i-1]; sq[i] <= sq[i-1];
    end
  end
  assign tw_addr[0] = {1'b0, nq[2]};

  // ---- conjugate twist, unfold into torus coefficients ----------------------
  always_ff @(posedge clk) begin
    out_valid <= va && rst_n;
    out_word  <= nq[3];
    out_src   <= sq[3];
    for (int m = 0; m < 256; m++) begin
      cplx_t u;
      u = cmul(za[m], cconj(tw_data[0][m]), TW_FRAC);
      dout[m]       <= torus_t'(signed'(u.re)) << OUT_SHIFT;
      dout[m + 256] <= torus_t'(signed'(u.im)) << OUT_SHIFT;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) vb0 |-> t_ready);
  logic unused;
  assign unused = vb1;
endmodule
