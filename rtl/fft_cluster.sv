// Forward FFT cluster of a blind-rotation unit: negacyclic double-real FFT of a
// polynomial of degree N = 65536 in 128 cycles, 512 coefficients per cycle.
//
// Double-real folding: coefficient pairs (a[n], a[n+N/2]) become one complex
// value z[n] = (a[n] + j*a[n+N/2]) * zeta^n with zeta = exp(j*pi/N), so the
// negacyclic product of two degree-N polynomials becomes a pointwise product of
// two N/2 = 32768-point FFTs. The 32768 points are split as 256 x 128
// (n = 128*n1 + n2, k = k1 + 256*k2):
//   1. input word n2 carries a[128*m + n2] for m = 0..511; lanes m and m+256
//      form z[128*n1 + n2] with n1 = m (twist, 256 complex multipliers);
//   2. FFT-A transforms over n1 (256 points, one word per cycle);
//   3. each result k1 is multiplied by W_32768^(n2*k1) (four-step twiddle);
//   4. the shutter transpose turns rows n2 into column pairs k1 = 2j, 2j+1;
//   5. two FFT-B units transform over n2 (128 points each).
// Output word j (0..127) holds bins X[k1 + 256*k2] for k1 = 2j (dout[k2]) and
// k1 = 2j+1 (dout[128 + k2]). Pointwise products do not care about this order,
// and the inverse cluster consumes exactly this layout.
// Twiddles come from the twiddle buffer: word n2 holds the 256 twist factors
// zeta^(128*n1+n2) and the 256 four-step factors W_32768^(n2*k1); tw_addr[0]
// and tw_addr[1] (table bit, n2) ask for the words needed one cycle later. Digits enter as integers and are scaled
// by 2^IN_SHIFT to keep fractional precision through the transform.
// Interface: a word per in_valid (words n2 = 0..127 of one polynomial in order),
// word_out per out_valid with out_word = j. Throughput one word per cycle,
// latency 1 + 1 + 4 + 1 + 128 + 4 cycles from the last input word.
// The 256 x 128 split, double-real folding and FFT-A / transpose / FFT-B chain
// follow the paper; the twist formulation, the data layout and the twiddle
// buffer organisation are this design's choices.
module fft_cluster
  import taurus_pkg::*;
#(
  parameter int DIG_W    = 32,   // width of the signed input digits
  parameter int IN_SHIFT = 8     // fractional bits given to the digits
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [6:0]              in_word,         // n2
  input  logic signed [DIG_W-1:0] din [512],
  output logic [7:0]              tw_addr [2],     // twiddle read ports
  input  cplx_t                   tw_data [2][256],// word tw_addr of previous cycle
  output logic                    out_valid,
  output logic [6:0]              out_word,        // j
  output cplx_t                   dout [256]
);
  // ---- stage 0: register input, request twist twiddles ------------------
  logic                    v0;
  logic [6:0]              w0;
  logic signed [DIG_W-1:0] d0 [512];
  logic [6:0] w3;
  // port 0: twist factors (table 0), port 1: four-step factors (table 1)
  assign tw_addr[0] = {1'b0, in_word};
  assign tw_addr[1] = {1'b1, w3};

  always_ff @(posedge clk) begin
    v0 <= in_valid && rst_n;
    w0 <= in_word;
    d0 <= din;
  end

  // ---- stage 1: fold + twist ---------------------------------------------
  logic  v1;
  logic [6:0] w1;
  cplx_t z1 [256];
  always_ff @(posedge clk) begin
    v1 <= v0 && rst_n;
    w1 <= w0;
    for (int m = 0; m < 256; m++) begin
      cplx_t z;
      z.re = CPLX_W'(d0[m])       <<< IN_SHIFT;
      z.im = CPLX_W'(d0[m + 256]) <<< IN_SHIFT;
      z1[m] <= cmul(z, tw_data[0][m], TW_FRAC);
    end
  end

  // ---- stage 2: FFT-A over n1 (4 cycles) --------------------------------
  logic  va;
  cplx_t za [256];
  logic [6:0] wq [4];
  fft_a #(.INVERSE(1'b0), .SCALE(1'b0)) u_fft_a
    (.clk, .in_valid(v1), .din(z1), .out_valid(va), .dout(za));
  always_ff @(posedge clk) begin
    wq[0] <= w1;
    for (int i = 1; i < 4; i++) wq[i] <= wq[i-1];
  end
  assign w3 = wq[2];   // word of the FFT-A output one cycle ahead

  // ---- stage 3: four-step twiddle ----------------------------------------
  logic  vt;
  cplx_t zt [128][2];
  always_ff @(posedge clk) begin
    vt <= va && rst_n;
    for (int k = 0; k < 256; k++) zt[k/2][k%2] <= cmul(za[k], tw_data[1][k], TW_FRAC);
  end

  // ---- stage 4: shutter transpose -----------------------------------------
  logic  vx, tr_ready;
  logic [6:0] jx;
  cplx_t zx [128][2];
  shutter_transpose #(.S(128), .G(2)) u_tr
    (.clk, .rst_n, .in_valid(vt), .in_ready(tr_ready), .din(zt),
     .out_valid(vx), .out_line(jx), .dout(zx));

  // ---- stage 5: two FFT-B units over n2 ----------------------------------
  cplx_t xb0 [128], xb1 [128], yb0 [128], yb1 [128];
  logic  vb0, vb1;
  always_comb
    for (int i = 0; i < 128; i++) begin
      xb0[i] = zx[i][0];
      xb1[i] = zx[i][1];
    end
  fft_b #(.INVERSE(1'b0), .SCALE(1'b0)) u_fft_b0
    (.clk, .in_valid(vx), .bypass_r2(1'b0), .din(xb0), .out_valid(vb0), .dout(yb0));
  fft_b #(.INVERSE(1'b0), .SCALE(1'b0)) u_fft_b1
    (.clk, .in_valid(vx), .bypass_r2(1'b0), .din(xb1), .out_valid(vb1), .dout(yb1));

  logic [6:0] jq [4];
  always_ff @(posedge clk) begin
    jq[0] <= jx;
    for (int i = 1; i < 4; i++) jq[i] <= jq[i-1];
  end

  assign out_valid = vb0 && rst_n;
  assign out_word  = jq[3];
  always_comb
    for (int i = 0; i < 128; i++) begin
      dout[i]       = yb0[i];
      dout[128 + i] = yb1[i];
    end

  // The transpose never back-pressures a steady stream of whole polynomials.
  assert property (@(posedge clk) disable iff (!rst_n) vt |-> tr_ready);
  logic unused_vb1;
  assign unused_vb1 = vb1;
endmodule
