// FFT-B: 128-point fully parallel FFT unit (asymmetric design).
//
// 128 = 2 * 4^3: a radix-2 stage on the full 128 points, then radix-4 stages on
// sub-lengths 64, 16 and 4 (32 butterflies each, i.e. 32 lanes of four points).
// The leading radix-2 stage can be bypassed at run time (bypass_r2); the unit
// then computes two independent 64-point transforms, of din[0:63] into
// dout[0:63] and of din[64:127] into dout[64:127]. This gives the shorter
// sequence lengths needed by smaller polynomial degrees. Outputs are in natural
// order in both modes (constant output wiring chosen by bypass_r2).
// INVERSE selects conjugate twiddles; SCALE divides by the radix in every stage.
// One transform per cycle, latency 4 cycles. Radix plan and lane count follow
// the paper's figure of the unit; the spatial organisation is this design's.
module fft_b
  import taurus_pkg::*;
#(
  parameter bit INVERSE = 1'b0,
  parameter bit SCALE   = 1'b0
) (
  input  logic  clk,
  input  logic  in_valid,
  input  logic  bypass_r2,
  input  cplx_t din  [128],
  output logic  out_valid,
  output cplx_t dout [128]
);
  localparam int P = 128;

  // Position of frequency bin k after the stages r = {2,4,4,4}.
  function automatic int out_pos(int k);
    int pos, kk;
    kk  = k;
    pos = (kk % 2) * 64;  kk = kk / 2;
    pos = pos + (kk % 4) * 16; kk = kk / 4;
    pos = pos + (kk % 4) * 4;  kk = kk / 4;
    pos = pos + (kk % 4);
    return pos;
  endfunction

  cplx_t s0 [P], s1 [P], s2 [P], s3 [P];
  logic  v0, v1, v2, v3;
  logic  byp_q [4];

  fft_r2_stage #(.POINTS(P), .SUBLEN(128), .INVERSE(INVERSE), .SCALE(SCALE))
    u_st0 (.clk, .in_valid, .bypass(bypass_r2), .din, .out_valid(v0), .dout(s0));
  fft_r4_stage #(.POINTS(P), .SUBLEN(64), .INVERSE(INVERSE), .SCALE(SCALE))
    u_st1 (.clk, .in_valid(v0), .din(s0), .out_valid(v1), .dout(s1));
  fft_r4_stage #(.POINTS(P), .SUBLEN(16), .INVERSE(INVERSE), .SCALE(SCALE))
    u_st2 (.clk, .in_valid(v1), .din(s1), .out_valid(v2), .dout(s2));
  fft_r4_stage #(.POINTS(P), .SUBLEN(4),  .INVERSE(INVERSE), .SCALE(SCALE))
    u_st3 (.clk, .in_valid(v2), .din(s2), .out_valid(v3), .dout(s3));

  // The bypass flag travels with the data so the output wiring matches.
  always_ff @(posedge clk) begin
    byp_q[0] <= bypass_r2;
    for (int i = 1; i < 4; i++) byp_q[i] <= byp_q[i-1];
  end

  assign out_valid = v3;
  always_comb
    for (int k = 0; k < P; k++)
      if (byp_q[3]) dout[k] = s3[out_pos((k / 64) + 2 * (k % 64))];
      else          dout[k] = s3[out_pos(k)];
endmodule
