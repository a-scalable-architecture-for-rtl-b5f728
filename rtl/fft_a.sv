// FFT-A: 256-point fully parallel FFT unit (symmetric design).
//
// 256 = 4^4, so the unit is four radix-4 decimation-in-frequency stages
// (fft_r4_stage) on sub-lengths 256, 64, 16 and 4, drawn as a 16 x 16 array
// of lanes: each radix-4 column holds 64 butterflies, and the fixed transpose
// networks between columns are the constant index patterns that the stages use
// to pair their inputs. The digit-reversed order left by the stages is undone
// by a constant output wiring, so dout[k] is frequency bin k.
// INVERSE selects conjugate twiddles (+j rotations); SCALE divides by 4 in every
// stage (1/256 overall). One 256-point transform enters and leaves per cycle;
// latency is 4 cycles. The stage count, radix and 256 points follow the paper;
// the fully spatial organisation and the scaling option are this design's.
module fft_a
  import taurus_pkg::*;
#(
  parameter bit INVERSE = 1'b0,
  parameter bit SCALE   = 1'b0
) (
  input  logic  clk,
  input  logic  in_valid,
  input  cplx_t din  [256],
  output logic  out_valid,
  output cplx_t dout [256]
);
  localparam int P = 256;

  // Position, after the four stages, of frequency bin k (base-4 digit reversal).
  function automatic int out_pos(int k);
    int pos, span, kk;
    pos = 0; span = P; kk = k;
    for (int s = 0; s < 4; s++) begin
      span = span / 4;
      pos  = pos + (kk % 4) * span;
      kk   = kk / 4;
    end
    return pos;
  endfunction

  cplx_t s0 [P], s1 [P], s2 [P], s3 [P];
  logic  v0, v1, v2, v3;

  fft_r4_stage #(.POINTS(P), .SUBLEN(256), .INVERSE(INVERSE), .SCALE(SCALE))
    u_st0 (.clk, .in_valid, .din, .out_valid(v0), .dout(s0));
  fft_r4_stage #(.POINTS(P), .SUBLEN(64),  .INVERSE(INVERSE), .SCALE(SCALE))
    u_st1 (.clk, .in_valid(v0), .din(s0), .out_valid(v1), .dout(s1));
  fft_r4_stage #(.POINTS(P), .SUBLEN(16),  .INVERSE(INVERSE), .SCALE(SCALE))
    u_st2 (.clk, .in_valid(v1), .din(s1), .out_valid(v2), .dout(s2));
  fft_r4_stage #(.POINTS(P), .SUBLEN(4),   .INVERSE(INVERSE), .SCALE(SCALE))
    u_st3 (.clk, .in_valid(v2), .din(s2), .out_valid(v3), .dout(s3));

  assign out_valid = v3;
  always_comb for (int k = 0; k < P; k++) dout[k] = s3[out_pos(k)];
endmodule
