// Sample extraction: reads the constant term of a rotated GLWE accumulator as
// an LWE ciphertext of dimension k*N (k = 1) under the GLWE key.
//
// For the mask polynomial A the long-LWE mask is a'[0] = A[0] and
// a'[i] = -A[N - i] for 0 < i < N; the body is b' = B[0]. With the word layout
// of the GLWE buffer (word w holds A[128*m + w], m = 0..LANES-1) output word w
// needs input word (128 - w) mod 128 with its lanes reversed and negated:
//   w = 0:  a'[128*m]     = -A[128*(LANES - m)] for m > 0, a'[0] = A[0]
//   w > 0:  a'[128*m + w] = -A[128*(LANES - 1 - m) + 128 - w]
// so the unit asks for src_word = (128 - w) mod 128 and permutes the returned
// word; for the body it passes lane 0. Output word w holds a'[128*m + w] in
// lane m. Timing: combinational request, one register stage on the data
// (in_valid must accompany the returned word). The extraction formula is the
// standard one; the word mapping and timing are this design's.
module sample_extract
  import taurus_pkg::*;
#(
  parameter int LANES = 512
) (
  input  logic       clk,
  input  logic [6:0] out_word,        // w requested this cycle
  output logic [6:0] src_word,
  input  logic       in_valid,        // data of the previous request
  input  torus_t     din [LANES],
  output logic       out_valid,
  output torus_t     dout [LANES]
);
  logic [6:0] w_q;
  assign src_word = 7'd0 - out_word;

  always_ff @(posedge clk) w_q <= out_word;

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    for (int m = 0; m < LANES; m++) begin
      if (w_q == 7'd0) dout[m] <= (m == 0) ? din[0] : -din[LANES - m];
      else             dout[m] <= -din[LANES - 1 - m];
    end
  end
endmodule
