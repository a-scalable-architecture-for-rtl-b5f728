// Complex MAC (vector multiply-accumulate) of a blind-rotation unit.
//
// Each cycle one Fourier-domain word x of a decomposed polynomial (LANES
// complex bins) is multiplied with the matching word of the current key row
// for each of the COLS output polynomials (LANES x COLS = 512 key products per
// cycle for k = 1), and the products, shifted right by SHIFT with rounding,
// are added to the accumulator word acc_in read from the accumulator buffer
// (or replace it when first is set, at the first row of an external product).
// The result is registered one cycle later (out_valid / acc_out) for the
// write-back into the accumulator buffer. The 512 products per cycle follow
// the paper; the shift and the replace-on-first rule are this design's.
module complex_mac
  import taurus_pkg::*;
#(
  parameter int LANES = 256,
  parameter int COLS  = 2,
  parameter int SHIFT = 24
) (
  input  logic  clk,
  input  logic  in_valid,
  input  logic  first,
  input  cplx_t x      [LANES],
  input  cplx_t key    [COLS][LANES],
  input  cplx_t acc_in [COLS][LANES],
  output logic  out_valid,
  output cplx_t acc_out [COLS][LANES]
);
  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    for (int c = 0; c < COLS; c++)
      for (int i = 0; i < LANES; i++)
        acc_out[c][i] <= first ? cmul(x[i], key[c][i], SHIFT)
                               : cadd(acc_in[c][i], cmul(x[i], key[c][i], SHIFT));
  end
endmodule
