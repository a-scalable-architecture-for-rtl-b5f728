// One pipelined radix-2 decimation-in-frequency stage of a fully parallel FFT.
//
// Within each block of SUBLEN points, points j and j+SUBLEN/2 form a butterfly:
// the sum goes to position j, the difference times W_SUBLEN^j to position
// j+SUBLEN/2. With bypass set the stage passes its input unchanged, so the
// following stages see two independent half-length sequences (used to run a
// 128-point unit as two 64-point transforms). With SCALE set each output is
// halved (rounded). Timing: one register stage, a new vector every cycle.
module fft_r2_stage
  import taurus_pkg::*;
#(
  parameter int POINTS  = 128,
  parameter int SUBLEN  = 128,
  parameter bit INVERSE = 1'b0,
  parameter bit SCALE   = 1'b0
) (
  input  logic  clk,
  input  logic  in_valid,
  input  logic  bypass,
  input  cplx_t din  [POINTS],
  output logic  out_valid,
  output cplx_t dout [POINTS]
);
  localparam int H = SUBLEN / 2;

  typedef cplx_t [H-1:0] tw_t;
  function automatic tw_t mk_tw();
    tw_t t;
    for (int i = 0; i < H; i++) t[i] = twiddle(i, SUBLEN, INVERSE);
    return t;
  endfunction
  localparam tw_t TW = mk_tw();

  cplx_t y [POINTS];

  always_comb begin
    for (int b = 0; b < POINTS / SUBLEN; b++) begin
      for (int j = 0; j < H; j++) begin
        cplx_t s, d;
        s = cadd(din[b*SUBLEN + j], din[b*SUBLEN + j + H]);
        d = csub(din[b*SUBLEN + j], din[b*SUBLEN + j + H]);
        if (j != 0) d = cmul(d, TW[j], TW_FRAC);
        if (SCALE) begin
          s = cshr(s, 1); d = cshr(d, 1);
        end
        y[b*SUBLEN + j]     = bypass ? din[b*SUBLEN + j]     : s;
        y[b*SUBLEN + j + H] = bypass ? din[b*SUBLEN + j + H] : d;
      end
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    dout      <= y;
  end
endmodule
