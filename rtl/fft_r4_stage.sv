// One pipelined radix-4 decimation-in-frequency stage of a fully parallel FFT.
//
// The POINTS inputs are split into blocks of SUBLEN consecutive points. Within a
// block, the four points j, j+SUBLEN/4, j+SUBLEN/2, j+3*SUBLEN/4 enter one
// radix-4 butterfly (three complex additions per output, the -j rotation done by
// swapping components, no multiplier). Outputs p = 1..3 are then multiplied by
// the constant twiddle W_SUBLEN^(p*j); a radix-4 butterfly needs three such
// multipliers where two radix-2 stages need four. All twiddles are constants
// fixed at elaboration. With SCALE set, each output is divided by 4 (rounded),
// which the inverse transform uses to apply its 1/N factor stage by stage.
// Timing: one register stage; a new vector of POINTS values every cycle.
module fft_r4_stage
  import taurus_pkg::*;
#(
  parameter int POINTS  = 256,
  parameter int SUBLEN  = 256,
  parameter bit INVERSE = 1'b0,
  parameter bit SCALE   = 1'b0
) (
  input  logic  clk,
  input  logic  in_valid,
  input  cplx_t din  [POINTS],
  output logic  out_valid,
  output cplx_t dout [POINTS]
);
  localparam int Q = SUBLEN / 4;

  typedef cplx_t [SUBLEN-1:0] tw_t;
  function automatic tw_t mk_tw();
    tw_t t;
    for (int i = 0; i < SUBLEN; i++) t[i] = twiddle(i, SUBLEN, INVERSE);
    return t;
  endfunction
  localparam tw_t TW = mk_tw();

  cplx_t y [POINTS];

  always_comb begin
    for (int b = 0; b < POINTS / SUBLEN; b++) begin
      for (int j = 0; j < Q; j++) begin
        cplx_t x0, x1, x2, x3, a0, a1, a2, a3, r0, r1, r2, r3;
        int base;
        base = b * SUBLEN + j;
        x0 = din[base];
        x1 = din[base + Q];
        x2 = din[base + 2*Q];
        x3 = din[base + 3*Q];
        a0 = cadd(x0, x2);
        a1 = csub(x0, x2);
        a2 = cadd(x1, x3);
        a3 = INVERSE ? cconj(cmul_mj(cconj(csub(x1, x3)))) : cmul_mj(csub(x1, x3));
        r0 = cadd(a0, a2);
        r1 = cadd(a1, a3);
        r2 = csub(a0, a2);
        r3 = csub(a1, a3);
        if (j != 0) begin
          r1 = cmul(r1, TW[j],     TW_FRAC);
          r2 = cmul(r2, TW[2*j],   TW_FRAC);
          r3 = cmul(r3, TW[3*j],   TW_FRAC);
        end
        if (SCALE) begin
          r0 = cshr(r0, 2); r1 = cshr(r1, 2); r2 = cshr(r2, 2); r3 = cshr(r3, 2);
        end
        y[base]       = r0;
        y[base + Q]   = r1;
        y[base + 2*Q] = r2;
        y[base + 3*Q] = r3;
      end
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    dout      <= y;
  end
endmodule
