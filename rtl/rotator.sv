// Rotator: negacyclic monomial rotation of a GLWE polynomial, word by word.
//
// Computes, for one output word w of a polynomial of degree N = 128 * LANES,
//   out = X^a * P  -  (sub_en ? P : 0)     in Z_2^64[X] / (X^N + 1),
// the CMux difference used by each blind-rotation step (sub_en = 1) or the
// plain initial rotation of the test polynomial (sub_en = 0).
// Word layout: word w holds coefficients P[128*m + w], m = 0..LANES-1. Writing
// a = 128*q + r, output word w is input word (w - r) mod 128 with its lanes
// rotated by q (or q+1 when w < r); lanes that wrap past X^N change sign, and a
// rotation by N or more negates everything. So a single word read plus a
// LANES-wide signed barrel rotation produce each output word, and the GLWE
// buffer is read as words only.
// Timing: in cycle t the unit drives rd_addr_src / rd_addr_self from (a, w);
// the buffer returns those words in t+1; the result is registered and valid in
// t+2. One word per cycle. The rotator's place in the pipeline follows the
// paper; the word layout and this decomposition of the rotation are this
// design's.
module rotator
  import taurus_pkg::*;
#(
  parameter int LANES = 512,
  parameter int TAG_W = 16,
  localparam int AW   = $clog2(2 * 128 * LANES)   // a is taken modulo 2N
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [AW-1:0]    a,
  input  logic [6:0]       word,
  input  logic             sub_en,
  output logic [6:0]       rd_addr_src,
  output logic [6:0]       rd_addr_self,
  input  torus_t           rd_src  [LANES],
  input  torus_t           rd_self [LANES],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output torus_t           dout [LANES]
);
  localparam int QW = AW - 7;   // bits of q, rotation in lanes modulo 2*LANES

  logic [6:0]    r;
  logic [QW-1:0] q;
  assign r = a[6:0];
  assign q = a[AW-1:7];
  assign rd_addr_src  = word - r;
  assign rd_addr_self = word;

  // stage 1 (data arriving from the buffer): shift amount and flags
  logic            v1, sub1;
  logic [TAG_W-1:0] tag1;
  logic [QW-1:0]   s1;
  always_ff @(posedge clk) begin
    v1   <= in_valid && rst_n;
    tag1 <= in_tag;
    sub1 <= sub_en;
    s1   <= (word < r) ? q + 1'b1 : q;   // modulo 2*LANES wraps naturally
  end

  logic          neg_all;
  logic [QW-2:0] sh;
  assign neg_all = s1[QW-1];
  assign sh      = s1[QW-2:0];

  always_ff @(posedge clk) begin
    out_valid <= v1 && rst_n;
    out_tag   <= tag1;
    for (int m = 0; m < LANES; m++) begin
      torus_t x;
      if (m >= int'(sh)) x = rd_src[m - int'(sh)];
      else               x = -rd_src[m - int'(sh) + LANES];
      if (neg_all) x = -x;
      dout[m] <= x - (sub1 ? rd_self[m] : 64'd0);
    end
  end
endmodule
