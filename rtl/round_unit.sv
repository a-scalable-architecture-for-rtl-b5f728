// Round unit: keeps the B*d most significant bits of each torus coefficient,
// rounded to nearest, ahead of gadget decomposition.
//
// out = floor((x + 2^(63 - B*d)) / 2^(64 - B*d)) mod 2^(B*d), for LANES
// coefficients in parallel, with B = base_log and d = levels given at run time
// (1 <= B*d <= 63). The rounding position is the one required by the TFHE
// gadget decomposition; the run-time B and d inputs are this design's.
// Timing: one register stage; a word enters and leaves every cycle, and the
// valid bit and a word tag travel with the data.
module round_unit
  import taurus_pkg::*;
#(
  parameter int LANES = 512,
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [5:0]       base_log,
  input  logic [2:0]       levels,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  torus_t           din  [LANES],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output torus_t           dout [LANES]
);
  logic [6:0] drop;   // 64 - B*d low bits are rounded away
  assign drop = 7'd64 - 7'(base_log) * 7'(levels);

  always_ff @(posedge clk) begin
    out_valid <= in_valid && rst_n;
    out_tag   <= in_tag;
    for (int i = 0; i < LANES; i++) begin
      logic [64:0] s;
      s = {1'b0, din[i]} + (65'd1 << (drop - 7'd1));
      dout[i] <= torus_t'(s >> drop) & ((64'd1 << (64 - drop)) - 64'd1);
    end
  end
endmodule
