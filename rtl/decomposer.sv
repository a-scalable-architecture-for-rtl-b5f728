// Decomposer unit: signed gadget decomposition of rounded torus coefficients.
//
// Each of the LANES lanes turns a value c of B*d bits (the output of the round
// unit) into d signed digits in [-2^(B-1), 2^(B-1)] with
//   c = sum_j digit_j * 2^(B*(d-1-j))  (mod 2^(B*d)),
// emitted least significant first, one digit per cycle. Per step the splitter
// separates the low B bits (remainder r) from the rest (initial quotient q);
// a carry is taken when r is above 2^(B-1), or equal to it and the next digit
// would be negative (bit B-1 of q); the digit is r - carry*2^B and q + carry is
// fed back for the next step. This is the balanced rounding rule used by common
// TFHE libraries: carry = bit B-1 of (((r-1) | q) & r).
// A new word is accepted only every d cycles (in_ready low in between: the
// stall the scaling stage introduces for d > 1); digits leave every cycle.
// out_level j names the weight 2^(64 - B*(j+1)) of the digit in the torus, so
// the first digit of a word has level d-1 and the last has level 0.
// The two-part structure (splitter, then one digit per cycle with rounding
// carry) follows the paper's figure; digit order and handshake are this design's.
module decomposer
  import taurus_pkg::*;
#(
  parameter int LANES = 512,
  parameter int DIG_W = 32,
  parameter int TAG_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [5:0]              base_log,   // B, 1..DIG_W-1
  input  logic [2:0]              levels,     // d, 1..7
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [TAG_W-1:0]        in_tag,
  input  torus_t                  din [LANES],
  output logic                    out_valid,
  output logic [2:0]              out_level,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [DIG_W-1:0] dout [LANES]
);
  torus_t           quot [LANES];   // quotient register per lane
  logic [2:0]       step;           // digits still to emit for the held word
  logic [TAG_W-1:0] tag_q;

  assign in_ready = (step <= 3'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      step      <= '0;
      out_valid <= 1'b0;
    end else begin
      logic take;
      take = in_valid && in_ready;
      out_valid <= take || (step > 3'd1);
      if (take) begin
        step  <= levels;
        tag_q <= in_tag;
      end else if (step != 0) begin
        step <= step - 3'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    logic take;
    take = in_valid && in_ready;
    for (int i = 0; i < LANES; i++) begin
      torus_t c, r, q, carry;
      torus_t mask;
      mask  = (64'd1 << base_log) - 64'd1;
      c     = take ? din[i] : quot[i];            // Coef / Quotient mux
      r     = c & mask;                          // splitter: remainder
      q     = c >> base_log;                     //           initial quotient
      carry = ((((r - 64'd1) | q) & r) >> (base_log - 6'd1)) & 64'd1;
      quot[i] <= q + carry;
      dout[i] <= DIG_W'(r) - (DIG_W'(carry) << base_log);
    end
    if (take) begin
      out_level <= levels - 3'd1;
      out_tag   <= in_tag;
    end else begin
      out_level <= out_level - 3'd1;
      out_tag   <= tag_q;
    end
  end
endmodule
