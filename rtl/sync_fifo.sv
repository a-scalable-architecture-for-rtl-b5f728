// Read/store queue between the HBM stacks and the on-chip buffers.
//
// A synchronous first-in first-out queue of DEPTH words of W bits with
// valid/ready handshakes on both sides. Sequential access patterns let this
// small queue hide DRAM latency: the default holds 16 KB (W * DEPTH / 8 bytes).
// Writing when full or reading when empty is refused by the handshake.
// Timing: a word written in cycle t can be read from cycle t+1.
// The 16 KB size follows the paper; width, depth split and handshake are this
// design's.
module sync_fifo #(
  parameter int W     = 1024,
  parameter int DEPTH = 128,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
