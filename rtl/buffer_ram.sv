// On-chip scratchpad buffer: DEPTH words of type word_t, one write port and
// NRD independent read ports with one cycle of read latency.
//
// Every buffer of the accelerator is an instance of this module with its own
// word type and depth: the per-cluster GLWE, LWE and accumulator buffers and
// the shared key (GGSW row, key-switching key) and twiddle buffers. In silicon
// these are compiled SRAM macros; here the storage is an array that synthesis
// maps to memory. A read of the address written in the same cycle returns the
// old word (read-before-write). Contents are not reset.
module buffer_ram #(
  parameter type word_t = logic [63:0],
  parameter int  DEPTH  = 1024,
  parameter int  NRD    = 1,
  localparam int AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic [AW-1:0] raddr [NRD],
  output word_t         rdata [NRD]
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NRD; p++) rdata[p] <= mem[raddr[p]];
  end

  assert property (@(posedge clk) we |-> (int'(waddr) < DEPTH));
endmodule
