// Shutter transpose unit: streaming matrix transpose between FFT-A and FFT-B.
//
// A polynomial in flight is an S x S matrix of cells, each cell holding G
// complex values. It enters one line (S cells) per cycle and leaves one line per
// cycle, transposed. A single S x S array is used without double buffering:
// the orientation alternates from one polynomial to the next, like the two
// curtains of a camera shutter. A polynomial written row by row ("vertical"
// streaming of the next one) is read column by column; the next polynomial is
// written column by column into exactly the column that is being read in the
// same cycle, and is later read row by row, and so on. The read of line t
// happens before the write of line t in the same clock edge, so one polynomial
// drains while the next fills and throughput stays at one line per cycle.
// Internal counters track polynomial boundaries; in_ready drops only if a new
// line would overwrite a line that has not yet been read.
// Interface: din/in_valid/in_ready (line in), dout/out_valid/out_line (line
// out, index within the polynomial). Latency from the last input line of a
// polynomial to its first output line is one cycle.
// The alternating-orientation principle follows the paper; the cell grouping,
// the counters and the ready rule are this design's.
module shutter_transpose
  import taurus_pkg::*;
#(
  parameter int S = 128,   // lines per polynomial and cells per line
  parameter int G = 2      // complex values per cell
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t                din  [S][G],
  output logic                 out_valid,
  output logic [$clog2(S)-1:0] out_line,
  output cplx_t                dout [S][G]
);
  localparam int LW = $clog2(S);

  cplx_t           mem [S][S][G];
  logic            wr_mode, rd_mode;     // 0: row-wise write / column-wise read
  logic [LW-1:0]   wr_cnt, rd_cnt;
  logic            draining;             // a complete polynomial is being read
  logic            rd_fire, wr_fire;

  assign rd_fire  = draining;
  // Line t of the filling polynomial may be written once line t of the
  // draining one has been read (or is read this cycle).
  assign in_ready = !draining || ({1'b0, wr_cnt} <= {1'b0, rd_cnt});
  assign wr_fire  = in_valid && in_ready;

  always_comb begin
    for (int i = 0; i < S; i++)
      for (int g = 0; g < G; g++)
        dout[i][g] = rd_mode ? mem[rd_cnt][i][g] : mem[i][rd_cnt][g];
  end
  assign out_valid = rd_fire;
  assign out_line  = rd_cnt;

  always_ff @(posedge clk) begin
    if (wr_fire)
      for (int i = 0; i < S; i++)
        for (int g = 0; g < G; g++)
          if (wr_mode) mem[i][wr_cnt][g] <= din[i][g];
          else         mem[wr_cnt][i][g] <= din[i][g];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_mode  <= 1'b0;
      rd_mode  <= 1'b0;
      wr_cnt   <= '0;
      rd_cnt   <= '0;
      draining <= 1'b0;
    end else begin
      logic wr_done, rd_done;
      wr_done = wr_fire && (wr_cnt == LW'(S-1));
      rd_done = rd_fire && (rd_cnt == LW'(S-1));
      if (wr_fire) wr_cnt <= wr_cnt + 1'b1;
      if (rd_fire) rd_cnt <= rd_cnt + 1'b1;
      if (wr_done) begin
        // the polynomial just completed is read in the orientation it was
        // not written in; the next one is written the other way round
        wr_mode  <= ~wr_mode;
        rd_mode  <= wr_mode;
        draining <= 1'b1;
      end else if (rd_done) begin
        draining <= 1'b0;
      end
    end
  end

  // A completed polynomial may only appear when the previous one is drained.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (wr_fire && wr_cnt == LW'(S-1) && draining) |-> (rd_cnt == LW'(S-1)));
endmodule
