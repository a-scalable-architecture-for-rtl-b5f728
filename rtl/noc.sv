// On-chip network between the shared buffers and the four compute clusters.
//
// Traffic it carries:
//  - key rows: all BRUs run in lock step (full synchronisation), so one read
//    of the GGSW row buffer, addressed by cluster 0, is broadcast to every BRU;
//    an assertion checks that all clusters ask for the same word;
//  - twiddle factors: the two read ports of each BRU's forward FFT and of each
//    group's inverse FFT are mapped onto the NPORT read ports of the shared
//    twiddle buffer (port 2*u + p for unit u = cluster 0..3, IFFT 4..5);
//  - key-switching key words: one word of the KSK buffer is broadcast to the
//    four LPUs through one pipeline register;
//  - inverse-FFT results: each group's shared inverse FFT returns words to the
//    BRU named by its source tag.
// The NoC's existence, its pipelining and the key sharing through it follow
// the paper; its topology is not described there, and this broadcast /
// routing crossbar is this design's.
module noc
  import taurus_pkg::*;
#(
  parameter int NCL = 4
) (
  input  logic       clk,
  // key rows
  input  logic [6:0] bsk_raddr_cl [NCL],
  output logic [6:0] bsk_raddr,
  input  cplx_t      bsk_rdata [2][256],
  output cplx_t      bsk_rdata_cl [NCL][2][256],
  // twiddles
  input  logic [7:0] tw_addr_cl [NCL][2],
  input  logic [7:0] tw_addr_if [NCL/2][2],
  output logic [7:0] tw_raddr [3*NCL],
  input  cplx_t      tw_rdata [3*NCL][256],
  output cplx_t      tw_data_cl [NCL][2][256],
  output cplx_t      tw_data_if [NCL/2][2][256],
  // key-switching key
  input  torus_t     ksk_rdata [4][64],
  output torus_t     ksk_cl [NCL][4][64],
  // inverse-FFT results
  input  logic       if_valid [NCL/2],
  input  logic       if_src   [NCL/2],
  input  logic [6:0] if_word  [NCL/2],
  input  torus_t     if_data  [NCL/2][512],
  output logic       res_valid_cl [NCL],
  output logic [6:0] res_word_cl  [NCL],
  output torus_t     res_data_cl  [NCL][512]
);
  assign bsk_raddr = bsk_raddr_cl[0];

  always_comb begin
    for (int c = 0; c < NCL; c++) begin
      bsk_rdata_cl[c] = bsk_rdata;
      for (int p = 0; p < 2; p++) begin
        tw_raddr[2*c + p]   = tw_addr_cl[c][p];
        tw_data_cl[c][p]    = tw_rdata[2*c + p];
      end
    end
    for (int g = 0; g < NCL/2; g++)
      for (int p = 0; p < 2; p++) begin
        tw_raddr[2*NCL + 2*g + p] = tw_addr_if[g][p];
        tw_data_if[g][p]          = tw_rdata[2*NCL + 2*g + p];
      end
    for (int c = 0; c < NCL; c++) begin
      res_valid_cl[c] = if_valid[c/2] && (if_src[c/2] == c[0]);
      res_word_cl[c]  = if_word[c/2];
      res_data_cl[c]  = if_data[c/2];
    end
  end

  always_ff @(posedge clk)
    for (int c = 0; c < NCL; c++) ksk_cl[c] <= ksk_rdata;

  for (genvar c = 1; c < NCL; c++) begin : g_lockstep
    assert property (@(posedge clk) bsk_raddr_cl[c] == bsk_raddr_cl[0]);
  end
endmodule
