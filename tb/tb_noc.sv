// Testbench for noc (four clusters, two groups): random addresses and data on
// every port; checks the broadcast of the key-row address and data, the
// mapping of the twelve twiddle read ports, the one-cycle registered
// broadcast of the key-switching-key word, and the routing of inverse-FFT
// results to the cluster named by the result's source bit.
module tb_noc;
  import taurus_pkg::*;
  localparam int NCL = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] bsk_raddr_cl [NCL], bsk_raddr; cplx_t bsk_rdata [2][256], bsk_rdata_cl [NCL][2][256];
  logic [7:0] tw_addr_cl [NCL][2], tw_addr_if [NCL/2][2], tw_raddr [3*NCL];
  cplx_t tw_rdata [3*NCL][256], tw_data_cl [NCL][2][256], tw_data_if [NCL/2][2][256];
  torus_t ksk_rdata [4][64], ksk_cl [NCL][4][64], ksk_prev [4][64];
  logic if_valid [NCL/2], if_src [NCL/2]; logic [6:0] if_word [NCL/2]; torus_t if_data [NCL/2][512];
  logic res_valid_cl [NCL]; logic [6:0] res_word_cl [NCL]; torus_t res_data_cl [NCL][512];
  int checks = 0, failures = 0;
  noc #(.NCL(NCL)) dut (.*);
  function automatic cplx_t rc(); cplx_t r; r.re = 48'({$urandom, $urandom}); r.im = 48'({$urandom, $urandom}); return r; endfunction
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [6:0] ba;
      @(negedge clk);
      ba = 7'($urandom);
      for (int c = 0; c < NCL; c++) bsk_raddr_cl[c] = ba;
      for (int p = 0; p < 2; p++) for (int i = 0; i < 256; i++) bsk_rdata[p][i] = rc();
      for (int c = 0; c < NCL; c++) for (int p = 0; p < 2; p++) tw_addr_cl[c][p] = 8'($urandom);
      for (int g = 0; g < NCL/2; g++) for (int p = 0; p < 2; p++) tw_addr_if[g][p] = 8'($urandom);
      for (int q = 0; q < 3*NCL; q++) for (int i = 0; i < 256; i++) tw_rdata[q][i] = rc();
      for (int l = 0; l < 4; l++) for (int e = 0; e < 64; e++) begin ksk_prev[l][e] = ksk_rdata[l][e]; ksk_rdata[l][e] = {$urandom, $urandom}; end
      for (int g = 0; g < NCL/2; g++) begin
        if_valid[g] = $urandom_range(0, 1); if_src[g] = $urandom_range(0, 1); if_word[g] = 7'($urandom);
        for (int m = 0; m < 512; m++) if_data[g][m] = {$urandom, $urandom};
      end
      #1;
      checks++; if (bsk_raddr != ba) failures++;
      for (int c = 0; c < NCL; c++) begin
        checks++; if (bsk_rdata_cl[c] != bsk_rdata) failures++;
        for (int p = 0; p < 2; p++) begin
          checks++; if (tw_raddr[2*c+p] != tw_addr_cl[c][p]) failures++;
          checks++; if (tw_data_cl[c][p] != tw_rdata[2*c+p]) failures++;
        end
        checks++; if (res_valid_cl[c] != (if_valid[c/2] && if_src[c/2] == c[0])) failures++;
        checks++; if (res_word_cl[c] != if_word[c/2] || res_data_cl[c] != if_data[c/2]) failures++;
        if (t > 0) begin checks++; if (ksk_cl[c] != ksk_prev) failures++; end
      end
      for (int g = 0; g < NCL/2; g++) for (int p = 0; p < 2; p++) begin
        checks++; if (tw_raddr[2*NCL+2*g+p] != tw_addr_if[g][p]) failures++;
        checks++; if (tw_data_if[g][p] != tw_rdata[2*NCL+2*g+p]) failures++;
      end
      @(posedge clk); #1;
      for (int c = 0; c < NCL; c++) begin checks++; if (ksk_cl[c] != ksk_rdata) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
