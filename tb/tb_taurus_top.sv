// Reduced end-to-end test bench of taurus_top: two round-robin ciphertexts
// per cluster, three blind-rotation iterations (see tb_top_core for the
// scenario and the checks). All other sizes are the design defaults.
module tb_taurus_top;
  tb_top_core #(.RR(2), .NS(3)) u_core ();
endmodule
