// Full-size end-to-end test bench of taurus_top: the top at its default
// parameters (12 round-robin ciphertexts in each of the four clusters, a
// batch of 48, polynomial degree 65536): the initial rotation plus one
// blind-rotation iteration with B = 23, d = 1, followed by sample extraction
// of all 48 results, with the checks of tb_top_core. The d = 2 run is left to
// the reduced bench to keep the simulation short.
module tb_taurus_top_full;
  tb_top_core #(.RR(12), .NS(1), .RUNS(1)) u_core ();
endmodule
