// Testbench for buffer_ram: random writes and reads on three read ports
// against an array model; reads return the old word one cycle later even when
// the same address is written in that cycle.
module tb_buffer_ram;
  localparam int D = 64;
  typedef logic [39:0] w_t;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [5:0] waddr; w_t wdata; logic [5:0] raddr [3]; w_t rdata [3];
  w_t model [D];
  int checks = 0, failures = 0;
  buffer_ram #(.word_t(w_t), .DEPTH(D), .NRD(3)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    w_t expd [3];
    we = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); waddr = 6'(i); wdata = {$urandom, 8'(i)}; model[i] = wdata;
      for (int p = 0; p < 3; p++) raddr[p] = 0;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 6'($urandom); wdata = {$urandom, 8'($urandom)};
      for (int p = 0; p < 3; p++) begin raddr[p] = (p == 2) ? waddr : 6'($urandom); expd[p] = model[raddr[p]]; end
      @(posedge clk);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0;
      for (int p = 0; p < 3; p++) begin checks++; if (rdata[p] != expd[p]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
