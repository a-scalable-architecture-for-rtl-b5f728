// Testbench for sync_fifo: random pushes and pops against a queue model;
// checks data order, the count output, and that a full FIFO refuses input.
module tb_sync_fifo;
  localparam int W = 32, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data; logic [3:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] model [$];
  sync_fifo #(.W(W), .DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < (t < 2500 ? 70 : 30));
      in_data = $urandom;
      out_ready = ($urandom_range(0, 99) < (t < 2500 ? 30 : 70));
      #1;
      checks++; if (int'(count) != model.size()) failures++;
      checks++; if (in_ready != (model.size() < D)) failures++;
      checks++; if (out_valid != (model.size() > 0)) failures++;
      if (out_valid) begin checks++; if (out_data != model[0]) failures++; end
      if (!in_ready) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++; if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
