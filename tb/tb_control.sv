// Testbench for control with four modelled clusters: each cluster answers a
// start with a done pulse after its own random delay and asks for key-row
// words (bsk_next) at random times; the key queue is modelled as a counter
// that sometimes runs empty. Checks: 128 preload writes to GGSW words 0..127
// in order, one initial-rotation start with iteration index n_short, then
// starts for iterations 0..n_short-1, each only after every cluster finished
// the previous step (full synchronisation), GGSW refill writes at the
// requested word, the underflow and sync-wait counters, and one done pulse.
module tb_control;
  localparam int NCL = 4, NSH = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done; logic [10:0] n_short, iter;
  logic cl_start, cl_init; logic [10:0] cl_iter; logic [NCL-1:0] cl_done;
  logic kq_valid, kq_ready, bsk_next_valid; logic [6:0] bsk_next_word;
  logic ggsw_we; logic [6:0] ggsw_waddr; logic [31:0] underflows, sync_waits;
  int checks = 0, failures = 0;
  control #(.NCL(NCL)) dut (.*);
  int kq = 0, pre = 0, starts = 0, dones = 0, exp_under = 0, refills = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  int cnt [NCL]; logic [NCL-1:0] finished;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  assign kq_valid = (kq > 0);
  always @(posedge clk) if (rst_n) begin
    if ($urandom_range(0, 9) < 6 && !(starts >= 2 && starts <= 3)) kq <= kq + 1 - ((kq_valid && kq_ready) ? 1 : 0);
    else kq <= kq - ((kq_valid && kq_ready) ? 1 : 0);
    if (ggsw_we && starts == 0) begin
      checks++; if (int'(ggsw_waddr) != pre) failures++;
      pre++;
    end
    if (bsk_next_valid) begin
      if (!kq_valid) exp_under++;
      else begin refills++; checks++; if (!ggsw_we || ggsw_waddr != bsk_next_word) failures++; end
    end
    cl_done <= '0;
    for (int c = 0; c < NCL; c++) if (cnt[c] > 0) begin
      cnt[c] <= cnt[c] - 1;
      if (cnt[c] == 1) begin cl_done[c] <= 1'b1; finished[c] <= 1'b1; end
    end
    if (cl_start) begin
      checks++; if (finished != '1) failures++;
      checks++;
      if (starts == 0) begin if (!cl_init || cl_iter != 11'(NSH) || pre != 128) failures++; end
      else if (cl_init || int'(cl_iter) != starts - 1) failures++;
      starts++;
      finished <= '0;
      for (int c = 0; c < NCL; c++) cnt[c] <= 1 + $urandom_range(0, 30);
    end
    if (done) dones++;
  end
  initial begin
    start = 0; n_short = 11'(NSH); bsk_next_valid = 0; bsk_next_word = 0;
    for (int c = 0; c < NCL; c++) cnt[c] = 0;
    finished = '1; cl_done = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      bsk_next_valid = (starts > 0) && ($urandom_range(0, 3) == 0);
      bsk_next_word = 7'($urandom);
      @(negedge clk);
    end
    bsk_next_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (starts != NSH + 1) failures++;
    checks++; if (dones != 1) failures++;
    checks++; if (busy) failures++;
    checks++; if (int'(underflows) != exp_under) failures++;
    checks++; if (sync_waits == 0) failures++;
    checks++; if (refills == 0 || exp_under == 0) failures++;
    $display("starts %0d refills %0d underflows %0d sync waits %0d", starts, refills, underflows, sync_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
