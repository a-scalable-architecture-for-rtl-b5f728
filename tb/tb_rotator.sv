// Testbench for rotator: holds a random polynomial of degree N = 128*LANES in
// a word-organised memory that answers reads one cycle later, asks for every
// output word of X^a*P - P (and of X^a*P alone) for random a in [0, 2N), and
// compares with the negacyclic rotation computed coefficient by coefficient.
// Checks the two-cycle latency.
module tb_rotator;
  import taurus_pkg::*;
  localparam int L = 4, N = 128 * L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; logic [15:0] in_tag; logic [9:0] a; logic [6:0] word; logic sub_en;
  logic [6:0] rd_addr_src, rd_addr_self;
  torus_t rd_src [L], rd_self [L], dout [L];
  logic out_valid; logic [15:0] out_tag;
  int checks = 0, failures = 0;
  torus_t P [N];
  rotator #(.LANES(L)) dut (.*);
  always_ff @(posedge clk)
    for (int m = 0; m < L; m++) begin
      rd_src[m]  <= P[128 * m + rd_addr_src];
      rd_self[m] <= P[128 * m + rd_addr_self];
    end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic torus_t rot_ref(int av, int j);
    int idx;
    idx = (j - av) % (2 * N); if (idx < 0) idx += 2 * N;
    return (idx < N) ? P[idx] : -P[idx - N];
  endfunction
  int exp_a [$], exp_w [$], exp_s [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    int av, w, s;
    av = exp_a.pop_front(); w = exp_w.pop_front(); s = exp_s.pop_front();
    checks++; if (out_tag != 16'(w)) failures++;
    for (int m = 0; m < L; m++) begin
      torus_t e;
      e = rot_ref(av, 128 * m + w) - (s ? P[128 * m + w] : 64'd0);
      checks++;
      if (dout[m] != e) begin failures++; if (failures < 5) $display("a=%0d w=%0d m=%0d got %h exp %h", av, w, m, dout[m], e); end
    end
  end
  initial begin
    for (int i = 0; i < N; i++) P[i] = {$urandom, $urandom};
    in_valid = 0; a = 0; word = 0; sub_en = 0; in_tag = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int av;
      av = (t == 0) ? 0 : (t == 1) ? N : (t == 2) ? 2 * N - 1 : $urandom_range(0, 2 * N - 1);
      for (int w = 0; w < 128; w++) begin
        @(negedge clk);
        in_valid = 1; a = 10'(av); word = 7'(w); sub_en = t[0]; in_tag = 16'(w);
        exp_a.push_back(av); exp_w.push_back(w); exp_s.push_back(t % 2);
      end
    end
    @(negedge clk); in_valid = 0;
    // latency: one request, valid exactly two edges later
    @(negedge clk); in_valid = 1; a = 5; word = 3; sub_en = 0; in_tag = 3;
    exp_a.push_back(5); exp_w.push_back(3); exp_s.push_back(0);
    @(negedge clk); in_valid = 0;
    checks++; if (out_valid) failures++;
    @(negedge clk);
    checks++; if (!out_valid) failures++;
    repeat (3) @(negedge clk);
    checks++; if (exp_a.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
