// Compute cluster: one blind-rotation unit (BRU), one LWE processing unit
// (LPU) and the cluster's private buffers (GLWE buffer, LWE buffer; the
// accumulator buffer sits inside the BRU).
//
// GLWE buffer: (2*RR + 2) polynomials of 65536 64-bit coefficients in 128 words
// of 512 coefficients: the two accumulator polynomials of each round-robin
// ciphertext, then the two polynomials of the test polynomial (LUT). The BRU
// owns its ports while busy; otherwise the load port (gl_we ...) writes and
// the sample-extraction port reads.
// LWE buffer: mod-switched mask values, RR * CH words of 256 values (ciphertext
// c, values 256*ch .. 256*ch+255 at word c*CH + ch). The LPU's modulus switch
// writes it directly (lpu_lwe_we, lpu_lwe_addr). Before each blind-rotation
// iteration i the cluster gathers a[c] = value i of every ciphertext, one word
// per cycle (RR + 1 cycles), then starts the BRU.
// Commands: cmd_start with cmd_init = 1 runs the initial LUT rotation with
// a[c] = value cmd_iter (the caller stores 2N - b there); with cmd_init = 0 it
// runs blind-rotation iteration cmd_iter. cmd_done pulses at the end.
// Sample extraction: se_req with se_ct, se_word asks for word se_word of the
// long LWE mask of ciphertext se_ct (se_body = 1: the body polynomial's word
// through the same path; lane 0 of word 0 is b'). Result two cycles later.
// The unit mix and the private/shared split of buffers follow the paper; the
// buffer organisation and command protocol are this design's.
module cluster
  import taurus_pkg::*;
#(
  parameter int RR        = 12,
  parameter int CH        = 5,      // 256-value chunks per short LWE (n <= 1280)
  parameter int MAC_SHIFT = 24,
  parameter int KS_CHUNKS = 17,
  localparam int CW       = (RR > 1) ? $clog2(RR) : 1,
  localparam int GDEPTH   = (2 * RR + 2) * 128,
  localparam int GAW      = $clog2(GDEPTH),
  localparam int LDEPTH   = RR * CH,
  localparam int LAW      = (LDEPTH > 1) ? $clog2(LDEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [5:0]     base_log,
  input  logic [2:0]     levels,
  // commands
  input  logic           cmd_start,
  input  logic           cmd_init,
  input  logic [10:0]    cmd_iter,
  output logic           cmd_busy,
  output logic           cmd_done,
  // GLWE load port
  input  logic           gl_we,
  input  logic [GAW-1:0] gl_waddr,
  input  torus_t         gl_wdata [512],
  // sample extraction read port
  input  logic           se_req,
  input  logic [CW-1:0]  se_ct,
  input  logic           se_body,
  input  logic [6:0]     se_word,
  output logic           se_valid,
  output torus_t         se_data [512],
  // LPU
  input  logic           lpu_valid,
  input  lpu_op_e        lpu_op,
  input  torus_t         lpu_a [4][64],
  input  torus_t         lpu_b [4][64],
  input  torus_t         lpu_scalar,
  input  logic [4:0]     lpu_log_n2,
  input  logic           lpu_lwe_we,
  input  logic [LAW-1:0] lpu_lwe_addr,
  input  logic [$clog2(KS_CHUNKS)-1:0] lpu_chunk,
  input  logic           lpu_ks_clear,
  input  torus_t         lpu_ks_scalar [4],
  input  logic [2:0]     lpu_ks_level [4],
  input  logic [5:0]     lpu_ks_base_log,
  input  logic [2:0]     lpu_ks_levels,
  input  logic [3:0]     lpu_ks_lane_en,
  input  torus_t         ksk [4][64],
  input  logic [$clog2(KS_CHUNKS)-1:0] lpu_acc_rd_chunk,
  output torus_t         lpu_acc_rd_data [64],
  output logic           lpu_out_valid,
  output torus_t         lpu_out [4][64],
  // shared resources
  output logic [7:0]     tw_addr [2],
  input  cplx_t          tw_data [2][256],
  output logic [6:0]     bsk_raddr,
  input  cplx_t          bsk_rdata [2][256],
  output logic           bsk_next_valid,
  output logic [6:0]     bsk_next_word,
  output logic           ifft_req_valid,
  input  logic           ifft_req_ready,
  output logic [6:0]     ifft_req_word,
  output cplx_t          ifft_req_data [256],
  input  logic           ifft_res_valid,
  input  logic [6:0]     ifft_res_word,
  input  torus_t         ifft_res_data [512],
  output logic           ev_decomp_stall
);
  logic [6:0] se_src;
  logic           lwe_we_q;
  logic [LAW-1:0] lwe_addr_q;
  torus_t lpu_out_raw [4][64];
  typedef torus_t glwe_word_t [512];
  typedef logic [16:0] lwe_word_t [256];

  // ---------------- GLWE buffer ----------------
  logic [GAW-1:0] g_raddr [4], b_raddr [3];
  glwe_word_t     g_rdata [4];
  torus_t         b_rdata [3][512];
  logic           b_we, bru_busy, bru_done;
  logic [GAW-1:0] b_waddr;
  torus_t         b_wdata [512];
  logic           g_we;
  logic [GAW-1:0] g_waddr;
  glwe_word_t     g_wdata;

  always_comb begin
    for (int p = 0; p < 3; p++) g_raddr[p] = b_raddr[p];
    for (int p = 0; p < 3; p++) b_rdata[p] = g_rdata[p];
    g_raddr[3] = GAW'((int'(se_ct) * 2 + int'(se_body)) * 128 + int'(se_src));
    if (bru_busy) begin
      g_we = b_we; g_waddr = b_waddr; g_wdata = b_wdata;
    end else begin
      g_we = gl_we; g_waddr = gl_waddr; g_wdata = gl_wdata;
    end
  end

  buffer_ram #(.word_t(glwe_word_t), .DEPTH(GDEPTH), .NRD(4)) u_glwe_buf (
    .clk, .we(g_we), .waddr(g_waddr), .wdata(g_wdata), .raddr(g_raddr), .rdata(g_rdata));

  logic       se_req_q;
  always_ff @(posedge clk) se_req_q <= se_req && rst_n;
  sample_extract #(.LANES(512)) u_se (
    .clk, .out_word(se_word), .src_word(se_src), .in_valid(se_req_q),
    .din(g_rdata[3]), .out_valid(se_valid), .dout(se_data));

  // ---------------- LWE buffer and a[] gathering ----------------
  logic [LAW-1:0] l_raddr [1];
  lwe_word_t      l_rdata [1];
  lwe_word_t      l_wdata;
  always_comb
    for (int i = 0; i < 256; i++) l_wdata[i] = lpu_out_raw[i / 64][i % 64][16:0];
  buffer_ram #(.word_t(lwe_word_t), .DEPTH(LDEPTH), .NRD(1)) u_lwe_buf (
    .clk, .we(lwe_we_q), .waddr(lwe_addr_q), .wdata(l_wdata),
    .raddr(l_raddr), .rdata(l_rdata));

  always_ff @(posedge clk) begin
    lwe_we_q   <= lpu_valid && lpu_lwe_we && lpu_op == LPU_MODSW && rst_n;
    lwe_addr_q <= lpu_lwe_addr;
  end

  typedef enum logic [1:0] {G_IDLE, G_GATHER, G_RUN} gstate_e;
  gstate_e      gs;
  logic [CW:0]  g_cnt;
  logic [10:0]  iter_q;
  logic         init_q;
  logic [16:0]  a_vec [RR];
  logic         bru_start;

  assign l_raddr[0] = LAW'(int'(g_cnt) * CH + int'(iter_q[10:8]));

  always_ff @(posedge clk) begin
    bru_start <= 1'b0;
    if (!rst_n) begin
      gs <= G_IDLE; g_cnt <= '0;
    end else begin
      unique case (gs)
        G_IDLE: if (cmd_start) begin
          gs <= G_GATHER; g_cnt <= '0; iter_q <= cmd_iter; init_q <= cmd_init;
        end
        G_GATHER: begin
          // word g_cnt-1 is on l_rdata this cycle
          if (g_cnt != 0) a_vec[int'(g_cnt) - 1] <= l_rdata[0][iter_q[7:0]];
          if (int'(g_cnt) == RR) begin
            gs <= G_RUN; bru_start <= 1'b1;
          end
          g_cnt <= g_cnt + 1'b1;
        end
        G_RUN: if (bru_done) gs <= G_IDLE;
        default: gs <= G_IDLE;
      endcase
    end
  end
  assign cmd_busy = (gs != G_IDLE);
  assign cmd_done = bru_done;

  // ---------------- BRU ----------------
  bru #(.RR(RR), .MAC_SHIFT(MAC_SHIFT)) u_bru (
    .clk, .rst_n, .base_log, .levels, .start(bru_start), .init(init_q), .a_vec,
    .busy(bru_busy), .done(bru_done),
    .g_raddr(b_raddr), .g_rdata(b_rdata), .g_we(b_we), .g_waddr(b_waddr), .g_wdata(b_wdata),
    .tw_addr, .tw_data, .bsk_raddr, .bsk_rdata, .bsk_next_valid, .bsk_next_word,
    .ifft_req_valid, .ifft_req_ready, .ifft_req_word, .ifft_req_data,
    .ifft_res_valid, .ifft_res_word, .ifft_res_data, .ev_decomp_stall);

  // ---------------- LPU ----------------
  lpu #(.NLANE(4), .ELEMS(64), .KS_CHUNKS(KS_CHUNKS)) u_lpu (
    .clk, .rst_n, .in_valid(lpu_valid), .op(lpu_op), .a_in(lpu_a), .b_in(lpu_b),
    .scalar(lpu_scalar), .log_n2(lpu_log_n2), .chunk(lpu_chunk), .ks_clear(lpu_ks_clear),
    .ks_scalar(lpu_ks_scalar), .ks_level(lpu_ks_level), .ks_base_log(lpu_ks_base_log),
    .ks_levels(lpu_ks_levels), .ks_lane_en(lpu_ks_lane_en), .ksk,
    .acc_rd_chunk(lpu_acc_rd_chunk), .acc_rd_data(lpu_acc_rd_data),
    .out_valid(lpu_out_valid), .dout(lpu_out_raw));
  assign lpu_out = lpu_out_raw;
endmodule
