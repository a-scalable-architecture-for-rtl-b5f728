// Top level of the multi-bit TFHE bootstrapping accelerator.
//
// Four compute clusters, each with a blind-rotation unit (BRU), an LWE
// processing unit (LPU) and private GLWE / LWE / accumulator buffers, form two
// cluster groups; the two BRUs of a group share one inverse-FFT cluster. The
// shared side holds the GGSW row buffer (one row of the bootstrapping key in
// the Fourier domain), the key-switching-key buffer, the twiddle buffer, the
// read queue in front of the HBM stacks, the NoC and the global control.
// Bootstrapping runs key-switching first: the LPUs key-switch and
// modulus-switch (driven through the per-cluster LPU ports), the BRUs then
// blind-rotate RR ciphertexts each, all clusters in lock step, and sample
// extraction reads the results back. The HBM stacks and their controllers are
// outside: the key stream arrives on kin_*, buffers are loaded through the
// *_we ports.
// Default sizes: polynomial degree N = 65536, 48-bit complex fixed point,
// 12 round-robin ciphertexts per cluster (48 per batch).
module taurus_top
  import taurus_pkg::*;
#(
  parameter int NCL       = 4,
  parameter int RR        = 12,
  parameter int CH        = 5,
  parameter int MAC_SHIFT = 24,
  parameter int OUT_SHIFT = 16,
  parameter int KS_CHUNKS = 17,
  parameter int KSK_DEPTH = 256,
  parameter int KQ_DEPTH  = 2,
  localparam int CW       = (RR > 1) ? $clog2(RR) : 1,
  localparam int GAW      = $clog2((2 * RR + 2) * 128),
  localparam int LAW      = (RR * CH > 1) ? $clog2(RR * CH) : 1,
  localparam int KAW      = $clog2(KSK_DEPTH),
  localparam int KCW      = $clog2(KS_CHUNKS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [5:0]    base_log,
  input  logic [2:0]    levels,
  input  logic [10:0]   n_short,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [10:0]   iter,
  // key stream from HBM (one GGSW row word per beat)
  input  logic          kin_valid,
  output logic          kin_ready,
  input  cplx_t         kin_data [2][256],
  // twiddle buffer load
  input  logic          tw_we,
  input  logic [7:0]    tw_waddr,
  input  cplx_t         tw_wdata [256],
  // key-switching-key buffer
  input  logic          ksk_we,
  input  logic [KAW-1:0] ksk_waddr,
  input  torus_t        ksk_wdata [4][64],
  input  logic [KAW-1:0] ksk_raddr,
  // per-cluster GLWE load
  input  logic          gl_we    [NCL],
  input  logic [GAW-1:0] gl_waddr [NCL],
  input  torus_t        gl_wdata [NCL][512],
  // per-cluster sample extraction
  input  logic          se_req   [NCL],
  input  logic [CW-1:0] se_ct    [NCL],
  input  logic          se_body  [NCL],
  input  logic [6:0]    se_word  [NCL],
  output logic          se_valid [NCL],
  output torus_t        se_data  [NCL][512],
  // per-cluster LPU instruction
  input  logic          lpu_valid [NCL],
  input  lpu_op_e       lpu_op    [NCL],
  input  torus_t        lpu_a     [NCL][4][64],
  input  torus_t        lpu_b     [NCL][4][64],
  input  torus_t        lpu_scalar [NCL],
  input  logic [4:0]    lpu_log_n2 [NCL],
  input  logic          lpu_lwe_we [NCL],
  input  logic [LAW-1:0] lpu_lwe_addr [NCL],
  input  logic [KCW-1:0] lpu_chunk [NCL],
  input  logic          lpu_ks_clear [NCL],
  input  torus_t        lpu_ks_scalar [NCL][4],
  input  logic [2:0]    lpu_ks_level [NCL][4],
  input  logic [5:0]    lpu_ks_base_log,
  input  logic [2:0]    lpu_ks_levels,
  input  logic [3:0]    lpu_ks_lane_en [NCL],
  input  logic [KCW-1:0] lpu_acc_rd_chunk [NCL],
  output torus_t        lpu_acc_rd_data [NCL][64],
  output logic          lpu_out_valid [NCL],
  output torus_t        lpu_out [NCL][4][64],
  // observation
  output logic [31:0]   key_underflows,
  output logic [31:0]   sync_waits,
  output logic [NCL-1:0] ev_decomp_stall,
  output logic [NCL-1:0] ev_ifft_wait
);
  typedef cplx_t key_word_t [2][256];
  typedef cplx_t tw_word_t [256];
  typedef torus_t ksk_word_t [4][64];

  // ---------------- key queue (read queue in front of HBM) ----------------
  logic                       kq_valid, kq_ready;
  logic [2*256*2*CPLX_W-1:0]  kq_in, kq_out;
  key_word_t                  kq_word;
  always_comb
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < 256; i++) begin
        kq_in[(p*256 + i)*2*CPLX_W +: 2*CPLX_W] = kin_data[p][i];
        kq_word[p][i] = kq_out[(p*256 + i)*2*CPLX_W +: 2*CPLX_W];
      end
  sync_fifo #(.W(2*256*2*CPLX_W), .DEPTH(KQ_DEPTH)) u_kq (
    .clk, .rst_n, .in_valid(kin_valid), .in_ready(kin_ready), .in_data(kq_in),
    .out_valid(kq_valid), .out_ready(kq_ready), .out_data(kq_out), .count());

  // ---------------- control ----------------
  logic            cl_start, cl_init;
  logic [10:0]     cl_iter;
  logic [NCL-1:0]  cl_done;
  logic            bsk_next_valid [NCL];
  logic [6:0]      bsk_next_word [NCL];
  logic            ggsw_we;
  logic [6:0]      ggsw_waddr;
  control #(.NCL(NCL)) u_ctrl (
    .clk, .rst_n, .start, .n_short, .busy, .done, .iter,
    .cl_start, .cl_init, .cl_iter, .cl_done,
    .kq_valid, .kq_ready, .bsk_next_valid(bsk_next_valid[0]), .bsk_next_word(bsk_next_word[0]),
    .ggsw_we, .ggsw_waddr, .underflows(key_underflows), .sync_waits);

  // ---------------- shared buffers ----------------
  logic [6:0]  bsk_raddr;
  logic [6:0]  ggsw_raddr [1];
  key_word_t   ggsw_rdata [1];
  assign ggsw_raddr[0] = bsk_raddr;
  buffer_ram #(.word_t(key_word_t), .DEPTH(128), .NRD(1)) u_ggsw_buf (
    .clk, .we(ggsw_we), .waddr(ggsw_waddr), .wdata(kq_word),
    .raddr(ggsw_raddr), .rdata(ggsw_rdata));

  logic [7:0]  tw_raddr [3*NCL];
  tw_word_t    tw_rdata [3*NCL];
  buffer_ram #(.word_t(tw_word_t), .DEPTH(256), .NRD(3*NCL)) u_tw_buf (
    .clk, .we(tw_we), .waddr(tw_waddr), .wdata(tw_wdata), .raddr(tw_raddr), .rdata(tw_rdata));

  logic [KAW-1:0] ksk_ra [1];
  ksk_word_t      ksk_rd [1];
  assign ksk_ra[0] = ksk_raddr;
  buffer_ram #(.word_t(ksk_word_t), .DEPTH(KSK_DEPTH), .NRD(1)) u_ksk_buf (
    .clk, .we(ksk_we), .waddr(ksk_waddr), .wdata(ksk_wdata), .raddr(ksk_ra), .rdata(ksk_rd));

  // ---------------- NoC ----------------
  logic [6:0] bsk_raddr_cl [NCL];
  cplx_t      bsk_rdata_cl [NCL][2][256];
  logic [7:0] tw_addr_cl [NCL][2];
  logic [7:0] tw_addr_if [NCL/2][2];
  cplx_t      tw_data_cl [NCL][2][256];
  cplx_t      tw_data_if [NCL/2][2][256];
  torus_t     ksk_cl [NCL][4][64];
  logic       if_valid [NCL/2], if_src [NCL/2];
  logic [6:0] if_word [NCL/2];
  torus_t     if_data [NCL/2][512];
  logic       res_valid_cl [NCL];
  logic [6:0] res_word_cl [NCL];
  torus_t     res_data_cl [NCL][512];

  noc #(.NCL(NCL)) u_noc (
    .clk, .bsk_raddr_cl, .bsk_raddr, .bsk_rdata(ggsw_rdata[0]), .bsk_rdata_cl,
    .tw_addr_cl, .tw_addr_if, .tw_raddr, .tw_rdata, .tw_data_cl, .tw_data_if,
    .ksk_rdata(ksk_rd[0]), .ksk_cl,
    .if_valid, .if_src, .if_word, .if_data, .res_valid_cl, .res_word_cl, .res_data_cl);

  // ---------------- clusters and shared inverse FFTs ----------------
  logic       req_valid [NCL], req_ready [NCL];
  logic [6:0] req_word [NCL];
  cplx_t      req_data [NCL][256];

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    cluster #(.RR(RR), .CH(CH), .MAC_SHIFT(MAC_SHIFT), .KS_CHUNKS(KS_CHUNKS)) u_cluster (
      .clk, .rst_n, .base_log, .levels,
      .cmd_start(cl_start), .cmd_init(cl_init), .cmd_iter(cl_iter),
      .cmd_busy(), .cmd_done(cl_done[c]),
      .gl_we(gl_we[c]), .gl_waddr(gl_waddr[c]), .gl_wdata(gl_wdata[c]),
      .se_req(se_req[c]), .se_ct(se_ct[c]), .se_body(se_body[c]), .se_word(se_word[c]),
      .se_valid(se_valid[c]), .se_data(se_data[c]),
      .lpu_valid(lpu_valid[c]), .lpu_op(lpu_op[c]), .lpu_a(lpu_a[c]), .lpu_b(lpu_b[c]),
      .lpu_scalar(lpu_scalar[c]), .lpu_log_n2(lpu_log_n2[c]),
      .lpu_lwe_we(lpu_lwe_we[c]), .lpu_lwe_addr(lpu_lwe_addr[c]),
      .lpu_chunk(lpu_chunk[c]), .lpu_ks_clear(lpu_ks_clear[c]),
      .lpu_ks_scalar(lpu_ks_scalar[c]), .lpu_ks_level(lpu_ks_level[c]),
      .lpu_ks_base_log, .lpu_ks_levels, .lpu_ks_lane_en(lpu_ks_lane_en[c]),
      .ksk(ksk_cl[c]), .lpu_acc_rd_chunk(lpu_acc_rd_chunk[c]),
      .lpu_acc_rd_data(lpu_acc_rd_data[c]),
      .lpu_out_valid(lpu_out_valid[c]), .lpu_out(lpu_out[c]),
      .tw_addr(tw_addr_cl[c]), .tw_data(tw_data_cl[c]),
      .bsk_raddr(bsk_raddr_cl[c]), .bsk_rdata(bsk_rdata_cl[c]),
      .bsk_next_valid(bsk_next_valid[c]), .bsk_next_word(bsk_next_word[c]),
      .ifft_req_valid(req_valid[c]), .ifft_req_ready(req_ready[c]),
      .ifft_req_word(req_word[c]), .ifft_req_data(req_data[c]),
      .ifft_res_valid(res_valid_cl[c]), .ifft_res_word(res_word_cl[c]),
      .ifft_res_data(res_data_cl[c]), .ev_decomp_stall(ev_decomp_stall[c]));
    assign ev_ifft_wait[c] = req_valid[c] && !req_ready[c];
  end

  for (genvar g = 0; g < NCL / 2; g++) begin : g_grp
    logic [1:0] rv, rr;
    logic [6:0] rw [2];
    cplx_t      rd [2][256];
    assign rv = {req_valid[2*g+1], req_valid[2*g]};
    assign req_ready[2*g]   = rr[0];
    assign req_ready[2*g+1] = rr[1];
    assign rw[0] = req_word[2*g];
    assign rw[1] = req_word[2*g+1];
    assign rd[0] = req_data[2*g];
    assign rd[1] = req_data[2*g+1];
    ifft_cluster #(.OUT_SHIFT(OUT_SHIFT)) u_ifft (
      .clk, .rst_n, .req_valid(rv), .req_ready(rr), .req_word(rw), .req_data(rd),
      .tw_addr(tw_addr_if[g]), .tw_data(tw_data_if[g]),
      .out_valid(if_valid[g]), .out_src(if_src[g]), .out_word(if_word[g]), .dout(if_data[g]));
  end
endmodule
