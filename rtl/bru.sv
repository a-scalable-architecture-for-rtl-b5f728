// Blind-rotation unit (BRU): runs the CMux steps of programmable bootstrapping
// for RR ciphertexts that take turns (round robin) on one deep pipeline.
//
// Pipeline, one 512-coefficient word per cycle:
//   GLWE buffer -> rotator (X^a*ACC - ACC) -> round unit -> decomposer
//   -> FFT cluster (twist, FFT-A, transpose, 2 x FFT-B) -> complex MAC with
//   one row of the bootstrapping key -> accumulator (ACC) buffer;
// then the accumulated products are sent, one polynomial at a time, through
// the inverse FFT shared with the neighbouring BRU, and the results are added
// to the torus accumulators in the GLWE buffer (ACC := ACC + ExtProd).
// Schedule of one iteration (one GGSW of the key, GLWE dimension k = 1, so
// 2d rows of the GGSW, each row two polynomials in the Fourier domain):
//   for row r = 0..2d-1 (polynomial p = r / d, level l = r mod d)
//     for ciphertext c = 0..RR-1            (round robin, key row reused RR x)
//       for word w = 0..127: rotate word w of ACC(c,p) by a[c], round,
//                            decompose, keep digit level l, FFT, MAC.
// Every word passes the decomposer, which accepts a new word every d cycles.
// The key row in the shared GGSW buffer is replaced word by word: after the
// last ciphertext has used word j of row r, bsk_next_valid asks for word j of
// row r+1 (bsk_next_word), which must be written before that word is needed
// again at least 128 cycles later.
// Commands: start with init = 1 writes ACC(c,p) := X^a[c] * LUT(p) (the
// initial rotation, a[c] = 2N - b); start with init = 0 runs one CMux
// iteration with rotation amounts a[c]. done pulses at the end of either.
// GLWE buffer layout: polynomial c*2 + p is ACC(c,p), 2*RR + p is LUT(p); word
// address = polynomial * 128 + word.
// The unit chain, the round-robin key reuse, the 512 key multiplications per
// cycle and the shared inverse FFT follow the paper; the exact loop order,
// the per-word level selection, the key-row refill rule and the serialised
// write-back between iterations are this design's.
// Lint note: only the word and level fields of the decomposer's output tag
// are used (the ciphertext and polynomial travel in the FFT-side tag), so the
// upper tag bits there are left unread on purpose.
module bru
  import taurus_pkg::*;
#(
  parameter int RR        = 12,   // round-robin ciphertexts per BRU
  parameter int MAC_SHIFT = 24,   // right shift of each key product
  localparam int CW       = (RR > 1) ? $clog2(RR) : 1,
  localparam int GDEPTH   = (2 * RR + 2) * 128,
  localparam int GAW      = $clog2(GDEPTH),
  localparam int ADEPTH   = RR * 128,
  localparam int AAW      = (ADEPTH > 1) ? $clog2(ADEPTH) : 1,
  localparam int TW       = 12 + CW       // tag: init, ct, poly, level, word
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [5:0]    base_log,
  input  logic [2:0]    levels,
  input  logic          start,
  input  logic          init,
  input  logic [16:0]   a_vec [RR],
  output logic          busy,
  output logic          done,
  // GLWE buffer (three read ports, one write port)
  output logic [GAW-1:0] g_raddr [3],
  input  torus_t         g_rdata [3][512],
  output logic           g_we,
  output logic [GAW-1:0] g_waddr,
  output torus_t         g_wdata [512],
  // twiddle buffer ports of the forward FFT
  output logic [7:0]     tw_addr [2],
  input  cplx_t          tw_data [2][256],
  // key row (GGSW buffer, via the NoC)
  output logic [6:0]     bsk_raddr,
  input  cplx_t          bsk_rdata [2][256],
  output logic           bsk_next_valid,
  output logic [6:0]     bsk_next_word,
  // shared inverse FFT
  output logic           ifft_req_valid,
  input  logic           ifft_req_ready,
  output logic [6:0]     ifft_req_word,
  output cplx_t          ifft_req_data [256],
  input  logic           ifft_res_valid,
  input  logic [6:0]     ifft_res_word,
  input  torus_t         ifft_res_data [512],
  // event counters for observation
  output logic           ev_decomp_stall
);
  logic [AAW-1:0] acc_waddr_q;
  logic [6:0] d_j_q;
  logic [AAW-1:0] d_addr_q;
  logic init_q;
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_ROWS, S_WAIT, S_DRAIN, S_FIN} state_e;
  state_e st;

  logic [2:0]  rows;                      // 2d rows
  assign rows = {levels[1:0], 1'b0};

  // ------------------------------------------------------------------------
  // issue side
  logic [2:0]    i_r;
  logic [CW-1:0] i_c;
  logic [6:0]    i_w;
  logic [2:0]    i_gap;                   // cycles until the decomposer is free
  logic          issue;
  logic          last_issue;
  logic [1:0]    i_p;
  logic [2:0]    i_l;

  always_comb begin
    i_p = (i_r >= {1'b0, levels[1:0]}) ? 2'd1 : 2'd0;
    if (levels == 0) i_p = 2'd0;
    i_l = i_p[0] ? i_r - levels : i_r;
  end

  assign issue      = (st == S_INIT || st == S_ROWS) && (i_gap == 0);
  assign last_issue = (i_w == 7'd127) && (int'(i_c) == RR - 1) &&
                      ((st == S_INIT) ? (i_r == 3'd1) : (i_r == rows - 3'd1));
  assign ev_decomp_stall = (st == S_ROWS) && (i_gap != 0);

  // rotator
  logic [6:0]  rot_src, rot_self;
  logic        rot_v;
  logic [TW-1:0] rot_tag_o;
  torus_t      rot_out [512];
  logic [GAW-1:0] poly_base, src_base;
  assign poly_base = GAW'((int'(i_c) * 2 + int'(i_p)) * 128);
  assign src_base  = (st == S_INIT) ? GAW'((2 * RR + int'(i_p)) * 128) : poly_base;

  rotator #(.LANES(512), .TAG_W(TW)) u_rot (
    .clk, .rst_n, .in_valid(issue),
    .in_tag({(st == S_INIT), CW'(i_c), i_p[0], i_l, i_w}),
    .a(a_vec[i_c]), .word(i_w), .sub_en(st != S_INIT),
    .rd_addr_src(rot_src), .rd_addr_self(rot_self),
    .rd_src(g_rdata[0]), .rd_self(g_rdata[1]),
    .out_valid(rot_v), .out_tag(rot_tag_o), .dout(rot_out));

  // tag layout: [6:0] word, [9:7] level, [10] poly, [10+CW:11] ct, [11+CW] init
  localparam int T_INIT = 11 + CW;
  assign g_raddr[0] = src_base + GAW'(rot_src);
  assign g_raddr[1] = poly_base + GAW'(rot_self);

  // round + decompose
  logic        rnd_v, dec_v, dec_ready;
  logic [TW-1:0] rnd_tag, dec_tag;
  logic [2:0]  dec_lvl;
  torus_t      rnd_out [512];
  logic signed [31:0] dec_out [512];
  round_unit #(.LANES(512), .TAG_W(TW)) u_rnd (
    .clk, .rst_n, .base_log, .levels, .in_valid(rot_v && !rot_tag_o[T_INIT]),
    .in_tag(rot_tag_o), .din(rot_out), .out_valid(rnd_v), .out_tag(rnd_tag), .dout(rnd_out));
  decomposer #(.LANES(512), .DIG_W(32), .TAG_W(TW)) u_dec (
    .clk, .rst_n, .base_log, .levels, .in_valid(rnd_v), .in_ready(dec_ready),
    .in_tag(rnd_tag), .din(rnd_out), .out_valid(dec_v), .out_level(dec_lvl),
    .out_tag(dec_tag), .dout(dec_out));

  // forward FFT of the selected level
  logic  f_v;
  logic [6:0] f_word;
  cplx_t f_out [256];
  fft_cluster #(.DIG_W(32), .IN_SHIFT(8)) u_fft (
    .clk, .rst_n, .in_valid(dec_v && dec_lvl == dec_tag[9:7]), .in_word(dec_tag[6:0]),
    .din(dec_out), .tw_addr, .tw_data, .out_valid(f_v), .out_word(f_word), .dout(f_out));

  // ------------------------------------------------------------------------
  // complex MAC into the accumulator buffer
  logic [2:0]    m_r;
  logic [CW-1:0] m_c;
  logic          m_v;
  logic          m_first;
  cplx_t         m_x [256];
  typedef cplx_t acc_word_t [2][256];
  logic [AAW-1:0] acc_raddr [2];
  acc_word_t      acc_rdata [2];
  logic           acc_we;
  logic [AAW-1:0] acc_waddr;
  acc_word_t      acc_wdata;
  logic           mac_last;

  assign acc_raddr[0] = AAW'(int'(m_c) * 128 + int'(f_word));
  assign bsk_raddr    = f_word;

  always_ff @(posedge clk) begin
    m_v     <= f_v && rst_n;
    m_first <= (m_r == 0);
    m_x     <= f_out;
    acc_waddr <= acc_raddr[0];
    bsk_next_valid <= f_v && rst_n && (int'(m_c) == RR - 1);
    bsk_next_word  <= f_word;
  end

  complex_mac #(.LANES(256), .COLS(2), .SHIFT(MAC_SHIFT)) u_mac (
    .clk, .in_valid(m_v), .first(m_first), .x(m_x), .key(bsk_rdata),
    .acc_in(acc_rdata[0]), .out_valid(acc_we), .acc_out(acc_wdata));

  always_ff @(posedge clk) begin
    if (!rst_n || st == S_IDLE) begin
      m_r <= '0; m_c <= '0;
    end else if (f_v && f_word == 7'd127) begin
      if (int'(m_c) == RR - 1) begin
        m_c <= '0; m_r <= m_r + 3'd1;
      end else m_c <= m_c + 1'b1;
    end
  end
  assign mac_last = f_v && f_word == 7'd127 && int'(m_c) == RR - 1 && m_r == rows - 3'd1;

  logic unused_acc_addr;
  assign unused_acc_addr = ^acc_waddr[0];

  buffer_ram #(.word_t(acc_word_t), .DEPTH(ADEPTH), .NRD(2)) u_acc_buf (
    .clk, .we(acc_we), .waddr(acc_waddr_q), .wdata(acc_wdata),
    .raddr(acc_raddr), .rdata(acc_rdata));
  always_ff @(posedge clk) acc_waddr_q <= acc_waddr;

  // ------------------------------------------------------------------------
  // drain through the shared inverse FFT and write back
  logic [CW-1:0] d_c;  logic d_col;  logic [6:0] d_j;  logic d_more;
  logic          d_dv;                 // rdata holds a word to send
  logic          d_col_q;
  logic          d_fire;
  assign d_fire          = d_dv && ifft_req_ready;
  assign ifft_req_valid  = d_dv;
  assign ifft_req_word   = d_j_q;
  assign ifft_req_data   = acc_rdata[1][d_col_q];
  logic       d_issue;
  assign d_issue = (st == S_DRAIN) && d_more && (!d_dv || d_fire);
  assign acc_raddr[1] = d_issue ? AAW'(int'(d_c) * 128 + int'(d_j)) : d_addr_q;

  always_ff @(posedge clk) begin
    if (!rst_n || st != S_DRAIN) begin
      d_dv <= 1'b0;
    end else if (d_issue) begin
      d_dv <= 1'b1;
    end else if (d_fire) begin
      d_dv <= 1'b0;
    end
    if (d_issue) begin
      d_addr_q <= acc_raddr[1];
      d_j_q    <= d_j;
      d_col_q  <= d_col;
    end
  end

  // write-back: ACC(c,col) word n2 += inverse-FFT result
  logic [CW-1:0] w_c;  logic w_col;
  logic          wb_v;
  torus_t        wb_res [512];
  logic [GAW-1:0] wb_addr;
  assign g_raddr[2] = GAW'((int'(w_c) * 2 + int'(w_col)) * 128 + int'(ifft_res_word));
  always_ff @(posedge clk) begin
    wb_v    <= ifft_res_valid && rst_n && st == S_DRAIN;
    wb_res  <= ifft_res_data;
    wb_addr <= g_raddr[2];
  end

  // GLWE write port: initial rotation or write-back
  always_comb begin
    if (st == S_INIT || (st == S_WAIT && init_q)) begin
      g_we    = rot_v && rot_tag_o[T_INIT];
      g_waddr = GAW'((int'(rot_tag_o[10+CW:11]) * 2 + int'(rot_tag_o[10])) * 128 + int'(rot_tag_o[6:0]));
      g_wdata = rot_out;
    end else begin
      g_we    = wb_v;
      g_waddr = wb_addr;
      for (int i = 0; i < 512; i++) g_wdata[i] = g_rdata[2][i] + wb_res[i];
    end
  end

  // ------------------------------------------------------------------------
  // control
  logic [2:0] wait_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; init_q <= 1'b0;
      i_r <= '0; i_c <= '0; i_w <= '0; i_gap <= '0;
      d_c <= '0; d_col <= 1'b0; d_j <= '0; d_more <= 1'b0;
      w_c <= '0; w_col <= 1'b0; wait_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (issue) begin
        i_gap <= (st == S_ROWS) ? levels - 3'd1 : 3'd0;
        i_w   <= i_w + 1'b1;
        if (i_w == 7'd127) begin
          if (int'(i_c) == RR - 1) begin
            i_c <= '0; i_r <= i_r + 3'd1;
          end else i_c <= i_c + 1'b1;
        end
      end else if (i_gap != 0) begin
        i_gap <= i_gap - 3'd1;
      end
      unique case (st)
        S_IDLE: if (start) begin
          st <= init ? S_INIT : S_ROWS; init_q <= init;
          i_r <= '0; i_c <= '0; i_w <= '0; i_gap <= '0;
        end
        S_INIT: if (issue && last_issue) begin
          st <= S_WAIT; wait_cnt <= 3'd4;
        end
        S_ROWS: if (issue && last_issue) st <= S_WAIT;
        S_WAIT: begin
          if (init_q) begin
            if (wait_cnt == 0) st <= S_FIN; else wait_cnt <= wait_cnt - 3'd1;
          end else if (mac_last) begin
            st <= S_DRAIN;
            d_c <= '0; d_col <= 1'b0; d_j <= '0; d_more <= 1'b1;
            w_c <= '0; w_col <= 1'b0;
          end
        end
        S_DRAIN: begin
          if (d_issue) begin
            d_j <= d_j + 1'b1;
            if (d_j == 7'd127) begin
              d_col <= ~d_col;
              if (d_col) begin
                if (int'(d_c) == RR - 1) d_more <= 1'b0;
                else d_c <= d_c + 1'b1;
              end
            end
          end
          if (wb_v && wb_addr[6:0] == 7'd127) begin
            w_col <= ~w_col;
            if (w_col) begin
              if (int'(w_c) == RR - 1) st <= S_FIN;
              else w_c <= w_c + 1'b1;
            end
          end
        end
        S_FIN: begin
          st <= S_IDLE; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) rnd_v |-> dec_ready);
endmodule
