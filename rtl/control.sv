// Global control: runs programmable bootstrapping for a batch on all clusters
// in full synchronisation.
//
// Sequence after start:
//   1. PRELOAD: the first key row (128 words) is moved from the key queue
//      (the read queue in front of HBM) into the GGSW row buffer;
//   2. INIT: every cluster rotates its test polynomial (cmd_init = 1, rotation
//      amounts stored at LWE index n_short);
//   3. ITER i = 0..n_short-1: every cluster runs blind-rotation iteration i;
//      the next iteration starts only when all clusters have finished the
//      current one (full synchronisation, so that key words are shared).
// While the BRUs run, every bsk_next request (word j of the next key row) pops
// one word of the queue into the GGSW row buffer; a request that finds the
// queue empty is counted in underflows. done pulses at the end.
// The full-synchronisation policy and the key streaming through a queue
// follow the paper; the state machine itself is this design's.
module control
  import taurus_pkg::*;
#(
  parameter int NCL = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [10:0]   n_short,
  output logic          busy,
  output logic          done,
  output logic [10:0]   iter,
  // clusters
  output logic          cl_start,
  output logic          cl_init,
  output logic [10:0]   cl_iter,
  input  logic [NCL-1:0] cl_done,
  // key stream and GGSW row buffer
  input  logic          kq_valid,
  output logic          kq_ready,
  input  logic          bsk_next_valid,
  input  logic [6:0]    bsk_next_word,
  output logic          ggsw_we,
  output logic [6:0]    ggsw_waddr,
  output logic [31:0]   underflows,
  output logic [31:0]   sync_waits        // cycles some but not all clusters were done
);
  typedef enum logic [2:0] {C_IDLE, C_PRELOAD, C_INIT, C_ITER, C_WAIT, C_DONE} cstate_e;
  cstate_e        st;
  logic [6:0]     pre_cnt;
  logic [NCL-1:0] done_seen;
  logic           was_init;

  always_comb begin
    kq_ready   = 1'b0;
    ggsw_we    = 1'b0;
    ggsw_waddr = bsk_next_word;
    if (st == C_PRELOAD) begin
      kq_ready   = 1'b1;
      ggsw_we    = kq_valid;
      ggsw_waddr = pre_cnt;
    end else if (bsk_next_valid) begin
      kq_ready = 1'b1;
      ggsw_we  = kq_valid;
    end
  end

  always_ff @(posedge clk) begin
    cl_start <= 1'b0;
    done     <= 1'b0;
    if (!rst_n) begin
      st <= C_IDLE; pre_cnt <= '0; iter <= '0; done_seen <= '0;
      underflows <= '0; sync_waits <= '0; was_init <= 1'b0;
    end else begin
      if (bsk_next_valid && !kq_valid && st != C_PRELOAD) underflows <= underflows + 1;
      unique case (st)
        C_IDLE: if (start) begin
          st <= C_PRELOAD; pre_cnt <= '0; iter <= '0;
        end
        C_PRELOAD: if (kq_valid) begin
          pre_cnt <= pre_cnt + 1'b1;
          if (pre_cnt == 7'd127) st <= C_INIT;
        end
        C_INIT: begin
          cl_start <= 1'b1; cl_init <= 1'b1; cl_iter <= n_short;
          done_seen <= '0; was_init <= 1'b1; st <= C_WAIT;
        end
        C_ITER: begin
          cl_start <= 1'b1; cl_init <= 1'b0; cl_iter <= iter;
          done_seen <= '0; was_init <= 1'b0; st <= C_WAIT;
        end
        C_WAIT: begin
          logic [NCL-1:0] seen;
          seen = done_seen | cl_done;
          done_seen <= seen;
          if (seen != '0 && seen != '1) sync_waits <= sync_waits + 1;
          if (seen == '1) begin
            if (!was_init) iter <= iter + 1'b1;
            if (!was_init && iter + 11'd1 == n_short) st <= C_DONE;
            else st <= C_ITER;
          end
        end
        C_DONE: begin
          done <= 1'b1; st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
  assign busy = (st != C_IDLE);
endmodule
