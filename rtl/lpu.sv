// LWE processing unit (LPU): all operations on LWE ciphertexts of a cluster.
//
// The unit has NLANE = 4 lanes of ELEMS = 64 64-bit elements. Operations, one
// instruction per cycle (op, operands, chunk index):
//   LPU_ADD / LPU_SUB  out = a +/- b, element-wise      (homomorphic add/sub)
//   LPU_MULC           out = a * scalar                  (plaintext multiply)
//   LPU_MODSW          out = round(a * 2N / 2^64)        (modulus switch; N =
//                      2^log_n2 / 2, rounding to nearest)
//   LPU_KS             key-switching multiply-accumulate: lane i takes one
//                      long-LWE scalar ks_scalar[i] and a decomposition level
//                      ks_level[i], forms its signed digit (base 2^ks_base_log,
//                      ks_levels levels) and multiplies it with 64 elements of
//                      the matching key-switching-key row; the four products
//                      are subtracted from 64-element accumulator chunk
//                      `chunk`. ks_clear starts a new output (chunk := body
//                      term b placed by the caller in a_in) .
// For the vector operations the four lanes hold 4 x 64 consecutive elements;
// results appear on dout one cycle later. The KS accumulator holds up to
// KS_CHUNKS chunks (KS_CHUNKS * 64 >= short dimension + 1) and is read out
// through acc_rd_chunk / acc_rd_data.
// Sample extraction is not a separate datapath here: it is the word
// permutation done by sample_extract when the cluster reads the GLWE buffer.
// The four lanes of 64 elements, one decomposed scalar per lane, the 64-bit
// width and the list of operations follow the paper; the instruction format,
// the chunked accumulator and the rounding are this design's.
module lpu
  import taurus_pkg::*;
#(
  parameter int NLANE     = 4,
  parameter int ELEMS     = 64,
  parameter int KS_CHUNKS = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  lpu_op_e       op,
  input  torus_t        a_in   [NLANE][ELEMS],
  input  torus_t        b_in   [NLANE][ELEMS],
  input  torus_t        scalar,
  input  logic [4:0]    log_n2,                  // log2(2N) for MODSW
  // key switching
  input  logic [$clog2(KS_CHUNKS)-1:0] chunk,
  input  logic          ks_clear,
  input  torus_t        ks_scalar [NLANE],
  input  logic [2:0]    ks_level  [NLANE],
  input  logic [5:0]    ks_base_log,
  input  logic [2:0]    ks_levels,
  input  logic [NLANE-1:0] ks_lane_en,
  input  torus_t        ksk    [NLANE][ELEMS],
  input  logic [$clog2(KS_CHUNKS)-1:0] acc_rd_chunk,
  output torus_t        acc_rd_data [ELEMS],
  output logic          out_valid,
  output torus_t        dout   [NLANE][ELEMS]
);
  torus_t ks_acc [KS_CHUNKS][ELEMS];

  always_ff @(posedge clk) begin
    out_valid <= in_valid && rst_n && (op != LPU_KS);
    if (in_valid) begin
      unique case (op)
        LPU_ADD:  for (int l = 0; l < NLANE; l++) for (int e = 0; e < ELEMS; e++)
                    dout[l][e] <= a_in[l][e] + b_in[l][e];
        LPU_SUB:  for (int l = 0; l < NLANE; l++) for (int e = 0; e < ELEMS; e++)
                    dout[l][e] <= a_in[l][e] - b_in[l][e];
        LPU_MULC: for (int l = 0; l < NLANE; l++) for (int e = 0; e < ELEMS; e++)
                    dout[l][e] <= a_in[l][e] * scalar;
        LPU_MODSW: for (int l = 0; l < NLANE; l++) for (int e = 0; e < ELEMS; e++) begin
                    torus_t x;
                    logic [6:0] sh;
                    sh = 7'd64 - 7'(log_n2);
                    x  = (a_in[l][e] >> sh) + ((a_in[l][e] >> (sh - 7'd1)) & 64'd1);
                    dout[l][e] <= x & ((64'd1 << log_n2) - 64'd1);
                  end
        LPU_KS: begin
          for (int e = 0; e < ELEMS; e++) begin
            torus_t sum;
            sum = ks_clear ? a_in[0][e] : ks_acc[chunk][e];
            for (int l = 0; l < NLANE; l++)
              if (ks_lane_en[l])
                sum = sum - torus_t'(signed'(decomp_digit(ks_scalar[l], int'(ks_base_log),
                                          int'(ks_levels), int'(ks_level[l])))) * ksk[l][e];
            ks_acc[chunk][e] <= sum;
          end
        end
        default: ;
      endcase
    end
  end

  always_comb for (int e = 0; e < ELEMS; e++) acc_rd_data[e] = ks_acc[acc_rd_chunk][e];
endmodule
