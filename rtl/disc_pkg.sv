// disc_pkg: types and constants shared by the DiSC core.
//
// Number format. The design works in signed fixed point: activations, weights and
// attention scores are 16-bit Q8.8 (DATA_FRAC = 8), attention probabilities are
// unsigned Q1.15 carried in the same 16 bits (PROB_FRAC = 15). Dot products and
// SIMD accumulators are kept at full width and rounded back by truncation when
// written to memory. The number format is this design's own choice; the accelerator
// it follows only states that it matches an FP16 GPU in peak MAC rate.
//
// Hash. Both the DPU array (SDDMM) and the VPU (SpMM) place index j on bank
// hash(j) = MSB_b((j * K_ODD) mod 2^IDX_W), b = log2(number of banks): the
// multiplicative hash, with K_ODD = 2053 and 64 banks as the default configuration.
package disc_pkg;

  localparam int DATA_W    = 16;   // element width
  localparam int DATA_FRAC = 8;    // Q8.8 activations / weights / scores
  localparam int PROB_FRAC = 15;   // Q1.15 probabilities

  typedef logic signed [DATA_W-1:0] elem_t;

  // Operation codes of one VPU SIMD engine.
  typedef enum logic [2:0] {
    SOP_NOP     = 3'd0,
    SOP_CLR     = 3'd1,  // clear scalar and vector accumulators
    SOP_MAX     = 3'd2,  // smax  <= max(smax, a)
    SOP_EXP     = 3'd3,  // y = exp(a - b) in Q1.15, sacc += y
    SOP_NORM    = 3'd4,  // y = (a << 15) / b, flag = (y >= thr)
    SOP_FMA     = 3'd5,  // vacc[l] += a * d[l]
    SOP_ABSDIFF = 3'd6   // vout[l] = |d[l] - d[l + W]|
  } simd_op_e;

  // Reduction-bus operation.
  typedef enum logic {
    RED_SUM = 1'b0,
    RED_MAX = 1'b1
  } red_op_e;

  // Commands accepted by the top controller.
  typedef enum logic [2:0] {
    CMD_TOKSEL = 3'd0,  // CTR token selection -> index memory
    CMD_LINEAR = 3'd1,  // dense linear layer on the DPU array
    CMD_ATTN   = 3'd2,  // QK^T (dense or SDDMM) + softmax + P*V (SpMM)
    CMD_STEP   = 3'd3   // start of a new denoising step (ST dense/sparse cadence)
  } cmd_op_e;

  // Where a linear layer's output row goes.
  typedef enum logic [1:0] {
    DST_OMEM  = 2'd0,  // row-major in OMEM (bank v holds column v)
    DST_WMEM  = 2'd1,  // K projection: through the data aligner to WMEM bank hash(j)
    DST_OPMEM = 2'd2   // V projection: through the data aligner to OPMEM bank hash(j)
  } lin_dst_e;

  typedef struct packed {
    cmd_op_e    op;
    logic       use_index;   // CTR: iterate only over the selected tokens
    lin_dst_e   dst;         // CMD_LINEAR destination
    logic [15:0] n_tok;      // number of tokens (rows) of the layer
    logic [7:0]  k_beats;    // CMD_LINEAR: reduction length in LANES-wide beats
    logic [15:0] in_base;    // IMEM base row (input rows / queries / latents)
    logic [15:0] w_base;     // WMEM base word (weights, or K^T slots)
    logic [15:0] out_base;   // output base (OMEM row / IMEM row for attention output)
    logic [15:0] v_base;     // OPMEM base word of V (attention) / latent base (token select)
    logic signed [15:0] thr; // threshold: CTR tau (Q8.8) or ST tau (Q1.15)
  } cmd_t;

  // Multiplicative hash, as a function (hash_unit wraps it as a module).
  function automatic int unsigned mult_hash(input int unsigned j, input int unsigned k_odd,
                                            input int unsigned idx_w, input int unsigned b);
    logic [63:0] prod;
    prod = (64'(j) * 64'(k_odd)) & ((64'd1 << idx_w) - 64'd1);
    return int'(prod >> (idx_w - b));
  endfunction

endpackage
