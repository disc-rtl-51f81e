// simd_engine: one SIMD engine of the Vector Processing Unit.
//
// Each engine is paired with one memory bank and holds a scalar sum accumulator, a
// running maximum and a W-lane vector accumulator. The operations are the ones the
// attention pipeline needs:
//   SOP_CLR      clear the accumulators (max to the most negative value);
//   SOP_MAX      smax <= max(smax, a)                  softmax pass 1 (row maximum);
//   SOP_EXP      y = exp(a - b), sacc += y             softmax pass 2 (b = row maximum);
//   SOP_NORM     y = a / b, flag = (y >= thr)          softmax pass 3 (b = row sum) and
//                                                      ST sparsity-mask thresholding;
//   SOP_FMA      vacc[l] += a * d[l]                   SpMM row-wise product, fused
//                                                      multiply-add (a = c(i,j), d = d_j);
//   SOP_ABSDIFF  vout[l] = |d[l] - d2[l]|              CTR latent difference.
// The FMA mode and the use of intra-SIMD accumulation for the softmax denominator follow
// the accelerator's description; the operation encoding, lane count and number formats
// are this design's. GELU and LayerNorm, which the VPU also runs in the full model, are
// not part of this engine.
//
// Number formats: a, thr and y are Q1.15 probabilities for NORM/FMA/EXP outputs and Q8.8
// scores for MAX/EXP inputs; b is a 32-bit operand (Q8.8 maximum or Q1.15 sum); d and
// d2 are Q8.8. exp uses 2^(x*log2 e) with the fraction's power of two approximated
// linearly: 2^(-n + f) ~ (1 + f) >> n. The division is written as one combinational
// divider; a reciprocal unit would replace it in a production design.
//
// Timing: y, flag, vout and y_valid are registered, one cycle after `valid`; the
// accumulators update at that same edge.
module simd_engine
  import disc_pkg::*;
#(
  parameter int W     = 16,
  parameter int ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  simd_op_e                op,
  input  elem_t                   a,
  input  logic signed [31:0]      b,
  input  elem_t                   thr,
  input  elem_t [W-1:0]           d,
  input  elem_t [W-1:0]           d2,
  output elem_t                   y,
  output logic                    flag,
  output logic                    y_valid,
  output elem_t [W-1:0]           vout,
  output logic signed [31:0]      sacc,
  output elem_t                   smax,
  output logic signed [ACC_W-1:0] vacc [W]
);
  localparam logic signed [31:0] LOG2E_Q8 = 32'sd369;  // log2(e) in Q8.8

  // exp(x) for x <= 0 in Q8.8, returned in Q1.15 and saturated to 32767.
  function automatic elem_t exp_q15(input logic signed [31:0] x);
    logic signed [31:0] t;
    int unsigned        n;
    logic [7:0]         f;
    logic [31:0]        m;
    if (x > 0) x = 0;
    t = (x * LOG2E_Q8) >>> 8;        // x * log2(e), Q8.8, <= 0
    n = 32'(-(t >>> 8));              // integer part (as a right shift)
    f = t[7:0];                       // fractional part in [0, 1)
    if (n >= 16) return '0;
    m = (32'd32768 + (32'(f) << 7)) >> n;
    return (m > 32'd32767) ? 16'sd32767 : elem_t'(m);
  endfunction

  function automatic elem_t norm_q15(input elem_t num, input logic signed [31:0] den);
    logic [47:0] q;
    if (den <= 0) return '0;
    q = (48'(unsigned'(num)) << PROB_FRAC) / 48'(den);
    return (q > 48'd32767) ? 16'sd32767 : elem_t'(q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      flag    <= 1'b0;
      y_valid <= 1'b0;
      vout    <= '0;
      sacc    <= '0;
      smax    <= 16'sh8000;
      for (int l = 0; l < W; l++) vacc[l] <= '0;
    end else begin
      y_valid <= valid && (op == SOP_EXP || op == SOP_NORM);
      if (valid) begin
        unique case (op)
          SOP_CLR: begin
            sacc <= '0;
            smax <= 16'sh8000;
            for (int l = 0; l < W; l++) vacc[l] <= '0;
          end
          SOP_MAX: if (a > smax) smax <= a;
          SOP_EXP: begin
            elem_t e;
            e    = exp_q15(32'(a) - b);
            y    <= e;
            sacc <= sacc + 32'(e);
          end
          SOP_NORM: begin
            elem_t p;
            p    = norm_q15(a, b);
            y    <= p;
            flag <= (p >= thr);
          end
          SOP_FMA:
            for (int l = 0; l < W; l++) vacc[l] <= vacc[l] + ACC_W'(a * d[l]);
          SOP_ABSDIFF:
            for (int l = 0; l < W; l++)
              vout[l] <= (d[l] >= d2[l]) ? elem_t'(d[l] - d2[l]) : elem_t'(d2[l] - d[l]);
          default: ;
        endcase
      end
    end
  end
endmodule
