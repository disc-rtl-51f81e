// vpu: the Vector Processing Unit - NS SIMD engines joined by the inter-SIMD reduction bus.
//
// SIMD v is paired with memory bank v (its operands arrive on a[v], d[v], d2[v], read by
// the controller from OMEM bank v and OPMEM bank v), so with the hash-encoded layout every
// engine finds c(i,j) and d_j for its own j's locally. All engines execute the same
// operation in a cycle; `valid[v]` masks the engines that have no element, which is how
// a softmax over the non-zeros of one row is restricted to that row.
//
// Reductions: `red_start` sends one value per engine over the reduction bus - the scalar
// sum accumulator (RSRC_SUM), the running maximum (RSRC_MAX) or the W-lane vector
// accumulator (RSRC_VEC) - and `red_out`/`red_valid` return the sum or maximum
// log2(NS) cycles later. This gives the softmax maximum and denominator and the second
// stage of the SpMM accumulation (e_i = sum over engines of the per-engine FMA results).
// NS = 64 (one engine per bank, the same bank count as the DPU array so that one hash
// serves both) and W = 16 lanes are this design's choices; the accelerator gives neither.
//
// Timing: per-engine results one cycle after `valid`; reduction results log2(NS) cycles
// after `red_start`. Do not start a reduction in the same cycle as an operation that
// changes the accumulators being reduced.
module vpu
  import disc_pkg::*;
#(
  parameter int NS    = 64,
  parameter int W     = 16,
  parameter int ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NS-1:0]           valid,
  input  simd_op_e                op,
  input  elem_t                   a     [NS],
  input  logic signed [31:0]      b,
  input  elem_t                   thr,
  input  elem_t [W-1:0]           d     [NS],
  input  elem_t [W-1:0]           d2    [NS],
  output elem_t                   y     [NS],
  output logic [NS-1:0]           flag,
  output logic [NS-1:0]           y_valid,
  output elem_t [W-1:0]           vout  [NS],
  input  logic                    red_start,
  input  logic [1:0]              red_src,
  output logic                    red_valid,
  output logic signed [ACC_W-1:0] red_out [W]
);
  localparam logic [1:0] RSRC_SUM = 2'd0, RSRC_MAX = 2'd1, RSRC_VEC = 2'd2;

  logic signed [31:0]      sacc [NS];
  elem_t                   smax [NS];
  logic signed [ACC_W-1:0] vacc [NS][W];
  logic signed [ACC_W-1:0] red_in [NS][W];
  red_op_e                 red_op;

  for (genvar v = 0; v < NS; v++) begin : g_simd
    simd_engine #(.W(W), .ACC_W(ACC_W)) u_simd (
      .clk     (clk),
      .rst_n   (rst_n),
      .valid   (valid[v]),
      .op      (op),
      .a       (a[v]),
      .b       (b),
      .thr     (thr),
      .d       (d[v]),
      .d2      (d2[v]),
      .y       (y[v]),
      .flag    (flag[v]),
      .y_valid (y_valid[v]),
      .vout    (vout[v]),
      .sacc    (sacc[v]),
      .smax    (smax[v]),
      .vacc    (vacc[v])
    );
  end

  // reduction-bus source selection
  always_comb begin
    red_op = (red_src == RSRC_MAX) ? RED_MAX : RED_SUM;
    for (int v = 0; v < NS; v++)
      for (int l = 0; l < W; l++)
        unique case (red_src)
          RSRC_SUM: red_in[v][l] = (l == 0) ? ACC_W'(sacc[v]) : '0;
          RSRC_MAX: red_in[v][l] = (l == 0) ? ACC_W'(smax[v]) : '0;
          default:  red_in[v][l] = vacc[v][l];
        endcase
  end

  reduction_bus #(.NS(NS), .W(W), .ACC_W(ACC_W)) u_bus (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (red_start),
    .op        (red_op),
    .in_data   (red_in),
    .out_valid (red_valid),
    .out_data  (red_out)
  );
endmodule
