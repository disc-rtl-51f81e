// reduction_bus: the VPU's inter-SIMD reduction bus.
//
// Combines one W-lane value from each of NS SIMD engines into one W-lane result, by sum
// or by maximum. It is used for the softmax maximum and denominator and, reused as-is,
// for the second accumulation stage of SpMM (summing the per-SIMD partial rows e_i^v
// into e_i). As in the reduction drawn for eight SIMDs, the values are folded in halves
// over log2(NS) cycles: in each cycle engine i takes the value of engine i + NS/2^k.
// Here every fold is a pipeline stage, so a new reduction may start every cycle.
// The lane count, widths and the choice of a pipelined fold are this design's own.
//
// Timing: `out`/`out_valid` follow `in_valid` by log2(NS) cycles (NS a power of two,
// at least 2). `op` travels with the data.
module reduction_bus
  import disc_pkg::*;
#(
  parameter int NS    = 64,
  parameter int W     = 16,
  parameter int ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  red_op_e                 op,
  input  logic signed [ACC_W-1:0] in_data [NS][W],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data [W]
);
  localparam int STAGES = $clog2(NS);

  // g_fold[s].val holds NS >> (s+1) partial results after fold s.
  for (genvar s = 0; s < STAGES; s++) begin : g_fold
    localparam int HALF = NS >> (s + 1);
    logic signed [ACC_W-1:0] val [HALF][W];
    logic signed [ACC_W-1:0] src [2*HALF][W];
    logic                    vld, src_vld;   // stage output valid / stage input valid
    red_op_e                 opq, src_op;

    if (s == 0) begin : g_src_in
      assign src     = in_data;
      assign src_vld = in_valid;
      assign src_op  = op;
    end else begin : g_src_prev
      assign src     = g_fold[s-1].val;
      assign src_vld = g_fold[s-1].vld;
      assign src_op  = g_fold[s-1].opq;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld <= 1'b0;
        opq <= RED_SUM;
        for (int i = 0; i < HALF; i++)
          for (int l = 0; l < W; l++) val[i][l] <= '0;
      end else begin
        vld <= src_vld;
        opq <= src_op;
        for (int i = 0; i < HALF; i++)
          for (int l = 0; l < W; l++)
            if (src_op == RED_MAX)
              val[i][l] <= (src[i+HALF][l] > src[i][l]) ? src[i+HALF][l] : src[i][l];
            else
              val[i][l] <= src[i][l] + src[i+HALF][l];
      end
    end
  end

  assign out_valid = g_fold[STAGES-1].vld;
  assign out_data  = g_fold[STAGES-1].val[0];

  initial assert (NS == (1 << STAGES) && NS >= 2) else $error("reduction_bus: NS must be a power of two >= 2");
endmodule
