// dpu: one Dot Product Unit.
//
// LANES multipliers take one input element and one weight element each; an adder tree
// sums the LANES products; a final adder adds either the bias (first beat of a dot
// product) or the accumulation register (later beats), selected by a multiplexer, and
// the sum is stored in the accumulation register. This is the structure drawn for the
// DPU (multipliers, adder tree, bias/accumulator multiplexer, adder, register); the
// pipelining (one register, after the adder) is this design's choice.
//
// Interface: when `valid` is high the beat (in_vec, w_vec) is consumed; `first` selects
// bias instead of the register, `last` marks the final beat. `acc` and `out_valid`
// appear one cycle after the last beat. A dot product of K*LANES elements therefore
// takes K cycles plus one, and a new one can start in the cycle after `last`.
// LANES = 64 is derived from the quoted 8.2 TFLOPS per core at 1 GHz: 4096 MACs per
// cycle over 64 DPUs.
module dpu
  import disc_pkg::*;
#(
  parameter int LANES = 64,
  parameter int ACC_W = 2*DATA_W + $clog2(LANES) + 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic                    last,
  input  elem_t [LANES-1:0]       in_vec,
  input  elem_t [LANES-1:0]       w_vec,
  input  logic signed [ACC_W-1:0] bias,
  output logic signed [ACC_W-1:0] acc,
  output logic                    out_valid
);
  logic signed [2*DATA_W-1:0] prod [LANES];
  logic signed [ACC_W-1:0]    tree_sum;
  logic signed [ACC_W-1:0]    addend;

  // Multipliers and adder tree (written as a sum; synthesis builds the tree).
  always_comb begin
    tree_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      prod[l]  = in_vec[l] * w_vec[l];
      tree_sum = tree_sum + ACC_W'(prod[l]);
    end
    addend = first ? bias : acc;   // bias / accumulator multiplexer
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= valid && last;
      if (valid) acc <= tree_sum + addend;
    end
  end
endmodule
