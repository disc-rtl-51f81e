// token_selector: CTR token selection.
//
// The VPU delivers absolute latent differences |z_t - z_{t-1}|, LANES values per beat,
// all belonging to one latent patch (the C x p x p values that patch embedding turns into
// one token). A bank of LANES comparators tests each value against the threshold tau
// ("diff < tau" gives 0, otherwise 1) and a reduction-OR tree folds the bits of the patch
// into one token-mask bit: 1 = recompute the token, 0 = reuse its cached output. This is
// the comparator + OR-tree structure of the accelerator's Token Selector. A patch wider
// than LANES is fed over several beats; the OR is carried between beats until `last`.
//
// LANES = 16 matches a 4-channel latent with 2x2 patches (the DiT / PixArt-Sigma
// setting), which is this design's choice. Timing: `tok_valid`/`tok_sel` come one cycle
// after the beat with `last`; one patch per cycle is accepted when a patch fits in a beat.
module token_selector
  import disc_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  input  logic              last,
  input  elem_t [LANES-1:0] diff,   // |z_t - z_{t-1}|, non-negative Q8.8
  input  elem_t             tau,    // CTR threshold, Q8.8
  output logic              tok_valid,
  output logic              tok_sel
);
  logic [LANES-1:0] above;   // comparator outputs, inverted "<"
  logic             beat_or; // reduction-OR tree output
  logic             carry;   // OR of earlier beats of the same patch

  always_comb begin
    for (int l = 0; l < LANES; l++) above[l] = !(diff[l] < tau);
    beat_or = |above;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry     <= 1'b0;
      tok_valid <= 1'b0;
      tok_sel   <= 1'b0;
    end else begin
      tok_valid <= valid && last;
      if (valid) begin
        if (last) begin
          tok_sel <= carry | beat_or;
          carry   <= 1'b0;
        end else begin
          carry   <= carry | beat_or;
        end
      end
    end
  end
endmodule
