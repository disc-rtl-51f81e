// sddmm_scheduler: per-DPU issue of the non-zero outputs of one SDDMM row.
//
// The sparsity mask of query row i is kept hash-encoded: for each bank v a bitmap of
// SLOTS bits, bit a set when output c(i,j) must be computed for the column j stored in
// slot a of WMEM bank v. At `start` the scheduler loads the NB bitmaps (in a dense step
// it instead sets the first cnt[v] bits of each, so that every stored column is issued;
// in a sparse step the mask is limited to those cnt[v] slots as well).
// Then in every cycle each bank whose bitmap is not empty issues its lowest set slot and
// clears it, so DPU v computes one output per cycle until its own list is exhausted.
// The row therefore takes max_v nnz_v cycles, which is why a balanced hash matters.
// Computing only mask-selected outputs, and DPU v serving only hash bucket v, follow the
// accelerator; the bitmap layout and lowest-slot-first order are this design's choices.
//
// Timing: `start` in cycle t loads; issues begin in t+1; `busy` is high while any bank
// still has slots; `idle_slots` counts DPU-cycles left idle during the row (the load
// imbalance) and `nnz[v]` the outputs issued to each DPU.
module sddmm_scheduler #(
  parameter int NB    = 64,
  parameter int SLOTS = 256,
  parameter int SW    = $clog2(SLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              dense,
  input  logic [SLOTS-1:0]  mask_row [NB],
  input  logic [SW:0]       cnt [NB],
  output logic              busy,
  output logic [NB-1:0]     issue,
  output logic [SW-1:0]     slot [NB],
  output logic [SW:0]       nnz [NB],
  output logic [31:0]       idle_slots
);
  logic [SLOTS-1:0] rem [NB];
  logic [SLOTS-1:0] range [NB];  // slots 0 .. cnt[v]-1 hold a stored column
  logic [$clog2(NB):0] n_idle;   // banks without work this cycle

  // per-bank priority encoder: lowest set bit of rem[v] wins
  for (genvar v = 0; v < NB; v++) begin : g_pick
    always_comb begin
      issue[v] = |rem[v];
      slot[v]  = '0;
      for (int a = SLOTS - 1; a >= 0; a--)
        if (rem[v][a]) slot[v] = SW'(a);
    end
  end

  always_comb begin
    busy = |issue;
    for (int v = 0; v < NB; v++)
      range[v] = (cnt[v] >= (SW+1)'(SLOTS)) ? '1 : ((SLOTS'(1) << cnt[v]) - SLOTS'(1));
    n_idle = '0;
    for (int v = 0; v < NB; v++) n_idle = n_idle + ($clog2(NB)+1)'(!issue[v]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idle_slots <= '0;
      for (int v = 0; v < NB; v++) begin
        rem[v] <= '0;
        nnz[v] <= '0;
      end
    end else if (start) begin
      idle_slots <= '0;
      for (int v = 0; v < NB; v++) begin
        nnz[v] <= '0;
        if (dense) rem[v] <= range[v];
        else       rem[v] <= mask_row[v] & range[v];
      end
    end else if (busy) begin
      for (int v = 0; v < NB; v++) begin
        if (issue[v]) begin
          rem[v][slot[v]] <= 1'b0;
          nnz[v]          <= nnz[v] + 1'b1;
        end
      end
      idle_slots <= idle_slots + 32'(n_idle);
    end
  end
endmodule
