// data_aligner: moves projected K (or V) rows into the hash-mapped bank layout.
//
// A linear layer leaves its output row j striped across the NB OMEM banks (bank v holds
// output column v). SDDMM needs K^T column j, i.e. the whole K row j, as one word of WMEM
// bank hash(j); SpMM needs V row j as one word of OPMEM bank hash(j). The aligner takes
// the row gathered from all OMEM banks (the transposition) and writes it into bank
// hash(j) at address base + rank, where rank counts the rows already placed in that
// bank since `clear`. With rows presented in ascending j this gives exactly the layout of
// the accelerator's example (hash(j) = (3j mod 8) >> 1: bank 0 holds rows 0 and 3, bank 1
// rows 1 and 6, ...). The accelerator obtains that layout by computing K in a
// pre-shuffled row order and letting the aligner place rows round-robin; here the
// aligner computes the bank itself and keeps one fill counter per bank, which yields the
// same memory contents for any token count. `cnt[v]` (rows held by bank v) is what the
// SDDMM scheduler needs in a dense step.
//
// Timing: one row per cycle; the write appears one cycle after `in_valid`.
module data_aligner
  import disc_pkg::*;
#(
  parameter int NB    = 64,
  parameter int LANES = 64,
  parameter int IDX_W = 14,
  parameter int K_ODD = 2053,
  parameter int AW    = 10,
  parameter int CW    = IDX_W + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic [AW-1:0]          base,
  input  logic                   in_valid,
  input  logic [IDX_W-1:0]       in_j,
  input  elem_t [LANES-1:0]      in_row,
  output logic                   wr_en,
  output logic [$clog2(NB)-1:0]  wr_bank,
  output logic [AW-1:0]          wr_addr,
  output elem_t [LANES-1:0]      wr_data,
  output logic [CW-1:0]          cnt [NB]
);
  logic [$clog2(NB)-1:0] bank;

  hash_unit #(.IDX_W(IDX_W), .NB(NB), .K_ODD(K_ODD)) u_hash (.j(in_j), .v(bank));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_bank <= '0;
      wr_addr <= '0;
      wr_data <= '0;
      for (int v = 0; v < NB; v++) cnt[v] <= '0;
    end else begin
      wr_en <= in_valid && !clear;
      if (clear) begin
        for (int v = 0; v < NB; v++) cnt[v] <= '0;
      end else if (in_valid) begin
        wr_bank    <= bank;
        wr_addr    <= base + AW'(cnt[bank]);
        wr_data    <= in_row;
        cnt[bank]  <= cnt[bank] + 1'b1;
      end
    end
  end
endmodule
