// tb_data_aligner: feeds rows 0..7 with the four-bank example hash ((3j mod 8) >> 1) and
// checks the printed placement (bank 0: rows 0,3; bank 1: 1,6; bank 2: 4,7; bank 3: 2,5),
// then 300 rows at the default hash, checking every bank/address against a model that
// computes the hash and the per-bank ranks itself.
module tb_data_aligner;
  import disc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // small instance: 4 banks, 4 lanes, 3-bit index, k = 3
  logic clear_s = 0, inv_s = 0; logic [2:0] j_s = '0; elem_t [3:0] row_s = '0;
  logic we_s; logic [1:0] bank_s; logic [3:0] addr_s; elem_t [3:0] data_s; logic [3:0] cnt_s [4];
  data_aligner #(.NB(4), .LANES(4), .IDX_W(3), .K_ODD(3), .AW(4)) u_s (
    .clk, .rst_n, .clear(clear_s), .base(4'd2), .in_valid(inv_s), .in_j(j_s), .in_row(row_s),
    .wr_en(we_s), .wr_bank(bank_s), .wr_addr(addr_s), .wr_data(data_s), .cnt(cnt_s));

  // default instance with 8 lanes
  logic clear_d = 0, inv_d = 0; logic [13:0] j_d = '0; elem_t [7:0] row_d = '0;
  logic we_d; logic [5:0] bank_d; logic [9:0] addr_d; elem_t [7:0] data_d; logic [14:0] cnt_d [64];
  data_aligner #(.LANES(8)) u_d (
    .clk, .rst_n, .clear(clear_d), .base(10'd100), .in_valid(inv_d), .in_j(j_d), .in_row(row_d),
    .wr_en(we_d), .wr_bank(bank_d), .wr_addr(addr_d), .wr_data(data_d), .cnt(cnt_d));

  int exp_bank [8] = '{0, 1, 3, 0, 2, 3, 1, 2};
  int exp_rank [8] = '{0, 0, 0, 1, 0, 1, 1, 1};

  initial begin
    int rank [64];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 8; j++) begin
      @(negedge clk); inv_s = 1; j_s = 3'(j); row_s = '{elem_t'(j), elem_t'(j+1), elem_t'(j+2), elem_t'(j+3)};
      @(negedge clk); inv_s = 0;
      checks++;
      if (!we_s || int'(bank_s) != exp_bank[j] || int'(addr_s) != 2 + exp_rank[j] || data_s[0] != elem_t'(j+3)) begin
        failures++; $display("small j=%0d bank=%0d addr=%0d", j, bank_s, addr_s);
      end
    end
    for (int v = 0; v < 4; v++) begin checks++; if (cnt_s[v] != 4'd2) failures++; end
    foreach (rank[v]) rank[v] = 0;
    for (int j = 0; j < 300; j++) begin
      int eb;
      @(negedge clk); inv_d = 1; j_d = 14'(j * 37 % 16384);
      for (int l = 0; l < 8; l++) row_d[l] = elem_t'($urandom);
      eb = ((int'(j_d) * 2053) % 16384) / 256;
      @(negedge clk); inv_d = 0;
      checks++;
      if (!we_d || int'(bank_d) != eb || int'(addr_d) != 100 + rank[eb] || data_d != row_d) begin
        failures++;
        if (failures < 10) $display("def j=%0d bank=%0d/%0d addr=%0d/%0d", j_d, bank_d, eb, addr_d, 100 + rank[eb]);
      end
      rank[eb]++;
    end
    for (int v = 0; v < 64; v++) begin checks++; if (int'(cnt_d[v]) != rank[v]) failures++; end
    @(negedge clk); clear_d = 1; @(negedge clk); clear_d = 0;
    checks++; if (cnt_d[0] != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
