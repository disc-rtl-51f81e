// tb_sddmm_scheduler: random hash-encoded mask rows (8 banks x 32 slots) in sparse and
// dense mode. Checks that each bank issues exactly its set slots, lowest first, one per
// cycle; that the row takes max_v nnz_v cycles; and the idle-slot count.
module tb_sddmm_scheduler;
  localparam int NB = 8, SLOTS = 32, SW = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, dense = 0;
  logic [SLOTS-1:0] mask_row [NB];
  logic [SW:0] cnt [NB];
  logic busy; logic [NB-1:0] issue; logic [SW-1:0] slot [NB]; logic [SW:0] nnz [NB];
  logic [31:0] idle_slots;
  always #5 clk = ~clk;

  sddmm_scheduler #(.NB(NB), .SLOTS(SLOTS)) dut (.*);

  initial begin
    for (int v = 0; v < NB; v++) begin mask_row[v] = '0; cnt[v] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [SLOTS-1:0] expm [NB];
      int maxn, cyc, idle_exp;
      dense = (t % 4 == 0);
      maxn = 0;
      for (int v = 0; v < NB; v++) begin
        mask_row[v] = SLOTS'($urandom) & SLOTS'($urandom);
        cnt[v] = (SW+1)'($urandom_range(0, SLOTS));
        expm[v] = ((cnt[v] == SLOTS) ? '1 : (SLOTS'(1) << cnt[v]) - 1);
        if (!dense) expm[v] &= mask_row[v];
        if ($countones(expm[v]) > maxn) maxn = $countones(expm[v]);
      end
      idle_exp = 0;
      for (int v = 0; v < NB; v++) idle_exp += maxn - $countones(expm[v]);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (busy) begin
        for (int v = 0; v < NB; v++) if (issue[v]) begin
          int low; low = -1;
          for (int a = SLOTS - 1; a >= 0; a--) if (expm[v][a]) low = a;
          checks++;
          if (low != int'(slot[v])) begin failures++; if (failures < 10) $display("t=%0d v=%0d slot=%0d exp=%0d", t, v, slot[v], low); end
          if (low >= 0) expm[v][low] = 1'b0;
        end
        cyc++;
        @(negedge clk);
      end
      checks++; if (cyc != maxn) begin failures++; $display("t=%0d cycles %0d vs %0d", t, cyc, maxn); end
      for (int v = 0; v < NB; v++) begin checks++; if (expm[v] != '0) failures++; end
      checks++; if (int'(idle_slots) != idle_exp) begin failures++; $display("idle %0d vs %0d", idle_slots, idle_exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
