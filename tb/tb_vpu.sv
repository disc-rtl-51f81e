// tb_vpu: one full sparse-attention row on a 4-engine, 4-lane VPU. Hash-encoded scores
// are spread over the engines (some engines empty in some steps), then the testbench
// runs max -> reduce -> exp -> reduce -> normalise -> FMA with V rows -> vector reduce
// and compares the output row, the maximum, the denominator and every probability with
// a reference computed in the testbench from the same scores. Reduction latency
// (log2 4 = 2 cycles) is checked too.
module tb_vpu;
  import disc_pkg::*;
  localparam int NS = 4, W = 4, ACC_W = 40, K = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NS-1:0] valid = '0;
  simd_op_e op = SOP_NOP;
  elem_t a [NS];
  logic signed [31:0] b = '0;
  elem_t thr = '0;
  elem_t [W-1:0] d [NS], d2 [NS];
  elem_t y [NS]; logic [NS-1:0] flag, y_valid;
  elem_t [W-1:0] vout [NS];
  logic red_start = 0; logic [1:0] red_src = '0; logic red_valid;
  logic signed [ACC_W-1:0] red_out [W];

  vpu #(.NS(NS), .W(W), .ACC_W(ACC_W)) dut (.*);

  function automatic int ref_exp(int x);
    int t, n, f, m;
    if (x > 0) x = 0;
    t = (x * 369) >>> 8; n = -(t >>> 8); f = t & 255;
    if (n >= 16) return 0;
    m = (32768 + f * 128) >> n;
    return (m > 32767) ? 32767 : m;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // reduce and wait; returns lane values
  task automatic reduce(input logic [1:0] src, output longint res [W]);
    int lat;
    @(negedge clk); red_start = 1; red_src = src;
    @(negedge clk); red_start = 0; lat = 1;
    while (!red_valid) begin @(negedge clk); lat++; end
    check(lat == 2, $sformatf("reduction latency %0d", lat));
    foreach (res[l]) res[l] = longint'(red_out[l]);
  endtask

  initial begin
    for (int row = 0; row < 20; row++) begin
      int sc [NS][K]; bit pres [NS][K]; elem_t [W-1:0] vrow [NS][K];
      int mx, sum, pr [NS][K]; longint eref [W]; longint res [W];
      foreach (a[v]) begin a[v] = '0; d[v] = '0; d2[v] = '0; end
      if (row == 0) begin repeat (2) @(posedge clk); rst_n = 1; end
      mx = -32768;
      foreach (sc[v, k]) begin
        pres[v][k] = ($urandom_range(0, 3) != 0) && !(v == 2 && row % 2 == 0);
        if (v == 0 && k == 0) pres[v][k] = 1;
        sc[v][k] = int'($urandom_range(0, 1500)) - 750;
        for (int l = 0; l < W; l++) vrow[v][k][l] = elem_t'(int'($urandom_range(0, 2000)) - 1000);
        if (pres[v][k] && sc[v][k] > mx) mx = sc[v][k];
      end
      sum = 0;
      foreach (sc[v, k]) if (pres[v][k]) begin pr[v][k] = ref_exp(sc[v][k] - mx); sum += pr[v][k]; end
      foreach (sc[v, k]) if (pres[v][k]) begin pr[v][k] = (pr[v][k] * 32768) / sum; if (pr[v][k] > 32767) pr[v][k] = 32767; end
      foreach (eref[l]) begin
        eref[l] = 0;
        foreach (sc[v, k]) if (pres[v][k]) eref[l] += longint'(pr[v][k]) * longint'(vrow[v][k][l]);
      end
      // clear
      @(negedge clk); valid = '1; op = SOP_CLR; @(negedge clk); valid = '0;
      // pass 1: max
      for (int k = 0; k < K; k++) begin
        @(negedge clk); op = SOP_MAX;
        for (int v = 0; v < NS; v++) begin valid[v] = pres[v][k]; a[v] = elem_t'(sc[v][k]); end
      end
      @(negedge clk); valid = '0;
      reduce(2'd1, res);
      check(res[0] == longint'(mx), $sformatf("row max %0d vs %0d", res[0], mx));
      // pass 2: exp and sum
      b = 32'(res[0]);
      for (int k = 0; k < K; k++) begin
        @(negedge clk); op = SOP_EXP;
        for (int v = 0; v < NS; v++) begin valid[v] = pres[v][k]; a[v] = elem_t'(sc[v][k]); end
        @(negedge clk); valid = '0;
        for (int v = 0; v < NS; v++) if (pres[v][k]) begin
          sc[v][k] = int'(y[v]);    // keep exp value in place, as the core writes it back
        end
      end
      reduce(2'd0, res);
      check(res[0] == longint'(sum), $sformatf("row sum %0d vs %0d", res[0], sum));
      // pass 3: normalise
      b = 32'(res[0]);
      for (int k = 0; k < K; k++) begin
        @(negedge clk); op = SOP_NORM;
        for (int v = 0; v < NS; v++) begin valid[v] = pres[v][k]; a[v] = elem_t'(sc[v][k]); end
        @(negedge clk); valid = '0;
        for (int v = 0; v < NS; v++) if (pres[v][k]) begin
          check(int'(y[v]) == pr[v][k], $sformatf("p[%0d][%0d] %0d vs %0d", v, k, y[v], pr[v][k]));
          sc[v][k] = int'(y[v]);
        end
      end
      // pass 4: FMA with V rows, then vector reduction
      @(negedge clk); valid = '1; op = SOP_CLR; @(negedge clk); valid = '0;
      for (int k = 0; k < K; k++) begin
        @(negedge clk); op = SOP_FMA;
        for (int v = 0; v < NS; v++) begin valid[v] = pres[v][k]; a[v] = elem_t'(sc[v][k]); d[v] = vrow[v][k]; end
      end
      @(negedge clk); valid = '0;
      reduce(2'd2, res);
      for (int l = 0; l < W; l++) check(res[l] == eref[l], $sformatf("e[%0d] %0d vs %0d", l, res[l], eref[l]));
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
