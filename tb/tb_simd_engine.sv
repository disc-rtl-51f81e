// tb_simd_engine: drives each SIMD operation with random operands and compares with a
// reference written in the testbench: max, exp (bit-exact against the documented
// approximation and within 7 % of the real exponential), normalisation with threshold
// flag, fused multiply-add accumulation and absolute difference.
module tb_simd_engine;
  import disc_pkg::*;
  localparam int W = 4, ACC_W = 40;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, valid = 0;
  simd_op_e op = SOP_NOP;
  elem_t a = '0, thr = '0;
  logic signed [31:0] b = '0;
  elem_t [W-1:0] d, d2;
  elem_t y; logic flag, y_valid;
  elem_t [W-1:0] vout;
  logic signed [31:0] sacc;
  elem_t smax;
  logic signed [ACC_W-1:0] vacc [W];

  simd_engine #(.W(W), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  // reference exp: 2^(x*369/256) with linear fraction, integer arithmetic
  function automatic int ref_exp(int x);
    int t, n, f, m;
    if (x > 0) x = 0;
    t = (x * 369) >>> 8;
    n = -(t >>> 8);
    f = t & 255;
    if (n >= 16) return 0;
    m = (32768 + f * 128) >> n;
    return (m > 32767) ? 32767 : m;
  endfunction

  task automatic step(simd_op_e o);
    @(negedge clk); valid = 1; op = o;
    @(negedge clk); valid = 0; op = SOP_NOP;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    int mx, sum, e, p, x;
    longint vref [W];
    d = '0; d2 = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // max and exp-sum over a random row
    for (int r = 0; r < 20; r++) begin
      int vals [12];
      step(SOP_CLR);
      mx = -32768;
      foreach (vals[k]) begin
        vals[k] = int'($urandom_range(0, 4000)) - 2000;
        if (vals[k] > mx) mx = vals[k];
        a = elem_t'(vals[k]); step(SOP_MAX);
      end
      check(int'(smax) == mx, $sformatf("max %0d vs %0d", smax, mx));
      b = 32'(mx); sum = 0;
      foreach (vals[k]) begin
        real rexp;
        a = elem_t'(vals[k]);
        @(negedge clk); valid = 1; op = SOP_EXP;
        @(negedge clk); valid = 0; op = SOP_NOP;
        e = ref_exp(vals[k] - mx);
        sum += e;
        check(y_valid && int'(y) == e, $sformatf("exp %0d vs %0d", y, e));
        rexp = $exp(real'(vals[k] - mx) / 256.0) * 32768.0;
        check((real'(y) - rexp) <= 0.07 * rexp + 2.0 && (rexp - real'(y)) <= 0.07 * rexp + 2.0,
              $sformatf("exp accuracy %0d vs %f", y, rexp));
      end
      check(sacc == sum, $sformatf("sum %0d vs %0d", sacc, sum));
      // normalise the first element, with threshold
      x = ref_exp(vals[0] - mx);
      a = elem_t'(x); b = 32'(sum); thr = elem_t'($urandom_range(0, 8000));
      step(SOP_NORM);
      p = (x * 32768) / sum; if (p > 32767) p = 32767;
      check(int'(y) == p && flag == (p >= int'(thr)), $sformatf("norm %0d vs %0d", y, p));
    end
    // FMA accumulation
    step(SOP_CLR);
    foreach (vref[l]) vref[l] = 0;
    for (int k = 0; k < 50; k++) begin
      a = elem_t'($urandom_range(0, 32767));
      for (int l = 0; l < W; l++) begin
        d[l] = elem_t'($urandom);
        vref[l] += longint'(a) * longint'(d[l]);
      end
      step(SOP_FMA);
    end
    for (int l = 0; l < W; l++) check(longint'(vacc[l]) == vref[l], $sformatf("fma lane %0d", l));
    // absolute difference
    for (int k = 0; k < 20; k++) begin
      for (int l = 0; l < W; l++) begin
        d[l]  = elem_t'(int'($urandom_range(0, 20000)) - 10000);
        d2[l] = elem_t'(int'($urandom_range(0, 20000)) - 10000);
      end
      step(SOP_ABSDIFF);
      for (int l = 0; l < W; l++) begin
        int df; df = int'(d[l]) - int'(d2[l]); if (df < 0) df = -df;
        check(int'(vout[l]) == df, $sformatf("absdiff lane %0d", l));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
