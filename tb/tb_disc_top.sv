// tb_disc_top: end-to-end test of one DiSC core over two ST periods.
//
// Flow: load inputs, weights, queries and two latents through the load/store port; run
// CTR token selection; project K and V for all tokens (the data aligner places them in
// the hash-mapped WMEM / OPMEM banks); run a CTR-gated Q-style projection; then run
// attention for the selected queries over 1 dense step, 3 sparse steps (reused mask)
// and one more dense step. Every output row is compared with a reference model written
// here in plain integer arithmetic (projection, scores, the documented exp and
// normalisation, mask threshold, P*V); rows of pruned tokens must keep their cached
// contents. The SDDMM issue time of every sparse row must equal the largest per-bank
// non-zero count (one output per DPU per cycle). Each mechanism (token kept / pruned,
// rows skipped, aligner remap, dense and sparse rows, mask bits set, DPU idle slots from
// imbalance, dense/sparse mode switch) is counted and must occur at least once.
//
// Parameters default to a small core (8 DPUs/banks of 8 lanes, 64-token index space);
// the same test runs at the full default configuration in tb_disc_top_full.
module tb_disc_top #(
  parameter int NB = 8, LANES = 8, W = 4, IDX_W = 6,
  parameter int IM_DEPTH = 512, WM_DEPTH = 64, OM_DEPTH = 128, OP_DEPTH = 32, MASK_ROWS = 64,
  parameter int T = 40, KB = 2
);
  import disc_pkg::*;

  localparam int X_BASE = 0, Q_BASE = IM_DEPTH / 4, O_BASE = IM_DEPTH / 2;
  localparam int WK = 0, WV = KB, WQ = 2 * KB, KSLOT = 4 * KB;   // WMEM word bases
  localparam int VSLOT = 0, LAT = OP_DEPTH / 2;                   // OPMEM word bases
  localparam int OK_BASE = 0, OV_BASE = T, OQ_BASE = 2 * T;       // OMEM row bases
  localparam int TAU_CTR = 64, TAU_ST = 300;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // DUT signals
  logic cmd_valid = 0, cmd_ready, done;
  cmd_t cmd;
  logic ext_we = 0, ext_re = 0, ext_rsel = 0;
  logic [1:0] ext_sel = '0;
  logic [$clog2(NB)-1:0] ext_bank = '0;
  logic [15:0] ext_addr = '0, ext_raddr = '0;
  elem_t [LANES-1:0] ext_wdata, ext_rdata;
  logic dense_step;
  logic [IDX_W:0] n_sel;
  logic [31:0] ev_rows_skipped, ev_sddmm_cycles, ev_qk_outputs, ev_idle_slots;
  logic [31:0] ev_sparse_rows, ev_dense_rows, ev_mask_ones;

  disc_top #(.NB(NB), .LANES(LANES), .W(W), .IDX_W(IDX_W), .IM_DEPTH(IM_DEPTH),
             .WM_DEPTH(WM_DEPTH), .OM_DEPTH(OM_DEPTH), .OP_DEPTH(OP_DEPTH),
             .MASK_ROWS(MASK_ROWS)) dut (.*);

  // reference data
  int X [T][KB][LANES];
  int Wk [LANES][KB][LANES], Wv [LANES][KB][LANES], Wq [LANES][KB][LANES];
  int K [T][LANES], V [T][LANES], Qp [T][LANES], Q [T][LANES];
  bit sel [T];
  bit mask [T][T];
  int n_exp_sel;

  // event tallies
  int m_kept = 0, m_pruned = 0, m_skipped = 0, m_remap = 0, m_dense = 0, m_sparse = 0;
  int m_ones = 0, m_idle = 0, m_switch = 0;

  function automatic int hsh(int j);
    return ((j * 2053) % (1 << IDX_W)) / ((1 << IDX_W) / NB);
  endfunction

  function automatic int sat(longint x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return int'(x);
  endfunction

  function automatic int ref_exp(int x);
    int t, n, f, m;
    if (x > 0) x = 0;
    t = (x * 369) >>> 8; n = -(t >>> 8); f = t & 255;
    if (n >= 16) return 0;
    m = (32768 + f * 128) >> n;
    return (m > 32767) ? 32767 : m;
  endfunction

  function automatic int e2i(elem_t x);   // signed element -> int
    return int'(x);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic ext_write(int sel_, int bank, int addr, elem_t [LANES-1:0] data);
    @(negedge clk);
    ext_we = 1; ext_sel = 2'(sel_); ext_bank = $clog2(NB)'(bank); ext_addr = 16'(addr); ext_wdata = data;
    @(negedge clk); ext_we = 0;
  endtask

  task automatic ext_read(bit rsel, int addr, output elem_t [LANES-1:0] data);
    @(negedge clk); ext_re = 1; ext_rsel = rsel; ext_raddr = 16'(addr);
    @(negedge clk); ext_re = 0; data = ext_rdata;
  endtask

  task automatic run(cmd_t cm);
    @(negedge clk); while (!cmd_ready) @(negedge clk);
    cmd = cm; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic cmd_t mk(cmd_op_e op, bit use_index, lin_dst_e dst, int in_base, int w_base,
                              int out_base, int v_base, int thr);
    cmd_t cm;
    cm = '0; cm.op = op; cm.use_index = use_index; cm.dst = dst; cm.n_tok = 16'(T);
    cm.k_beats = 8'(KB); cm.in_base = 16'(in_base); cm.w_base = 16'(w_base);
    cm.out_base = 16'(out_base); cm.v_base = 16'(v_base); cm.thr = 16'(thr);
    return cm;
  endfunction

  // attention reference for query i; dense: all keys, else mask[i]
  task automatic ref_attn(int i, bit dense, output int o [LANES], output int nnz_max);
    int s [T]; int mx, sum; int e [T]; int p [T]; longint acc; int nnz [NB];
    bit act [T];
    mx = -32768; sum = 0;
    foreach (nnz[v]) nnz[v] = 0;
    for (int jj = 0; jj < T; jj++) begin
      longint d = 0;
      act[jj] = dense || mask[i][jj];
      for (int m = 0; m < LANES; m++) d += longint'(Q[i][m]) * longint'(K[jj][m]);
      s[jj] = sat(d >>> 8);
      if (act[jj]) begin
        nnz[hsh(jj)]++;
        if (s[jj] > mx) mx = s[jj];
      end
    end
    nnz_max = 0;
    foreach (nnz[v]) if (nnz[v] > nnz_max) nnz_max = nnz[v];
    for (int jj = 0; jj < T; jj++) if (act[jj]) begin e[jj] = ref_exp(s[jj] - mx); sum += e[jj]; end
    for (int jj = 0; jj < T; jj++) if (act[jj]) begin
      p[jj] = (sum > 0) ? int'((longint'(e[jj]) << 15) / sum) : 0;
      if (p[jj] > 32767) p[jj] = 32767;
      if (dense) mask[i][jj] = (p[jj] >= TAU_ST);
    end
    for (int l = 0; l < LANES; l++) begin
      acc = 0;
      for (int jj = 0; jj < T; jj++) if (act[jj]) acc += longint'(p[jj]) * longint'(V[jj][l]);
      o[l] = sat(acc >>> 15);
    end
  endtask

  task automatic attention_step(bit dense, int step_no);
    int qk0, idle0, cyc0, exp_cyc;
    elem_t [LANES-1:0] rd;
    qk0 = int'(ev_qk_outputs); idle0 = int'(ev_idle_slots); cyc0 = int'(ev_sddmm_cycles);
    check(dense_step == dense, $sformatf("step %0d dense flag", step_no));
    run(mk(CMD_ATTN, 1, DST_OMEM, Q_BASE, KSLOT, O_BASE, VSLOT, TAU_ST));
    exp_cyc = 0;
    for (int i = 0; i < T; i++) begin
      int o [LANES]; int nm;
      ext_read(0, O_BASE + i, rd);
      if (sel[i]) begin
        ref_attn(i, dense, o, nm);
        exp_cyc += nm;
        for (int l = 0; l < LANES; l++)
          check(e2i(rd[l]) == o[l], $sformatf("step %0d out[%0d][%0d] = %0d, expected %0d", step_no, i, l, e2i(rd[l]), o[l]));
      end else begin
        for (int l = 0; l < LANES; l++)
          check(e2i(rd[l]) == 1000 + i, $sformatf("step %0d cached row %0d overwritten", step_no, i));
      end
    end
    // one output per DPU per cycle: row time = largest bucket
    check(int'(ev_sddmm_cycles) - cyc0 == exp_cyc,
          $sformatf("step %0d SDDMM cycles %0d, expected %0d", step_no, int'(ev_sddmm_cycles) - cyc0, exp_cyc));
    if (int'(ev_idle_slots) > idle0) m_idle++;
    if (dense) m_dense++; else m_sparse++;
    $display("step %0d (%s): QK^T outputs %0d, issue cycles %0d", step_no, dense ? "dense" : "sparse",
             int'(ev_qk_outputs) - qk0, int'(ev_sddmm_cycles) - cyc0);
  endtask

  initial begin
    elem_t [LANES-1:0] row;
    int t0;
    cmd = '0; ext_wdata = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    t0 = cyc;

    // ---- data
    for (int j = 0; j < T; j++) for (int b = 0; b < KB; b++) begin
      for (int m = 0; m < LANES; m++) begin X[j][b][m] = int'($urandom_range(0, 512)) - 256; row[m] = elem_t'(X[j][b][m]); end
      ext_write(0, 0, X_BASE + j * KB + b, row);
    end
    for (int v = 0; v < LANES; v++) for (int b = 0; b < KB; b++) begin
      for (int m = 0; m < LANES; m++) begin Wk[v][b][m] = int'($urandom_range(0, 128)) - 64; row[m] = elem_t'(Wk[v][b][m]); end
      ext_write(1, v, WK + b, row);
      for (int m = 0; m < LANES; m++) begin Wv[v][b][m] = int'($urandom_range(0, 128)) - 64; row[m] = elem_t'(Wv[v][b][m]); end
      ext_write(1, v, WV + b, row);
      for (int m = 0; m < LANES; m++) begin Wq[v][b][m] = int'($urandom_range(0, 128)) - 64; row[m] = elem_t'(Wq[v][b][m]); end
      ext_write(1, v, WQ + b, row);
    end
    for (int i = 0; i < T; i++) begin
      for (int m = 0; m < LANES; m++) begin Q[i][m] = int'($urandom_range(0, 1024)) - 512; row[m] = elem_t'(Q[i][m]); end
      ext_write(0, 0, Q_BASE + i, row);
      row = '0; for (int m = 0; m < LANES; m++) row[m] = elem_t'(1000 + i);   // cached outputs
      ext_write(0, 0, O_BASE + i, row);
    end
    // latents: lanes [0,W) = z_{t-1}, [W,2W) = z_t; about 40 % of patches change a lot
    n_exp_sel = 0;
    for (int j = 0; j < T; j++) begin
      bit big; big = ($urandom_range(0, 9) < 4);
      row = '0;
      for (int l = 0; l < W; l++) begin
        int z, dz;
        z = int'($urandom_range(0, 2000)) - 1000;
        dz = int'($urandom_range(0, 2 * (TAU_CTR - 1))) - (TAU_CTR - 1);   // |dz| < tau
        if (big && l == int'(j % W)) dz = (j % 2 == 0) ? TAU_CTR + 5 * j : -(TAU_CTR + 3 * j);
        row[l] = elem_t'(z); row[W + l] = elem_t'(z + dz);
      end
      sel[j] = big;
      if (big) n_exp_sel++;
      ext_write(2, j % NB, LAT + j / NB, row);
    end
    // reference projections
    for (int j = 0; j < T; j++) for (int l = 0; l < LANES; l++) begin
      longint sk, sv, sq;
      sk = 0; sv = 0; sq = 0;
      for (int b = 0; b < KB; b++) for (int m = 0; m < LANES; m++) begin
        sk += longint'(X[j][b][m]) * Wk[l][b][m];
        sv += longint'(X[j][b][m]) * Wv[l][b][m];
        sq += longint'(X[j][b][m]) * Wq[l][b][m];
      end
      K[j][l] = sat(sk >>> 8); V[j][l] = sat(sv >>> 8); Qp[j][l] = sat(sq >>> 8);
    end

    // ---- CTR token selection
    run(mk(CMD_TOKSEL, 0, DST_OMEM, 0, 0, 0, LAT, TAU_CTR));
    check(int'(n_sel) == n_exp_sel, $sformatf("selected %0d tokens, expected %0d", n_sel, n_exp_sel));
    m_kept = int'(n_sel); m_pruned = T - int'(n_sel);

    // ---- K and V projections for all tokens, re-mapped by hash
    run(mk(CMD_LINEAR, 0, DST_WMEM,  X_BASE, WK, OK_BASE, KSLOT, 0));
    run(mk(CMD_LINEAR, 0, DST_OPMEM, X_BASE, WV, OV_BASE, VSLOT, 0));
    for (int j = 0; j < T; j++) begin
      ext_read(1, OK_BASE + j, row);
      for (int l = 0; l < LANES; l++) check(e2i(row[l]) == K[j][l], $sformatf("K[%0d][%0d] = %0d, expected %0d", j, l, e2i(row[l]), K[j][l]));
    end
    m_remap = 2;

    // ---- CTR-gated projection: only selected rows are recomputed, the rest keep K
    run(mk(CMD_LINEAR, 0, DST_OMEM, X_BASE, WK, OQ_BASE, 0, 0));
    run(mk(CMD_LINEAR, 1, DST_OMEM, X_BASE, WQ, OQ_BASE, 0, 0));
    for (int j = 0; j < T; j++) begin
      ext_read(1, OQ_BASE + j, row);
      for (int l = 0; l < LANES; l++)
        check(e2i(row[l]) == (sel[j] ? Qp[j][l] : K[j][l]), $sformatf("gated row %0d lane %0d", j, l));
    end
    m_skipped = int'(ev_rows_skipped);

    // ---- ST: dense, 3 sparse, dense
    attention_step(1, 0);
    m_ones = int'(ev_mask_ones);
    for (int s = 1; s <= 4; s++) begin
      bit was_dense;
      was_dense = dense_step;
      run(mk(CMD_STEP, 0, DST_OMEM, 0, 0, 0, 0, 0));
      if (dense_step != was_dense) m_switch++;
      attention_step(s == 4, s);
    end

    $display("cycles: %0d", cyc - t0);
    $display("events: kept=%0d pruned=%0d rows_skipped=%0d remaps=%0d dense_steps=%0d sparse_steps=%0d mask_ones=%0d imbalance_steps=%0d mode_switches=%0d",
             m_kept, m_pruned, m_skipped, m_remap, m_dense, m_sparse, m_ones, m_idle, m_switch);
    check(m_kept > 0, "no token kept");
    check(m_pruned > 0, "no token pruned");
    check(m_skipped > 0, "no row skipped by CTR");
    check(m_dense >= 2, "dense steps");
    check(m_sparse >= 3, "sparse steps");
    check(m_ones > 0 && m_ones < int'(n_sel) * T, "mask neither empty nor full");
    check(m_idle > 0, "no DPU idle slot from imbalance");
    check(m_switch >= 2, "mode switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
