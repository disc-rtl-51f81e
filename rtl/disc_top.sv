// disc_top: one DiSC core with its top controller, mask memory and index memory.
//
// The core runs the attention and linear layers of a diffusion transformer with two
// savings. Cached token reuse (CTR): the token selector marks the tokens whose latent
// patch changed by at least tau since the previous denoising step; query-side work
// (Q projection, QK^T, softmax, P*V, output projection, FFN) is then issued only for the
// rows in the index memory, and the rows of the others keep their cached contents. Softmax
// thresholding with mask reuse (ST): in a dense step the whole QK^T row is computed and the
// probabilities >= tau_ST are recorded in the mask memory; in the next REUSE steps only the
// recorded outputs are computed (SDDMM on the DPU array) and P*V becomes a sparse-dense
// product on the VPU (SpMM). Both sparse steps use one hash-encoded layout: column/row j
// of K^T and V lives in bank hash(j), DPU v and SIMD v touch only bank v, and the
// SDDMM outputs stay in OMEM bank v where SIMD v finds them for softmax and SpMM.
//
// Blocks: IMEM (one wide bank: inputs, queries, latents' outputs), the DPU array with its
// NB WMEM banks, NB OMEM banks (entries {slot, value}), NB OPMEM banks (V rows and
// latents), the VPU (NB SIMD engines + reduction bus), the token selector, the data
// aligner, the SDDMM scheduler, the mask memory (NB banks, one SLOTS-bit word per query
// row) and the index memory (list of selected tokens).
//
// Commands (cmd_t, accepted when cmd_ready):
//   CMD_STEP    next denoising step: steps alternate one dense step, REUSE sparse steps.
//   CMD_TOKSEL  token j's latent patch is in OPMEM bank j%NB, word v_base + j/NB, lanes
//               [0,W) = z_{t-1} and [W,2W) = z_t; SIMD j%NB forms |difference|, the token
//               selector compares with thr (Q8.8) and OR-reduces; selected j are appended
//               to the index memory (count on n_sel).
//   CMD_LINEAR  for each row j (all n_tok, or the index list if use_index): out row =
//               sum over k_beats beats of IMEM[in_base + j*k_beats + b] . WMEM_v[w_base + b],
//               DPU v giving output column v; written (>>> 8, saturated) to OMEM word
//               out_base + j of every bank. dst = DST_WMEM / DST_OPMEM then moves the rows
//               through the data aligner into bank hash(j), words v_base + rank (K / V).
//   CMD_ATTN    for each query i (all, or the index list): Q row = IMEM[in_base + i],
//               K^T slots at WMEM w_base, V slots at OPMEM v_base; QK^T (dense or masked),
//               softmax, ST mask update (dense steps, threshold thr in Q1.15), P*V; the
//               output row goes to IMEM[out_base + i].
// The load/store port (ext_*) stands in for the network-on-chip to the global scratchpad;
// it may be used only while the core is idle.
//
// What follows the paper: the block set and their connections, the DPU structure, the
// hash-based placement and issue, the row-wise SpMM with two-stage accumulation, the
// softmax on the VPU with valid-masked SIMDs and the reduction bus, CTR gating by
// address issue, the dense/sparse step cadence. This design's own choices: fixed-point
// formats, memory depths, the command set, processing one query row at a time (SDDMM,
// softmax and SpMM are not overlapped with each other or with the next linear layer),
// linear layers without bias, one LANES-wide beat for the head dimension in attention.
module disc_top
  import disc_pkg::*;
#(
  parameter int NB        = 64,      // DPUs = WMEM/OMEM/OPMEM/mask banks = SIMD engines
  parameter int LANES     = 64,      // multipliers per DPU = row width
  parameter int W         = 16,      // SIMD lanes = token-selector lanes (4 ch x 2 x 2)
  parameter int IDX_W     = 14,      // token index width (16384 tokens)
  parameter int K_ODD     = 2053,    // multiplicative hash constant
  parameter int REUSE     = 3,       // sparse steps per dense step
  parameter int IM_DEPTH  = 32768,
  parameter int WM_DEPTH  = 1024,
  parameter int OM_DEPTH  = 16384,
  parameter int OP_DEPTH  = 512,
  parameter int MASK_ROWS = 16384,
  parameter int SLOTS     = (1 << IDX_W) / NB,
  parameter int ACC_W     = 2*DATA_W + $clog2(LANES) + 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // command interface
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               done,          // one-cycle pulse when a command finishes
  // load/store port
  input  logic               ext_we,
  input  logic [1:0]         ext_sel,       // 0 IMEM, 1 WMEM, 2 OPMEM
  input  logic [$clog2(NB)-1:0] ext_bank,
  input  logic [15:0]        ext_addr,
  input  elem_t [LANES-1:0]  ext_wdata,
  input  logic               ext_re,
  input  logic               ext_rsel,      // 0 IMEM row, 1 OMEM row (value of every bank)
  input  logic [15:0]        ext_raddr,
  output elem_t [LANES-1:0]  ext_rdata,     // one cycle after ext_re
  // status and event counters
  output logic               dense_step,
  output logic [IDX_W:0]     n_sel,
  output logic [31:0]        ev_rows_skipped,   // query-side rows not issued thanks to CTR
  output logic [31:0]        ev_sddmm_cycles,   // cycles spent issuing QK^T outputs
  output logic [31:0]        ev_qk_outputs,     // QK^T outputs computed
  output logic [31:0]        ev_idle_slots,     // DPU-cycles idle in QK^T (imbalance)
  output logic [31:0]        ev_sparse_rows,    // attention rows run with a reused mask
  output logic [31:0]        ev_dense_rows,     // attention rows that regenerated the mask
  output logic [31:0]        ev_mask_ones       // mask bits set in dense rows
);
  localparam int BW     = $clog2(NB);
  localparam int SW     = $clog2(SLOTS);
  localparam int IMAW   = $clog2(IM_DEPTH);
  localparam int WMAW   = $clog2(WM_DEPTH);
  localparam int OMAW   = $clog2(OM_DEPTH);
  localparam int OPAW   = $clog2(OP_DEPTH);
  localparam int MKAW   = $clog2(MASK_ROWS);
  localparam int NCHUNK = LANES / W;
  localparam int ENT_W  = SW + DATA_W;          // OMEM entry: {slot, value}
  localparam int VACC_W = 40;                   // SIMD accumulator width

  // ---------------------------------------------------------------- helpers
  function automatic elem_t sat16(input logic signed [ACC_W-1:0] x);
    if (x > ACC_W'(32767))  return 16'sd32767;
    if (x < -ACC_W'(32768)) return -16'sd32768;
    return elem_t'(x);
  endfunction

  // ---------------------------------------------------------------- FSM state
  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_FETCH2,
    S_TS, S_TS_DRAIN,
    S_LIN_BEAT, S_LIN_DRAIN, S_AL_FETCH, S_AL_FETCH2, S_AL_READ, S_AL_DRAIN,
    S_AT_LOAD, S_AT_LOAD2, S_AT_SDDMM, S_AT_DRAIN,
    S_SM_CLR, S_PASS, S_RED, S_SPMM_CLR, S_ROW_END, S_DONE
  } state_e;

  typedef enum logic [1:0] { P_MAX, P_EXP, P_NORM, P_FMA } pass_e;

  state_e            state, ret_state;
  cmd_t              c;
  logic [IDX_W:0]    r;            // row counter
  logic [IDX_W-1:0]  j;            // current token index
  logic [IDX_W:0]    nrows;
  logic [7:0]        beat;
  logic [2:0]        drain;
  logic [$clog2(REUSE+1)-1:0] st_phase;
  pass_e             pass;
  logic [SW:0]       pk;           // pass issue counter
  logic [$clog2(NCHUNK+1)-1:0] chunk;
  logic [1:0]        red_src_q;
  logic signed [31:0] row_max, row_sum;
  logic [SW:0]       ent_cnt [NB];
  logic [SW:0]       kmax;
  logic [IDX_W:0]    kcnt [NB];    // K^T slots per WMEM bank (from the aligner)

  // pipelines
  logic              ts_p1, ts_p2;  logic [IDX_W-1:0] ts_j1, ts_j2, ts_j3; logic [BW-1:0] ts_b1, ts_b2;
  logic [1:0]        lin_p;         logic [IDX_W-1:0] lin_j [2];
  logic [SW-1:0]     sl_p1 [NB], sl_p2 [NB];
  logic              ps1_v, ps2_v;  logic [SW:0] ps1_k, ps2_k;
  logic [SW-1:0]     ps2_slot [NB];
  elem_t             ps2_val [NB];
  logic              al_v1;         logic [IDX_W-1:0] al_j1;

  // ---------------------------------------------------------------- datapath signals
  // IMEM
  logic             im_re, im_we;
  logic [IMAW-1:0]  im_raddr, im_waddr;
  elem_t [LANES-1:0] im_rdata, im_wdata, im_wmask_e;
  // DPU array
  logic [NB-1:0]    d_valid, d_first, d_last, d_ov;
  logic [WMAW-1:0]  d_raddr [NB];
  elem_t [LANES-1:0] d_in, q_row;
  logic signed [ACC_W-1:0] d_bias [NB], d_acc [NB];
  logic             wm_we;  logic [BW-1:0] wm_bank; logic [WMAW-1:0] wm_addr; elem_t [LANES-1:0] wm_data;
  // OMEM
  logic             om_re;  logic [OMAW-1:0] om_raddr;
  logic [ENT_W-1:0] om_rdata [NB];
  logic [NB-1:0]    om_we;  logic [OMAW-1:0] om_waddr [NB]; logic [ENT_W-1:0] om_wdata [NB];
  // OPMEM
  logic [NB-1:0]    op_re;  logic [OPAW-1:0] op_raddr [NB];
  elem_t [LANES-1:0] op_rdata [NB];
  logic             op_we;  logic [BW-1:0] op_wbank; logic [OPAW-1:0] op_waddr; elem_t [LANES-1:0] op_wdata;
  // mask memory
  logic             mk_re;  logic [MKAW-1:0] mk_raddr; logic [SLOTS-1:0] mk_rdata [NB];
  logic [NB-1:0]    mk_we;  logic [MKAW-1:0] mk_waddr; logic [SLOTS-1:0] mk_wdata [NB], mk_wmask [NB];
  // index memory
  logic             ix_re, ix_we; logic [IDX_W-1:0] ix_raddr, ix_waddr, ix_rdata, ix_wdata;
  // VPU
  logic [NB-1:0]    v_valid;  simd_op_e v_op;  elem_t v_a [NB];  logic signed [31:0] v_b;  elem_t v_thr;
  elem_t [W-1:0]    v_d [NB], v_d2 [NB], v_vout [NB];
  elem_t            v_y [NB]; logic [NB-1:0] v_flag, v_yv;
  logic             v_red_start; logic [1:0] v_red_src; logic v_red_valid;
  logic signed [VACC_W-1:0] v_red_out [W];
  // token selector
  logic             ts_valid, tok_valid, tok_sel; elem_t [W-1:0] ts_diff;
  // aligner
  logic             al_clear, al_valid, al_we; logic [BW-1:0] al_bank; logic [OMAW-1:0] al_base, al_addr;
  elem_t [LANES-1:0] al_row, al_data; logic [IDX_W:0] al_cnt [NB];
  // scheduler
  logic             sc_start, sc_busy; logic [NB-1:0] sc_issue; logic [SW-1:0] sc_slot [NB];
  logic [SW:0]      sc_nnz [NB]; logic [31:0] sc_idle; logic [SW:0] sc_cnt [NB];
  // ext read
  logic             ext_rsel_q;

  // ---------------------------------------------------------------- memories
  sram_bank #(.DEPTH(IM_DEPTH), .WIDTH(LANES*DATA_W)) u_imem (
    .clk, .re(im_re), .raddr(im_raddr), .rdata(im_rdata),
    .we(im_we), .waddr(im_waddr), .wdata(im_wdata), .wmask(im_wmask_e));

  for (genvar v = 0; v < NB; v++) begin : g_bank
    sram_bank #(.DEPTH(OM_DEPTH), .WIDTH(ENT_W)) u_omem (
      .clk, .re(om_re), .raddr(om_raddr), .rdata(om_rdata[v]),
      .we(om_we[v]), .waddr(om_waddr[v]), .wdata(om_wdata[v]), .wmask('1));
    sram_bank #(.DEPTH(OP_DEPTH), .WIDTH(LANES*DATA_W)) u_opmem (
      .clk, .re(op_re[v]), .raddr(op_raddr[v]), .rdata(op_rdata[v]),
      .we(op_we && int'(op_wbank) == v), .waddr(op_waddr), .wdata(op_wdata), .wmask('1));
    sram_bank #(.DEPTH(MASK_ROWS), .WIDTH(SLOTS)) u_mask (
      .clk, .re(mk_re), .raddr(mk_raddr), .rdata(mk_rdata[v]),
      .we(mk_we[v]), .waddr(mk_waddr), .wdata(mk_wdata[v]), .wmask(mk_wmask[v]));
  end

  sram_bank #(.DEPTH(1 << IDX_W), .WIDTH(IDX_W)) u_index (
    .clk, .re(ix_re), .raddr(ix_raddr), .rdata(ix_rdata),
    .we(ix_we), .waddr(ix_waddr), .wdata(ix_wdata), .wmask('1));

  // ---------------------------------------------------------------- compute blocks
  dpu_array #(.NB(NB), .LANES(LANES), .WM_DEPTH(WM_DEPTH), .ACC_W(ACC_W)) u_dpus (
    .clk, .rst_n, .valid(d_valid), .first(d_first), .last(d_last), .raddr(d_raddr),
    .in_vec(d_in), .bias(d_bias), .w_we(wm_we), .w_bank(wm_bank), .w_addr(wm_addr),
    .w_data(wm_data), .acc(d_acc), .out_valid(d_ov));

  vpu #(.NS(NB), .W(W), .ACC_W(VACC_W)) u_vpu (
    .clk, .rst_n, .valid(v_valid), .op(v_op), .a(v_a), .b(v_b), .thr(v_thr), .d(v_d),
    .d2(v_d2), .y(v_y), .flag(v_flag), .y_valid(v_yv), .vout(v_vout),
    .red_start(v_red_start), .red_src(v_red_src), .red_valid(v_red_valid), .red_out(v_red_out));

  token_selector #(.LANES(W)) u_toksel (
    .clk, .rst_n, .valid(ts_valid), .last(1'b1), .diff(ts_diff), .tau(c.thr),
    .tok_valid(tok_valid), .tok_sel(tok_sel));

  data_aligner #(.NB(NB), .LANES(LANES), .IDX_W(IDX_W), .K_ODD(K_ODD), .AW(OMAW)) u_align (
    .clk, .rst_n, .clear(al_clear), .base(al_base), .in_valid(al_valid), .in_j(al_j1),
    .in_row(al_row), .wr_en(al_we), .wr_bank(al_bank), .wr_addr(al_addr), .wr_data(al_data),
    .cnt(al_cnt));

  sddmm_scheduler #(.NB(NB), .SLOTS(SLOTS)) u_sched (
    .clk, .rst_n, .start(sc_start), .dense(dense_step), .mask_row(mk_rdata), .cnt(sc_cnt),
    .busy(sc_busy), .issue(sc_issue), .slot(sc_slot), .nnz(sc_nnz), .idle_slots(sc_idle));

  // ---------------------------------------------------------------- combinational control
  assign dense_step = (st_phase == '0);
  assign cmd_ready  = (state == S_IDLE);

  always_comb begin
    kmax = '0;
    for (int v = 0; v < NB; v++) begin
      if (ent_cnt[v] > kmax) kmax = ent_cnt[v];
      sc_cnt[v] = (kcnt[v] > (IDX_W+1)'(SLOTS)) ? (SW+1)'(SLOTS) : (SW+1)'(kcnt[v]);
    end
  end

  always_comb begin
    // defaults
    im_re = 1'b0; im_raddr = '0; im_we = 1'b0; im_waddr = '0; im_wdata = '0; im_wmask_e = '0;
    d_valid = '0; d_first = '0; d_last = '0;
    d_in = (c.op == CMD_LINEAR) ? im_rdata : q_row;   // linear: IMEM stream; attention: held Q row
    wm_we = 1'b0; wm_bank = '0; wm_addr = '0; wm_data = '0;
    om_re = 1'b0; om_raddr = '0; om_we = '0;
    op_re = '0; op_we = 1'b0; op_wbank = '0; op_waddr = '0; op_wdata = '0;
    mk_re = 1'b0; mk_raddr = '0; mk_we = '0; mk_waddr = '0;
    ix_re = 1'b0; ix_raddr = '0; ix_we = 1'b0; ix_waddr = '0; ix_wdata = '0;
    v_valid = '0; v_op = SOP_NOP; v_b = '0; v_thr = c.thr;
    v_red_start = 1'b0; v_red_src = red_src_q;
    ts_valid = 1'b0; ts_diff = v_vout[ts_b2];
    al_clear = 1'b0; al_valid = 1'b0; al_base = OMAW'(c.v_base);
    sc_start = 1'b0;
    for (int v = 0; v < NB; v++) begin
      d_raddr[v] = '0; d_bias[v] = '0;
      om_waddr[v] = '0; om_wdata[v] = '0;
      op_raddr[v] = '0;
      mk_wdata[v] = '0; mk_wmask[v] = '0;
      v_a[v] = '0; v_d[v] = '0; v_d2[v] = '0;
      al_row[v % LANES] = elem_t'(om_rdata[v][DATA_W-1:0]);
    end

    // ---- idle: load/store port
    if (state == S_IDLE) begin
      if (ext_we) begin
        unique case (ext_sel)
          2'd0: begin im_we = 1'b1; im_waddr = IMAW'(ext_addr); im_wdata = ext_wdata; im_wmask_e = '1; end
          2'd1: begin wm_we = 1'b1; wm_bank = ext_bank; wm_addr = WMAW'(ext_addr); wm_data = ext_wdata; end
          default: begin op_we = 1'b1; op_wbank = ext_bank; op_waddr = OPAW'(ext_addr); op_wdata = ext_wdata; end
        endcase
      end
      if (ext_re) begin
        if (ext_rsel) begin om_re = 1'b1; om_raddr = OMAW'(ext_raddr); end
        else begin im_re = 1'b1; im_raddr = IMAW'(ext_raddr); end
      end
    end

    // ---- index fetch for row-based commands
    if (state == S_FETCH || state == S_AL_FETCH) begin
      ix_re = 1'b1; ix_raddr = IDX_W'(r);
    end

    // ---- token selection pipeline
    if (state == S_TS && r < (IDX_W+1)'(c.n_tok)) begin
      op_re[int'(r) % NB] = 1'b1;
      op_raddr[int'(r) % NB] = OPAW'(c.v_base) + OPAW'(int'(r) / NB);
    end
    if (ts_p1) begin
      v_op = SOP_ABSDIFF;
      v_valid[ts_b1] = 1'b1;
      v_d[ts_b1]  = op_rdata[ts_b1][W-1:0];
      v_d2[ts_b1] = op_rdata[ts_b1][2*W-1:W];
    end
    if (ts_p2) ts_valid = 1'b1;
    if (tok_valid && tok_sel) begin
      ix_we = 1'b1; ix_waddr = IDX_W'(n_sel); ix_wdata = ts_j3;
    end

    // ---- linear layer beats
    if (state == S_LIN_BEAT) begin
      im_re    = 1'b1;
      im_raddr = IMAW'(c.in_base) + IMAW'(int'(j) * int'(c.k_beats) + int'(beat));
      d_valid  = '1;
      d_first  = {NB{beat == 8'd0}};
      d_last   = {NB{beat == c.k_beats - 8'd1}};
      for (int v = 0; v < NB; v++) d_raddr[v] = WMAW'(c.w_base) + WMAW'(beat);
    end
    if (lin_p[1] && d_ov[0]) begin
      for (int v = 0; v < NB; v++) begin
        om_we[v] = 1'b1;
        om_waddr[v] = OMAW'(c.out_base) + OMAW'(lin_j[1]);
        om_wdata[v] = {SW'(0), sat16(d_acc[v] >>> DATA_FRAC)};
      end
    end

    // ---- aligner pass: OMEM row j -> bank hash(j)
    if (state == S_LIN_BEAT && beat == 8'd0 && r == '0) al_clear = (c.dst != DST_OMEM);
    if (state == S_AL_READ) begin
      om_re = 1'b1; om_raddr = OMAW'(c.out_base) + OMAW'(j);
    end
    al_valid = al_v1;
    if (al_we) begin
      if (c.dst == DST_WMEM) begin
        wm_we = 1'b1; wm_bank = al_bank; wm_addr = WMAW'(al_addr); wm_data = al_data;
      end else begin
        op_we = 1'b1; op_wbank = al_bank; op_waddr = OPAW'(al_addr); op_wdata = al_data;
      end
    end

    // ---- attention: load Q row and mask row
    if (state == S_AT_LOAD) begin
      im_re = 1'b1; im_raddr = IMAW'(c.in_base) + IMAW'(j);
      mk_re = 1'b1; mk_raddr = MKAW'(j);
    end
    if (state == S_AT_LOAD2) sc_start = 1'b1;

    // ---- QK^T issue: DPU v computes the slot its scheduler picked
    if (state == S_AT_SDDMM) begin
      d_valid = sc_issue; d_first = sc_issue; d_last = sc_issue;
      for (int v = 0; v < NB; v++) d_raddr[v] = WMAW'(c.w_base) + WMAW'(sc_slot[v]);
    end
    if (state == S_AT_SDDMM || state == S_AT_DRAIN) begin
      for (int v = 0; v < NB; v++) if (d_ov[v]) begin
        om_we[v] = 1'b1; om_waddr[v] = OMAW'(ent_cnt[v]);
        om_wdata[v] = {sl_p2[v], sat16(d_acc[v] >>> DATA_FRAC)};
      end
    end

    // ---- softmax / SpMM passes over the OMEM entry lists
    if (state == S_SM_CLR || state == S_SPMM_CLR) begin
      v_valid = '1; v_op = SOP_CLR;
    end
    if (state == S_PASS && pk < kmax) begin
      om_re = 1'b1; om_raddr = OMAW'(pk);
    end
    if (ps1_v) begin
      for (int v = 0; v < NB; v++) begin
        if (pass == P_FMA) begin
          op_re[v] = (ps1_k < ent_cnt[v]);
          op_raddr[v] = OPAW'(c.v_base) + OPAW'(om_rdata[v][ENT_W-1:DATA_W]);
        end else begin
          v_valid[v] = (ps1_k < ent_cnt[v]);
          v_a[v] = elem_t'(om_rdata[v][DATA_W-1:0]);
        end
      end
      unique case (pass)
        P_MAX:   v_op = SOP_MAX;
        P_EXP:   begin v_op = SOP_EXP;  v_b = row_max; end
        P_NORM:  begin v_op = SOP_NORM; v_b = row_sum; end
        default: ;
      endcase
    end
    if (ps2_v) begin
      for (int v = 0; v < NB; v++) begin
        if (pass == P_FMA) begin
          v_valid[v] = (ps2_k < ent_cnt[v]);
          v_a[v] = ps2_val[v];
          v_d[v] = op_rdata[v][int'(chunk)*W +: W];
        end else if (v_yv[v]) begin
          om_we[v] = 1'b1; om_waddr[v] = OMAW'(ps2_k);
          om_wdata[v] = {ps2_slot[v], v_y[v]};
          if (pass == P_NORM && dense_step) begin
            mk_we[v] = 1'b1; mk_waddr = MKAW'(j);
            mk_wmask[v] = SLOTS'(1) << ps2_slot[v];
            mk_wdata[v] = SLOTS'(v_flag[v]) << ps2_slot[v];
          end
        end
      end
      if (pass == P_FMA) v_op = SOP_FMA;
    end
    if (state == S_RED && drain == 3'd0) v_red_start = 1'b1;
    if (state == S_RED && v_red_valid && red_src_q == 2'd2) begin
      im_we = 1'b1; im_waddr = IMAW'(c.out_base) + IMAW'(j);
      for (int l = 0; l < W; l++) begin
        im_wdata[int'(chunk)*W + l]   = sat16(ACC_W'(v_red_out[l] >>> PROB_FRAC));
        im_wmask_e[int'(chunk)*W + l] = '1;
      end
    end
  end

  // ---------------------------------------------------------------- sequential control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret_state <= S_IDLE; c <= '0; r <= '0; j <= '0; nrows <= '0;
      beat <= '0; drain <= '0; st_phase <= '0; pass <= P_MAX; pk <= '0; chunk <= '0;
      red_src_q <= '0; row_max <= '0; row_sum <= '0; n_sel <= '0; done <= 1'b0;
      ts_p1 <= 1'b0; ts_p2 <= 1'b0; ts_j1 <= '0; ts_j2 <= '0; ts_j3 <= '0; ts_b1 <= '0; ts_b2 <= '0;
      lin_p <= '0; lin_j[0] <= '0; lin_j[1] <= '0;
      ps1_v <= 1'b0; ps2_v <= 1'b0; ps1_k <= '0; ps2_k <= '0;
      al_v1 <= 1'b0; al_j1 <= '0; q_row <= '0; ext_rsel_q <= 1'b0;
      ev_rows_skipped <= '0; ev_sddmm_cycles <= '0; ev_qk_outputs <= '0; ev_idle_slots <= '0;
      ev_sparse_rows <= '0; ev_dense_rows <= '0; ev_mask_ones <= '0;
      for (int v = 0; v < NB; v++) begin
        ent_cnt[v] <= '0; kcnt[v] <= '0; sl_p1[v] <= '0; sl_p2[v] <= '0;
        ps2_slot[v] <= '0; ps2_val[v] <= '0;
      end
    end else begin
      done       <= 1'b0;
      ext_rsel_q <= ext_rsel;

      // pipelines that run regardless of state
      ts_p2 <= ts_p1; ts_j2 <= ts_j1; ts_b2 <= ts_b1; ts_j3 <= ts_j2;
      ts_p1 <= 1'b0;
      if (tok_valid && tok_sel) n_sel <= n_sel + 1'b1;
      lin_p <= {lin_p[0], 1'b0};
      lin_j[1] <= lin_j[0];
      al_v1 <= 1'b0;
      for (int v = 0; v < NB; v++) begin
        sl_p1[v] <= sc_slot[v];
        sl_p2[v] <= sl_p1[v];
        if ((state == S_AT_SDDMM || state == S_AT_DRAIN) && d_ov[v]) ent_cnt[v] <= ent_cnt[v] + 1'b1;
        if (ps1_v && pass != P_FMA) ps2_slot[v] <= om_rdata[v][ENT_W-1:DATA_W];
        if (ps1_v) ps2_val[v] <= elem_t'(om_rdata[v][DATA_W-1:0]);
      end
      ps2_v <= ps1_v; ps2_k <= ps1_k;
      ps1_v <= 1'b0;

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; r <= '0;
          unique case (cmd.op)
            CMD_STEP: begin
              st_phase <= (int'(st_phase) == REUSE) ? '0 : st_phase + 1'b1;
              state <= S_DONE;
            end
            CMD_TOKSEL: begin n_sel <= '0; state <= S_TS; end
            CMD_LINEAR: begin
              nrows <= cmd.use_index ? n_sel : (IDX_W+1)'(cmd.n_tok);
              if (cmd.use_index) ev_rows_skipped <= ev_rows_skipped + 32'(cmd.n_tok) - 32'(n_sel);
              ret_state <= S_LIN_BEAT; state <= S_FETCH;
            end
            default: begin   // CMD_ATTN
              nrows <= cmd.use_index ? n_sel : (IDX_W+1)'(cmd.n_tok);
              if (cmd.use_index) ev_rows_skipped <= ev_rows_skipped + 32'(cmd.n_tok) - 32'(n_sel);
              ret_state <= S_AT_LOAD; state <= S_FETCH;
            end
          endcase
        end

        // ---- row fetch: j = index[r] or r
        S_FETCH: begin
          if (r == nrows) state <= (c.op == CMD_LINEAR) ? S_LIN_DRAIN : S_DONE;
          else state <= S_FETCH2;
          drain <= '0;
        end
        S_FETCH2: begin
          j <= c.use_index ? ix_rdata : IDX_W'(r);
          beat <= '0;
          state <= ret_state;
        end

        // ---- token selection
        S_TS: begin
          if (r < (IDX_W+1)'(c.n_tok)) begin
            ts_p1 <= 1'b1; ts_j1 <= IDX_W'(r); ts_b1 <= BW'(int'(r) % NB);
            r <= r + 1'b1;
          end else begin
            drain <= '0; state <= S_TS_DRAIN;
          end
        end
        S_TS_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd4) state <= S_DONE;
        end

        // ---- linear layer
        S_LIN_BEAT: begin
          beat <= beat + 1'b1;
          if (beat == c.k_beats - 8'd1) begin
            lin_p[0] <= 1'b1; lin_j[0] <= j;
            r <= r + 1'b1;
            state <= S_FETCH;
          end
        end
        S_LIN_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            r <= '0;
            state <= (c.dst == DST_OMEM) ? S_DONE : S_AL_FETCH;
          end
        end
        S_AL_FETCH:  state <= (r == nrows) ? S_AL_DRAIN : S_AL_FETCH2;
        S_AL_FETCH2: begin j <= c.use_index ? ix_rdata : IDX_W'(r); state <= S_AL_READ; end
        S_AL_READ: begin
          al_v1 <= 1'b1; al_j1 <= j;
          r <= r + 1'b1;
          state <= S_AL_FETCH;
          drain <= '0;
        end
        S_AL_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd2) begin
            if (c.dst == DST_WMEM) for (int v = 0; v < NB; v++) kcnt[v] <= al_cnt[v];
            state <= S_DONE;
          end
        end

        // ---- attention row
        S_AT_LOAD:  state <= S_AT_LOAD2;
        S_AT_LOAD2: begin
          q_row <= im_rdata;
          for (int v = 0; v < NB; v++) ent_cnt[v] <= '0;
          if (dense_step) ev_dense_rows <= ev_dense_rows + 1; else ev_sparse_rows <= ev_sparse_rows + 1;
          state <= S_AT_SDDMM;
        end
        S_AT_SDDMM: begin
          if (sc_busy) ev_sddmm_cycles <= ev_sddmm_cycles + 1;
          else begin
            ev_idle_slots <= ev_idle_slots + sc_idle;
            drain <= '0; state <= S_AT_DRAIN;
          end
        end
        S_AT_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd2) begin
            state <= S_SM_CLR;
          end
        end
        S_SM_CLR: begin
          pass <= P_MAX; pk <= '0; drain <= '0; state <= S_PASS;
        end
        S_PASS: begin
          if (pk < kmax) begin
            ps1_v <= 1'b1; ps1_k <= pk; pk <= pk + 1'b1; drain <= '0;
          end else begin
            drain <= drain + 1'b1;
            if (drain == 3'd3) begin
              drain <= '0;
              unique case (pass)
                P_MAX:  begin red_src_q <= 2'd1; state <= S_RED; end
                P_EXP:  begin red_src_q <= 2'd0; state <= S_RED; end
                P_NORM: begin chunk <= '0; state <= S_SPMM_CLR; end
                default: begin red_src_q <= 2'd2; state <= S_RED; end
              endcase
            end
          end
        end
        S_RED: begin
          if (drain == 3'd0) drain <= 3'd1;
          if (v_red_valid) begin
            drain <= '0; pk <= '0;
            unique case (pass)
              P_MAX: begin row_max <= 32'(v_red_out[0]); pass <= P_EXP;  state <= S_PASS; end
              P_EXP: begin row_sum <= 32'(v_red_out[0]); pass <= P_NORM; state <= S_PASS; end
              default: begin
                if (int'(chunk) == NCHUNK - 1) state <= S_ROW_END;
                else begin chunk <= chunk + 1'b1; state <= S_SPMM_CLR; end
              end
            endcase
          end
        end
        S_SPMM_CLR: begin pass <= P_FMA; pk <= '0; drain <= '0; state <= S_PASS; end
        S_ROW_END: begin r <= r + 1'b1; state <= S_FETCH; end

        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase

      // QK^T output and mask statistics
      if (state == S_AT_SDDMM || state == S_AT_DRAIN)
        ev_qk_outputs <= ev_qk_outputs + 32'($countones(d_ov));
      if (ps2_v && pass == P_NORM && dense_step)
        ev_mask_ones <= ev_mask_ones + 32'($countones(v_flag & v_yv));
    end
  end

  // ext read data: IMEM row or the value field of every OMEM bank
  always_comb begin
    for (int l = 0; l < LANES; l++)
      ext_rdata[l] = ext_rsel_q ? elem_t'(om_rdata[l % NB][DATA_W-1:0]) : im_rdata[l];
  end

  // ---------------------------------------------------------------- checks
  initial begin
    assert (NB == LANES) else $error("disc_top: the aligner's transposition needs NB == LANES");
    assert (W * 2 <= LANES) else $error("disc_top: a latent word holds two W-lane patches");
    assert (LANES % W == 0) else $error("disc_top: LANES must be a multiple of W");
  end
  always_ff @(posedge clk) begin
    if (ext_we || ext_re) assert (state == S_IDLE) else $error("disc_top: load/store while busy");
    if (cmd_valid && cmd_ready && cmd.op == CMD_LINEAR) assert (cmd.k_beats != 0) else $error("disc_top: k_beats = 0");
  end
endmodule
