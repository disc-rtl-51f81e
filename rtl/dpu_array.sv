// dpu_array: the Dot Product Unit array with its banked Weight Memory (WMEM).
//
// NB DPUs each own one WMEM bank (DPU v reads only bank v), and one input row is
// broadcast to all of them. This private DPU-bank pairing is what lets the hash-based
// SDDMM run without an interconnection network or bank conflicts: DPU v computes only
// outputs c(i,j) with hash(j) = v, whose K^T column j was placed in bank v beforehand.
// Each DPU has its own read address and valid, so in SDDMM every DPU walks a different
// list of slots in the same cycle; in a dense linear layer all DPUs use the same address
// and DPU v produces output column v.
//
// Interface: per-DPU `valid`, `first`, `last` and `raddr` are presented in cycle t; the
// WMEM read returns in t+1, when the broadcast row `in_vec` must be presented (it comes
// from IMEM, which has the same one-cycle latency, or from a held register). Each DPU's
// result `acc[v]` / `out_valid[v]` appears in t+2. WMEM is written through one shared
// write port with a bank select (data aligner or external load).
// NB = 64 DPUs follows the load-balancing study (N = 64); LANES = 64 follows from the
// per-core peak rate; the WMEM depth is this design's choice.
module dpu_array
  import disc_pkg::*;
#(
  parameter int NB       = 64,
  parameter int LANES    = 64,
  parameter int WM_DEPTH = 1024,
  parameter int ACC_W    = 2*DATA_W + $clog2(LANES) + 8,
  parameter int WAW      = $clog2(WM_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // per-DPU control, cycle t
  input  logic [NB-1:0]           valid,
  input  logic [NB-1:0]           first,
  input  logic [NB-1:0]           last,
  input  logic [WAW-1:0]          raddr [NB],
  // broadcast input row and per-DPU bias, cycle t+1
  input  elem_t [LANES-1:0]       in_vec,
  input  logic signed [ACC_W-1:0] bias [NB],
  // WMEM write port
  input  logic                    w_we,
  input  logic [$clog2(NB)-1:0]   w_bank,
  input  logic [WAW-1:0]          w_addr,
  input  elem_t [LANES-1:0]       w_data,
  // results, cycle t+2
  output logic signed [ACC_W-1:0] acc [NB],
  output logic [NB-1:0]           out_valid
);
  logic [NB-1:0] valid_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      first_q <= '0;
      last_q  <= '0;
    end else begin
      valid_q <= valid;
      first_q <= first;
      last_q  <= last;
    end
  end

  for (genvar v = 0; v < NB; v++) begin : g_dpu
    elem_t [LANES-1:0] w_vec;

    sram_bank #(.DEPTH(WM_DEPTH), .WIDTH(LANES*DATA_W)) u_wmem (
      .clk   (clk),
      .re    (valid[v]),
      .raddr (raddr[v]),
      .rdata (w_vec),
      .we    (w_we && (int'(w_bank) == v)),
      .waddr (w_addr),
      .wdata (w_data),
      .wmask ('1)
    );

    dpu #(.LANES(LANES), .ACC_W(ACC_W)) u_dpu (
      .clk       (clk),
      .rst_n     (rst_n),
      .valid     (valid_q[v]),
      .first     (first_q[v]),
      .last      (last_q[v]),
      .in_vec    (in_vec),
      .w_vec     (w_vec),
      .bias      (bias[v]),
      .acc       (acc[v]),
      .out_valid (out_valid[v])
    );
  end
endmodule
