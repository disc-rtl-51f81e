// tb_dpu_array: loads random weights into the banks of an 8-DPU, 8-lane array, then runs
// (1) a dense two-beat linear layer (all DPUs at the same addresses, bias added) and
// (2) an SDDMM-style pass where each DPU reads a different address in the same cycle.
// Results are compared with dot products computed in the testbench, and the two-cycle
// latency from request to result is checked.
module tb_dpu_array;
  import disc_pkg::*;
  localparam int NB = 8, LANES = 8, DEPTH = 16, WAW = 4;
  localparam int ACC_W = 2*DATA_W + $clog2(LANES) + 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NB-1:0] valid = '0, first = '0, last = '0;
  logic [WAW-1:0] raddr [NB];
  elem_t [LANES-1:0] in_vec = '0;
  logic signed [ACC_W-1:0] bias [NB];
  logic w_we = 0; logic [2:0] w_bank = '0; logic [WAW-1:0] w_addr = '0; elem_t [LANES-1:0] w_data = '0;
  logic signed [ACC_W-1:0] acc [NB];
  logic [NB-1:0] out_valid;

  dpu_array #(.NB(NB), .LANES(LANES), .WM_DEPTH(DEPTH)) dut (.*);

  elem_t [LANES-1:0] wref [NB][DEPTH];

  function automatic longint dot(elem_t [LANES-1:0] x, elem_t [LANES-1:0] w);
    longint s = 0;
    for (int l = 0; l < LANES; l++) s += longint'(x[l]) * longint'(w[l]);
    return s;
  endfunction

  initial begin
    for (int v = 0; v < NB; v++) begin raddr[v] = '0; bias[v] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < NB; v++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); w_we = 1; w_bank = 3'(v); w_addr = WAW'(a);
      for (int l = 0; l < LANES; l++) w_data[l] = elem_t'($urandom);
      wref[v][a] = w_data;
    end
    @(negedge clk); w_we = 0;
    // dense linear: 2 beats at addresses 4,5 with bias
    for (int t = 0; t < 20; t++) begin
      elem_t [LANES-1:0] x0, x1; longint e [NB];
      for (int l = 0; l < LANES; l++) begin x0[l] = elem_t'($urandom); x1[l] = elem_t'($urandom); end
      for (int v = 0; v < NB; v++) begin
        bias[v] = ACC_W'(v * 1000 - 3000);
        e[v] = longint'(bias[v]) + dot(x0, wref[v][4]) + dot(x1, wref[v][5]);
      end
      @(negedge clk); valid = '1; first = '1; last = '0; for (int v = 0; v < NB; v++) raddr[v] = 4'd4;
      @(negedge clk); in_vec = x0; first = '0; last = '1; for (int v = 0; v < NB; v++) raddr[v] = 4'd5;
      @(negedge clk); in_vec = x1; valid = '0; last = '0;
      @(negedge clk);
      checks++;
      if (out_valid != '1) failures++;
      for (int v = 0; v < NB; v++) begin
        checks++;
        if (longint'(acc[v]) != e[v]) begin failures++; if (failures < 10) $display("lin v=%0d %0d vs %0d", v, acc[v], e[v]); end
      end
    end
    // SDDMM style: single beats, a different address per DPU, some DPUs idle
    for (int t = 0; t < 20; t++) begin
      elem_t [LANES-1:0] q; logic [NB-1:0] act; longint e [NB];
      for (int l = 0; l < LANES; l++) q[l] = elem_t'($urandom);
      act = NB'($urandom);
      for (int v = 0; v < NB; v++) begin
        raddr[v] = WAW'($urandom_range(0, DEPTH - 1));
        bias[v] = '0;
        e[v] = dot(q, wref[v][raddr[v]]);
      end
      @(negedge clk); valid = act; first = '1; last = '1;
      @(negedge clk); valid = '0; in_vec = q;
      @(negedge clk);
      checks++;
      if (out_valid != act) failures++;
      for (int v = 0; v < NB; v++) if (act[v]) begin
        checks++;
        if (longint'(acc[v]) != e[v]) begin failures++; if (failures < 10) $display("sddmm v=%0d %0d vs %0d", v, acc[v], e[v]); end
      end
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
