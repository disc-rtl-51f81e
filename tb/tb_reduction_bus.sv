// tb_reduction_bus: back-to-back random sum and max reductions over 8 engines x 3 lanes,
// checked against sums and maxima computed in the testbench, with the log2(NS) = 3 cycle
// latency checked for every result.
module tb_reduction_bus;
  import disc_pkg::*;
  localparam int NS = 8, W = 3, ACC_W = 40, LAT = 3, NT = 100;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, in_valid = 0;
  red_op_e op = RED_SUM;
  logic signed [ACC_W-1:0] in_data [NS][W];
  logic out_valid;
  logic signed [ACC_W-1:0] out_data [W];

  longint expv [NT][W];
  int issue_cyc [NT];
  int cyc = 0, n_out = 0;

  reduction_bus #(.NS(NS), .W(W), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (n_out >= NT || cyc - issue_cyc[n_out] != LAT) failures++;
    else for (int l = 0; l < W; l++) if ((++checks > 0) && longint'(out_data[l]) != expv[n_out][l]) begin
      failures++;
      if (failures < 10) $display("t=%0d lane %0d got %0d exp %0d", n_out, l, out_data[l], expv[n_out][l]);
    end
    n_out++;
  end

  initial begin
    for (int i = 0; i < NS; i++) for (int l = 0; l < W; l++) in_data[i][l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      in_valid = 1;
      op = (t % 3 == 0) ? RED_MAX : RED_SUM;
      for (int l = 0; l < W; l++) begin
        expv[t][l] = (op == RED_MAX) ? -(64'sd1 << 40) : 0;
        for (int i = 0; i < NS; i++) begin
          in_data[i][l] = ACC_W'(longint'($urandom_range(0, 2000000)) - 1000000);
          if (op == RED_MAX) begin
            if (longint'(in_data[i][l]) > expv[t][l]) expv[t][l] = longint'(in_data[i][l]);
          end else expv[t][l] += longint'(in_data[i][l]);
        end
      end
      issue_cyc[t] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (n_out != NT) failures++;
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
