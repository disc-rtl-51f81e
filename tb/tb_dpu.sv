// tb_dpu: random multi-beat dot products with bias, checked against a reference sum
// computed in the testbench; also checks the one-cycle latency after the last beat.
module tb_dpu;
  import disc_pkg::*;
  localparam int LANES = 8;
  localparam int ACC_W = 2*DATA_W + $clog2(LANES) + 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic valid = 0, first = 0, last = 0;
  elem_t [LANES-1:0] in_vec, w_vec;
  logic signed [ACC_W-1:0] bias, acc;
  logic out_valid;

  dpu #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    in_vec = '0; w_vec = '0; bias = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint ref_sum;
      int nb;
      nb = 1 + int'($urandom_range(0, 4));
      bias = ACC_W'($signed($urandom_range(0, 2000)) - 1000);
      ref_sum = longint'(bias);
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0); last = (b == nb - 1);
        for (int l = 0; l < LANES; l++) begin
          in_vec[l] = elem_t'($urandom);
          w_vec[l]  = elem_t'($urandom);
          ref_sum += longint'(in_vec[l]) * longint'(w_vec[l]);
        end
      end
      @(negedge clk);
      valid = 0; first = 0; last = 0;
      // result registered at the posedge after the last beat
      checks++;
      if (!out_valid || longint'(acc) != ref_sum) begin
        failures++;
        if (failures < 10) $display("t=%0d acc=%0d exp=%0d ov=%0b", t, acc, ref_sum, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;   // out_valid is a single-cycle pulse
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
