// tb_token_selector: random patches of one and of three beats, with differences drawn
// mostly below the threshold so that both outcomes occur; the expected token bit is the
// OR over the patch of (diff >= tau), computed in the testbench.
module tb_token_selector;
  import disc_pkg::*;
  localparam int LANES = 16;
  int checks = 0, failures = 0, n_sel = 0, n_prune = 0;

  logic clk = 0, rst_n = 0, valid = 0, last = 0;
  elem_t [LANES-1:0] diff;
  elem_t tau;
  logic tok_valid, tok_sel;

  token_selector #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    diff = '0; tau = 16'sd100;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int nb; logic exp_sel;
      nb = (t % 2 == 0) ? 1 : 3;
      exp_sel = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        valid = 1; last = (b == nb - 1);
        for (int l = 0; l < LANES; l++) begin
          // about one value in 60 reaches the threshold
          diff[l] = ($urandom_range(0, 59) == 0) ? elem_t'($urandom_range(100, 300))
                                                 : elem_t'($urandom_range(0, 99));
          if (diff[l] >= tau) exp_sel = 1;
        end
      end
      @(negedge clk); valid = 0; last = 0;
      checks++;
      if (!tok_valid || tok_sel != exp_sel) begin
        failures++;
        if (failures < 10) $display("t=%0d sel=%0b exp=%0b v=%0b", t, tok_sel, exp_sel, tok_valid);
      end
      if (exp_sel) n_sel++; else n_prune++;
    end
    checks++;
    if (n_sel == 0 || n_prune == 0) failures++;
    $display("selected=%0d pruned=%0d", n_sel, n_prune);
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
