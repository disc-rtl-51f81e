// tb_sram_bank: random masked writes and reads against a reference array, including
// read-during-write of the same address (old data expected) and one-cycle read latency.
module tb_sram_bank;
  localparam int DEPTH = 64, WIDTH = 24, AW = 6;
  int checks = 0, failures = 0;

  logic clk = 0;
  logic re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [WIDTH-1:0] rdata, wdata = '0, wmask = '0;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  sram_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    // initialise through the write port with a full mask
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'(a * 7 + 3); wmask = '1;
      ref_mem[a] = WIDTH'(a * 7 + 3);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [WIDTH-1:0] expect_q;
      @(negedge clk);
      re = 1; raddr = AW'($urandom_range(0, DEPTH - 1));
      we = $urandom_range(0, 1) == 1;
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom); wmask = WIDTH'($urandom);
      expect_q = ref_mem[raddr];
      if (we) ref_mem[waddr] = (ref_mem[waddr] & ~wmask) | (wdata & wmask);
      @(posedge clk); #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("t=%0d addr=%0d got=%h exp=%h", t, raddr, rdata, expect_q);
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
