// tb_hash_unit: checks the multiplicative hash against an independent integer model,
// exhaustively for the paper's 8-index example ((j*3 mod 8) >> 1, four banks, whose
// table is printed in the SDDMM/SpMM figures) and over all 16384 indices at the default
// size, where it also checks that every bank receives exactly 256 indices.
module tb_hash_unit;
  int checks = 0, failures = 0;

  logic [2:0]  js;  logic [1:0] vs;
  logic [13:0] jd;  logic [5:0] vd;

  hash_unit #(.IDX_W(3), .NB(4), .K_ODD(3)) u_small (.j(js), .v(vs));
  hash_unit                                  u_def   (.j(jd), .v(vd));

  // Bank of each column 0..7 in the printed 4-bank example.
  int exp_small [8] = '{0, 1, 3, 0, 2, 3, 1, 2};
  int count [64];

  initial begin
    for (int j = 0; j < 8; j++) begin
      js = 3'(j); #1;
      checks++;
      if (int'(vs) != exp_small[j]) begin
        failures++; $display("small: j=%0d v=%0d exp=%0d", j, vs, exp_small[j]);
      end
    end
    foreach (count[i]) count[i] = 0;
    for (int j = 0; j < 16384; j++) begin
      int e;
      jd = 14'(j); #1;
      e = ((j * 2053) % 16384) / 256;
      checks++;
      if (int'(vd) != e) begin
        failures++;
        if (failures < 10) $display("default: j=%0d v=%0d exp=%0d", j, vd, e);
      end
      count[vd]++;
    end
    foreach (count[i]) begin
      checks++;
      if (count[i] != 256) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
