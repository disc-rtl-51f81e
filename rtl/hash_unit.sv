// hash_unit: multiplicative hash of an index onto one of NB banks.
//
// v = MSB_b((j * K_ODD) mod 2^IDX_W), b = log2(NB). The same function decides which
// WMEM bank (and DPU) holds column j of K^T in SDDMM, and which OPMEM bank (and VPU
// SIMD) holds row j of V in SpMM, so the two sparse steps share one hash-encoded
// layout. The hash, K_ODD = 2053 and NB = 64 follow the accelerator's description
// (the paper also evaluated modulo and range-partition hashes and chose this one).
// IDX_W = 14 covers 16384 tokens, the token count of a 2048x2048 image with an 8x
// down-sampling latent and 2x2 patches; that width is this design's choice.
//
// Purely combinational: v is valid in the same cycle as j. When K_ODD is odd the map
// j -> (j*K_ODD mod 2^IDX_W) is a bijection, so each bank receives exactly 2^IDX_W/NB
// of all possible indices.
module hash_unit #(
  parameter int unsigned IDX_W = 14,
  parameter int unsigned NB    = 64,
  parameter int unsigned K_ODD = 2053
) (
  input  logic [IDX_W-1:0]       j,
  output logic [$clog2(NB)-1:0]  v
);
  localparam int unsigned B = $clog2(NB);

  logic [IDX_W-1:0] prod;  // product truncated to IDX_W bits, i.e. mod 2^IDX_W

  always_comb begin
    prod = IDX_W'(j * IDX_W'(K_ODD));
    v    = prod[IDX_W-1 -: B];
  end

  initial begin
    assert (K_ODD % 2 == 1) else $error("hash_unit: K_ODD must be odd");
    assert (NB == (1 << B)) else $error("hash_unit: NB must be a power of two");
  end
endmodule
