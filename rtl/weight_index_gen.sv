// weight_index_gen: Weight Index Generator of the Combination Tile decoder.
//
// A feature slice of C values is described by a C-bit bitmap index (1 = the
// feature is non-zero). The Parallel Sum Unit forms the inclusive prefix sum of
// the bitmap; gating each prefix sum with its own bitmap bit gives, for every
// row r of W, the 1-based ordinal of the non-zero value that must be
// multiplied by row r, or 0 when feature r is zero. For the bitmap 1,0,1,0,1,1,0,0
// this yields 1,0,2,0,3,4,0,0, as in the paper's example. The crossbar of the
// Combination Unit uses these ordinals to route rows of W to the BSEs.
//
// Purely combinational. Bit 0 of bitindex is row 0. nnz is the last prefix sum.
module weight_index_gen #(
  parameter int unsigned C  = 32,
  parameter int unsigned IW = $clog2(C) + 1
) (
  input  logic [C-1:0]          bitindex,
  output logic [C-1:0][IW-1:0]  weight_index,
  output logic [IW-1:0]         nnz
);

  logic [C-1:0][IW-1:0] psum;

  // Parallel Sum Unit: inclusive prefix sum of the bitmap.
  always_comb begin
    logic [IW-1:0] run;
    run = '0;
    for (int r = 0; r < C; r++) begin
      run     = run + IW'(bitindex[r]);
      psum[r] = run;
    end
  end

  // Gate with the bitmap: zero features get no weight row.
  always_comb begin
    for (int r = 0; r < C; r++)
      weight_index[r] = bitindex[r] ? psum[r] : '0;
    nnz = psum[C-1];
  end

endmodule
