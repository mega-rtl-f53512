// aggregation_tile: Aggregation Tile of L x M Aggregation Units (8 x 32 = 256
// AUs in Table III).
//
// Each cycle the tile takes up to L edges of one CSC column, i.e. of one
// source node j: lane l has the destination row e_row[l] (local to the
// subgraph) and the edge value e_val[l]. All M features of B_j (feat) are
// broadcast to the lanes; lane l reads row e_row[l] of the Aggregation Buffer,
// adds e_val[l] * B_j[c] for all c in its M AUs, and writes the row back in
// the same cycle. Rows of one column are distinct, so the lanes never
// collide. sat reports that some AU saturated this cycle.
// The paper gives the AU count and the 16-bit partial sums; the L x M split
// (edge-parallel lanes times feature-parallel AUs) is this design's choice.
module aggregation_tile
  import mega_pkg::*;
#(
  parameter int unsigned L     = 8,
  parameter int unsigned M     = 32,
  parameter int unsigned ROW_W = 11
) (
  input  logic                                e_valid_any,
  input  logic [L-1:0]                        e_valid,
  input  logic [L-1:0][ROW_W-1:0]             e_row,
  input  logic [L-1:0][EVAL_BITS-1:0]         e_val,
  input  logic [M-1:0][B_BITS-1:0]            feat,
  output logic [L-1:0][ROW_W-1:0]             ab_rd_addr,
  input  logic [L-1:0][M-1:0][PSUM_BITS-1:0]  ab_rd_data,
  output logic [L-1:0]                        ab_wr_en,
  output logic [L-1:0][ROW_W-1:0]             ab_wr_addr,
  output logic [L-1:0][M-1:0][PSUM_BITS-1:0]  ab_wr_data,
  output logic                                sat
);
  logic [L-1:0][M-1:0] au_sat;

  for (genvar l = 0; l < L; l++) begin : g_lane
    for (genvar c = 0; c < M; c++) begin : g_au
      agg_unit u_au (
        .a(e_val[l]), .b(feat[c]),
        .psum_in(ab_rd_data[l][c]), .psum_out(ab_wr_data[l][c]),
        .sat(au_sat[l][c])
      );
    end
  end

  always_comb begin
    ab_rd_addr = e_row;
    ab_wr_addr = e_row;
    ab_wr_en   = e_valid & {L{e_valid_any}};
    sat        = 1'b0;
    for (int l = 0; l < L; l++)
      if (ab_wr_en[l] && (|au_sat[l])) sat = 1'b1;
  end
endmodule
