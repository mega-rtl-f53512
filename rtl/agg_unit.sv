// agg_unit: one Aggregation Unit (AU). Multiplies one 8-bit unsigned edge
// value of A by one signed 4-bit feature of B and adds the product to a
// 16-bit partial sum, saturating at the 16-bit limits (sat flags it).
// Purely combinational; the read-modify-write register is the Aggregation
// Buffer row. Saturation is this design's choice for the 16-bit partial sum
// that the paper gives.
module agg_unit
  import mega_pkg::*;
(
  input  logic [EVAL_BITS-1:0]  a,
  input  logic [B_BITS-1:0]     b,
  input  logic [PSUM_BITS-1:0]  psum_in,
  output logic [PSUM_BITS-1:0]  psum_out,
  output logic                  sat
);
  localparam int unsigned SW = PSUM_BITS + 2;
  logic signed [SW-1:0] prod, sum;
  localparam logic signed [SW-1:0] PMAX = SW'((1 << (PSUM_BITS - 1)) - 1);
  localparam logic signed [SW-1:0] PMIN = -SW'(1 << (PSUM_BITS - 1));

  always_comb begin
    prod = SW'($signed({1'b0, a})) * SW'($signed(b));
    sum  = SW'($signed(psum_in)) + prod;
    sat  = 1'b0;
    if (sum > PMAX) begin
      psum_out = PMAX[PSUM_BITS-1:0];
      sat      = 1'b1;
    end else if (sum < PMIN) begin
      psum_out = PMIN[PSUM_BITS-1:0];
      sat      = 1'b1;
    end else psum_out = sum[PSUM_BITS-1:0];
  end
endmodule
