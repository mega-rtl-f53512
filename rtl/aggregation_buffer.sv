// aggregation_buffer: Aggregation Buffer (128KB in Table III) holding the
// 16-bit partial sums of the subgraph being aggregated.
//
// A row is M partial sums of PSUM_BITS (32 x 16 bit = 64 B), so the default
// 2048 rows give 128KB; a subgraph may have at most ROWS nodes. The
// Aggregation Tile updates L rows per cycle through L read-modify-write lanes:
// rd_addr[l] returns the row combinationally and wr_* writes it at the clock
// edge. The lanes of one cycle always address different rows (the edges of
// one CSC column have different destination rows). A separate combinational
// read port feeds the Encoder.
// Clearing a whole buffer in one cycle (clear) is done with a valid bit per
// row: a row whose valid bit is low reads as zero. This is this design's
// choice; the paper does not say how the buffer is reset between subgraphs.
module aggregation_buffer
  import mega_pkg::*;
#(
  parameter int unsigned ROWS = 2048,
  parameter int unsigned M    = 32,
  parameter int unsigned L    = 8,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                clear,
  input  logic [L-1:0][AW-1:0]                rd_addr,
  output logic [L-1:0][M-1:0][PSUM_BITS-1:0]  rd_data,
  input  logic [L-1:0]                        wr_en,
  input  logic [L-1:0][AW-1:0]                wr_addr,
  input  logic [L-1:0][M-1:0][PSUM_BITS-1:0]  wr_data,
  input  logic [AW-1:0]                       enc_addr,
  output logic [M-1:0][PSUM_BITS-1:0]         enc_data
);
  logic [M-1:0][PSUM_BITS-1:0] mem [ROWS];
  logic [ROWS-1:0]             vld;

  always_ff @(posedge clk)
    for (int l = 0; l < L; l++)
      if (wr_en[l]) mem[wr_addr[l]] <= wr_data[l];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else begin
      if (clear) vld <= '0;
      for (int l = 0; l < L; l++)
        if (wr_en[l]) vld[wr_addr[l]] <= 1'b1;
    end

  always_comb begin
    for (int l = 0; l < L; l++)
      rd_data[l] = vld[rd_addr[l]] ? mem[rd_addr[l]] : '0;
    enc_data = vld[enc_addr] ? mem[enc_addr] : '0;
  end
endmodule
