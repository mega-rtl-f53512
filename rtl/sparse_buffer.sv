// sparse_buffer: Sparse Buffer (32KB in Table III): holds the B rows of sparse-connection
// nodes that the Condense Unit selects while subgraph 0 is being combined; the
// Address Reg in the Condense Unit gives every later subgraph its own region.
//
// One entry is M features of B_BITS bits (32 x 4 bit = 128 bit), so the
// default depth 2048 matches the paper's capacity. One write port, one
// combinational read port (register-file style read, this design's choice so
// that the controller can read and use a row in the same cycle).
module sparse_buffer
  import mega_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned M     = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [M-1:0][B_BITS-1:0]  wr_data,
  input  logic [AW-1:0]             rd_addr,
  output logic [M-1:0][B_BITS-1:0]  rd_data
);
  logic [M-1:0][B_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign rd_data = mem[rd_addr];
endmodule
