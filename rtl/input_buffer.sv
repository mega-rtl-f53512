// input_buffer: on-chip Input Buffer holding encoded node features.
//
// Package storage: IB_WORDS 64-bit words (64 KB at the default size). Each
// Combination Tile has a read port returning a 192-bit window of three
// consecutive words (the longest package) one cycle after rd_en. One write
// port stores 1..3 consecutive words per cycle (a whole package from the
// Encoder, or loading from off-chip memory).
// Bitmap storage: BIDX_WORDS words of C bits, one per node slice, kept apart
// from the packages; one write port and one read port per tile, same latency.
// Addresses wrap at the end of the array. Reads are registered (synchronous
// SRAM behaviour); the contents are not reset. Splitting the array into the
// halves of a ping-pong pair is left to the addresses the controller uses.
module input_buffer
  import mega_pkg::*;
#(
  parameter int unsigned IB_WORDS   = 8192,
  parameter int unsigned BIDX_WORDS = 2048,
  parameter int unsigned C          = 32,
  parameter int unsigned N_RD       = 4,
  parameter int unsigned AW         = $clog2(IB_WORDS),
  parameter int unsigned BW         = $clog2(BIDX_WORDS)
) (
  input  logic                              clk,
  input  logic [N_RD-1:0]                   rd_en,
  input  logic [N_RD-1:0][AW-1:0]           rd_addr,
  output logic [N_RD-1:0][PKG_MAX-1:0]      rd_data,
  input  logic                              wr_en,
  input  logic [AW-1:0]                     wr_addr,
  input  logic [1:0]                        wr_nwords,
  input  logic [PKG_MAX-1:0]                wr_data,
  input  logic                              bidx_wr_en,
  input  logic [BW-1:0]                     bidx_wr_addr,
  input  logic [C-1:0]                      bidx_wr_data,
  input  logic [N_RD-1:0]                   bidx_rd_en,
  input  logic [N_RD-1:0][BW-1:0]           bidx_rd_addr,
  output logic [N_RD-1:0][C-1:0]            bidx_rd_data
);
  logic [WORD_BITS-1:0] mem  [IB_WORDS];
  logic [C-1:0]         bmem [BIDX_WORDS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int w = 0; w < 3; w++)
        if (w < int'(wr_nwords)) mem[wr_addr + AW'(w)] <= wr_data[w*WORD_BITS +: WORD_BITS];
    if (bidx_wr_en) bmem[bidx_wr_addr] <= bidx_wr_data;
    for (int p = 0; p < N_RD; p++) begin
      if (rd_en[p])
        rd_data[p] <= {mem[rd_addr[p] + AW'(2)], mem[rd_addr[p] + AW'(1)], mem[rd_addr[p]]};
      if (bidx_rd_en[p]) bidx_rd_data[p] <= bmem[bidx_rd_addr[p]];
    end
  end
endmodule
