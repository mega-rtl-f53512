// weight_buffer: on-chip Weight Buffer.
//
// Holds three things:
//  * weight rows: WB_ROWS rows of C x M 4-bit weights, each exactly one Weight
//    Reg load of a Combination Tile (48 KB at the default size); one write
//    port, one read port with one cycle latency;
//  * column scales: one unsigned Q8.8 factor per output column of the layer,
//    used when the Combination Engine requantizes its results to 4-bit B; read
//    as a block of M columns with one cycle latency;
//  * the degree table of the Degree-Aware quantization: for each in-degree
//    (0..DEG_MAX-1, larger degrees use the last entry) the output bitwidth and
//    quantization factor used by the Encoder, and the scale of that degree's
//    input features used by the requantizer. Two combinational read ports.
// The split into rows, column scales and degree table is this design's
// organisation of what the paper says the buffer supplies.
module weight_buffer
  import mega_pkg::*;
#(
  parameter int unsigned WB_ROWS = 96,
  parameter int unsigned C       = 32,
  parameter int unsigned M       = 32,
  parameter int unsigned COLS    = 256,
  parameter int unsigned DEG_MAX = 64,
  parameter int unsigned RAW     = $clog2(WB_ROWS),
  parameter int unsigned CAW     = $clog2(COLS),
  parameter int unsigned DAW     = $clog2(DEG_MAX)
) (
  input  logic                              clk,
  input  logic                              row_wr_en,
  input  logic [RAW-1:0]                    row_wr_addr,
  input  logic [C-1:0][M-1:0][W_BITS-1:0]   row_wr_data,
  input  logic                              row_rd_en,
  input  logic [RAW-1:0]                    row_rd_addr,
  output logic [C-1:0][M-1:0][W_BITS-1:0]   row_rd_data,
  input  logic                              col_wr_en,
  input  logic [CAW-1:0]                    col_wr_addr,
  input  logic [SCALE_W-1:0]                col_wr_data,
  input  logic                              col_rd_en,
  input  logic [CAW-1:0]                    col_rd_base,
  output logic [M-1:0][SCALE_W-1:0]         col_rd_data,
  input  logic                              deg_wr_en,
  input  logic [DAW-1:0]                    deg_wr_addr,
  input  logic [3:0]                        deg_wr_bits,
  input  logic [SCALE_W-1:0]                deg_wr_qscale,
  input  logic [SCALE_W-1:0]                deg_wr_alpha,
  input  logic [NID_W-1:0]                  deg_a,
  output logic [3:0]                        deg_a_bits,
  output logic [SCALE_W-1:0]                deg_a_qscale,
  input  logic [NID_W-1:0]                  deg_b,
  output logic [SCALE_W-1:0]                deg_b_alpha
);
  logic [C-1:0][M-1:0][W_BITS-1:0] rows [WB_ROWS];
  logic [SCALE_W-1:0] cols [COLS];
  logic [3:0]         dbits [DEG_MAX];
  logic [SCALE_W-1:0] dq [DEG_MAX];
  logic [SCALE_W-1:0] da [DEG_MAX];

  always_ff @(posedge clk) begin
    if (row_wr_en) rows[row_wr_addr] <= row_wr_data;
    if (row_rd_en) row_rd_data <= rows[row_rd_addr];
    if (col_wr_en) cols[col_wr_addr] <= col_wr_data;
    if (col_rd_en)
      for (int p = 0; p < M; p++) col_rd_data[p] <= cols[col_rd_base + CAW'(p)];
    if (deg_wr_en) begin
      dbits[deg_wr_addr] <= deg_wr_bits;
      dq[deg_wr_addr]    <= deg_wr_qscale;
      da[deg_wr_addr]    <= deg_wr_alpha;
    end
  end

  function automatic logic [DAW-1:0] clampdeg(input logic [NID_W-1:0] d);
    return (32'(d) >= DEG_MAX) ? DAW'(DEG_MAX - 1) : DAW'(d);
  endfunction

  assign deg_a_bits   = dbits[clampdeg(deg_a)];
  assign deg_a_qscale = dq[clampdeg(deg_a)];
  assign deg_b_alpha  = da[clampdeg(deg_b)];
endmodule
