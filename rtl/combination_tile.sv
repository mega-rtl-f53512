// combination_tile: one Combination Tile of the Combination Engine.
//
// A tile owns one C-wide slice of the input features. For each node it is given
// the slice's bitmap index; the Weight Index Generator turns it into per-row
// ordinals and the non-zero count, the Package Division Unit (decoder) pulls
// that many values from the tile's Adaptive-Package stream in the Input Buffer
// and writes their bit-planes into the Bit FIFO, and the Combination Unit
// multiplies them with the Weight Reg slice, giving M partial output features.
//
// Interface and timing:
//   set_ptr/ptr_in  : start of the slice's package stream (word address).
//   node_start      : with bitindex, begins a node; accepted when cmd_ready.
//                     One node is in flight at a time: cmd_ready returns once
//                     the node's result has been taken (out_valid & out_ready),
//                     so the bitmap ordinals stay fixed while the node's planes
//                     are in the FIFO and the C-PEs.
//   pkg_rd_*        : Input Buffer read port, one cycle latency, 192-bit window.
//   wreg_load       : loads the Weight Reg (C x M 4-bit weights).
// The one-node-in-flight rule and the FIFO depth are this design's choices.
module combination_tile
  import mega_pkg::*;
#(
  parameter int unsigned C          = 32,
  parameter int unsigned M          = 32,
  parameter int unsigned N_BSE      = 8,
  parameter int unsigned IB_AW      = 13,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wreg_load,
  input  logic [C-1:0][M-1:0][W_BITS-1:0]   wreg_data,
  input  logic                              set_ptr,
  input  logic [IB_AW-1:0]                  ptr_in,
  input  logic                              node_start,
  input  logic [C-1:0]                      bitindex,
  output logic                              cmd_ready,
  output logic                              pkg_rd_en,
  output logic [IB_AW-1:0]                  pkg_rd_addr,
  input  logic [PKG_MAX-1:0]                pkg_rd_data,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [M-1:0][ACC_W-1:0]           out_acc,
  output logic                              xbar_stall
);
  localparam int unsigned IW = $clog2(C) + 1;
  localparam int unsigned FW = N_BSE + 3 + 1 + IW + 1;

  logic [C-1:0]         bidx_r;
  logic                 inflight, start_d;
  logic [C-1:0][IW-1:0] weight_index;
  logic [IW-1:0]        nnz;

  weight_index_gen #(.C(C)) u_wig (.bitindex(bidx_r), .weight_index, .nnz);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bidx_r   <= '0;
      inflight <= 1'b0;
      start_d  <= 1'b0;
    end else begin
      start_d <= node_start && cmd_ready;
      if (node_start && cmd_ready) begin
        bidx_r   <= bitindex;
        inflight <= 1'b1;
      end else if (out_valid && out_ready) begin
        inflight <= 1'b0;
      end
    end
  end
  assign cmd_ready = !inflight;

  // Package Division Unit.
  logic dec_idle, pv, pr, pfirst, plast;
  logic [N_BSE-1:0] pbits;
  logic [2:0] pshift;
  logic [IW-1:0] pbase;
  logic [3:0] pbw;

  decoder #(.C(C), .N_BSE(N_BSE), .IB_AW(IB_AW)) u_dec (
    .clk, .rst_n, .set_ptr, .ptr_in,
    .node_start(start_d), .node_nnz(nnz), .idle(dec_idle),
    .pkg_rd_en, .pkg_rd_addr, .pkg_rd_data,
    .plane_valid(pv), .plane_ready(pr), .plane_bits(pbits), .plane_shift(pshift),
    .plane_first(pfirst), .plane_base(pbase), .plane_last(plast), .plane_bw(pbw)
  );

  // Bit FIFO.
  logic f_full, f_empty, cu_ready;
  logic [FW-1:0] f_dout;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;
  assign pr = !f_full;
  sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_bitfifo (
    .clk, .rst_n,
    .push(pv && !f_full), .din({pbits, pshift, pfirst, pbase, plast}),
    .pop(cu_ready && !f_empty), .dout(f_dout),
    .full(f_full), .empty(f_empty), .count(f_count)
  );

  combination_unit #(.C(C), .M(M), .N_BSE(N_BSE)) u_cu (
    .clk, .rst_n, .wreg_load, .wreg_data, .weight_index,
    .plane_valid(!f_empty), .plane_ready(cu_ready),
    .plane_bits(f_dout[FW-1 -: N_BSE]), .plane_shift(f_dout[IW+4:IW+2]),
    .plane_first(f_dout[IW+1]), .plane_base(f_dout[IW:1]), .plane_last(f_dout[0]),
    .out_valid, .out_ready, .out_acc, .xbar_stall
  );

  logic unused;
  assign unused = ^{pbw, dec_idle, f_count};
endmodule
