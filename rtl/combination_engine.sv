// combination_engine: Combination Engine, computing the combination
// B = X*W for one node at a time with N_TILES Combination Tiles.
//
// Each tile handles one C-wide slice of the input features (tile t reads the
// package stream and bitindex of slice t) against its Weight Reg slice. When
// every tile has produced its M partial results they are summed (the tiles'
// outputs together form the full dot products for M output columns) and
// requantized to the 4-bit B used by aggregation:
//   B[c] = clamp(round(y[c] * alpha * scale[c] / 2^16), -7, 7)
// where alpha (Q8.8, selected by the node's degree) undoes the node's input
// quantization step and scale[c] (Q8.8) is the column scale of W combined with
// the step chosen for B. The paper quantizes B to 4 bit but gives no rounding
// rule; this fixed-point form is this design's choice.
//
// Interface: wreg_load[t] loads the weight slice on wreg_data into tile t
// (one Weight Buffer row at a time). cmd_valid/cmd_ready start a node in all tiles (with its ID, its
// alpha and one bitindex per tile). b_valid/b_ready hand out B with the node
// ID. A new node may start as soon as the tiles have passed their results
// to the output register, so decoding of node j+1 overlaps the output of j.
module combination_engine
  import mega_pkg::*;
#(
  parameter int unsigned N_TILES = 4,
  parameter int unsigned C       = 32,
  parameter int unsigned M       = 32,
  parameter int unsigned N_BSE   = 8,
  parameter int unsigned IB_AW   = 13
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  logic [N_TILES-1:0]                              wreg_load,
  input  logic [C-1:0][M-1:0][W_BITS-1:0]                 wreg_data,
  input  logic                                            set_ptr,
  input  logic [N_TILES-1:0][IB_AW-1:0]                   ptr_in,
  input  logic [M-1:0][SCALE_W-1:0]                       col_scale,
  input  logic                                            cmd_valid,
  output logic                                            cmd_ready,
  input  logic [NID_W-1:0]                                cmd_nid,
  input  logic [SCALE_W-1:0]                              cmd_alpha,
  input  logic [N_TILES-1:0][C-1:0]                       cmd_bitindex,
  output logic [N_TILES-1:0]                              pkg_rd_en,
  output logic [N_TILES-1:0][IB_AW-1:0]                   pkg_rd_addr,
  input  logic [N_TILES-1:0][PKG_MAX-1:0]                 pkg_rd_data,
  output logic                                            b_valid,
  input  logic                                            b_ready,
  output logic [NID_W-1:0]                                b_nid,
  output logic [M-1:0][B_BITS-1:0]                        b_data,
  output logic [N_TILES-1:0]                              xbar_stall
);
  localparam int unsigned YW = ACC_W + $clog2(N_TILES) + 1;
  localparam int unsigned PW = YW + 2 * SCALE_W + 1;

  logic [N_TILES-1:0]                      t_ready, t_valid;
  logic [N_TILES-1:0][M-1:0][ACC_W-1:0]    t_acc;
  logic                                    start, take;
  logic [NID_W-1:0]                        nid_r;
  logic [SCALE_W-1:0]                      alpha_r;
  logic [M-1:0][B_BITS-1:0]                b_next;

  assign cmd_ready = &t_ready;
  assign start     = cmd_valid && cmd_ready;
  assign take      = (&t_valid) && (!b_valid || b_ready);

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    combination_tile #(.C(C), .M(M), .N_BSE(N_BSE), .IB_AW(IB_AW)) u_tile (
      .clk, .rst_n,
      .wreg_load(wreg_load[t]), .wreg_data,
      .set_ptr, .ptr_in(ptr_in[t]),
      .node_start(start), .bitindex(cmd_bitindex[t]), .cmd_ready(t_ready[t]),
      .pkg_rd_en(pkg_rd_en[t]), .pkg_rd_addr(pkg_rd_addr[t]), .pkg_rd_data(pkg_rd_data[t]),
      .out_valid(t_valid[t]), .out_ready(take), .out_acc(t_acc[t]),
      .xbar_stall(xbar_stall[t])
    );
  end

  function automatic logic [B_BITS-1:0] requant(input logic signed [YW-1:0] y,
                                               input logic [SCALE_W-1:0] a,
                                               input logic [SCALE_W-1:0] s);
    logic signed [PW-1:0] p, r;
    p = PW'(y) * $signed({1'b0, a}) * $signed({1'b0, s});
    r = (p + (PW'(1) <<< 15)) >>> 16;
    if (r > 7) r = 7;
    else if (r < -7) r = -7;
    return r[B_BITS-1:0];
  endfunction

  always_comb
    for (int c = 0; c < M; c++) begin
      logic signed [YW-1:0] y;
      y = '0;
      for (int t = 0; t < N_TILES; t++) y += YW'($signed(t_acc[t][c]));
      b_next[c] = requant(y, alpha_r, col_scale[c]);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      nid_r   <= '0;
      alpha_r <= '0;
      b_valid <= 1'b0;
      b_nid   <= '0;
      b_data  <= '0;
    end else begin
      if (start) begin
        nid_r   <= cmd_nid;
        alpha_r <= cmd_alpha;
      end
      if (take) begin
        b_valid <= 1'b1;
        b_nid   <= nid_r;
        b_data  <= b_next;
      end else if (b_ready) b_valid <= 1'b0;
    end
endmodule
