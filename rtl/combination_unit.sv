// combination_unit: bit-serial, row-product Combination Unit of one
// Combination Tile.
//
// It multiplies the non-zero values of one node slice (up to C values of 1..8
// bits, arriving as bit-planes from the Bit FIFO) by the matching rows of the
// 4-bit weight slice held in the Weight Reg (C rows x M columns), producing M
// partial output features. M C-PEs each compute one output column; each C-PE
// has N_BSE BSEs, one per value of the current group.
//
// Dataflow (paper, Fig. 17/18): the C-PEs form two halves. A plane enters the
// left half first and is forwarded to the right half one cycle later, so both
// halves see the same bits. A c x n crossbar routes weight rows to the BSEs:
// BSE j receives row r when the Weight Index Generator gave row r the ordinal
// base+j+1 of the value held by BSE j. The crossbar serves one half per cycle:
// the left half on the first plane of a group, the right half one cycle later;
// both halves keep their weights for all bits of the group. A group of 1-bit
// values would need the crossbar for both halves at once, so a first plane is
// not accepted in the cycle after another first plane (one stall cycle); every
// group thus takes max(b,2) cycles.
//
// Interface: plane_* is a valid/ready stream (ready low on a crossbar conflict,
// in the cycle after a node's last plane, or while an unread result is held). weight_index must stay stable while a node
// is in flight. out_valid rises two cycles after the node's last plane is
// accepted and holds out_acc until out_ready. wreg_load writes the Weight Reg.
// The Weight Reg is stored row-major: wreg_data[r][col] is W[r][col].
module combination_unit
  import mega_pkg::*;
#(
  parameter int unsigned C     = 32,
  parameter int unsigned M     = 32,
  parameter int unsigned N_BSE = 8,
  parameter int unsigned IW    = $clog2(C) + 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wreg_load,
  input  logic [C-1:0][M-1:0][W_BITS-1:0]   wreg_data,
  input  logic [C-1:0][IW-1:0]              weight_index,
  input  logic                              plane_valid,
  output logic                              plane_ready,
  input  logic [N_BSE-1:0]                  plane_bits,
  input  logic [2:0]                        plane_shift,
  input  logic                              plane_first,
  input  logic [IW-1:0]                     plane_base,
  input  logic                              plane_last,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [M-1:0][ACC_W-1:0]           out_acc,
  output logic                              xbar_stall   // crossbar conflict this cycle
);
  localparam int unsigned H = M / 2;

  logic [C-1:0][M-1:0][W_BITS-1:0] wreg;   // Weight Reg
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) wreg <= '0;
    else if (wreg_load) wreg <= wreg_data;

  // Left-stage copy of the plane control, forwarded to the right half.
  logic              l_v, l_first, l_last;
  logic [N_BSE-1:0]  l_bits;
  logic [2:0]        l_shift;
  logic [IW-1:0]     l_base;

  logic accept;
  assign xbar_stall  = plane_valid && plane_first && l_v && l_first;
  // No plane in the cycle after a node's last plane, so that the left half
  // cannot finish a new node before the right half has finished the old one.
  assign plane_ready = !out_valid && !(l_v && l_last) && !(plane_first && l_v && l_first);
  assign accept      = plane_valid && plane_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_v <= 1'b0; l_first <= 1'b0; l_last <= 1'b0;
      l_bits <= '0; l_shift <= '0; l_base <= '0;
    end else begin
      l_v <= accept;
      if (accept) begin
        l_first <= plane_first;
        l_last  <= plane_last;
        l_bits  <= plane_bits;
        l_shift <= plane_shift;
        l_base  <= plane_base;
      end
    end
  end

  // Crossbar: one half per cycle. Crosspoint (row r, BSE j) conducts when row r
  // carries the ordinal of the value held by BSE j.
  logic [N_BSE-1:0][C-1:0] sel_l, sel_r;
  always_comb begin
    for (int j = 0; j < N_BSE; j++)
      for (int r = 0; r < C; r++) begin
        sel_l[j][r] = (weight_index[r] == plane_base + IW'(j + 1));
        sel_r[j][r] = (weight_index[r] == l_base + IW'(j + 1));
      end
  end

  logic [M-1:0] pe_done;
  logic signed [M-1:0][ACC_W-1:0] pe_res;

  for (genvar p = 0; p < M; p++) begin : g_pe
    logic                          in_v, in_last, ld;
    logic [N_BSE-1:0]              in_bits;
    logic [2:0]                    in_shift;
    logic [N_BSE-1:0][W_BITS-1:0]  w_in;
    if (p < H) begin : g_left
      assign in_v     = accept;
      assign in_bits  = plane_bits;
      assign in_shift = plane_shift;
      assign in_last  = plane_last;
      assign ld       = accept && plane_first;
      always_comb begin
        w_in = '0;
        for (int j = 0; j < N_BSE; j++)
          for (int r = 0; r < C; r++)
            if (sel_l[j][r]) w_in[j] = w_in[j] | wreg[r][p];
      end
    end else begin : g_right
      assign in_v     = l_v;
      assign in_bits  = l_bits;
      assign in_shift = l_shift;
      assign in_last  = l_last;
      assign ld       = l_v && l_first;
      always_comb begin
        w_in = '0;
        for (int j = 0; j < N_BSE; j++)
          for (int r = 0; r < C; r++)
            if (sel_r[j][r]) w_in[j] = w_in[j] | wreg[r][p];
      end
    end
    c_pe #(.N_BSE(N_BSE)) u_pe (
      .clk, .rst_n,
      .in_valid(in_v), .in_bits, .in_shift, .in_last,
      .load_w(ld), .w_in,
      .done(pe_done[p]), .result(pe_res[p])
    );
  end

  // Left results finish one cycle before the right ones.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      if (pe_done[0])
        for (int p = 0; p < H; p++) out_acc[p] <= pe_res[p];
      if (pe_done[M-1]) begin
        for (int p = H; p < M; p++) out_acc[p] <= pe_res[p];
        out_valid <= 1'b1;
      end else if (out_ready) out_valid <= 1'b0;
    end
  end
endmodule
