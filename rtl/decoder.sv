// decoder: Package Division Unit of a Combination Tile (the paper's Decoder
// minus the Weight Index Generator, which is a separate module).
//
// The tile's feature slice is stored in the Input Buffer as a stream of
// Adaptive-Package packages (1, 2 or 3 64-bit words). The Package Reg holds the
// current package; its Mode selects the package length (short/medium/long)
// and an adder moves the word pointer Ptr to the next package when the current
// one has no values left. For each node the decoder is told how many non-zero
// values (nnz) the node has in this slice; it takes them from the package in
// groups of up to N_BSE values (one per BSE), and the per-bitwidth bit
// selectors turn each group into bit-planes: plane k holds bit k of every value
// of the group and is tagged with the shift amount k (least significant bit
// first). A group of b-bit values therefore produces b planes, one per cycle.
//
// A package ends at the first all-zero value slot or at the end of its Val
// Array (only non-zero values are stored and padding is zero), so a node may
// start in the middle of a package and may continue into the next one.
//
// Interface and timing:
//   set_ptr     : load Ptr with ptr_in (start of a slice stream); drops the
//                 cached package.
//   node_start  : begin a node with node_nnz values (accepted only when idle).
//   pkg_rd_*    : Input Buffer read, data returned one cycle after the request.
//   plane_*     : valid/ready stream to the Bit FIFO. plane_first marks the first
//                 plane of a group, plane_base is the ordinal (0-based) of the
//                 group's first value, plane_last marks the node's last plane.
//   A node with nnz = 0 yields one all-zero plane with plane_last set.
//   Back-to-back groups within a package stream one plane per cycle.
//
// The Mode/Bitwidth codes, lengths and LSB-first bit-planes follow the paper;
// the field positions in the word, the 8-bit code 000, the value grouping and the
// handshakes are this design's own.
module decoder
  import mega_pkg::*;
#(
  parameter int unsigned C     = 32,
  parameter int unsigned N_BSE = 8,
  parameter int unsigned IB_AW = 13,
  parameter int unsigned IW    = $clog2(C) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 set_ptr,
  input  logic [IB_AW-1:0]     ptr_in,
  input  logic                 node_start,
  input  logic [IW-1:0]        node_nnz,
  output logic                 idle,
  output logic                 pkg_rd_en,
  output logic [IB_AW-1:0]     pkg_rd_addr,
  input  logic [PKG_MAX-1:0]   pkg_rd_data,
  output logic                 plane_valid,
  input  logic                 plane_ready,
  output logic [N_BSE-1:0]     plane_bits,
  output logic [2:0]           plane_shift,
  output logic                 plane_first,
  output logic [IW-1:0]        plane_base,
  output logic                 plane_last,
  output logic [3:0]           plane_bw
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_WAIT, S_GROUP, S_EMIT, S_ZERO} state_e;
  state_e state;

  localparam int unsigned VAL_BITS = PKG_MAX - HDR_BITS;
  localparam int unsigned SLOT_W   = $clog2(VAL_BITS + 1);

  logic [PKG_MAX-1:0] pkg_reg;       // Package Reg
  logic               pkg_valid;
  logic [IB_AW-1:0]   ptr;           // word address of the package in pkg_reg
  logic [SLOT_W-1:0]  slot;          // next value slot in the package
  logic [IW-1:0]      rem;           // values of the node still to take
  logic [IW-1:0]      ord;           // ordinal of the next value of the node
  logic [N_BSE-1:0][7:0] grp_val;    // current group
  logic [3:0]         grp_bw;
  logic [2:0]         k;             // current plane
  logic [IW-1:0]      grp_base;
  logic               grp_last;      // group ends the node

  // Header fields.
  logic [1:0] hdr_mode;
  logic [3:0] hdr_bw;
  assign hdr_mode = pkg_reg[1:0];
  assign hdr_bw   = bw_decode(pkg_reg[4:2]);

  // Slot capacity of the Val Array.
  logic [SLOT_W-1:0] cap;
  always_comb cap = SLOT_W'((mode_bits(hdr_mode) - HDR_BITS) / hdr_bw);

  // Bit selectors: one per bitwidth, each extracting N_BSE values of that width
  // starting at the current slot.
  logic [VAL_BITS-1:0]        shifted;
  logic [8:1][N_BSE-1:0][7:0] sel;
  logic [N_BSE-1:0][7:0]      nxt_val;
  always_comb begin
    shifted = pkg_reg[PKG_MAX-1:HDR_BITS] >> (32'(slot) * 32'(hdr_bw));
    for (int w = 1; w <= 8; w++)
      for (int j = 0; j < N_BSE; j++) begin
        sel[w][j] = '0;
        for (int t = 0; t < w; t++)
          if (j * w + t < VAL_BITS) sel[w][j][t] = shifted[j * w + t];
      end
    nxt_val = sel[hdr_bw];
  end

  // How many values the next group takes: leading slots that exist, are non-zero
  // and are still needed by the node.
  logic [IW-1:0] rem_eff;
  logic [IW-1:0] take;
  assign rem_eff = (state == S_IDLE) ? node_nnz : rem;
  always_comb begin
    logic stop;
    take = '0;
    stop = !pkg_valid;
    for (int j = 0; j < N_BSE; j++) begin
      if (!stop && (32'(slot) + j < 32'(cap)) && (nxt_val[j] != 8'd0) && (IW'(j) < rem_eff))
        take = IW'(j + 1);
      else
        stop = 1'b1;
    end
  end

  logic plane_fire;
  assign plane_fire = plane_valid && plane_ready;
  logic grp_done;      // last plane of the current group is leaving
  assign grp_done = plane_fire && (state == S_EMIT) && ({1'b0, k} == grp_bw - 4'd1);

  // Start a group from the current package.
  task automatic latch_group(input logic [IW-1:0] n, input logic [IW-1:0] r, input logic [IW-1:0] o);
    for (int j = 0; j < N_BSE; j++) grp_val[j] <= (IW'(j) < n) ? nxt_val[j] : 8'd0;
    grp_bw   <= hdr_bw;
    grp_base <= o;
    grp_last <= (r == n);
    k        <= '0;
    slot     <= slot + SLOT_W'(n);
    rem      <= r - n;
    ord      <= o + n;
    state    <= S_EMIT;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      pkg_valid <= 1'b0;
      ptr       <= '0;
      slot      <= '0;
      rem       <= '0;
      ord       <= '0;
      k         <= '0;
      grp_bw    <= 4'd1;
      grp_base  <= '0;
      grp_last  <= 1'b0;
      grp_val   <= '0;
      pkg_reg   <= '0;
    end else begin
      if (set_ptr) begin
        ptr       <= ptr_in;
        pkg_valid <= 1'b0;
      end
      case (state)
        S_IDLE:
          if (node_start) begin
            ord <= '0;
            if (node_nnz == '0)             state <= S_ZERO;
            else if (take != '0)            latch_group(take, node_nnz, '0);
            else begin
              rem <= node_nnz;
              state <= pkg_valid ? S_GROUP : S_FETCH;
            end
          end
        S_GROUP: begin
          if (take != '0) latch_group(take, rem, ord);
          else begin
            // Package exhausted: Ptr + length of the current Mode.
            ptr       <= ptr + IB_AW'(mode_words(hdr_mode));
            pkg_valid <= 1'b0;
            state     <= S_FETCH;
          end
        end
        S_FETCH: state <= S_WAIT;
        S_WAIT: begin
          pkg_reg   <= pkg_rd_data;
          pkg_valid <= 1'b1;
          slot      <= '0;
          state     <= S_GROUP;
        end
        S_EMIT:
          if (plane_fire) begin
            k <= k + 3'd1;
            if (grp_done) begin
              if (grp_last)          state <= S_IDLE;
              else if (take != '0)   latch_group(take, rem, ord);
              else                   state <= S_GROUP;
            end
          end
        S_ZERO:
          if (plane_fire) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    idle        = (state == S_IDLE);
    pkg_rd_en   = (state == S_FETCH);
    pkg_rd_addr = ptr;
    plane_valid = (state == S_EMIT) || (state == S_ZERO);
    plane_shift = (state == S_ZERO) ? 3'd0 : k;
    plane_first = (state == S_ZERO) || (k == 3'd0);
    plane_base  = (state == S_ZERO) ? '0 : grp_base;
    plane_last  = (state == S_ZERO) || (grp_last && ({1'b0, k} == grp_bw - 4'd1));
    plane_bw    = (state == S_ZERO) ? 4'd1 : grp_bw;
    for (int j = 0; j < N_BSE; j++)
      plane_bits[j] = (state == S_EMIT) ? grp_val[j][k] : 1'b0;
  end

endmodule
