// encoder: Encoder turning aggregated 16-bit rows into the Adaptive-Package
// stream and bitindex used as the next layer's input.
//
// For one node (one M-wide row of the Aggregation Buffer) the M QN units
// quantize every partial sum with the node's Degree-Aware bitwidth b and
// step:  q = min((max(v, 0) * qscale + 2^11) >> 12, 2^b - 1)  (qscale is
// Q4.12; negative values become zero, matching the ReLU that follows
// aggregation). The non-zero pattern is written as the node's bitindex and
// the non-zero values are compacted and appended to the package register.
// A package holds values of one bitwidth: if b differs from the open
// package's bitwidth, or the next value does not fit in 192 bits, the
// package is closed with the shortest Mode (64/128/192 bits) that holds its
// 5-bit header and values (Fig. 14 format: Mode in bits 1:0, Bitwidth code in
// bits 4:2, value k at bit 5 + k*b) and written to the Input Buffer as 1..3
// 64-bit words; the values of one node may continue in the next package.
// flush_req closes the open package at the end of a stream; empty reports
// that nothing is pending.
//
// Timing: a node is accepted in one cycle (node_valid & node_ready), then
// placed in one cycle per package it touches. Writes are registered.
// QN rounding, ReLU and the greedy packing order are this design's choices.
module encoder
  import mega_pkg::*;
#(
  parameter int unsigned M     = 32,
  parameter int unsigned IB_AW = 13,
  parameter int unsigned BW    = 11
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              set_ptr,
  input  logic [IB_AW-1:0]                  ptr_in,
  output logic [IB_AW-1:0]                  ptr,
  input  logic                              node_valid,
  output logic                              node_ready,
  input  logic [BW-1:0]                     node_bidx_addr,
  input  logic [M-1:0][PSUM_BITS-1:0]       node_psum,
  input  logic [3:0]                        node_bits,
  input  logic [SCALE_W-1:0]                node_qscale,
  input  logic                              flush_req,
  output logic                              empty,
  output logic                              pkg_wr_en,
  output logic [IB_AW-1:0]                  pkg_wr_addr,
  output logic [1:0]                        pkg_wr_nwords,
  output logic [PKG_MAX-1:0]                pkg_wr_data,
  output logic                              bidx_wr_en,
  output logic [BW-1:0]                     bidx_wr_addr,
  output logic [M-1:0]                      bidx_wr_data,
  output logic                              split
);
  localparam int unsigned VB   = M * 8;
  localparam int unsigned CAPB = PKG_MAX - HDR_BITS;   // 187 value bits
  localparam int unsigned CW   = $clog2(M + 1);

  typedef enum logic [0:0] {S_IDLE, S_PUT} state_e;
  state_e state;

  logic [VB-1:0]       vbuf;
  logic [CW-1:0]       vrem;
  logic [3:0]          vbw;
  logic                vstarted;
  logic [PKG_MAX-1:0]  preg;
  logic [7:0]          pused;
  logic [3:0]          pbw;

  // ---------------- QN units and compaction ----------------
  logic [M-1:0][7:0]   q;
  logic [M-1:0]        nz;
  logic [VB-1:0]       packed_v;
  logic [CW-1:0]       nnz;

  always_comb begin
    logic [CW-1:0] rank;
    for (int c = 0; c < M; c++) begin
      logic signed [PSUM_BITS-1:0] v;
      logic [PSUM_BITS+SCALE_W:0] p;
      logic [PSUM_BITS+SCALE_W:0] lim;
      v   = $signed(node_psum[c]);
      p   = (v > 0) ? ((PSUM_BITS+SCALE_W+1)'(v) * (PSUM_BITS+SCALE_W+1)'(node_qscale)
                       + (PSUM_BITS+SCALE_W+1)'(2048)) >> 12 : '0;
      lim = ((PSUM_BITS+SCALE_W+1)'(1) << node_bits) - 1'b1;
      q[c]  = (p > lim) ? lim[7:0] : p[7:0];
      nz[c] = (q[c] != 0);
    end
    packed_v = '0;
    rank     = '0;
    for (int c = 0; c < M; c++)
      if (nz[c]) begin
        packed_v = packed_v | (VB'(q[c]) << (9'(rank) * 9'(node_bits)));
        rank     = rank + 1'b1;
      end
    nnz = rank;
  end

  // ---------------- placement ----------------
  logic [7:0]  fit;
  logic [CW-1:0] take;
  logic        close_pkg, place;
  logic [7:0]  room;

  always_comb begin
    room = 8'(CAPB) - pused;
    fit  = (vbw == 0) ? 8'd0 : room / {4'd0, vbw};
    take = (8'(vrem) < fit) ? vrem : CW'(fit);
    close_pkg = 1'b0;
    place     = 1'b0;
    if (state == S_PUT) begin
      if (pused != 0 && pbw != vbw) close_pkg = 1'b1;
      else if (take == 0)           close_pkg = 1'b1;
      else                          place     = 1'b1;
    end else if (flush_req && pused != 0) close_pkg = 1'b1;
  end

  function automatic logic [1:0] words_for(input logic [7:0] used);
    if (32'(used) + HDR_BITS <= SHORT_BITS)       return 2'd1;
    else if (32'(used) + HDR_BITS <= MEDIUM_BITS) return 2'd2;
    else                                     return 2'd3;
  endfunction

  // closing package (header filled in) and the values placed this cycle
  logic [1:0]         nw;
  logic [PKG_MAX-1:0] pk;
  logic [VB-1:0]      chunk;
  always_comb begin
    nw = words_for(pused);
    pk = preg;
    pk[1:0] = (nw == 2'd1) ? MODE_SHORT : (nw == 2'd2) ? MODE_MEDIUM : MODE_LONG;
    pk[4:2] = bw_encode(pbw);
    chunk = vbuf & ((VB'(1) << (9'(take) * 9'(vbw))) - 1'b1);
  end

  assign node_ready = (state == S_IDLE) && !flush_req;
  assign empty      = (state == S_IDLE) && (pused == 0);


  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE;
      vbuf <= '0; vrem <= '0; vbw <= '0; vstarted <= 1'b0;
      preg <= '0; pused <= '0; pbw <= '0; ptr <= '0;
      pkg_wr_en <= 1'b0; pkg_wr_addr <= '0; pkg_wr_nwords <= '0; pkg_wr_data <= '0;
      bidx_wr_en <= 1'b0; bidx_wr_addr <= '0; bidx_wr_data <= '0;
      split <= 1'b0;
    end else begin
      pkg_wr_en  <= 1'b0;
      bidx_wr_en <= 1'b0;
      split      <= 1'b0;
      if (set_ptr) ptr <= ptr_in;
      if (state == S_IDLE && node_valid && node_ready) begin
        bidx_wr_en   <= 1'b1;
        bidx_wr_addr <= node_bidx_addr;
        bidx_wr_data <= nz;
        vbuf     <= packed_v;
        vrem     <= nnz;
        vbw      <= node_bits;
        vstarted <= 1'b0;
        if (nnz != 0) state <= S_PUT;
      end
      if (close_pkg) begin
        pkg_wr_en     <= 1'b1;
        pkg_wr_addr   <= ptr;
        pkg_wr_nwords <= nw;
        pkg_wr_data   <= pk;
        ptr   <= ptr + IB_AW'(nw);
        preg  <= '0;
        pused <= '0;
        split <= (state == S_PUT) && vstarted;
      end
      if (place) begin
        preg  <= preg | (PKG_MAX'(chunk) << (HDR_BITS + 32'(pused)));
        pused <= pused + 8'(9'(take) * 9'(vbw));
        pbw   <= vbw;
        vbuf  <= vbuf >> (9'(take) * 9'(vbw));
        vrem  <= vrem - take;
        vstarted <= 1'b1;
        if (take == vrem) state <= S_IDLE;
      end
    end
endmodule
