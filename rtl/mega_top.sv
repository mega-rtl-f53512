// mega_top: the MEGA accelerator core - buffers, Combination Engine,
// Condense Unit, Aggregation Tile and Encoder, sequenced by the controller in
// this module.
//
// One run computes one GCN-style layer H' = A * (X * W) for the graph loaded
// into the Edge Buffer, one block of M output columns (cb) at a time:
//   Phase A  every node j (ascending) is combined: the four tiles decode the
//            node's Adaptive-Package slices, B_j = requant(X_j * W) is
//            written to the Combination Buffer, compared by the Condense
//            Unit with the heads of all eID FIFOs (matches go to the Sparse
//            Buffer region of their subgraph), and, if subgraph 0 has a CSC
//            column for j, aggregated into subgraph 0's rows right away.
//   Encode   subgraph 0's rows are quantized by the Encoder (Degree-Aware
//            bitwidth from the node's in-degree) into the output stream.
//   Phase B  for subgraphs s = 1..SubNum-1: the rows are cleared, and every
//            column (source node j) of s is aggregated, with B_j read from
//            the Sparse Buffer when the Condense Unit reports j at the head
//            of s's FIFO, otherwise from the Combination Buffer; then s is
//            encoded.
// The output stream of block cb is contiguous, starting where the previous
// block's ended (out_start[cb] reports it); its bitindex rows go to
// cfg_out_bidx_base + cb * cfg_num_nodes + j. Input slice t of the layer is
// the stream starting at cfg_in_ptr[t] with bitindex rows at
// cfg_in_bidx_base + t * cfg_num_nodes + j.
//
// The host (standing in for DRAM and the off-chip loader, which the paper
// does not design) fills the buffers through the host_* write ports before
// start; done pulses when all column blocks are written. Event outputs pulse
// for the mechanisms the paper describes, for counting.
// The phase order follows Algorithm 1 and Fig. 10; the single-layer scope,
// the column-block loop and the configuration ports are this design's own.
module mega_top
  import mega_pkg::*;
#(
  parameter int unsigned N_TILES    = 4,
  parameter int unsigned C          = 32,
  parameter int unsigned M          = 32,
  parameter int unsigned N_BSE      = 8,
  parameter int unsigned L          = 8,
  parameter int unsigned SUBNUM     = 16,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned IB_WORDS   = 8192,
  parameter int unsigned BIDX_WORDS = 2048,
  parameter int unsigned WB_ROWS    = 96,
  parameter int unsigned COLS       = 256,
  parameter int unsigned DEG_MAX    = 64,
  parameter int unsigned CB_DEPTH   = 6144,
  parameter int unsigned SB_DEPTH   = 2048,
  parameter int unsigned AB_ROWS    = 2048,
  parameter int unsigned EB_COLS    = 1024,
  parameter int unsigned EB_EDGES   = 4096,
  parameter int unsigned EB_EIDS    = 1024,
  parameter int unsigned EB_NODES   = 2048,
  parameter int unsigned IB_AW      = $clog2(IB_WORDS),
  parameter int unsigned BW         = $clog2(BIDX_WORDS),
  parameter int unsigned RAW        = $clog2(WB_ROWS),
  parameter int unsigned CAW        = $clog2(COLS),
  parameter int unsigned DAW        = $clog2(DEG_MAX),
  parameter int unsigned NCB_MAX    = COLS / M
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // host loading
  input  logic                                  host_ib_wr_en,
  input  logic [IB_AW-1:0]                      host_ib_wr_addr,
  input  logic [63:0]                           host_ib_wr_data,
  input  logic                                  host_bidx_wr_en,
  input  logic [BW-1:0]                         host_bidx_wr_addr,
  input  logic [C-1:0]                          host_bidx_wr_data,
  input  logic                                  host_wrow_wr_en,
  input  logic [RAW-1:0]                        host_wrow_wr_addr,
  input  logic [C-1:0][M-1:0][W_BITS-1:0]       host_wrow_wr_data,
  input  logic                                  host_col_wr_en,
  input  logic [CAW-1:0]                        host_col_wr_addr,
  input  logic [SCALE_W-1:0]                    host_col_wr_data,
  input  logic                                  host_deg_wr_en,
  input  logic [DAW-1:0]                        host_deg_wr_addr,
  input  logic [3:0]                            host_deg_wr_bits,
  input  logic [SCALE_W-1:0]                    host_deg_wr_qscale,
  input  logic [SCALE_W-1:0]                    host_deg_wr_alpha,
  input  logic                                  host_eb_wr_en,
  input  logic [2:0]                            host_eb_wr_sel,
  input  logic [15:0]                           host_eb_wr_addr,
  input  logic [127:0]                          host_eb_wr_data,
  // run configuration
  input  logic                                  start,
  input  logic [NID_W-1:0]                      cfg_num_nodes,
  input  logic [$clog2(SUBNUM):0]               cfg_num_sub,
  input  logic [$clog2(NCB_MAX):0]              cfg_ncb,
  input  logic [N_TILES-1:0][IB_AW-1:0]         cfg_in_ptr,
  input  logic [BW-1:0]                         cfg_in_bidx_base,
  input  logic [IB_AW-1:0]                      cfg_out_ptr,
  input  logic [BW-1:0]                         cfg_out_bidx_base,
  output logic                                  busy,
  output logic                                  done,
  output logic [NCB_MAX-1:0][IB_AW-1:0]         out_start,
  output logic [IB_AW-1:0]                      out_end,
  // events (one pulse per occurrence)
  output logic [N_TILES-1:0]                    ev_xbar_stall,
  output logic                                  ev_refill_stall,
  output logic                                  ev_multi_stall,
  output logic                                  ev_fifo_refill,
  output logic                                  ev_multi_match,
  output logic                                  ev_sb_overflow,
  output logic                                  ev_sb_hit,
  output logic                                  ev_sb_spill,
  output logic                                  ev_cb_read,
  output logic                                  ev_agg_sat,
  output logic                                  ev_pkg_split,
  output logic                                  ev_pkg_write
);
  localparam int unsigned SW    = $clog2(SUBNUM);
  localparam int unsigned CBAW  = $clog2(CB_DEPTH);
  localparam int unsigned SBAW  = $clog2(SB_DEPTH);
  localparam int unsigned ROW_W = $clog2(AB_ROWS);
  localparam int unsigned ECAW  = $clog2(EB_COLS);
  localparam int unsigned EEAW  = $clog2(EB_EDGES);
  localparam int unsigned EIAW  = $clog2(EB_EIDS);
  localparam int unsigned ENAW  = $clog2(EB_NODES);

  // ------------------------------------------------------------------
  // controller state
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    M_IDLE, M_WLOAD, M_A_WAITB, M_A_COL, M_EDGE, M_ENC,
    M_B_INIT, M_B_COL, M_FLUSH, M_DONE
  } mstate_e;
  mstate_e st, ret_st;

  logic [$clog2(NCB_MAX):0]  cb;
  logic [SW:0]               sub;
  logic [$clog2(N_TILES):0]  wl;
  logic [NID_W-1:0]          n_a;        // nodes consumed in phase A
  logic [ECAW:0]             colp;
  logic [EEAW:0]             eptr, erem;
  logic [M-1:0][B_BITS-1:0]  feat_r;
  logic [NID_W-1:0]          nid_r;
  logic [NID_W-1:0]          enc_i;
  logic                      iss_run, iss_st;
  logic [NID_W-1:0]          iss_j;

  // ------------------------------------------------------------------
  // buffers and engines
  // ------------------------------------------------------------------
  // Input Buffer
  logic [N_TILES-1:0]                 ib_rd_en, bidx_rd_en;
  logic [N_TILES-1:0][IB_AW-1:0]      ib_rd_addr;
  logic [N_TILES-1:0][PKG_MAX-1:0]    ib_rd_data;
  logic [N_TILES-1:0][BW-1:0]         bidx_rd_addr;
  logic [N_TILES-1:0][C-1:0]          bidx_rd_data;
  logic                               ib_wr_en, bidx_wr_en;
  logic [IB_AW-1:0]                   ib_wr_addr;
  logic [1:0]                         ib_wr_nwords;
  logic [PKG_MAX-1:0]                 ib_wr_data;
  logic [BW-1:0]                      bidx_wr_addr;
  logic [C-1:0]                       bidx_wr_data;
  // Encoder outputs
  logic                               enc_pkg_wr_en, enc_bidx_wr_en;
  logic [IB_AW-1:0]                   enc_pkg_wr_addr, enc_ptr;
  logic [1:0]                         enc_pkg_wr_nwords;
  logic [PKG_MAX-1:0]                 enc_pkg_wr_data;
  logic [BW-1:0]                      enc_bidx_wr_addr;
  logic [M-1:0]                       enc_bidx_wr_data;

  always_comb begin
    if (host_ib_wr_en) begin
      ib_wr_en     = 1'b1;
      ib_wr_addr   = host_ib_wr_addr;
      ib_wr_nwords = 2'd1;
      ib_wr_data   = PKG_MAX'(host_ib_wr_data);
    end else begin
      ib_wr_en     = enc_pkg_wr_en;
      ib_wr_addr   = enc_pkg_wr_addr;
      ib_wr_nwords = enc_pkg_wr_nwords;
      ib_wr_data   = enc_pkg_wr_data;
    end
    if (host_bidx_wr_en) begin
      bidx_wr_en   = 1'b1;
      bidx_wr_addr = host_bidx_wr_addr;
      bidx_wr_data = host_bidx_wr_data;
    end else begin
      bidx_wr_en   = enc_bidx_wr_en;
      bidx_wr_addr = enc_bidx_wr_addr;
      bidx_wr_data = C'(enc_bidx_wr_data);
    end
  end

  input_buffer #(.IB_WORDS(IB_WORDS), .BIDX_WORDS(BIDX_WORDS), .C(C), .N_RD(N_TILES)) u_ib (
    .clk,
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data),
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_nwords(ib_wr_nwords), .wr_data(ib_wr_data),
    .bidx_wr_en, .bidx_wr_addr, .bidx_wr_data,
    .bidx_rd_en, .bidx_rd_addr, .bidx_rd_data
  );

  // Weight Buffer
  logic                               wrow_rd_en, col_rd_en;
  logic [RAW-1:0]                     wrow_rd_addr;
  logic [C-1:0][M-1:0][W_BITS-1:0]    wrow_rd_data;
  logic [CAW-1:0]                     col_rd_base;
  logic [M-1:0][SCALE_W-1:0]          col_scale;
  logic [NID_W-1:0]                   enc_deg, iss_deg;
  logic [3:0]                         enc_bits;
  logic [SCALE_W-1:0]                 enc_qscale, iss_alpha;

  weight_buffer #(.WB_ROWS(WB_ROWS), .C(C), .M(M), .COLS(COLS), .DEG_MAX(DEG_MAX)) u_wb (
    .clk,
    .row_wr_en(host_wrow_wr_en), .row_wr_addr(host_wrow_wr_addr), .row_wr_data(host_wrow_wr_data),
    .row_rd_en(wrow_rd_en), .row_rd_addr(wrow_rd_addr), .row_rd_data(wrow_rd_data),
    .col_wr_en(host_col_wr_en), .col_wr_addr(host_col_wr_addr), .col_wr_data(host_col_wr_data),
    .col_rd_en, .col_rd_base, .col_rd_data(col_scale),
    .deg_wr_en(host_deg_wr_en), .deg_wr_addr(host_deg_wr_addr), .deg_wr_bits(host_deg_wr_bits),
    .deg_wr_qscale(host_deg_wr_qscale), .deg_wr_alpha(host_deg_wr_alpha),
    .deg_a(enc_deg), .deg_a_bits(enc_bits), .deg_a_qscale(enc_qscale),
    .deg_b(iss_deg), .deg_b_alpha(iss_alpha)
  );

  // Edge Buffer
  logic [SUBNUM-1:0][NID_W-1:0]       sub_node_base, sub_node_cnt;
  logic [SUBNUM-1:0][ECAW:0]          sub_col_base, sub_col_cnt;
  logic [SUBNUM-1:0][EIAW:0]          sub_eid_base, sub_eid_cnt;
  logic [ECAW-1:0]                    col_addr;
  logic [NID_W-1:0]                   col_src;
  logic [EEAW:0]                      col_edge_base, col_edge_cnt;
  logic [EEAW-1:0]                    edge_addr;
  logic [L-1:0][ROW_W-1:0]            edge_row;
  logic [L-1:0][EVAL_BITS-1:0]        edge_val;
  logic [EIAW-1:0]                    eid_addr;
  logic [NID_W-1:0]                   eid_data;
  logic [ENAW-1:0]                    enc_nid_a, iss_nid_a;

  edge_buffer #(.SUBNUM(SUBNUM), .EB_COLS(EB_COLS), .EB_EDGES(EB_EDGES), .EB_EIDS(EB_EIDS),
                .EB_NODES(EB_NODES), .L(L), .ROW_W(ROW_W)) u_eb (
    .clk,
    .wr_en(host_eb_wr_en), .wr_sel(host_eb_wr_sel), .wr_addr(host_eb_wr_addr), .wr_data(host_eb_wr_data),
    .sub_node_base, .sub_node_cnt, .sub_col_base, .sub_col_cnt, .sub_eid_base, .sub_eid_cnt,
    .col_addr, .col_src, .col_edge_base, .col_edge_cnt,
    .edge_addr, .edge_row, .edge_val,
    .eid_addr, .eid_data,
    .deg_addr(enc_nid_a), .deg_data(enc_deg),
    .deg2_addr(iss_nid_a), .deg2_data(iss_deg)
  );

  // Combination Engine
  logic [N_TILES-1:0]                 wreg_load;
  logic                               eng_set_ptr, cmd_valid, cmd_ready, b_valid, b_ready;
  logic [NID_W-1:0]                   b_nid;
  logic [M-1:0][B_BITS-1:0]           b_data;

  combination_engine #(.N_TILES(N_TILES), .C(C), .M(M), .N_BSE(N_BSE), .IB_AW(IB_AW)) u_ce (
    .clk, .rst_n,
    .wreg_load, .wreg_data(wrow_rd_data),
    .set_ptr(eng_set_ptr), .ptr_in(cfg_in_ptr),
    .col_scale,
    .cmd_valid, .cmd_ready, .cmd_nid(iss_j), .cmd_alpha(iss_alpha), .cmd_bitindex(bidx_rd_data),
    .pkg_rd_en(ib_rd_en), .pkg_rd_addr(ib_rd_addr), .pkg_rd_data(ib_rd_data),
    .b_valid, .b_ready, .b_nid, .b_data,
    .xbar_stall(ev_xbar_stall)
  );

  // Combination Buffer and Sparse Buffer
  logic                               cbuf_wr_en, sb_wr_en;
  logic [CBAW-1:0]                    cbuf_rd_addr;
  logic [SBAW-1:0]                    sb_wr_addr, sb_rd_addr;
  logic [M-1:0][B_BITS-1:0]           cbuf_rd_data, sb_wr_data, sb_rd_data;

  combination_buffer #(.DEPTH(CB_DEPTH), .M(M)) u_cbuf (
    .clk, .wr_en(cbuf_wr_en), .wr_addr(CBAW'(b_nid)), .wr_data(b_data),
    .rd_addr(cbuf_rd_addr), .rd_data(cbuf_rd_data)
  );

  sparse_buffer #(.DEPTH(SB_DEPTH), .M(M)) u_sb (
    .clk, .wr_en(sb_wr_en), .wr_addr(sb_wr_addr), .wr_data(sb_wr_data),
    .rd_addr(sb_rd_addr), .rd_data(sb_rd_data)
  );

  // Condense Unit
  logic                               cu_init_all, cu_init_sub, m_valid, m_ready;
  logic [SUBNUM-1:0]                  cu_init_mask;
  logic                               lk_valid, lk_ready, lk_hit, lk_spill;

  condense_unit #(.SUBNUM(SUBNUM), .FIFO_DEPTH(FIFO_DEPTH), .SB_DEPTH(SB_DEPTH),
                  .EB_EIDS(EB_EIDS), .M(M)) u_cu (
    .clk, .rst_n,
    .list_base(sub_eid_base), .list_cnt(sub_eid_cnt),
    .eid_rd_addr(eid_addr), .eid_rd_data(eid_data),
    .init_all(cu_init_all), .init_mask(cu_init_mask),
    .init_sub(cu_init_sub), .sub_sel(SW'(sub)),
    .m_valid, .m_ready, .m_nid(b_nid), .m_data(b_data),
    .sb_wr_en, .sb_wr_addr, .sb_wr_data,
    .lk_valid, .lk_ready, .lk_nid(col_src), .lk_hit, .lk_spill, .lk_addr(sb_rd_addr),
    .ovf(ev_sb_overflow), .refill_stall(ev_refill_stall), .multi_stall(ev_multi_stall),
    .refill_ev(ev_fifo_refill), .multi_match(ev_multi_match)
  );

  // Aggregation Tile and Aggregation Buffer
  logic                               agg_go, ab_clear;
  logic [L-1:0]                       agg_lane;
  logic [L-1:0][ROW_W-1:0]            ab_rd_addr, ab_wr_addr;
  logic [L-1:0][M-1:0][PSUM_BITS-1:0] ab_rd_data, ab_wr_data;
  logic [L-1:0]                       ab_wr_en;
  logic [ROW_W-1:0]                   enc_row;
  logic [M-1:0][PSUM_BITS-1:0]        enc_psum;

  aggregation_tile #(.L(L), .M(M), .ROW_W(ROW_W)) u_at (
    .e_valid_any(agg_go), .e_valid(agg_lane), .e_row(edge_row), .e_val(edge_val), .feat(feat_r),
    .ab_rd_addr, .ab_rd_data, .ab_wr_en, .ab_wr_addr, .ab_wr_data, .sat(ev_agg_sat)
  );

  aggregation_buffer #(.ROWS(AB_ROWS), .M(M), .L(L)) u_ab (
    .clk, .rst_n, .clear(ab_clear),
    .rd_addr(ab_rd_addr), .rd_data(ab_rd_data),
    .wr_en(ab_wr_en), .wr_addr(ab_wr_addr), .wr_data(ab_wr_data),
    .enc_addr(enc_row), .enc_data(enc_psum)
  );

  // Encoder
  logic                               enc_set_ptr, enc_valid, enc_ready, enc_flush, enc_empty;
  logic [NID_W-1:0]                   enc_nid;

  encoder #(.M(M), .IB_AW(IB_AW), .BW(BW)) u_enc (
    .clk, .rst_n,
    .set_ptr(enc_set_ptr), .ptr_in(cfg_out_ptr), .ptr(enc_ptr),
    .node_valid(enc_valid), .node_ready(enc_ready),
    .node_bidx_addr(BW'(cfg_out_bidx_base + BW'(cb) * BW'(cfg_num_nodes) + BW'(enc_nid))),
    .node_psum(enc_psum), .node_bits(enc_bits), .node_qscale(enc_qscale),
    .flush_req(enc_flush), .empty(enc_empty),
    .pkg_wr_en(enc_pkg_wr_en), .pkg_wr_addr(enc_pkg_wr_addr), .pkg_wr_nwords(enc_pkg_wr_nwords),
    .pkg_wr_data(enc_pkg_wr_data),
    .bidx_wr_en(enc_bidx_wr_en), .bidx_wr_addr(enc_bidx_wr_addr), .bidx_wr_data(enc_bidx_wr_data),
    .split(ev_pkg_split)
  );
  assign ev_pkg_write = enc_pkg_wr_en;

  // ------------------------------------------------------------------
  // controller
  // ------------------------------------------------------------------
  logic [SW-1:0]  s_i;
  logic [ECAW:0]  col_end;
  logic [EEAW:0]  e_take;

  assign s_i     = SW'(sub);
  assign col_end = sub_col_base[s_i] + sub_col_cnt[s_i];
  assign enc_nid = sub_node_base[s_i] + enc_i;
  assign enc_row = ROW_W'(enc_i);
  assign enc_nid_a = ENAW'(enc_nid);   // node IDs are below EB_NODES
  assign iss_nid_a = ENAW'(iss_j);
  assign e_take  = (erem < (EEAW+1)'(L)) ? erem : (EEAW+1)'(L);

  // node issue (phase A): read the bitindex rows, then start the node
  always_comb begin
    for (int t = 0; t < N_TILES; t++) begin
      bidx_rd_en[t]   = iss_run && !iss_st;
      bidx_rd_addr[t] = BW'(cfg_in_bidx_base + BW'(t) * BW'(cfg_num_nodes) + BW'(iss_j));
    end
    cmd_valid = iss_run && iss_st;
  end

  always_comb begin
    wrow_rd_en   = (st == M_WLOAD) && (wl < ($clog2(N_TILES)+1)'(N_TILES));
    wrow_rd_addr = RAW'(cb) * RAW'(N_TILES) + RAW'(wl);
    col_rd_en    = (st == M_WLOAD) && (wl == 0);
    col_rd_base  = CAW'(cb) * CAW'(M);
    wreg_load    = '0;
    for (int t = 0; t < N_TILES; t++)
      if (st == M_WLOAD && 32'(wl) == t + 1) wreg_load[t] = 1'b1;
    eng_set_ptr  = (st == M_WLOAD) && (wl == 0);
    cu_init_all  = (st == M_WLOAD) && (wl == 0);
    cu_init_mask = '0;
    for (int s = 1; s < SUBNUM; s++) cu_init_mask[s] = (s < int'(cfg_num_sub));
    cu_init_sub  = (st == M_B_INIT);
    ab_clear     = ((st == M_WLOAD) && (wl == 0)) || (st == M_B_INIT);
    enc_set_ptr  = (st == M_IDLE) && start;
    // phase A: take B, store it, condense it
    m_valid      = (st == M_A_WAITB) && b_valid && (n_a != cfg_num_nodes);
    b_ready      = (st == M_A_WAITB) && m_ready && (n_a != cfg_num_nodes);
    cbuf_wr_en   = m_valid && m_ready;
    // columns and edges
    col_addr     = ECAW'(colp);
    edge_addr    = EEAW'(eptr);
    agg_go       = (st == M_EDGE);
    for (int l = 0; l < L; l++) agg_lane[l] = ((EEAW+1)'(l) < erem);
    lk_valid     = (st == M_B_COL) && (colp != col_end);
    cbuf_rd_addr = CBAW'(col_src);
    // encoding
    enc_valid    = (st == M_ENC) && (enc_i != sub_node_cnt[s_i]);
    enc_flush    = (st == M_FLUSH);
    ev_sb_hit    = lk_valid && lk_ready && lk_hit;
    ev_sb_spill  = lk_valid && lk_ready && lk_spill;
    ev_cb_read   = lk_valid && lk_ready && !lk_hit;
  end

  assign busy = (st != M_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= M_IDLE; ret_st <= M_IDLE;
      cb <= '0; sub <= '0; wl <= '0; n_a <= '0; colp <= '0; eptr <= '0; erem <= '0;
      feat_r <= '0; nid_r <= '0; enc_i <= '0;
      iss_run <= 1'b0; iss_st <= 1'b0; iss_j <= '0;
      done <= 1'b0; out_start <= '0; out_end <= '0;
    end else begin
      done <= 1'b0;
      // issue process
      if (iss_run) begin
        if (!iss_st) iss_st <= 1'b1;
        else if (cmd_ready) begin
          iss_st <= 1'b0;
          iss_j  <= iss_j + 1'b1;
          if (iss_j + 1'b1 == cfg_num_nodes) iss_run <= 1'b0;
        end
      end
      case (st)
        M_IDLE:
          if (start) begin
            cb <= '0;
            wl <= '0;
            st <= M_WLOAD;
          end
        M_WLOAD: begin
          if (wl == 0) begin
            out_start[cb] <= enc_ptr;
            sub  <= '0;
            n_a  <= '0;
            colp <= '0;
          end
          if (wl == ($clog2(N_TILES)+1)'(N_TILES)) begin
            colp    <= sub_col_base[0];
            iss_run <= (cfg_num_nodes != 0);
            iss_st  <= 1'b0;
            iss_j   <= '0;
            st      <= M_A_WAITB;
          end else wl <= wl + 1'b1;
        end
        M_A_WAITB:
          if (n_a == cfg_num_nodes) begin
            enc_i <= '0;
            st    <= M_ENC;
          end else if (m_valid && m_ready) begin
            feat_r <= b_data;
            nid_r  <= b_nid;
            n_a    <= n_a + 1'b1;
            st     <= M_A_COL;
          end
        M_A_COL:
          if (colp != col_end && col_src == nid_r) begin
            eptr   <= col_edge_base;
            erem   <= col_edge_cnt;
            colp   <= colp + 1'b1;
            ret_st <= M_A_COL;
            st     <= M_EDGE;
          end else st <= M_A_WAITB;
        M_EDGE: begin
          eptr <= eptr + (EEAW+1)'(L);
          erem <= erem - e_take;
          if (erem <= (EEAW+1)'(L)) st <= ret_st;
        end
        M_ENC:
          if (enc_i == sub_node_cnt[s_i]) begin
            if (sub + 1'b1 < cfg_num_sub) begin
              sub <= sub + 1'b1;
              st  <= M_B_INIT;
            end else st <= M_FLUSH;
          end else if (enc_valid && enc_ready) enc_i <= enc_i + 1'b1;
        M_B_INIT: begin
          colp <= sub_col_base[s_i];
          st   <= M_B_COL;
        end
        M_B_COL:
          if (colp == col_end) begin
            enc_i <= '0;
            st    <= M_ENC;
          end else if (lk_ready) begin
            feat_r <= lk_hit ? sb_rd_data : cbuf_rd_data;
            eptr   <= col_edge_base;
            erem   <= col_edge_cnt;
            colp   <= colp + 1'b1;
            ret_st <= M_B_COL;
            st     <= M_EDGE;
          end
        M_FLUSH:
          if (enc_empty && !enc_pkg_wr_en) begin
            if (cb + 1'b1 == cfg_ncb) begin
              out_end <= enc_ptr;
              st      <= M_DONE;
            end else begin
              cb <= cb + 1'b1;
              wl <= '0;
              st <= M_WLOAD;
            end
          end
        M_DONE: begin
          done <= 1'b1;
          st   <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
endmodule
