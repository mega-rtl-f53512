// condense_unit: Condense Unit with one ID FIFO per subgraph, parallel
// comparators and the Address Reg, implementing Algorithm 1 (Condense-Edge).
//
// While subgraph 0 is combined, the ID FIFO of every other subgraph s holds
// the next eIDs of s's sparse connections (the source nodes outside s with
// edges into s, ascending). Each new B row with node ID j is compared with
// all FIFO heads in parallel (m_* port). For every match the row is written
// to the Sparse Buffer at Address Reg[s] (the region of subgraph s), the
// FIFO is popped and the pointer advanced; matches are written one per
// cycle, so several matches for one node stall the producer (m_ready low).
// When subgraph s is later aggregated, init_sub re-arms its FIFO and
// pointer, and every source node j of s is looked up (lk_* port): if j is at
// the FIFO head the row is read from the Sparse Buffer at Address Reg[s].
//
// Refill: each cycle the lowest-numbered FIFO that is not full and whose
// list is not exhausted reads one eID from the Edge Buffer. A FIFO that is
// empty while its list still has entries is "not ready" and stalls the
// comparison (the paper: "When the FIFO is empty, it will read the next eIDs
// from the Edge Buffer").
// Region overflow (more sparse connections than REGION entries) stands in for
// the paper's DRAM spill: the row is not stored, ovf pulses, and a later
// lookup of that entry reports lk_spill instead of lk_hit so the caller
// fetches the row elsewhere. The region split and the spill handling are this
// design's choices.
module condense_unit
  import mega_pkg::*;
#(
  parameter int unsigned SUBNUM     = 16,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned SB_DEPTH   = 2048,
  parameter int unsigned EB_EIDS    = 1024,
  parameter int unsigned M          = 32,
  parameter int unsigned REGION     = SB_DEPTH / SUBNUM,
  parameter int unsigned SAW        = $clog2(SB_DEPTH),
  parameter int unsigned IAW        = $clog2(EB_EIDS),
  parameter int unsigned SW         = $clog2(SUBNUM)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // eID lists in the Edge Buffer
  input  logic [SUBNUM-1:0][IAW:0]        list_base,
  input  logic [SUBNUM-1:0][IAW:0]        list_cnt,
  output logic [IAW-1:0]                  eid_rd_addr,
  input  logic [NID_W-1:0]                eid_rd_data,
  // re-arm FIFOs: init_all for the subgraphs in init_mask, init_sub for sub_sel
  input  logic                            init_all,
  input  logic [SUBNUM-1:0]               init_mask,
  input  logic                            init_sub,
  input  logic [SW-1:0]                   sub_sel,
  // condense: store matching rows
  input  logic                            m_valid,
  output logic                            m_ready,
  input  logic [NID_W-1:0]                m_nid,
  input  logic [M-1:0][B_BITS-1:0]        m_data,
  output logic                            sb_wr_en,
  output logic [SAW-1:0]                  sb_wr_addr,
  output logic [M-1:0][B_BITS-1:0]        sb_wr_data,
  // lookup for subgraph sub_sel
  input  logic                            lk_valid,
  output logic                            lk_ready,
  input  logic [NID_W-1:0]                lk_nid,
  output logic                            lk_hit,
  output logic                            lk_spill,
  output logic [SAW-1:0]                  lk_addr,
  // events
  output logic                            ovf,
  output logic                            refill_stall,
  output logic                            multi_stall,
  output logic                            refill_ev,
  output logic                            multi_match
);
  localparam int unsigned FAW = $clog2(FIFO_DEPTH);
  localparam int unsigned RW  = $clog2(REGION) + 1;

  logic [NID_W-1:0]  fifo_mem [SUBNUM][FIFO_DEPTH];
  logic [FAW-1:0]    rd_p  [SUBNUM];
  logic [FAW-1:0]    wr_p  [SUBNUM];
  logic [FAW:0]      cnt   [SUBNUM];
  logic [IAW:0]      lptr  [SUBNUM];
  logic [IAW:0]      lrem  [SUBNUM];
  logic [RW-1:0]     areg  [SUBNUM];   // Address Reg, offset inside the region

  logic [SUBNUM-1:0] empty, full, fready, head_eq, pop, push, pend;
  logic [SUBNUM-1:0] match_vec;
  logic              refill;
  logic [SW-1:0]     refill_s, pend_s;
  logic [M-1:0][B_BITS-1:0] data_r;

  always_comb begin
    for (int s = 0; s < SUBNUM; s++) begin
      empty[s]   = (cnt[s] == 0);
      full[s]    = (cnt[s] == (FAW+1)'(FIFO_DEPTH));
      fready[s]  = !empty[s] || (lrem[s] == 0);
      head_eq[s] = !empty[s] && (fifo_mem[s][rd_p[s]] == m_nid);
    end
    // refill arbitration: lowest FIFO with room and entries left
    refill   = 1'b0;
    refill_s = '0;
    for (int s = SUBNUM - 1; s >= 0; s--)
      if (!full[s] && lrem[s] != 0) begin
        refill   = 1'b1;
        refill_s = SW'(s);
      end
    eid_rd_addr = lptr[refill_s][IAW-1:0];
    push = '0;
    if (refill) push[refill_s] = 1'b1;
    // condense
    m_ready   = (pend == '0) && (&fready);
    match_vec = head_eq;
    pend_s    = '0;
    for (int s = SUBNUM - 1; s >= 0; s--) if (pend[s]) pend_s = SW'(s);
    sb_wr_en   = (pend != '0) && (areg[pend_s] < RW'(REGION));
    sb_wr_addr = SAW'(pend_s) * SAW'(REGION) + SAW'(areg[pend_s]);
    sb_wr_data = data_r;
    ovf        = (pend != '0) && !(areg[pend_s] < RW'(REGION));
    // lookup
    lk_ready = fready[sub_sel];
    lk_hit   = !empty[sub_sel] && (fifo_mem[sub_sel][rd_p[sub_sel]] == lk_nid)
               && (areg[sub_sel] < RW'(REGION));
    lk_spill = !empty[sub_sel] && (fifo_mem[sub_sel][rd_p[sub_sel]] == lk_nid)
               && !(areg[sub_sel] < RW'(REGION));
    lk_addr  = SAW'(sub_sel) * SAW'(REGION) + SAW'(areg[sub_sel]);
    // pops
    pop = '0;
    if (pend != '0) pop[pend_s] = 1'b1;
    if (lk_valid && lk_ready && (lk_hit || lk_spill)) pop[sub_sel] = 1'b1;
    refill_stall = m_valid && (pend == '0) && !(&fready);
    multi_stall  = m_valid && (pend != '0);
    refill_ev    = refill;
    multi_match  = m_valid && m_ready && ($countones(match_vec) > 1);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pend   <= '0;
      data_r <= '0;
      for (int s = 0; s < SUBNUM; s++) begin
        rd_p[s] <= '0; wr_p[s] <= '0; cnt[s] <= '0;
        lptr[s] <= '0; lrem[s] <= '0; areg[s] <= '0;
      end
    end else begin
      if (m_valid && m_ready) begin
        pend   <= match_vec;
        data_r <= m_data;
      end else if (pend != '0) pend[pend_s] <= 1'b0;
      for (int s = 0; s < SUBNUM; s++) begin
        if (pop[s]) begin
          rd_p[s] <= rd_p[s] + 1'b1;
          if (areg[s] < RW'(REGION)) areg[s] <= areg[s] + 1'b1;
        end
        if (push[s]) begin
          fifo_mem[s][wr_p[s]] <= eid_rd_data;
          wr_p[s] <= wr_p[s] + 1'b1;
          lptr[s] <= lptr[s] + 1'b1;
          lrem[s] <= lrem[s] - 1'b1;
        end
        cnt[s] <= cnt[s] + (FAW+1)'(push[s]) - (FAW+1)'(pop[s]);
        if ((init_all && init_mask[s]) || (init_sub && sub_sel == SW'(s))) begin
          rd_p[s] <= '0; wr_p[s] <= '0; cnt[s] <= '0; areg[s] <= '0;
          lptr[s] <= list_base[s];
          lrem[s] <= list_cnt[s];
        end else if (init_all) begin
          rd_p[s] <= '0; wr_p[s] <= '0; cnt[s] <= '0; areg[s] <= '0;
          lrem[s] <= '0;
        end
      end
    end
endmodule
