// mega_tb_body.svh: end-to-end test of mega_top, included by the testbench
// wrappers after they declare the DUT's sizes (localparams P_*) and the test
// sizes (N_NODES, N_SUB, N_CB, IN_BASE, OUT_PTR).
//
// A random graph is split into N_SUB contiguous subgraphs; one hub node and
// the last subgraph receive edges from many sources so that the Sparse
// Buffer region of that subgraph overflows and aggregation saturates. Node
// features are random sparse values of the Degree-Aware bitwidth of each
// node, packed into four Adaptive-Package streams (one per 32-feature slice).
// The model computes B = requant(X*W), aggregates in the same column order
// as the hardware (saturating 16-bit sums), quantizes with the QN rule and
// packs the result; the words and bitindex rows the design writes to the
// Input Buffer must match exactly. Every mechanism is counted from the
// event outputs, and one that never occurred counts as a failure.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int T = 4, C = 32, M = 32;
  localparam int IB_AW = $clog2(P_IB_WORDS), BW = $clog2(P_BIDX_WORDS);
  localparam int ECAW = $clog2(P_EB_COLS), EEAW = $clog2(P_EB_EDGES), EIAW = $clog2(P_EB_EIDS);
  localparam int ROW_W = $clog2(P_AB_ROWS);
  localparam int NCB_MAX = 256 / M;
  localparam int ZERO_LO = N_NODES / 3;

  logic host_ib_wr_en = 0, host_bidx_wr_en = 0, host_wrow_wr_en = 0, host_col_wr_en = 0;
  logic host_deg_wr_en = 0, host_eb_wr_en = 0, start = 0;
  logic [IB_AW-1:0] host_ib_wr_addr = '0;
  logic [63:0] host_ib_wr_data = '0;
  logic [BW-1:0] host_bidx_wr_addr = '0;
  logic [C-1:0] host_bidx_wr_data = '0;
  logic [6:0] host_wrow_wr_addr = '0;
  logic [C-1:0][M-1:0][W_BITS-1:0] host_wrow_wr_data = '0;
  logic [7:0] host_col_wr_addr = '0;
  logic [SCALE_W-1:0] host_col_wr_data = '0, host_deg_wr_qscale = '0, host_deg_wr_alpha = '0;
  logic [5:0] host_deg_wr_addr = '0;
  logic [3:0] host_deg_wr_bits = '0;
  logic [2:0] host_eb_wr_sel = '0;
  logic [15:0] host_eb_wr_addr = '0;
  logic [127:0] host_eb_wr_data = '0;
  logic [NID_W-1:0] cfg_num_nodes;
  logic [$clog2(P_SUBNUM):0] cfg_num_sub;
  logic [$clog2(NCB_MAX):0] cfg_ncb;
  logic [T-1:0][IB_AW-1:0] cfg_in_ptr;
  logic [BW-1:0] cfg_in_bidx_base, cfg_out_bidx_base;
  logic [IB_AW-1:0] cfg_out_ptr, out_end;
  logic busy, done;
  logic [NCB_MAX-1:0][IB_AW-1:0] out_start;
  logic [T-1:0] ev_xbar_stall;
  logic ev_refill_stall, ev_multi_stall, ev_fifo_refill, ev_multi_match, ev_sb_overflow, ev_sb_hit, ev_sb_spill, ev_cb_read;
  logic ev_agg_sat, ev_pkg_split, ev_pkg_write;

  int checks = 0, failures = 0;
  int n_xbar = 0, n_refill = 0, n_multi = 0, n_ovf = 0, n_hit = 0, n_spill = 0, n_cbr = 0;
  int n_refill_ev = 0, n_mmatch = 0, n_sat = 0, n_split = 0, n_pkg = 0, cycles = 0;
  always @(posedge clk) if (busy) begin
    cycles++;
    n_xbar += $countones(ev_xbar_stall);
    n_refill += int'(ev_refill_stall);
    n_multi += int'(ev_multi_stall);
    n_refill_ev += int'(ev_fifo_refill);
    n_mmatch += int'(ev_multi_match);
    n_ovf += int'(ev_sb_overflow);
    n_hit += int'(ev_sb_hit);
    n_spill += int'(ev_sb_spill);
    n_cbr += int'(ev_cb_read);
    n_sat += int'(ev_agg_sat);
    n_split += int'(ev_pkg_split);
    n_pkg += int'(ev_pkg_write);
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ---------------- graph ----------------
  int sub_base [N_SUB], sub_cnt [N_SUB];
  int sub_of [N_NODES];
  bit adj [N_NODES][N_NODES];        // adj[src][dst]
  int aval [N_NODES][N_NODES];
  int deg [N_NODES];
  int col_src [$], col_eb [$], col_ec [$];
  int e_row [$], e_val [$];
  int s_colb [N_SUB], s_colc [N_SUB], s_eidb [N_SUB], s_eidc [N_SUB];
  int eid_list [$];
  // ---------------- tables and features ----------------
  int dbits [64], dqs [64], dal [64];
  int wv [N_CB][T][C][M];
  int cs [N_CB * M];
  int xv [N_NODES][T][C];
  int bq [N_NODES][M];
  ap_packer inpk [T];
  ap_packer outpk;
  logic [C-1:0] in_bidx [N_NODES][T];
  logic [M-1:0] out_bidx [N_CB][N_NODES];

  function automatic int dcl(int d);
    return (d > 63) ? 63 : d;
  endfunction

  function automatic int requant(longint y, int a, int s);
    longint p = y * a * s, r;
    r = (p + 32768) >>> 16;
    if (r > 7) r = 7;
    if (r < -7) r = -7;
    return int'(r);
  endfunction

  task automatic build_graph();
    int b = 0;
    for (int s = 0; s < N_SUB; s++) begin
      sub_base[s] = b;
      sub_cnt[s] = (s == N_SUB - 1) ? N_NODES - b : N_NODES / N_SUB + int'($urandom_range(0, 2)) - 1;
      for (int i = 0; i < sub_cnt[s]; i++) sub_of[b + i] = s;
      b += sub_cnt[s];
    end
    for (int d = 0; d < N_NODES; d++) begin
      automatic int nin = (d == 1) ? 60 : (sub_of[d] == N_SUB - 1) ? 12 : int'($urandom_range(0, 6));
      for (int k = 0; k < nin; k++) begin
        automatic int sidx = int'($urandom_range(0, N_NODES - 1));
        adj[sidx][d] = 1;
        aval[sidx][d] = (d == 1) ? 255 : int'($urandom_range(1, 255));
      end
    end
    // a run of feature-less (fast to combine) nodes, each feeding every other
    // subgraph: several FIFOs match at once and FIFOs drain faster than
    // they are refilled
    for (int sidx = ZERO_LO; sidx < ZERO_LO + 20; sidx++)
      for (int s = 1; s < N_SUB; s++)
        if (s != sub_of[sidx]) begin
          adj[sidx][sub_base[s]] = 1;
          aval[sidx][sub_base[s]] = 3;
        end
    for (int d = 0; d < N_NODES; d++) begin
      deg[d] = 0;
      for (int sidx = 0; sidx < N_NODES; sidx++) deg[d] += int'(adj[sidx][d]);
    end
    for (int s = 0; s < N_SUB; s++) begin
      s_colb[s] = col_src.size();
      s_eidb[s] = eid_list.size();
      for (int sidx = 0; sidx < N_NODES; sidx++) begin
        automatic int ne = 0;
        automatic int eb = e_row.size();
        for (int r = 0; r < sub_cnt[s]; r++)
          if (adj[sidx][sub_base[s] + r]) begin
            e_row.push_back(r); e_val.push_back(aval[sidx][sub_base[s] + r]); ne++;
          end
        if (ne > 0) begin
          col_src.push_back(sidx); col_eb.push_back(eb); col_ec.push_back(ne);
          if (s != 0 && sub_of[sidx] != s) eid_list.push_back(sidx);
        end
      end
      s_colc[s] = col_src.size() - s_colb[s];
      s_eidc[s] = eid_list.size() - s_eidb[s];
    end
  endtask

  task automatic eb_write(int sel, int addr, logic [127:0] data);
    @(negedge clk);
    host_eb_wr_en = 1; host_eb_wr_sel = 3'(sel); host_eb_wr_addr = 16'(addr); host_eb_wr_data = data;
    @(negedge clk);
    host_eb_wr_en = 0;
  endtask

  task automatic load_all();
    // Edge Buffer
    for (int s = 0; s < P_SUBNUM; s++) begin
      automatic logic [127:0] v = '0;
      if (s < N_SUB)
        v = {16'(sub_base[s]), 16'(sub_cnt[s]), (ECAW+1)'(s_colb[s]), (ECAW+1)'(s_colc[s]),
             (EIAW+1)'(s_eidb[s]), (EIAW+1)'(s_eidc[s])};
      eb_write(0, s, v);
    end
    foreach (col_src[k]) eb_write(1, k, 128'({16'(col_src[k]), (EEAW+1)'(col_eb[k]), (EEAW+1)'(col_ec[k])}));
    foreach (e_row[k]) eb_write(2, k, 128'({ROW_W'(e_row[k]), 8'(e_val[k])}));
    foreach (eid_list[k]) eb_write(3, k, 128'(eid_list[k]));
    for (int n = 0; n < N_NODES; n++) eb_write(4, n, 128'(deg[n]));
    // Weight Buffer: rows, column scales, degree table
    for (int cb = 0; cb < N_CB; cb++)
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        host_wrow_wr_en = 1; host_wrow_wr_addr = 7'(cb * T + t);
        for (int r = 0; r < C; r++) for (int c = 0; c < M; c++) host_wrow_wr_data[r][c] = 4'(wv[cb][t][r][c]);
      end
    @(negedge clk); host_wrow_wr_en = 0;
    for (int c = 0; c < N_CB * M; c++) begin
      host_col_wr_en = 1; host_col_wr_addr = 8'(c); host_col_wr_data = SCALE_W'(cs[c]);
      @(negedge clk);
    end
    host_col_wr_en = 0;
    for (int d = 0; d < 64; d++) begin
      host_deg_wr_en = 1; host_deg_wr_addr = 6'(d); host_deg_wr_bits = 4'(dbits[d]);
      host_deg_wr_qscale = SCALE_W'(dqs[d]); host_deg_wr_alpha = SCALE_W'(dal[d]);
      @(negedge clk);
    end
    host_deg_wr_en = 0;
    // Input Buffer: streams and bitindex rows
    for (int t = 0; t < T; t++)
      foreach (inpk[t].words[a]) begin
        host_ib_wr_en = 1; host_ib_wr_addr = IB_AW'(a); host_ib_wr_data = inpk[t].words[a];
        @(negedge clk);
      end
    host_ib_wr_en = 0;
    for (int t = 0; t < T; t++)
      for (int n = 0; n < N_NODES; n++) begin
        host_bidx_wr_en = 1; host_bidx_wr_addr = BW'(t * N_NODES + n); host_bidx_wr_data = in_bidx[n][t];
        @(negedge clk);
      end
    host_bidx_wr_en = 0;
  endtask

  task automatic make_data();
    for (int d = 0; d < 64; d++) begin
      dbits[d] = (d % 7 == 2) ? 1 : (d % 7 == 5) ? 8 : int'($urandom_range(2, 6));
      dqs[d] = int'($urandom_range(16, 400));
      dal[d] = int'($urandom_range(1, 40));
    end
    for (int cb = 0; cb < N_CB; cb++)
      for (int t = 0; t < T; t++) for (int r = 0; r < C; r++) for (int c = 0; c < M; c++)
        // the last column block has non-negative weights so that sums saturate
        wv[cb][t][r][c] = (cb == N_CB - 1) ? int'($urandom_range(0, 7)) : int'($urandom_range(0, 15)) - 8;
    for (int c = 0; c < N_CB * M; c++) cs[c] = int'($urandom_range(1, 40));
    for (int t = 0; t < T; t++) inpk[t] = new(IN_BASE + t * IN_STRIDE);
    for (int n = 0; n < N_NODES; n++) begin
      automatic int b = dbits[dcl(deg[n])];
      for (int t = 0; t < T; t++)
        for (int r = 0; r < C; r++) begin
          automatic bit nz = (n % 17 != 9) && !(n >= ZERO_LO && n < ZERO_LO + 20) &&
                            ($urandom_range(0, 99) < 30);
          in_bidx[n][t][r] = nz;
          xv[n][t][r] = nz ? int'($urandom_range(1, (1 << b) - 1)) : 0;
          if (nz) inpk[t].put(xv[n][t][r], b);
        end
    end
    for (int t = 0; t < T; t++) inpk[t].flush();
  endtask

  task automatic model();
    outpk = new(OUT_PTR);
    for (int cb = 0; cb < N_CB; cb++) begin
      for (int n = 0; n < N_NODES; n++)
        for (int c = 0; c < M; c++) begin
          automatic longint y = 0;
          for (int t = 0; t < T; t++) for (int r = 0; r < C; r++) y += xv[n][t][r] * wv[cb][t][r][c];
          bq[n][c] = requant(y, dal[dcl(deg[n])], cs[cb * M + c]);
        end
      for (int s = 0; s < N_SUB; s++) begin
        automatic int ps [][];
        ps = new[sub_cnt[s]];
        foreach (ps[r]) begin ps[r] = new[M]; foreach (ps[r][c]) ps[r][c] = 0; end
        for (int k = s_colb[s]; k < s_colb[s] + s_colc[s]; k++)
          for (int e = col_eb[k]; e < col_eb[k] + col_ec[k]; e++)
            for (int c = 0; c < M; c++) begin
              automatic int v = ps[e_row[e]][c] + e_val[e] * bq[col_src[k]][c];
              ps[e_row[e]][c] = (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
            end
        for (int r = 0; r < sub_cnt[s]; r++) begin
          automatic int n = sub_base[s] + r;
          automatic int b = dbits[dcl(deg[n])], qs = dqs[dcl(deg[n])];
          out_bidx[cb][n] = '0;
          for (int c = 0; c < M; c++) begin
            automatic longint p = (ps[r][c] > 0) ? (longint'(ps[r][c]) * qs + 2048) >>> 12 : 0;
            automatic longint lim = (longint'(1) << b) - 1;
            automatic int q = int'((p > lim) ? lim : p);
            if (q != 0) begin out_bidx[cb][n][c] = 1; outpk.put(q, b); end
          end
        end
      end
      outpk.flush();
    end
  endtask

  initial begin
    build_graph();
    make_data();
    model();
    $display("graph: %0d nodes, %0d subgraphs, %0d columns, %0d edges, %0d eIDs, %0d output packages",
             N_NODES, N_SUB, col_src.size(), e_row.size(), eid_list.size(), outpk.npk);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    cfg_num_nodes = NID_W'(N_NODES);
    cfg_num_sub = ($clog2(P_SUBNUM)+1)'(N_SUB);
    cfg_ncb = ($clog2(NCB_MAX)+1)'(N_CB);
    for (int t = 0; t < T; t++) cfg_in_ptr[t] = IB_AW'(IN_BASE + t * IN_STRIDE);
    cfg_in_bidx_base = '0;
    cfg_out_bidx_base = BW'(T * N_NODES);
    cfg_out_ptr = IB_AW'(OUT_PTR);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(out_end == IB_AW'(outpk.wptr), "end of output stream");
    if (out_end != IB_AW'(outpk.wptr)) $display("  out_end %0d expected %0d", out_end, outpk.wptr);
    foreach (outpk.words[a]) begin
      checks++;
      if (dut.u_ib.mem[a] !== outpk.words[a]) begin
        failures++;
        if (failures < 12) $display("FAIL output word %0d got %h exp %h", a, dut.u_ib.mem[a], outpk.words[a]);
      end
    end
    for (int cb = 0; cb < N_CB; cb++)
      for (int n = 0; n < N_NODES; n++) begin
        checks++;
        if (dut.u_ib.bmem[T * N_NODES + cb * N_NODES + n] !== C'(out_bidx[cb][n])) begin
          failures++;
          if (failures < 12) $display("FAIL bitindex cb %0d node %0d", cb, n);
        end
      end
    $display("cycles=%0d crossbar_stalls=%0d refill_stalls=%0d multi_match_stalls=%0d", cycles, n_xbar, n_refill, n_multi);
    $display("fifo_refills=%0d multi_matches=%0d", n_refill_ev, n_mmatch);
    $display("sparse_overflows=%0d sparse_hits=%0d sparse_spills=%0d comb_buffer_reads=%0d", n_ovf, n_hit, n_spill, n_cbr);
    $display("saturations=%0d split_nodes=%0d packages=%0d", n_sat, n_split, n_pkg);
    chk(n_xbar > 0, "crossbar stall never happened");
    // every eID is read once in phase A and once more when its subgraph is
    // aggregated, in every column block (a refill in a re-arm cycle is discarded)
    chk(n_refill_ev >= 2 * N_CB * eid_list.size() && n_refill_ev <= 2 * N_CB * eid_list.size() + N_CB * N_SUB,
        "eID FIFO refills");
    chk(n_refill_ev > 0, "eID FIFO refill never happened");
    chk(n_mmatch > 0, "node matching several eID FIFOs never happened");
    chk(n_ovf > 0, "sparse buffer overflow never happened");
    chk(n_hit > 0, "sparse buffer hit never happened");
    chk(n_spill > 0, "sparse buffer spill never happened");
    chk(n_cbr > 0, "combination buffer read never happened");
    chk(n_sat > 0, "aggregation saturation never happened");
    chk(n_split > 0, "node split across packages never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
