// tb_condense_unit: random ascending eID lists for 4 subgraphs are placed in
// an eID memory. Phase A streams node IDs 0..N-1 with random rows through the
// condense port and checks every Sparse Buffer write (address = region base +
// order in the list; rows beyond the region must raise ovf). Phase B re-arms
// each subgraph and looks up a random ascending mix of list and non-list
// nodes, checking hit/spill and the address. Refill and multi-match stalls
// are counted and must occur.
module tb_condense_unit;
  import mega_pkg::*;
  localparam int S = 4, FD = 4, SB = 32, NI = 128, M = 4, N = 120;
  localparam int REG = SB / S, SAW = 5, IAW = 7, SW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [S-1:0][IAW:0] list_base, list_cnt;
  logic [IAW-1:0] eid_rd_addr;
  logic [NID_W-1:0] eid_rd_data, m_nid, lk_nid;
  logic init_all, init_sub, m_valid, m_ready, sb_wr_en, lk_valid, lk_ready, lk_hit, lk_spill;
  logic ovf, refill_stall, multi_stall, refill_ev, multi_match;
  int refills = 0, multis = 0;
  logic [S-1:0] init_mask;
  logic [SW-1:0] sub_sel;
  logic [M-1:0][B_BITS-1:0] m_data, sb_wr_data;
  logic [SAW-1:0] sb_wr_addr, lk_addr;
  condense_unit #(.SUBNUM(S), .FIFO_DEPTH(FD), .SB_DEPTH(SB), .EB_EIDS(NI), .M(M)) dut (.*);

  logic [NID_W-1:0] eids [NI];
  assign eid_rd_data = eids[eid_rd_addr];
  int lists [S][$];
  logic [M*B_BITS-1:0] rowv [N];
  int checks = 0, failures = 0, rstall = 0, mstall = 0, ovfs = 0, hits = 0, spills = 0;
  always @(posedge clk) begin
    rstall += int'(refill_stall);
    mstall += int'(multi_stall);
    refills += int'(refill_ev);
    multis += int'(multi_match);
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected writes in order
  int exp_s [$];
  int exp_n [$];
  int stored [S];
  always @(negedge clk) if (rst_n && (sb_wr_en || ovf)) begin
    if (exp_s.size() == 0) chk(0, "unexpected write");
    else begin
      automatic int s = exp_s.pop_front(), n = exp_n.pop_front();
      if (stored[s] < REG) begin
        chk(sb_wr_en && !ovf && sb_wr_addr == SAW'(s * REG + stored[s]) && sb_wr_data == rowv[n], "sparse write");
      end else begin
        chk(ovf && !sb_wr_en, "overflow");
        ovfs++;
      end
      stored[s]++;
    end
  end

  initial begin
    int p = 0;
    for (int s = 0; s < S; s++) begin
      list_base[s] = (IAW+1)'(p);
      for (int n = 0; n < N; n++)
        if ((s != 0) && ($urandom_range(0, 99) < ((s == 3) ? 70 : 12))) begin
          lists[s].push_back(n); eids[p] = NID_W'(n); p++;
        end
      list_cnt[s] = (IAW+1)'(lists[s].size());
    end
    for (int n = 0; n < N; n++) rowv[n] = (M*B_BITS)'($urandom());
    init_all = 0; init_sub = 0; init_mask = '0; sub_sel = '0; m_valid = 0; m_nid = '0; m_data = '0;
    lk_valid = 0; lk_nid = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); init_all = 1; init_mask = 4'b1110;
    @(negedge clk); init_all = 0;
    // phase A
    for (int n = 0; n < N; n++) begin
      m_valid = 1; m_nid = NID_W'(n); m_data = rowv[n];
      #1;
      while (!m_ready) begin @(negedge clk); #1; end
      for (int s = 1; s < S; s++)
        foreach (lists[s][k]) if (lists[s][k] == n) begin exp_s.push_back(s); exp_n.push_back(n); end
      @(negedge clk);
    end
    m_valid = 0;
    repeat (6) @(negedge clk);
    chk(exp_s.size() == 0, "all writes done");
    // phase B
    for (int s = 1; s < S; s++) begin
      automatic int k = 0;
      sub_sel = SW'(s); init_sub = 1;
      @(negedge clk); init_sub = 0;
      for (int n = 0; n < N; n++) begin
        automatic bit inl = (k < lists[s].size()) && (lists[s][k] == n);
        if (!inl && $urandom_range(0, 3) != 0) continue;
        lk_valid = 1; lk_nid = NID_W'(n);
        #1;
        while (!lk_ready) begin @(negedge clk); #1; end
        if (inl) begin
          if (k < REG) begin chk(lk_hit && !lk_spill && lk_addr == SAW'(s * REG + k), "lookup hit"); hits++; end
          else begin chk(lk_spill && !lk_hit, "lookup spill"); spills++; end
          k++;
        end else chk(!lk_hit && !lk_spill, "lookup miss");
        @(negedge clk);
      end
      lk_valid = 0;
    end
    $display("refills=%0d multi-matches=%0d", refills, multis);
    $display("refill stalls=%0d multi stalls=%0d overflows=%0d hits=%0d spills=%0d", rstall, mstall, ovfs, hits, spills);
    chk(refills == lists[1].size() + lists[2].size() + lists[3].size() + hits + spills, "refill count");
    chk(multis > 0, "multi-match");
    chk(rstall > 0 && mstall > 0 && ovfs > 0 && hits > 0 && spills > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
