// tb_encoder: random rows (including all-zero and saturating rows, random
// bitwidths 1..8 and steps) are encoded; every written word is compared with
// the stream produced by the reference packer fed with the model's QN
// outputs, and every bitindex with the model's non-zero mask. Node values
// split across packages must occur.
module tb_encoder;
  import mega_pkg::*;
  `include "tb_util.svh"
  localparam int M = 32, AW = 13, BW = 11, NODES = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic set_ptr, node_valid, node_ready, flush_req, empty, pkg_wr_en, bidx_wr_en, split;
  logic [AW-1:0] ptr_in, ptr, pkg_wr_addr;
  logic [BW-1:0] node_bidx_addr, bidx_wr_addr;
  logic [M-1:0][PSUM_BITS-1:0] node_psum;
  logic [3:0] node_bits;
  logic [SCALE_W-1:0] node_qscale;
  logic [1:0] pkg_wr_nwords;
  logic [PKG_MAX-1:0] pkg_wr_data;
  logic [M-1:0] bidx_wr_data;
  encoder #(.M(M), .IB_AW(AW), .BW(BW)) dut (.*);

  logic [63:0] mem [int];
  logic [M-1:0] bmem [int];
  int checks = 0, failures = 0, splits = 0, npk = 0;
  always @(posedge clk) if (rst_n) begin
    if (pkg_wr_en) begin
      npk++;
      for (int w = 0; w < int'(pkg_wr_nwords); w++) mem[int'(pkg_wr_addr) + w] = pkg_wr_data[w*64 +: 64];
    end
    if (bidx_wr_en) bmem[int'(bidx_wr_addr)] = bidx_wr_data;
    splits += int'(split);
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  ap_packer pk;
  logic [M-1:0] emask [NODES];
  initial begin
    pk = new(100);
    set_ptr = 0; ptr_in = '0; node_valid = 0; flush_req = 0; node_bidx_addr = '0;
    node_psum = '0; node_bits = '0; node_qscale = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); set_ptr = 1; ptr_in = AW'(100);
    @(negedge clk); set_ptr = 0;
    for (int n = 0; n < NODES; n++) begin
      automatic int b = int'($urandom_range(1, 8));
      automatic int qs = int'($urandom_range(200, 9000));
      emask[n] = '0;
      for (int c = 0; c < M; c++) begin
        automatic int v = (n % 10 == 3) ? 0 :
                          ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 65535)) - 32768 :
                          int'($urandom_range(0, 300));
        node_psum[c] = 16'(v);
        begin
          automatic longint p = (v > 0) ? (longint'(v) * qs + 2048) >>> 12 : 0;
          automatic longint lim = (longint'(1) << b) - 1;
          automatic int qv = int'((p > lim) ? lim : p);
          if (qv != 0) begin emask[n][c] = 1; pk.put(qv, b); end
        end
      end
      node_bits = 4'(b); node_qscale = SCALE_W'(qs); node_bidx_addr = BW'(n); node_valid = 1;
      #1;
      while (!node_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      node_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    flush_req = 1;
    #1;
    while (!empty) begin @(negedge clk); #1; end
    @(negedge clk); flush_req = 0;
    repeat (3) @(negedge clk);
    pk.flush();
    checks++;
    if (ptr != AW'(pk.wptr)) begin failures++; $display("FAIL end pointer %0d vs %0d", ptr, pk.wptr); end
    foreach (pk.words[a]) begin
      checks++;
      if (!mem.exists(a) || mem[a] !== pk.words[a]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d got %h exp %h", a, mem.exists(a) ? mem[a] : 64'hx, pk.words[a]);
      end
    end
    for (int n = 0; n < NODES; n++) begin
      checks++;
      if (bmem[n] !== emask[n]) begin failures++; $display("FAIL bitindex %0d", n); end
    end
    $display("packages=%0d (ref %0d) split nodes=%0d", npk, pk.npk, splits);
    checks++;
    if (splits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
