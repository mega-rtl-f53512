// tb_combination_engine: four tiles each decode their own random
// Adaptive-Package stream (one per feature slice); the engine's 4-bit B
// outputs for every node are compared with an integer model of
// X*W followed by the documented requantizer. Random output back-pressure,
// random alpha per node and random column scales are used.
module tb_combination_engine;
  import mega_pkg::*;
  `include "tb_util.svh"
  localparam int T = 4, C = 32, M = 32, NB = 8, AW = 13, NODES = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic set_ptr, cmd_valid, cmd_ready, b_valid, b_ready;
  logic [T-1:0] wreg_load;
  logic [C-1:0][M-1:0][W_BITS-1:0] wreg_data;
  logic [C-1:0][M-1:0][W_BITS-1:0] wrow [T];
  logic [T-1:0][AW-1:0] ptr_in, pkg_rd_addr;
  logic [M-1:0][SCALE_W-1:0] col_scale;
  logic [NID_W-1:0] cmd_nid, b_nid;
  logic [SCALE_W-1:0] cmd_alpha;
  logic [T-1:0][C-1:0] cmd_bitindex;
  logic [T-1:0] pkg_rd_en, xbar_stall;
  logic [T-1:0][PKG_MAX-1:0] pkg_rd_data;
  logic [M-1:0][B_BITS-1:0] b_data;

  combination_engine #(.N_TILES(T), .C(C), .M(M), .N_BSE(NB), .IB_AW(AW)) dut (.*);

  logic [63:0] mem [0:(1<<AW)-1];
  always_ff @(posedge clk)
    for (int t = 0; t < T; t++)
      if (pkg_rd_en[t]) pkg_rd_data[t] <= {mem[pkg_rd_addr[t]+2], mem[pkg_rd_addr[t]+1], mem[pkg_rd_addr[t]]};

  int checks = 0, failures = 0, stalls = 0, outs = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) stalls += $countones(xbar_stall);

  int wv [T][C][M];
  int fv [NODES][T][C];
  int alpha [NODES];
  int cs [M];
  logic [C-1:0] bidx [NODES][T];
  ap_packer pk [T];

  function automatic int ref_b(int n, int c);
    longint y = 0, p, r;
    for (int t = 0; t < T; t++) for (int k = 0; k < C; k++) y += fv[n][t][k] * wv[t][k][c];
    p = y * alpha[n] * cs[c];
    r = (p + 32768) >>> 16;
    if (r > 7) r = 7;
    if (r < -7) r = -7;
    return int'(r);
  endfunction

  initial begin
    for (int i = 0; i < (1<<AW); i++) mem[i] = '0;
    for (int t = 0; t < T; t++) begin
      pk[t] = new(16 + t * 1024);
      for (int r = 0; r < C; r++) for (int c = 0; c < M; c++) begin
        wv[t][r][c] = int'($urandom_range(0, 15)) - 8;
        wrow[t][r][c] = 4'(wv[t][r][c]);
      end
    end
    for (int c = 0; c < M; c++) begin
      cs[c] = int'($urandom_range(20, 400));
      col_scale[c] = SCALE_W'(cs[c]);
    end
    for (int n = 0; n < NODES; n++) begin
      alpha[n] = int'($urandom_range(1, 300));
      for (int t = 0; t < T; t++) begin
        automatic int b = int'($urandom_range(1, 8));
        for (int r = 0; r < C; r++) begin
          automatic bit nz = ($urandom_range(0, 99) < 30) && (n % 11 != 3);
          bidx[n][t][r] = nz;
          fv[n][t][r] = nz ? int'($urandom_range(1, (1 << b) - 1)) : 0;
          if (nz) pk[t].put(fv[n][t][r], b);
        end
      end
    end
    for (int t = 0; t < T; t++) begin
      pk[t].flush();
      foreach (pk[t].words[a]) mem[a] = pk[t].words[a];
    end
    wreg_load = '0; wreg_data = '0; set_ptr = 0; cmd_valid = 0; cmd_nid = '0; cmd_alpha = '0; cmd_bitindex = '0;
    ptr_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    set_ptr = 1;
    for (int t = 0; t < T; t++) ptr_in[t] = AW'(16 + t * 1024);
    for (int t = 0; t < T; t++) begin
      wreg_load = '0; wreg_load[t] = 1'b1; wreg_data = wrow[t];
      @(negedge clk); set_ptr = 0;
    end
    wreg_load = '0;
    for (int n = 0; n < NODES; n++) begin
      cmd_valid = 1; cmd_nid = NID_W'(n); cmd_alpha = SCALE_W'(alpha[n]);
      for (int t = 0; t < T; t++) cmd_bitindex[t] = bidx[n][t];
      #1;
      while (!cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      cmd_valid = 0;
    end
  end

  initial begin
    b_ready = 0;
    while (outs < NODES) begin
      @(negedge clk);
      b_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (b_valid && b_ready) begin
        checks++;
        if (b_nid != NID_W'(outs)) begin failures++; $display("FAIL order %0d vs %0d", b_nid, outs); end
        for (int c = 0; c < M; c++) begin
          automatic int e = ref_b(outs, c);
          checks++;
          if (sext(b_data[c], 4) != e) begin
            failures++;
            $display("FAIL node %0d col %0d got %0d exp %0d", outs, c, sext(b_data[c], 4), e);
          end
        end
        outs++;
      end
    end
    $display("crossbar stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
