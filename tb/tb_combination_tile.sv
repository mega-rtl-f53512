// tb_combination_tile: random sparse mixed-precision nodes are packed into one
// Adaptive-Package stream; the tile decodes them from a memory with one cycle
// of read latency and multiplies them by a random 4-bit weight slice. Every
// node's M outputs are compared with an integer reference, and random delays
// on taking the result exercise the back-pressure path.
module tb_combination_tile;
  import mega_pkg::*;
  `include "tb_util.svh"
  localparam int C = 32, M = 32, NB = 8, AW = 13, NODES = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wreg_load, set_ptr, node_start, cmd_ready, pkg_rd_en, out_valid, out_ready, xbar_stall;
  logic [C-1:0][M-1:0][W_BITS-1:0] wreg_data;
  logic [AW-1:0] ptr_in, pkg_rd_addr;
  logic [C-1:0] bitindex;
  logic [PKG_MAX-1:0] pkg_rd_data;
  logic [M-1:0][ACC_W-1:0] out_acc;

  combination_tile #(.C(C), .M(M), .N_BSE(NB), .IB_AW(AW)) dut (.*);

  logic [63:0] mem [0:(1<<AW)-1];
  always_ff @(posedge clk)
    if (pkg_rd_en) pkg_rd_data <= {mem[pkg_rd_addr+2], mem[pkg_rd_addr+1], mem[pkg_rd_addr]};

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wv [C][M];
  int fv [NODES][C];
  logic [C-1:0] bidx [NODES];
  ap_packer pk;

  initial begin
    pk = new(16);
    for (int i = 0; i < (1<<AW); i++) mem[i] = '0;
    for (int r = 0; r < C; r++) for (int c = 0; c < M; c++) begin
      wv[r][c] = int'($urandom_range(0, 15)) - 8;
      wreg_data[r][c] = 4'(wv[r][c]);
    end
    for (int n = 0; n < NODES; n++) begin
      automatic int b = (n % 9 == 4) ? 1 : (n % 9 == 5) ? 8 : int'($urandom_range(2, 4));
      for (int r = 0; r < C; r++) begin
        automatic bit nz = ($urandom_range(0, 99) < ((n % 4 == 0) ? 80 : 25)) && (n % 13 != 6);
        bidx[n][r] = nz;
        fv[n][r] = nz ? int'($urandom_range(1, (1 << b) - 1)) : 0;
        if (nz) pk.put(fv[n][r], b);
      end
    end
    pk.flush();
    foreach (pk.words[a]) mem[a] = pk.words[a];
    wreg_load = 0; set_ptr = 0; node_start = 0; ptr_in = '0; bitindex = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); wreg_load = 1; set_ptr = 1; ptr_in = AW'(16);
    @(negedge clk); wreg_load = 0; set_ptr = 0;
    for (int n = 0; n < NODES; n++) begin
      while (!cmd_ready) @(negedge clk);
      node_start = 1; bitindex = bidx[n];
      @(negedge clk); node_start = 0;
      while (!out_valid) @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      for (int c = 0; c < M; c++) begin
        automatic int e = 0;
        for (int r = 0; r < C; r++) e += fv[n][r] * wv[r][c];
        checks++;
        if (sext(longint'(out_acc[c]), ACC_W) != e) begin
          failures++;
          if (failures < 10) $display("FAIL node %0d col %0d got %0d exp %0d", n, c, sext(longint'(out_acc[c]), ACC_W), e);
        end
      end
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("combination_tile: %0d packages", pk.npk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
