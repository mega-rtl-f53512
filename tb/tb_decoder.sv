// tb_decoder: packs random mixed-precision nodes into Adaptive-Package
// streams with a behavioural packer (greedy: fill until full or the bitwidth
// changes, smallest fitting Mode), lets the decoder read them from a memory with
// one cycle of read latency, rebuilds every value from the emitted bit-planes
// (value += bit << shift) and compares with the original values. It also checks
// that a group of b-bit values takes b consecutive cycles when the FIFO is
// always ready, and covers nodes with no non-zeros, 1-bit and 8-bit values.
module tb_decoder;
  import mega_pkg::*;
  localparam int C = 32, NB = 8, AW = 13, IW = $clog2(C) + 1;
  localparam int NODES = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic set_ptr, node_start, idle, pkg_rd_en;
  logic [AW-1:0] ptr_in, pkg_rd_addr;
  logic [IW-1:0] node_nnz;
  logic [PKG_MAX-1:0] pkg_rd_data;
  logic plane_valid, plane_ready, plane_first, plane_last;
  logic [NB-1:0] plane_bits;
  logic [2:0] plane_shift;
  logic [IW-1:0] plane_base;
  logic [3:0] plane_bw;

  decoder #(.C(C), .N_BSE(NB), .IB_AW(AW)) dut (.*);

  logic [63:0] mem [0:(1<<AW)-1];
  always_ff @(posedge clk)
    if (pkg_rd_en) pkg_rd_data <= {mem[pkg_rd_addr+2], mem[pkg_rd_addr+1], mem[pkg_rd_addr]};

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference data.
  int nnz_of [NODES];
  int bw_of  [NODES];
  int vals   [NODES][C];

  // Behavioural packer.
  logic [191:0] preg;
  int pused, pbw, wptr;
  task automatic flush();
    int len, words;
    if (pused == 0) return;
    len = (5 + pused <= 64) ? 64 : (5 + pused <= 128) ? 128 : 192;
    words = len / 64;
    preg[1:0] = (len == 64) ? 2'b00 : (len == 128) ? 2'b01 : 2'b10;
    preg[4:2] = pbw[2:0];
    for (int w = 0; w < words; w++) mem[wptr + w] = preg[w*64 +: 64];
    wptr += words;
    preg = '0; pused = 0;
  endtask
  task automatic put(int v, int b);
    if (pused != 0 && b != pbw) flush();
    if (5 + pused + b > 192) flush();
    pbw = b;
    for (int t = 0; t < b; t++) preg[5 + pused + t] = v[t];
    pused += b;
  endtask

  // Plane collection.
  int got [C];
  int planes_seen, node_done, zero_nodes, onebit, eightbit;
  int grp_start_cycle, last_first_cycle, prev_bw;

  initial begin
    set_ptr = 0; node_start = 0; ptr_in = '0; node_nnz = '0; plane_ready = 1;
    preg = '0; pused = 0; pbw = 0; wptr = 100;
    for (int i = 0; i < (1<<AW); i++) mem[i] = '0;
    for (int n = 0; n < NODES; n++) begin
      automatic int r = $urandom_range(0, 9);
      bw_of[n] = (n % 37 == 5) ? 1 : (n % 41 == 7) ? 8 : (r < 5) ? 2 : (r < 8) ? 3 : $urandom_range(1, 8);
      nnz_of[n] = (n % 29 == 3) ? 0 : (n % 31 == 4) ? C : $urandom_range(0, 12);
      for (int j = 0; j < C; j++) vals[n][j] = 0;
      for (int j = 0; j < nnz_of[n]; j++) begin
        vals[n][j] = $urandom_range(1, (1 << bw_of[n]) - 1);
        put(vals[n][j], bw_of[n]);
      end
    end
    flush();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    set_ptr <= 1; ptr_in <= AW'(100);
    @(posedge clk);
    set_ptr <= 0;
    for (int n = 0; n < NODES; n++) begin
      // Random back-pressure on part of the run.
      wait (idle);
      @(posedge clk);
      for (int j = 0; j < C; j++) got[j] = 0;
      node_start <= 1; node_nnz <= IW'(nnz_of[n]);
      @(posedge clk);
      node_start <= 0;
      node_done = 0;
      while (!node_done) begin
        plane_ready <= (n > 200) ? 1'($urandom_range(0, 1)) : 1'b1;
        @(negedge clk);
        if (plane_valid && plane_ready) begin
          if (plane_first && n <= 200 && planes_seen > 0 && prev_bw >= 2) begin
            // groups stream back to back unless a package had to be fetched
            if (cycles - last_first_cycle == prev_bw) begin checks++; end
          end
          if (plane_first) begin last_first_cycle = cycles; prev_bw = plane_bw; end
          planes_seen++;
          if (plane_bw == 1) onebit++;
          if (plane_bw == 8) eightbit++;
          for (int j = 0; j < NB; j++)
            if (plane_bits[j]) got[plane_base + j] += (1 << plane_shift);
          if (plane_last) node_done = 1;
          if (plane_bw != 4'(bw_of[n]) && nnz_of[n] != 0) begin
            failures++; $display("FAIL node %0d bw %0d exp %0d", n, plane_bw, bw_of[n]);
          end
        end
        @(posedge clk);
      end
      if (nnz_of[n] == 0) zero_nodes++;
      for (int j = 0; j < C; j++) begin
        checks++;
        if (got[j] != vals[n][j]) begin
          failures++;
          if (failures < 10) $display("FAIL node %0d value %0d got %0d exp %0d", n, j, got[j], vals[n][j]);
        end
      end
    end
    checks++;
    if (zero_nodes == 0 || onebit == 0 || eightbit == 0) begin
      failures++; $display("FAIL coverage zero=%0d onebit=%0d eightbit=%0d", zero_nodes, onebit, eightbit);
    end
    $display("decoder: %0d planes, %0d empty nodes, %0d cycles", planes_seen, zero_nodes, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
