// tb_combination_unit: feeds bit-planes of random sparse mixed-precision node
// slices (bitwidths 1..8, random bitmaps) into the Combination Unit with random
// 4-bit signed weights and compares the M outputs with an integer dot-product
// reference. With planes always available it also checks the latency: the
// last plane enters (G-1)*max(b,2)+b-1 cycles after the first and the result
// appears two cycles later; 1-bit groups must show crossbar stalls.
module tb_combination_unit;
  import mega_pkg::*;
  localparam int C = 32, M = 32, NB = 8, IW = $clog2(C) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wreg_load;
  logic [C-1:0][M-1:0][W_BITS-1:0] wreg_data;
  logic [C-1:0][IW-1:0] weight_index;
  logic plane_valid, plane_ready, plane_first, plane_last, out_valid, out_ready, xbar_stall;
  logic [NB-1:0] plane_bits;
  logic [2:0] plane_shift;
  logic [IW-1:0] plane_base;
  logic [M-1:0][ACC_W-1:0] out_acc;

  combination_unit #(.C(C), .M(M), .N_BSE(NB)) dut (.*);

  int checks = 0, failures = 0, cycles = 0, stalls = 0;
  always @(posedge clk) begin cycles++; if (xbar_stall) stalls++; end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(input logic [ACC_W-1:0] v);
    return int'({{(32-ACC_W){v[ACC_W-1]}}, v});
  endfunction
  int wv [C][M];
  int vals [C];     // by ordinal
  int rows [C];     // row of ordinal
  int nnz, bw;

  initial begin
    wreg_load = 0; plane_valid = 0; out_ready = 1; plane_bits = '0; plane_shift = '0;
    plane_first = 0; plane_last = 0; plane_base = '0; weight_index = '0;
    for (int r = 0; r < C; r++) for (int c = 0; c < M; c++) begin
      wv[r][c] = $urandom_range(0, 15) - 8;
      wreg_data[r][c] = 4'(wv[r][c]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wreg_load <= 1; @(posedge clk); wreg_load <= 0;
    for (int t = 0; t < 120; t++) begin
      int groups, first_cyc, exp_last, last_cyc, done_cyc;
      bw = (t % 10 == 3) ? 1 : (t % 10 == 7) ? 8 : $urandom_range(1, 8);
      nnz = 0;
      for (int r = 0; r < C; r++) begin
        automatic logic nz = ($urandom_range(0, 99) < ((t % 3 == 0) ? 90 : 30));
        weight_index[r] = nz ? IW'(nnz + 1) : '0;
        if (nz) begin rows[nnz] = r; vals[nnz] = $urandom_range(1, (1 << bw) - 1); nnz++; end
      end
      groups = (nnz + NB - 1) / NB;
      if (nnz == 0) groups = 1;
      first_cyc = -1;
      for (int g = 0; g < groups; g++)
        for (int k = 0; k < bw; k++) begin
          @(negedge clk);
          plane_valid = 1;
          plane_first = (k == 0);
          plane_last  = (g == groups - 1) && (k == bw - 1);
          plane_base  = IW'(g * NB);
          plane_shift = 3'(k);
          for (int j = 0; j < NB; j++)
            plane_bits[j] = (g * NB + j < nnz) ? 1'(vals[g * NB + j] >> k) : 1'b0;
          #1;
          while (!plane_ready) begin @(negedge clk); #1; end
          if (first_cyc < 0) first_cyc = cycles;
          last_cyc = cycles;
          @(posedge clk);
        end
      @(negedge clk);
      plane_valid = 0;
      while (!out_valid) @(negedge clk);
      done_cyc = cycles;
      exp_last = (groups - 1) * ((bw < 2) ? 2 : bw) + bw - 1;
      checks++;
      if (last_cyc - first_cyc != exp_last || done_cyc - last_cyc != 3) begin
        failures++;
        $display("FAIL timing node %0d bw=%0d groups=%0d last-first=%0d exp %0d done-last=%0d", t, bw, groups, last_cyc - first_cyc, exp_last, done_cyc - last_cyc);
      end
      for (int c = 0; c < M; c++) begin
        automatic int e = 0;
        for (int o = 0; o < nnz; o++) e += vals[o] * wv[rows[o]][c];
        checks++;
        if (sx(out_acc[c]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL node %0d col %0d got %0d exp %0d", t, c, sx(out_acc[c]), e);
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no crossbar stall seen"); end
    $display("combination_unit: %0d crossbar stalls", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
