// tb_aggregation_tile: the tile is connected to an Aggregation Buffer;
// random CSC columns (distinct rows, random 8-bit values, random signed 4-bit
// features, biased positive) are aggregated, and the buffer contents are compared with a
// saturating integer model. Large values make saturation occur.
module tb_aggregation_tile;
  import mega_pkg::*;
  `include "tb_util.svh"
  localparam int L = 8, M = 8, RW = 6, R = 64;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic e_valid_any, sat;
  logic [L-1:0] e_valid, ab_wr_en;
  logic [L-1:0][RW-1:0] e_row, ab_rd_addr, ab_wr_addr;
  logic [L-1:0][EVAL_BITS-1:0] e_val;
  logic [M-1:0][B_BITS-1:0] feat;
  logic [L-1:0][M-1:0][PSUM_BITS-1:0] ab_rd_data, ab_wr_data;
  logic [RW-1:0] enc_addr;
  logic [M-1:0][PSUM_BITS-1:0] enc_data;
  aggregation_tile #(.L(L), .M(M), .ROW_W(RW)) dut (.*);
  aggregation_buffer #(.ROWS(R), .M(M), .L(L)) u_ab (.clk, .rst_n, .clear,
    .rd_addr(ab_rd_addr), .rd_data(ab_rd_data), .wr_en(ab_wr_en), .wr_addr(ab_wr_addr),
    .wr_data(ab_wr_data), .enc_addr, .enc_data);
  int model [R][M];
  int checks = 0, failures = 0, sats = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    e_valid_any = 0; e_valid = '0; e_row = '0; e_val = '0; feat = '0; enc_addr = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < M; c++) model[r][c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      automatic int base = $urandom_range(0, R - 1);
      automatic int fv [M];
      @(negedge clk);
      e_valid_any = ($urandom_range(0, 7) != 0);
      for (int c = 0; c < M; c++) begin
        fv[c] = int'($urandom_range(0, 10)) - 3;
        feat[c] = 4'(fv[c]);
      end
      for (int l = 0; l < L; l++) begin
        e_valid[l] = 1'($urandom());
        e_row[l] = RW'(base + 3 * l);
        e_val[l] = 8'($urandom_range(0, 255));
      end
      #1;
      sats += int'(sat);
      @(posedge clk);
      if (e_valid_any)
        for (int l = 0; l < L; l++) if (e_valid[l])
          for (int c = 0; c < M; c++) begin
            automatic int r = (base + 3 * l) % R;
            automatic int v = model[r][c] + int'(e_val[l]) * fv[c];
            model[r][c] = (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
          end
      @(negedge clk);
      e_valid_any = 0;
      for (int k = 0; k < 4; k++) begin
        automatic int r = $urandom_range(0, R - 1);
        enc_addr = RW'(r);
        #1;
        for (int c = 0; c < M; c++) begin
          checks++;
          if (sext(enc_data[c], 16) != model[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d col %0d got %0d exp %0d", r, c, sext(enc_data[c], 16), model[r][c]);
          end
        end
      end
    end
    $display("saturation cycles=%0d", sats);
    checks++;
    if (sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
