// tb_weight_buffer: writes random weight rows, column scales and degree-table
// entries, reads them back through every port and compares with a model,
// including the clamping of large degrees to the last table entry.
module tb_weight_buffer;
  import mega_pkg::*;
  localparam int ROWS = 8, C = 4, M = 4, COLS = 16, DEG = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic row_wr_en, row_rd_en, col_wr_en, col_rd_en, deg_wr_en;
  logic [2:0] row_wr_addr, row_rd_addr, deg_wr_addr;
  logic [C-1:0][M-1:0][W_BITS-1:0] row_wr_data, row_rd_data;
  logic [3:0] col_wr_addr, col_rd_base;
  logic [SCALE_W-1:0] col_wr_data, deg_wr_qscale, deg_wr_alpha, deg_a_qscale, deg_b_alpha;
  logic [M-1:0][SCALE_W-1:0] col_rd_data;
  logic [3:0] deg_wr_bits, deg_a_bits;
  logic [NID_W-1:0] deg_a, deg_b;
  weight_buffer #(.WB_ROWS(ROWS), .C(C), .M(M), .COLS(COLS), .DEG_MAX(DEG)) dut (.*);
  int checks = 0, failures = 0;
  logic [C*M*W_BITS-1:0] rm [ROWS];
  logic [15:0] cm [COLS];
  logic [3:0] bm [DEG];
  logic [15:0] qm [DEG], am [DEG];
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    {row_wr_en, row_rd_en, col_wr_en, col_rd_en, deg_wr_en} = '0;
    row_wr_addr = '0; row_rd_addr = '0; deg_wr_addr = '0; row_wr_data = '0; col_wr_addr = '0;
    col_rd_base = '0; col_wr_data = '0; deg_wr_qscale = '0; deg_wr_alpha = '0; deg_wr_bits = '0;
    deg_a = '0; deg_b = '0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      row_wr_en = (i < ROWS); row_wr_addr = 3'(i); row_wr_data = {$urandom(), $urandom()};
      if (i < ROWS) rm[i] = row_wr_data;
      col_wr_en = 1; col_wr_addr = 4'(i); col_wr_data = 16'($urandom()); cm[i] = col_wr_data;
      deg_wr_en = (i < DEG); deg_wr_addr = 3'(i); deg_wr_bits = 4'($urandom_range(1, 8));
      deg_wr_qscale = 16'($urandom()); deg_wr_alpha = 16'($urandom());
      if (i < DEG) begin bm[i] = deg_wr_bits; qm[i] = deg_wr_qscale; am[i] = deg_wr_alpha; end
    end
    @(negedge clk); {row_wr_en, col_wr_en, deg_wr_en} = '0;
    for (int i = 0; i < 100; i++) begin
      automatic int r = $urandom_range(0, ROWS - 1);
      automatic int cb = $urandom_range(0, COLS - M);
      automatic int da = $urandom_range(0, 3 * DEG);
      automatic int db = $urandom_range(0, 3 * DEG);
      row_rd_en = 1; row_rd_addr = 3'(r); col_rd_en = 1; col_rd_base = 4'(cb);
      deg_a = NID_W'(da); deg_b = NID_W'(db);
      #1;
      checks += 3;
      if (deg_a_bits != bm[(da >= DEG) ? DEG - 1 : da]) begin failures++; $display("FAIL deg bits"); end
      if (deg_a_qscale != qm[(da >= DEG) ? DEG - 1 : da]) begin failures++; $display("FAIL deg qscale"); end
      if (deg_b_alpha != am[(db >= DEG) ? DEG - 1 : db]) begin failures++; $display("FAIL deg alpha"); end
      @(negedge clk);
      checks++;
      if (row_rd_data != rm[r]) begin failures++; $display("FAIL row %0d", r); end
      for (int p = 0; p < M; p++) begin
        checks++;
        if (col_rd_data[p] != cm[cb + p]) begin failures++; $display("FAIL col %0d", cb + p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
