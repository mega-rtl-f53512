// tb_aggregation_buffer: random multi-lane writes (distinct rows per cycle),
// random clears and reads on all lanes and on the encoder port, checked
// against a model in which a cleared row reads as zero.
module tb_aggregation_buffer;
  import mega_pkg::*;
  localparam int R = 32, M = 4, L = 4, AW = 5;
  logic clk = 0, rst_n = 0, clear;
  always #5 clk = ~clk;
  logic [L-1:0][AW-1:0] rd_addr, wr_addr;
  logic [L-1:0][M-1:0][PSUM_BITS-1:0] rd_data, wr_data;
  logic [L-1:0] wr_en;
  logic [AW-1:0] enc_addr;
  logic [M-1:0][PSUM_BITS-1:0] enc_data;
  logic [M*PSUM_BITS-1:0] model [R];
  int checks = 0, failures = 0, clears = 0;
  aggregation_buffer #(.ROWS(R), .M(M), .L(L)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clear = 0; wr_en = '0; wr_addr = '0; wr_data = '0; rd_addr = '0; enc_addr = '0;
    for (int r = 0; r < R; r++) model[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) rd_addr[l] = AW'($urandom());
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] !== model[rd_addr[l]]) begin failures++; $display("FAIL lane %0d row %0d", l, rd_addr[l]); end
      end
      enc_addr = AW'($urandom());
      #1;
      checks++;
      if (enc_data !== model[enc_addr]) begin failures++; $display("FAIL enc row %0d", enc_addr); end
      clear = ($urandom_range(0, 30) == 0);
      // distinct rows per cycle: a random base plus the lane number
      begin
        automatic int base = $urandom_range(0, R - 1);
        for (int l = 0; l < L; l++) begin
          wr_en[l] = clear ? 1'b0 : 1'($urandom());
          wr_addr[l] = AW'(base + l);
          wr_data[l] = {$urandom(), $urandom()};
        end
      end
      @(posedge clk);
      if (clear) begin
        clears++;
        for (int r = 0; r < R; r++) model[r] = '0;
      end
      for (int l = 0; l < L; l++) if (wr_en[l]) model[wr_addr[l]] = wr_data[l];
    end
    $display("clears=%0d", clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
