// tb_sparse_buffer: random writes and reads of the sparse_buffer against a model array,
// including a read of the row written in the previous cycle.
module tb_sparse_buffer;
  import mega_pkg::*;
  localparam int D = 64, M = 32, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [M-1:0][B_BITS-1:0] wr_data, rd_data;
  logic [M*B_BITS-1:0] model [D];
  bit written [D];
  int checks = 0, failures = 0;
  sparse_buffer #(.DEPTH(D), .M(M)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wr_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // check the read of the address chosen in the previous cycle
      if (written[rd_addr]) begin
        checks++;
        if (rd_data !== model[rd_addr]) begin failures++; $display("FAIL addr %0d", rd_addr); end
      end
      wr_en = ($urandom_range(0, 1) == 1);
      wr_addr = AW'($urandom());
      wr_data = {$urandom(), $urandom(), $urandom(), $urandom()};
      rd_addr = ($urandom_range(0, 3) == 0) ? wr_addr : AW'($urandom());
      @(posedge clk);
      if (wr_en) begin model[wr_addr] = wr_data; written[wr_addr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
