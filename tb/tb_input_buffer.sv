// tb_input_buffer: writes packages of 1..3 words and bitmaps at random
// addresses (including the wrap at the end), then reads them back on every
// port and compares with a model; checks the one-cycle read latency.
module tb_input_buffer;
  import mega_pkg::*;
  localparam int WORDS = 256, BWORDS = 64, C = 32, NR = 4, AW = 8, BW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NR-1:0] rd_en, bidx_rd_en;
  logic [NR-1:0][AW-1:0] rd_addr;
  logic [NR-1:0][PKG_MAX-1:0] rd_data;
  logic wr_en, bidx_wr_en;
  logic [AW-1:0] wr_addr;
  logic [1:0] wr_nwords;
  logic [PKG_MAX-1:0] wr_data;
  logic [BW-1:0] bidx_wr_addr;
  logic [C-1:0] bidx_wr_data;
  logic [NR-1:0][BW-1:0] bidx_rd_addr;
  logic [NR-1:0][C-1:0] bidx_rd_data;
  input_buffer #(.IB_WORDS(WORDS), .BIDX_WORDS(BWORDS), .C(C), .N_RD(NR)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] model [WORDS];
  logic [C-1:0] bmodel [BWORDS];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    rd_en = '0; bidx_rd_en = '0; wr_en = 0; bidx_wr_en = 0; rd_addr = '0; bidx_rd_addr = '0;
    wr_addr = '0; wr_nwords = 2'd1; wr_data = '0; bidx_wr_addr = '0; bidx_wr_data = '0;
    // fill everything once
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_nwords = 1; wr_data = {128'd0, 64'(a * 7919)};
      model[a] = 64'(a * 7919);
      bidx_wr_en = (a < BWORDS); bidx_wr_addr = BW'(a); bidx_wr_data = C'(a * 104729);
      if (a < BWORDS) bmodel[a] = C'(a * 104729);
    end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'($urandom_range(0, WORDS - 1)); wr_nwords = 2'($urandom_range(1, 3));
      wr_data = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      for (int w = 0; w < int'(wr_nwords); w++) model[(int'(wr_addr) + w) % WORDS] = wr_data[w*64 +: 64];
      bidx_wr_en = 1; bidx_wr_addr = BW'($urandom_range(0, BWORDS - 1)); bidx_wr_data = $urandom();
      bmodel[bidx_wr_addr] = bidx_wr_data;
    end
    @(negedge clk); wr_en = 0; bidx_wr_en = 0;
    for (int i = 0; i < 400; i++) begin
      logic [NR-1:0][AW-1:0] a;
      logic [NR-1:0][BW-1:0] b;
      @(negedge clk);
      for (int p = 0; p < NR; p++) begin
        a[p] = (i == 0) ? AW'(WORDS - 1) : AW'($urandom_range(0, WORDS - 1));
        b[p] = BW'($urandom_range(0, BWORDS - 1));
      end
      rd_en = '1; bidx_rd_en = '1; rd_addr = a; bidx_rd_addr = b;
      @(negedge clk);
      rd_en = '0; bidx_rd_en = '0;
      for (int p = 0; p < NR; p++) begin
        checks += 2;
        if (rd_data[p] != {model[(int'(a[p]) + 2) % WORDS], model[(int'(a[p]) + 1) % WORDS], model[a[p]]}) begin
          failures++; $display("FAIL pkg read port %0d addr %0d", p, a[p]);
        end
        if (bidx_rd_data[p] != bmodel[b[p]]) begin
          failures++; $display("FAIL bidx read port %0d", p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
