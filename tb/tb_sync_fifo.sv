// tb_sync_fifo: random pushes and pops against a queue model; checks every
// popped word, the full/empty flags and the occupancy count.
module tb_sync_fifo;
  localparam int W = 12, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q [$];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == D) || empty != (q.size() == 0) || int'(count) != q.size()) begin
        failures++; $display("FAIL flags size=%0d full=%b empty=%b count=%0d", q.size(), full, empty, count);
      end
      if (full) fulls++;
      push = !full && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 35));
      pop  = !empty && ($urandom_range(0, 99) < 50);
      din  = W'($urandom());
      if (pop) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("FAIL data %h exp %h", dout, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
