// tb_weight_index_gen: checks the Weight Index Generator against the printed
// example (bitmap 1,0,1,0,1,1,0,0 -> 1,0,2,0,3,4,0,0) and against a counting
// reference on random 32-bit bitmaps.
module tb_weight_index_gen;
  localparam int C = 32;
  localparam int IW = $clog2(C) + 1;
  logic [C-1:0] bitindex;
  logic [C-1:0][IW-1:0] weight_index;
  logic [IW-1:0] nnz;
  int checks = 0, failures = 0;

  weight_index_gen #(.C(C)) dut (.*);

  // Watchdog (combinational block, short fixed bound).
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_ref();
    int cnt = 0;
    for (int r = 0; r < C; r++) begin
      if (bitindex[r]) cnt++;
      checks++;
      if (weight_index[r] != (bitindex[r] ? IW'(cnt) : '0)) begin
        failures++;
        $display("FAIL bitindex=%h row %0d got %0d", bitindex, r, weight_index[r]);
      end
    end
    checks++;
    if (nnz != IW'(cnt)) begin failures++; $display("FAIL nnz %0d vs %0d", nnz, cnt); end
  endtask

  initial begin
    int exp8 [8] = '{1, 0, 2, 0, 3, 4, 0, 0};
    bitindex = '0;
    bitindex[7:0] = 8'b0011_0101;  // rows 0..7 = 1,0,1,0,1,1,0,0
    #1;
    for (int r = 0; r < 8; r++) begin
      checks++;
      if (weight_index[r] != IW'(exp8[r])) begin
        failures++; $display("FAIL example row %0d got %0d exp %0d", r, weight_index[r], exp8[r]);
      end
    end
    check_ref();
    bitindex = '1; #1; check_ref();
    bitindex = '0; #1; check_ref();
    for (int i = 0; i < 200; i++) begin
      bitindex = $urandom();
      #1;
      check_ref();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
