// tb_edge_buffer: loads every table of the Edge Buffer with random entries
// through the write port, using the field packing documented in the module,
// and reads them back through all read ports against a model.
module tb_edge_buffer;
  import mega_pkg::*;
  localparam int S = 4, NC = 32, NE = 64, NI = 32, NN = 32, L = 8, RW = 11;
  localparam int CAW = 5, EAW = 6, IAW = 5, NAW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [2:0] wr_sel;
  logic [15:0] wr_addr;
  logic [127:0] wr_data;
  logic [S-1:0][NID_W-1:0] sub_node_base, sub_node_cnt;
  logic [S-1:0][CAW:0] sub_col_base, sub_col_cnt;
  logic [S-1:0][IAW:0] sub_eid_base, sub_eid_cnt;
  logic [CAW-1:0] col_addr;
  logic [NID_W-1:0] col_src, eid_data, deg_data, deg2_data;
  logic [EAW:0] col_edge_base, col_edge_cnt;
  logic [EAW-1:0] edge_addr;
  logic [L-1:0][RW-1:0] edge_row;
  logic [L-1:0][EVAL_BITS-1:0] edge_val;
  logic [IAW-1:0] eid_addr;
  logic [NAW-1:0] deg_addr, deg2_addr;
  edge_buffer #(.SUBNUM(S), .EB_COLS(NC), .EB_EDGES(NE), .EB_EIDS(NI), .EB_NODES(NN), .L(L), .ROW_W(RW)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] m [5][64];
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    int sizes [5] = '{S, NC, NE, NI, NN};
    wr_en = 0; wr_sel = '0; wr_addr = '0; wr_data = '0; col_addr = '0; edge_addr = '0; eid_addr = '0; deg_addr = '0; deg2_addr = '0;
    for (int t = 0; t < 5; t++)
      for (int a = 0; a < sizes[t]; a++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = 3'(t); wr_addr = 16'(a); wr_data = {$urandom(), $urandom()};
        m[t][a] = wr_data[63:0];
      end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < S; s++) begin
      // sub_t: node_base(16) node_cnt(16) col_base(6) col_cnt(6) eid_base(6) eid_cnt(6)
      automatic logic [55:0] v = m[0][s][55:0];
      chk(sub_eid_cnt[s] == v[5:0] && sub_eid_base[s] == v[11:6] && sub_col_cnt[s] == v[17:12] &&
          sub_col_base[s] == v[23:18] && sub_node_cnt[s] == v[39:24] && sub_node_base[s] == v[55:40], "sub table");
    end
    for (int i = 0; i < 100; i++) begin
      automatic int ca = $urandom_range(0, NC - 1), ea = $urandom_range(0, NE - 1);
      automatic int ia = $urandom_range(0, NI - 1), na = $urandom_range(0, NN - 1);
      col_addr = CAW'(ca); edge_addr = EAW'(ea); eid_addr = IAW'(ia); deg_addr = NAW'(na); deg2_addr = NAW'(ia);
      #1;
      // col_t: src(16) edge_base(7) edge_cnt(7)
      chk(col_src == m[1][ca][29:14] && col_edge_base == m[1][ca][13:7] && col_edge_cnt == m[1][ca][6:0], "column");
      for (int l = 0; l < L; l++)
        chk(edge_row[l] == m[2][(ea + l) % NE][18:8] && edge_val[l] == m[2][(ea + l) % NE][7:0], "edge");
      chk(eid_data == m[3][ia][15:0], "eid");
      chk(deg_data == m[4][na][15:0], "degree");
      chk(deg2_data == m[4][ia][15:0], "degree port 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
