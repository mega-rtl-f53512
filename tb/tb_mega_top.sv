// tb_mega_top: end-to-end test of mega_top at reduced buffer sizes
// (4 subgraphs, small Sparse Buffer so that its regions overflow) on a
// 60-node graph with two 32-column output blocks. See mega_tb_body.svh.
module tb_mega_top;
  import mega_pkg::*;
  `include "tb_util.svh"
  localparam int P_SUBNUM = 4, P_SB_DEPTH = 64, P_IB_WORDS = 4096, P_BIDX_WORDS = 1024;
  localparam int P_EB_COLS = 256, P_EB_EDGES = 1024, P_EB_EIDS = 256, P_EB_NODES = 256;
  localparam int P_CB_DEPTH = 256, P_AB_ROWS = 64;
  localparam int N_NODES = 60, N_SUB = 4, N_CB = 2;
  localparam int IN_BASE = 16, IN_STRIDE = 512, OUT_PTR = 2200;
  localparam int WATCHDOG = 400000;

  mega_top #(.SUBNUM(P_SUBNUM), .SB_DEPTH(P_SB_DEPTH), .IB_WORDS(P_IB_WORDS), .BIDX_WORDS(P_BIDX_WORDS),
             .EB_COLS(P_EB_COLS), .EB_EDGES(P_EB_EDGES), .EB_EIDS(P_EB_EIDS), .EB_NODES(P_EB_NODES),
             .CB_DEPTH(P_CB_DEPTH), .AB_ROWS(P_AB_ROWS)) dut (.*);

  `include "mega_tb_body.svh"
endmodule
