// tb_mega_top_full: end-to-end test of mega_top with every parameter at its
// default (the buffer sizes of the full design): a 240-node graph in 8
// subgraphs, two 32-column output blocks. See mega_tb_body.svh.
module tb_mega_top_full;
  import mega_pkg::*;
  `include "tb_util.svh"
  // defaults of mega_top, repeated for the test's address arithmetic
  localparam int P_SUBNUM = 16, P_SB_DEPTH = 2048, P_IB_WORDS = 8192, P_BIDX_WORDS = 2048;
  localparam int P_EB_COLS = 1024, P_EB_EDGES = 4096, P_EB_EIDS = 1024, P_EB_NODES = 2048;
  localparam int P_CB_DEPTH = 6144, P_AB_ROWS = 2048;
  localparam int N_NODES = 240, N_SUB = 8, N_CB = 2;
  localparam int IN_BASE = 16, IN_STRIDE = 1024, OUT_PTR = 4200;
  localparam int WATCHDOG = 2000000;

  mega_top dut (.*);

  `include "mega_tb_body.svh"
endmodule
