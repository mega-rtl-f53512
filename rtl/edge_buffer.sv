// edge_buffer: on-chip Edge Buffer holding the graph.
//
// The adjacency matrix is kept in compressed sparse column (CSC) form, split
// by subgraph (the graph is partitioned offline). For every subgraph s the
// subgraph table gives its first node and node count, the range of its
// column entries and the range of its eID list. A column entry names a source
// node (ascending order within a subgraph) and the range of its edges; an
// edge holds the destination row (local to the subgraph) and the 8-bit edge
// value of A. The eID list of subgraph s is the ascending list of source nodes
// outside s that have edges into s (its sparse connections). A per-node
// in-degree table selects the Degree-Aware quantization parameters.
//
// All reads are combinational (a register file); the edge port returns L
// consecutive edges; the in-degree table has two read ports (combination
// and encoding look up different nodes at once). One write port (wr_sel picks the table) loads the buffer.
// The field widths and the table split are this design's choices; the paper
// states only that the Edge Buffer stores A in CSC form and the eIDs.
module edge_buffer
  import mega_pkg::*;
#(
  parameter int unsigned SUBNUM   = 16,
  parameter int unsigned EB_COLS  = 1024,
  parameter int unsigned EB_EDGES = 4096,
  parameter int unsigned EB_EIDS  = 1024,
  parameter int unsigned EB_NODES = 2048,
  parameter int unsigned L        = 8,
  parameter int unsigned ROW_W    = 11,
  parameter int unsigned CAW      = $clog2(EB_COLS),
  parameter int unsigned EAW      = $clog2(EB_EDGES),
  parameter int unsigned IAW      = $clog2(EB_EIDS),
  parameter int unsigned NAW      = $clog2(EB_NODES)
) (
  input  logic                          clk,
  // loading: 0 subgraph table, 1 columns, 2 edges, 3 eIDs, 4 degrees
  input  logic                          wr_en,
  input  logic [2:0]                    wr_sel,
  input  logic [15:0]                   wr_addr,
  input  logic [127:0]                  wr_data,
  // subgraph table (all entries visible)
  output logic [SUBNUM-1:0][NID_W-1:0]  sub_node_base,
  output logic [SUBNUM-1:0][NID_W-1:0]  sub_node_cnt,
  output logic [SUBNUM-1:0][CAW:0]      sub_col_base,
  output logic [SUBNUM-1:0][CAW:0]      sub_col_cnt,
  output logic [SUBNUM-1:0][IAW:0]      sub_eid_base,
  output logic [SUBNUM-1:0][IAW:0]      sub_eid_cnt,
  // column entries
  input  logic [CAW-1:0]                col_addr,
  output logic [NID_W-1:0]              col_src,
  output logic [EAW:0]                  col_edge_base,
  output logic [EAW:0]                  col_edge_cnt,
  // edges
  input  logic [EAW-1:0]                edge_addr,
  output logic [L-1:0][ROW_W-1:0]       edge_row,
  output logic [L-1:0][EVAL_BITS-1:0]   edge_val,
  // eID lists
  input  logic [IAW-1:0]                eid_addr,
  output logic [NID_W-1:0]              eid_data,
  // in-degree
  input  logic [NAW-1:0]                deg_addr,
  output logic [NID_W-1:0]              deg_data,
  input  logic [NAW-1:0]                deg2_addr,
  output logic [NID_W-1:0]              deg2_data
);
  typedef struct packed {
    logic [NID_W-1:0] node_base;
    logic [NID_W-1:0] node_cnt;
    logic [CAW:0]     col_base;
    logic [CAW:0]     col_cnt;
    logic [IAW:0]     eid_base;
    logic [IAW:0]     eid_cnt;
  } sub_t;
  typedef struct packed {
    logic [NID_W-1:0] src;
    logic [EAW:0]     edge_base;
    logic [EAW:0]     edge_cnt;
  } col_t;
  typedef struct packed {
    logic [ROW_W-1:0]     row;
    logic [EVAL_BITS-1:0] val;
  } edge_t;

  sub_t             subs  [SUBNUM];
  col_t             cols  [EB_COLS];
  edge_t            edges [EB_EDGES];
  logic [NID_W-1:0] eids  [EB_EIDS];
  logic [NID_W-1:0] degs  [EB_NODES];

  always_ff @(posedge clk)
    if (wr_en)
      case (wr_sel)
        3'd0: subs[wr_addr[$clog2(SUBNUM)-1:0]] <= sub_t'(wr_data[$bits(sub_t)-1:0]);
        3'd1: cols[wr_addr[CAW-1:0]]            <= col_t'(wr_data[$bits(col_t)-1:0]);
        3'd2: edges[wr_addr[EAW-1:0]]           <= edge_t'(wr_data[$bits(edge_t)-1:0]);
        3'd3: eids[wr_addr[IAW-1:0]]            <= wr_data[NID_W-1:0];
        3'd4: degs[wr_addr[NAW-1:0]]            <= wr_data[NID_W-1:0];
        default: ;
      endcase

  always_comb begin
    for (int s = 0; s < SUBNUM; s++) begin
      sub_node_base[s] = subs[s].node_base;
      sub_node_cnt[s]  = subs[s].node_cnt;
      sub_col_base[s]  = subs[s].col_base;
      sub_col_cnt[s]   = subs[s].col_cnt;
      sub_eid_base[s]  = subs[s].eid_base;
      sub_eid_cnt[s]   = subs[s].eid_cnt;
    end
    col_src       = cols[col_addr].src;
    col_edge_base = cols[col_addr].edge_base;
    col_edge_cnt  = cols[col_addr].edge_cnt;
    for (int l = 0; l < L; l++) begin
      edge_row[l] = edges[edge_addr + EAW'(l)].row;
      edge_val[l] = edges[edge_addr + EAW'(l)].val;
    end
    eid_data = eids[eid_addr];
    deg_data = degs[deg_addr];
    deg2_data = degs[deg2_addr];
  end
endmodule
