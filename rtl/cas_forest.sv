// cas_forest -- the systolic forest of processing nodes and exit nodes.
//
// The forest is the hardware image of the motif trees built in preprocessing:
// every tree node is a proc_node, every root takes the forest input 'top',
// every other node takes its parent's data slot, and under each leaf sits an
// exit_node. Trees may share upper parts of paths (a node with several
// children fans out its data slot to all of them), but every distinct path has
// its own leaf and exit node. Data moves one level per clock, in one direction
// only, so a string of l bases is processed in 2l + m clocks whatever the
// number of trees.
//
// The shape is given at elaboration by four tables: NODE_LEVEL, NODE_PARENT
// (-1 for a root), NODE_CHAR (reset value of each node's base) and LEAF_NODE
// (the leaf above each exit node). The defaults are the forest of all motifs
// within one replacement of ACT (m = 3, 21 processing nodes, 10 exit nodes).
// Node bases can be rewritten at run time (char_we/char_addr/char_data): the
// paper notes that forests generated for the same m and d have the same shape.
//
// Because level L delays the mismatch bits by L-1 characters, the window that
// a leaf checks reads the path from the leaf up to the root: level 1 faces the
// newest character. Trees for a motif must therefore be loaded with the motif
// reversed; the palindromic example of the paper does not show this.
module cas_forest
  import cas_pkg::*;
#(
  parameter int    M         = FIG2A_M,
  parameter int    NODES     = FIG2A_NODES,
  parameter int    LEAVES    = FIG2A_LEAVES,
  parameter int    N_STRINGS = 4,
  parameter int    NODE_LEVEL  [NODES]  = FIG2A_LEVEL,
  parameter int    NODE_PARENT [NODES]  = FIG2A_PARENT,
  parameter base_t NODE_CHAR   [NODES]  = FIG2A_CHAR,
  parameter int    LEAF_NODE   [LEAVES] = FIG2A_LEAF,
  localparam int IDX_W  = (N_STRINGS > 1) ? $clog2(N_STRINGS) : 1,
  localparam int ADDR_W = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  token_t               top,
  // node base loading
  input  logic                 char_we,
  input  logic [ADDR_W-1:0]    char_addr,
  input  base_t                char_data,
  // exit nodes
  input  logic                 exit_en,
  input  logic                 clear,
  input  logic                 d_we,
  input  dist_t                d_in,
  input  logic [IDX_W-1:0]     str_idx,
  output logic [LEAVES-1:0]    verified,
  output logic [N_STRINGS-1:0] str_list [LEAVES],
  output token_t               leaf_data [LEAVES]
);

  token_t node_data [NODES];

  for (genvar i = 0; i < NODES; i++) begin : g_node
    if (NODE_LEVEL[i] < 1 || NODE_LEVEL[i] > M) begin : g_bad_level
      $error("node %0d: level %0d outside 1..M", i, NODE_LEVEL[i]);
    end
    if (NODE_PARENT[i] >= 0 && NODE_LEVEL[NODE_PARENT[i]] != NODE_LEVEL[i] - 1) begin : g_bad_parent
      $error("node %0d: parent is not one level up", i);
    end
    if (NODE_PARENT[i] < 0 && NODE_LEVEL[i] != 1) begin : g_bad_root
      $error("node %0d: a root must be at level 1", i);
    end

    token_t din;
    if (NODE_PARENT[i] < 0) begin : g_root
      assign din = top;
    end else begin : g_child
      assign din = node_data[NODE_PARENT[i]];
    end

    proc_node #(
      .LEVEL     (NODE_LEVEL[i]),
      .INIT_CHAR (NODE_CHAR[i])
    ) u_node (
      .clk       (clk),
      .rst_n     (rst_n),
      .ld_en     (char_we && 32'(char_addr) == i),
      .ld_char   (char_data),
      .din       (din),
      .dout      (node_data[i]),
      .node_char (),
      .bitvec    ()
    );
  end

  for (genvar e = 0; e < LEAVES; e++) begin : g_exit
    if (NODE_LEVEL[LEAF_NODE[e]] != M) begin : g_bad_leaf
      $error("exit %0d: its leaf is not at level M", e);
    end

    assign leaf_data[e] = node_data[LEAF_NODE[e]];

    exit_node #(.N_STRINGS(N_STRINGS)) u_exit (
      .clk       (clk),
      .rst_n     (rst_n),
      .en        (exit_en),
      .clear     (clear),
      .d_we      (d_we),
      .d_in      (d_in),
      .din       (node_data[LEAF_NODE[e]]),
      .str_idx   (str_idx),
      .verified  (verified[e]),
      .str_list  (str_list[e]),
      .d         (),
      .sum_valid (),
      .cur_sum   ()
    );
  end

endmodule
