// cas_top -- common-approximate-substring engine: sequencer, exit-node clock
// divider and systolic forest.
//
// The host first loads d (d_we/d_in) and, if it wants other motifs of the same
// shape, new node bases (char_we/char_addr/char_data). A 'start' pulse clears
// the exit nodes; the host then streams N_STRINGS query strings, one base per
// accepted s_valid/s_ready transfer, s_last on each string's final base. Each
// string takes 2l + m clocks when the host never stalls. When 'done' rises,
// verified[e] is 1 for every leaf whose motif came within d replacements of
// some window of every streamed string; str_list[e] shows which strings hit.
// The defaults are the paper's Fig. 2(A) forest: motif ACT, m = 3, d = 1,
// 21 processing nodes and 10 exit nodes, and four query strings as in its
// worked example. The shape tables are this design's way of handing the
// preprocessing result to the hardware; see cas_forest.
module cas_top
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
  // configuration
  input  logic                 d_we,
  input  dist_t                d_in,
  input  logic                 char_we,
  input  logic [ADDR_W-1:0]    char_addr,
  input  base_t                char_data,
  // batch control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // query stream
  input  logic                 s_valid,
  output logic                 s_ready,
  input  base_t                s_char,
  input  logic                 s_last,
  // results
  output logic [LEAVES-1:0]    verified,
  output logic [N_STRINGS-1:0] str_list [LEAVES]
);

  token_t           top;
  logic             sync;
  logic             exit_en;
  logic             clear;
  logic [IDX_W-1:0] str_idx;

  stream_ctrl #(.M(M), .N_STRINGS(N_STRINGS)) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .d_we    (d_we),
    .d_in    (d_in),
    .start   (start),
    .s_valid (s_valid),
    .s_ready (s_ready),
    .s_char  (s_char),
    .s_last  (s_last),
    .top     (top),
    .sync    (sync),
    .str_idx (str_idx),
    .clear   (clear),
    .d       (),
    .busy    (busy),
    .done    (done)
  );

  exit_clk_div #(.M(M)) u_div (
    .clk   (clk),
    .rst_n (rst_n),
    .sync  (sync),
    .en    (exit_en)
  );

  cas_forest #(
    .M           (M),
    .NODES       (NODES),
    .LEAVES      (LEAVES),
    .N_STRINGS   (N_STRINGS),
    .NODE_LEVEL  (NODE_LEVEL),
    .NODE_PARENT (NODE_PARENT),
    .NODE_CHAR   (NODE_CHAR),
    .LEAF_NODE   (LEAF_NODE)
  ) u_forest (
    .clk       (clk),
    .rst_n     (rst_n),
    .top       (top),
    .char_we   (char_we),
    .char_addr (char_addr),
    .char_data (char_data),
    .exit_en   (exit_en),
    .clear     (clear),
    .d_we      (d_we && !busy),
    .d_in      (d_in),
    .str_idx   (str_idx),
    .verified  (verified),
    .str_list  (str_list),
    .leaf_data ()
  );

endmodule
