// cas_pkg -- types and constants shared by the common-approximate-substring
// (CAS) systolic forest.
//
// A DNA base is held in two bits. Every register slot of the systolic forest
// carries one token: a character, a partial mismatch sum, or the empty marker
// '-' that is used to flush the sums out of the trees. A sum is eight bits and
// the error bound d four bits, the widths suggested for the node memories.
// The 2-bit code A=0, C=1, G=2, T=3 is this design's own choice.
//
// The package also holds the default forest: the trees generated from the
// motif ACT with one permitted replacement (m = 3, d = 1). That forest has
// 21 processing nodes in four trees (roots A, C, G, T) and 10 leaves, one for
// each of the 10 motifs within distance 1 of ACT. Nodes are numbered
// root-first, tree by tree; NODE_PARENT = -1 marks a root.
package cas_pkg;

  typedef logic [1:0] base_t;
  localparam base_t BASE_A = 2'd0;
  localparam base_t BASE_C = 2'd1;
  localparam base_t BASE_G = 2'd2;
  localparam base_t BASE_T = 2'd3;

  localparam int SUM_W  = 8;   // numeric data (partial sums)
  localparam int DIST_W = 4;   // the error bound d

  typedef logic [SUM_W-1:0]  sum_t;
  typedef logic [DIST_W-1:0] dist_t;

  // Kind of token in a node's data slot.
  typedef enum logic [1:0] {
    TK_NONE = 2'd0,   // '-' : nothing, used for flushing
    TK_CHAR = 2'd1,   // a base, in val[1:0]
    TK_NUM  = 2'd2    // a partial mismatch sum, in val
  } tok_kind_e;

  typedef struct packed {
    tok_kind_e kind;
    sum_t      val;
  } token_t;

  localparam token_t TOKEN_NONE = '{kind: TK_NONE, val: '0};

  function automatic token_t mk_char(base_t b);
    return '{kind: TK_CHAR, val: sum_t'(b)};
  endfunction

  function automatic token_t mk_num(sum_t n);
    return '{kind: TK_NUM, val: n};
  endfunction

  // ---------------------------------------------------------------------
  // Default forest: all motifs within one replacement of ACT.
  //   tree A : A-T-T, A-C-{A,C,G,T}, A-G-T, A-A-T   (nodes 0..11)
  //   tree C : C-C-T                                (nodes 12..14)
  //   tree G : G-C-T                                (nodes 15..17)
  //   tree T : T-C-T                                (nodes 18..20)
  // ---------------------------------------------------------------------
  localparam int FIG2A_M      = 3;
  localparam int FIG2A_NODES  = 21;
  localparam int FIG2A_LEAVES = 10;

  localparam int FIG2A_LEVEL [FIG2A_NODES] = '{
    1, 2, 2, 2, 2, 3, 3, 3, 3, 3, 3, 3,
    1, 2, 3,
    1, 2, 3,
    1, 2, 3 };

  localparam int FIG2A_PARENT [FIG2A_NODES] = '{
    -1, 0, 0, 0, 0, 1, 2, 2, 2, 2, 3, 4,
    -1, 12, 13,
    -1, 15, 16,
    -1, 18, 19 };

  localparam base_t FIG2A_CHAR [FIG2A_NODES] = '{
    BASE_A, BASE_T, BASE_C, BASE_G, BASE_A,
    BASE_T, BASE_A, BASE_C, BASE_G, BASE_T, BASE_T, BASE_T,
    BASE_C, BASE_C, BASE_T,
    BASE_G, BASE_C, BASE_T,
    BASE_T, BASE_C, BASE_T };

  // Leaf node of each exit node.
  localparam int FIG2A_LEAF [FIG2A_LEAVES] = '{5, 6, 7, 8, 9, 10, 11, 14, 17, 20};

endpackage
