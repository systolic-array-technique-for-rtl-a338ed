// proc_node -- regular processing node of the CAS systolic forest.
//
// A node at level LEVEL (roots are level 1, leaves level m) stores its own
// base, a LEVEL-bit mismatch history and one data slot. Each clock it takes
// the token from its parent (or from the forest input, for a root) into the
// data slot, which its children read on the next clock:
//   * a character is compared with the node's base and 0 (match) or
//     1 (mismatch) is shifted into the right end of the history;
//   * a number leaves with the leftmost (oldest) history bit added to it;
//   * '-' passes unchanged and leaves the history alone.
// Because characters and numbers alternate, the leftmost bit at level L is
// the mismatch of the character L-1 positions older than the one that
// travels with the number, so a number that passes levels 1..m sums the
// mismatches of a whole window of m characters. All of this follows the
// paper's node description and worked example.
//
// This design's own choices: the history resets to zeros and the slot to '-'
// (the worked example starts that way), and the base can be reloaded through
// ld_en/ld_char so the same forest shape can serve new motifs; its reset value
// is INIT_CHAR. A sum that would pass 255 wraps; with m + d + 1 far below
// 255 that never happens, and an assertion watches for it.
//
// Timing: one token per clock in, the same token (updated) one clock later out.
module proc_node
  import cas_pkg::*;
#(
  parameter int    LEVEL     = 1,
  parameter base_t INIT_CHAR = BASE_A
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ld_en,     // load a new node base
  input  base_t            ld_char,
  input  token_t           din,       // parent's data slot / forest input
  output token_t           dout,      // this node's data slot
  output base_t            node_char,
  output logic [LEVEL-1:0] bitvec     // mismatch history, [LEVEL-1] = leftmost
);

  logic [LEVEL-1:0] shifted;
  logic             mismatch;

  assign mismatch = (din.val[1:0] != node_char);

  always_comb begin
    shifted    = bitvec << 1;
    shifted[0] = mismatch;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_char <= INIT_CHAR;
      bitvec    <= '0;
      dout      <= TOKEN_NONE;
    end else begin
      if (ld_en) node_char <= ld_char;
      unique case (din.kind)
        TK_CHAR: begin
          bitvec <= shifted;
          dout   <= din;
        end
        TK_NUM:  dout <= mk_num(din.val + sum_t'(bitvec[LEVEL-1]));
        default: dout <= TOKEN_NONE;
      endcase
    end
  end

  a_no_wrap: assert property (@(posedge clk) disable iff (!rst_n)
    din.kind == TK_NUM |-> din.val != '1 || !bitvec[LEVEL-1]);

endmodule
