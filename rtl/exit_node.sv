// exit_node -- collector below one leaf of the CAS systolic forest.
//
// There is one exit node per leaf (level m + 1). It keeps the error bound d,
// a string list with one bit per query string, and the last sum that reached
// it. When a number s arrives from the leaf and s <= d, the window that
// produced it lies within d replacements of the leaf's motif, so the bit of
// the string now being streamed (str_idx) is set. Once every string has been
// streamed, an exit node whose list is all ones marks a verified common
// approximate substring and raises 'verified'. This is the paper's exit node.
//
// Clocking: numbers reach an exit node only on every second clock, so the
// node acts only when 'en' is high; en is the half-rate strobe from
// exit_clk_div (the paper lowers the exit nodes' clock with a divider; a clock
// enable on the single clock does the same job here). An assertion checks
// that no number ever arrives while en is low.
//
// This design's own choices: the list has N_STRINGS bits, bit j for the
// (j+1)-th streamed string (the paper's example records its string as the
// rightmost bit); d is loaded with d_we; 'clear' empties the list before a
// new batch of strings; reset clears everything.
module exit_node
  import cas_pkg::*;
#(
  parameter int N_STRINGS = 4,
  localparam int IDX_W = (N_STRINGS > 1) ? $clog2(N_STRINGS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,         // half-rate exit-node strobe
  input  logic                 clear,      // empty the string list
  input  logic                 d_we,
  input  dist_t                d_in,
  input  token_t               din,        // the leaf's data slot
  input  logic [IDX_W-1:0]     str_idx,    // string being streamed
  output logic                 verified,   // list is all ones
  output logic [N_STRINGS-1:0] str_list,
  output dist_t                d,
  output logic                 sum_valid,  // cur_sum holds a number
  output sum_t                 cur_sum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d         <= '0;
      str_list  <= '0;
      sum_valid <= 1'b0;
      cur_sum   <= '0;
    end else begin
      if (d_we) d <= d_in;
      if (clear) begin
        str_list  <= '0;
        sum_valid <= 1'b0;
      end else if (en) begin
        sum_valid <= (din.kind == TK_NUM);
        if (din.kind == TK_NUM) begin
          cur_sum <= din.val;
          if (din.val <= sum_t'(d)) str_list[str_idx] <= 1'b1;
        end
      end
    end
  end

  assign verified = &str_list;

  a_num_only_on_en: assert property (@(posedge clk) disable iff (!rst_n)
    din.kind == TK_NUM |-> en);
  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
    en && din.kind == TK_NUM |-> 32'(str_idx) < N_STRINGS);

endmodule
