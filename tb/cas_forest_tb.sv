// cas_forest_tb -- self-checking test of the systolic forest (default shape:
// all motifs within one replacement of ACT, 21 processing nodes, 10 exits).
//
// Part 1 replays the paper's worked example: the string TCT is streamed as
// T 2 C 2 T 0 - - - and after every clock the nodes of the path A-C-T and its
// exit node must hold the values printed in the example's figures (mismatch
// histories, data slots, exit sum and string list 0001).
// Part 2 streams batches of four random strings, with random d and randomly
// reloaded node bases, and compares every exit node's string list with a
// reference model: string s hits leaf e when some window of m characters,
// read against the path from leaf to root (level 1 faces the newest
// character), has at most d mismatches. The exit strobe is generated here
// from the token stream, independently of the design's divider.
`timescale 1ns/1ps
module cas_forest_tb;
  import cas_pkg::*;

  localparam int M = FIG2A_M;
  localparam int NODES = FIG2A_NODES;
  localparam int LEAVES = FIG2A_LEAVES;
  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  token_t      top;
  logic        char_we, exit_en, clear, d_we;
  logic [4:0]  char_addr;
  base_t       char_data;
  dist_t       d_in;
  logic [1:0]  str_idx;
  logic [LEAVES-1:0] verified;
  logic [N-1:0] str_list [LEAVES];
  token_t      leaf_data [LEAVES];

  cas_forest #(.N_STRINGS(N)) dut (
    .clk, .rst_n, .top, .char_we, .char_addr, .char_data, .exit_en, .clear,
    .d_we, .d_in, .str_idx, .verified, .str_list, .leaf_data);

  // exit strobe: a number entered M clocks ago
  logic [M-1:0] num_hist;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) num_hist <= '0;
    else        num_hist <= {num_hist[M-2:0], top.kind == TK_NUM};
  assign exit_en = num_hist[M-1];

  base_t node_chr [NODES];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic feed(token_t t);
    @(negedge clk); top = t;
  endtask

  function automatic token_t C(base_t b); return mk_char(b); endfunction
  function automatic token_t Nm(int v);   return mk_num(sum_t'(v)); endfunction

  // snapshot of path A-C-T (nodes 0, 2, 9) and its exit (index 4)
  task automatic snap(string tag, logic [0:0] b1, token_t d1, logic [1:0] b2, token_t d2,
                      logic [2:0] b3, token_t d3, int xsum, logic [3:0] xlist);
    @(posedge clk); #1;
    check({tag, " L1"}, dut.g_node[0].u_node.bitvec == b1 && dut.node_data[0] == d1);
    check({tag, " L2"}, dut.g_node[2].u_node.bitvec == b2 && dut.node_data[2] == d2);
    check({tag, " L3"}, dut.g_node[9].u_node.bitvec == b3 && dut.node_data[9] == d3);
    // xsum -1: the example shows '-' at the exit, a slot the strobed exit
    // node skips; it keeps the previous sum, so nothing is checked then
    if (xsum >= 0) check({tag, " exit sum"}, dut.g_exit[4].u_exit.sum_valid &&
                                    int'(dut.g_exit[4].u_exit.cur_sum) == xsum);
    check({tag, " exit list"}, str_list[4] == xlist);
  endtask

  // reference: does string s (chars) hit the path ending in leaf node ln?
  function automatic bit ref_hit(base_t s[$], int ln, int dv);
    base_t p[M];
    int n = ln;
    for (int lv = M; lv >= 1; lv--) begin
      p[lv-1] = node_chr[n];
      n = FIG2A_PARENT[n];
    end
    for (int k = M - 1; k < s.size(); k++) begin
      int mis = 0;
      for (int lv = 1; lv <= M; lv++) mis += (s[k-lv+1] != p[lv-1]) ? 1 : 0;
      if (mis <= dv) return 1'b1;
    end
    return 1'b0;
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hits = 0, verif = 0;

  initial begin
    token_t T;
    T = TOKEN_NONE;
    top = TOKEN_NONE; char_we = 0; char_addr = '0; char_data = '0;
    clear = 0; d_we = 0; d_in = '0; str_idx = '0;
    for (int i = 0; i < NODES; i++) node_chr[i] = FIG2A_CHAR[i];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    d_we = 1; d_in = 4'd1;
    @(negedge clk);
    d_we = 0;

    // ---- Part 1: worked example, string TCT, d = 1 ----
    top = C(BASE_T); snap("A", 1'b1, C(BASE_T), 2'b00, T, 3'b000, T, -1, 4'b0000);
    top = Nm(2);     snap("B", 1'b1, Nm(3), 2'b01, C(BASE_T), 3'b000, T, -1, 4'b0000);
    top = C(BASE_C); snap("C", 1'b1, C(BASE_C), 2'b01, Nm(3), 3'b000, C(BASE_T), -1, 4'b0000);
    top = Nm(2);     snap("D", 1'b1, Nm(3), 2'b10, C(BASE_C), 3'b000, Nm(3), -1, 4'b0000);
    top = C(BASE_T); snap("E", 1'b1, C(BASE_T), 2'b10, Nm(4), 3'b001, C(BASE_C), 3, 4'b0000);
    top = Nm(0);     snap("F", 1'b1, Nm(1), 2'b01, C(BASE_T), 3'b001, Nm(4), -1, 4'b0000);
    top = T;         snap("G", 1'b1, T, 2'b01, Nm(1), 3'b010, C(BASE_T), 4, 4'b0000);
    top = T;         snap("H", 1'b1, T, 2'b01, T, 3'b010, Nm(1), -1, 4'b0000);
    top = T;         snap("I", 1'b1, T, 2'b01, T, 3'b010, T, 1, 4'b0001);

    // ---- Part 2: random batches against the reference model ----
    for (int b = 0; b < 60; b++) begin
      base_t strs [N][$];
      int dv;
      dv = $urandom_range(0, 2);
      @(negedge clk);
      top = TOKEN_NONE;
      d_we = 1; d_in = dist_t'(dv); clear = 1;
      if (b % 3 == 2) begin
        // reload every base at random: same shape, other motifs
        for (int i = 0; i < NODES; i++) begin
          @(negedge clk);
          d_we = 0; clear = 0;
          char_we = 1; char_addr = 5'(i); char_data = base_t'($urandom_range(0, 3));
          node_chr[i] = char_data;
        end
      end
      @(negedge clk);
      d_we = 0; clear = 0; char_we = 0;
      for (int s = 0; s < N; s++) begin
        int l;
        l = $urandom_range(2, 10);
        strs[s].delete();
        str_idx = 2'(s);
        for (int k = 0; k < l; k++) begin
          base_t c;
          c = base_t'($urandom_range(0, 3));
          strs[s].push_back(c);
          top = C(c);
          @(negedge clk);
          top = (k + 1 < M) ? Nm(dv + 1) : Nm(0);
          @(negedge clk);
        end
        for (int f = 0; f < M; f++) begin top = TOKEN_NONE; @(negedge clk); end
      end
      for (int e = 0; e < LEAVES; e++) begin
        logic [N-1:0] exp_l;
        for (int s = 0; s < N; s++) exp_l[s] = ref_hit(strs[s], FIG2A_LEAF[e], dv);
        check("string list", str_list[e] == exp_l);
        check("verified", verified[e] == (&exp_l));
        if (str_list[e] != exp_l) $display("  leaf %0d got %b exp %b (d=%0d)", e, str_list[e], exp_l, dv);
        hits += $countones(exp_l);
        verif += (&exp_l) ? 1 : 0;
      end
    end
    check("some hits", hits > 0);
    check("some verified leaves", verif > 0);
    $display("hits %0d, verified leaves %0d", hits, verif);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
