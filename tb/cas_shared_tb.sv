// cas_shared_tb -- a shared forest for a whole first string.
//
// The first string ACTTGA has four windows of m = 3 (ACT, CTT, TTG, TGA).
// Their neighbourhoods within d = 1 overlap: ACT and CTT, for instance, both
// contain ATT and CCT, which must become a single path with a single leaf.
// Constant functions below do the preprocessing at elaboration: they collect
// the distinct motifs, then insert each one, reversed (the root holds the
// motif's last base), into a trie, so that equal upper parts of paths share
// nodes. The engine is built with that shape and those bases, four query
// strings are streamed, and every exit node is checked against a direct
// search for its motif. The testbench also checks the motif count and that
// sharing saved nodes.
`timescale 1ns/1ps
module cas_shared_tb;
  import cas_pkg::*;

  localparam int M = 3;
  localparam int D = 1;
  localparam int N = 4;
  localparam int FIRST_LEN = 6;
  localparam int FIRST [FIRST_LEN] = '{0, 1, 3, 3, 2, 0};   // A C T T G A
  localparam int MAXN = 512;

  typedef int big_t [MAXN];

  // motif code: base of position i in bits [2i+1:2i]
  function automatic int base_of(int code, int i);
    return (code >> (2 * i)) & 3;
  endfunction

  // what = 0: number of motifs, else the sorted list of distinct motifs
  function automatic big_t motifs(int what);
    big_t list;
    bit   seen [1 << (2 * M)];
    int   n = 0;
    for (int c = 0; c < (1 << (2 * M)); c++) seen[c] = 1'b0;
    for (int k = 0; k + M <= FIRST_LEN; k++) begin
      int w = 0;
      for (int i = 0; i < M; i++) w |= FIRST[k+i] << (2 * i);
      for (int c = 0; c < (1 << (2 * M)); c++) begin
        int hd = 0;
        for (int i = 0; i < M; i++) hd += (base_of(c, i) != base_of(w, i)) ? 1 : 0;
        if (hd <= D) seen[c] = 1'b1;
      end
    end
    for (int c = 0; c < (1 << (2 * M)); c++)
      if (seen[c]) begin list[n + 1] = c; n++; end
    list[0] = n;
    return list;
  endfunction

  // trie of the reversed motifs; what: 0 level, 1 parent, 2 base,
  // 3 leaf node of motif e, 4 node count (in [0])
  function automatic big_t trie(int what);
    big_t mo = motifs(1);
    big_t lvl, par, chr, leaf, res;
    int   n = 0;
    for (int e = 0; e < mo[0]; e++) begin
      int p = -1;
      for (int lv = 1; lv <= M; lv++) begin
        int b = base_of(mo[e + 1], M - lv);   // level lv faces position M - lv
        int found = -1;
        for (int j = 0; j < n; j++)
          if (found < 0 && par[j] == p && lvl[j] == lv && chr[j] == b) found = j;
        if (found < 0) begin
          lvl[n] = lv; par[n] = p; chr[n] = b; found = n; n++;
        end
        p = found;
      end
      leaf[e] = p;
    end
    case (what)
      0: res = lvl;
      1: res = par;
      2: res = chr;
      3: res = leaf;
      default: begin res = lvl; res[0] = n; end
    endcase
    return res;
  endfunction

  localparam big_t MO    = motifs(1);
  localparam int   P     = MO[0];
  localparam big_t TCNT  = trie(4);
  localparam int   NODES = TCNT[0];
  localparam big_t TLV   = trie(0);
  localparam big_t TPA   = trie(1);
  localparam big_t TCH   = trie(2);
  localparam big_t TLF   = trie(3);

  typedef int    node_tab_t [NODES];
  typedef int    leaf_tab_t [P];
  typedef base_t char_tab_t [NODES];

  function automatic node_tab_t cut_n(big_t t);
    node_tab_t r;
    for (int i = 0; i < NODES; i++) r[i] = t[i];
    return r;
  endfunction
  function automatic leaf_tab_t cut_p(big_t t);
    leaf_tab_t r;
    for (int i = 0; i < P; i++) r[i] = t[i];
    return r;
  endfunction
  function automatic char_tab_t cut_c(big_t t);
    char_tab_t r;
    for (int i = 0; i < NODES; i++) r[i] = base_t'(t[i]);
    return r;
  endfunction

  localparam node_tab_t LV = cut_n(TLV);
  localparam node_tab_t PA = cut_n(TPA);
  localparam char_tab_t CH = cut_c(TCH);
  localparam leaf_tab_t LF = cut_p(TLF);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam int AW = $clog2(NODES);

  logic        d_we, char_we, start, busy, done, s_valid, s_ready, s_last;
  dist_t       d_in;
  logic [AW-1:0] char_addr;
  base_t       char_data, s_char;
  logic [P-1:0] verified;
  logic [N-1:0] str_list [P];

  cas_top #(
    .M(M), .NODES(NODES), .LEAVES(P), .N_STRINGS(N),
    .NODE_LEVEL(LV), .NODE_PARENT(PA), .NODE_CHAR(CH), .LEAF_NODE(LF)
  ) dut (
    .clk, .rst_n, .d_we, .d_in, .char_we, .char_addr, .char_data,
    .start, .busy, .done, .s_valid, .s_ready, .s_char, .s_last,
    .verified, .str_list);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic bit hits(int code, base_t s[$]);
    for (int k = 0; k + M <= s.size(); k++) begin
      int mis = 0;
      for (int i = 0; i < M; i++) mis += (int'(s[k+i]) != base_of(code, i)) ? 1 : 0;
      if (mis <= D) return 1'b1;
    end
    return 1'b0;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base_t strs [N][$];
    int    nver, nhit, unshared;
    // four windows with 10 neighbours each; ACT/CTT share ATT and CCT,
    // CTT/TTG share CTG and TTT, TTG/TGA share TGG and TTA
    $display("distinct motifs %0d, shared-forest nodes %0d", P, NODES);
    check("distinct motifs", P == 34);
    unshared = 0;
    for (int k = 0; k + M <= FIRST_LEN; k++) unshared += 21;
    check("sharing saves nodes", NODES < unshared);
    d_we = 0; d_in = '0; char_we = 0; char_addr = '0; char_data = '0;
    start = 0; s_valid = 0; s_char = '0; s_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    for (int b = 0; b < 20; b++) begin
      @(negedge clk);
      d_we = 1; d_in = dist_t'(D);
      @(negedge clk);
      d_we = 0; start = 1;
      @(negedge clk);
      start = 0;
      for (int s = 0; s < N; s++) begin
        int l;
        strs[s].delete();
        if (s == 0) for (int k = 0; k < FIRST_LEN; k++) strs[s].push_back(base_t'(FIRST[k]));
        else begin
          l = $urandom_range(4, 14);
          for (int k = 0; k < l; k++) strs[s].push_back(base_t'($urandom_range(0, 3)));
        end
        for (int k = 0; k < strs[s].size(); k++) begin
          s_valid = 1; s_char = strs[s][k]; s_last = (k == strs[s].size() - 1);
          while (!s_ready) @(negedge clk);
          @(negedge clk);
          s_valid = 0; s_last = 0;
        end
      end
      while (!done) @(negedge clk);
      nver = 0; nhit = 0;
      for (int e = 0; e < P; e++) begin
        logic [N-1:0] exp_l;
        for (int s = 0; s < N; s++) exp_l[s] = hits(MO[e + 1], strs[s]);
        check("first string hits every motif", exp_l[0]);
        check("string list", str_list[e] == exp_l);
        check("verified", verified[e] == (&exp_l));
        nhit += $countones(exp_l);
        nver += (&exp_l) ? 1 : 0;
      end
      if (b == 0) $display("batch 0: leaf hits %0d, verified %0d", nhit, nver);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
