// cas_m10d2_tb -- the m = 10, d = 2 size: one generating motif and its 436
// neighbours within two replacements, built as a prefix-shared tree.
//
// The tree shape depends only on m and d: under a node that has used e of its
// d replacements there is one child that repeats the motif's base and, while
// e < d, three children carrying the other bases. Constant functions below
// lay that shape out level by level (1660 processing nodes, the 436 leaves
// last). At run time the testbench writes the bases for a random motif (its
// reverse, since level 1 faces the newest base), streams four random strings
// of 60 bases, each with a copy of the motif carrying up to two random
// replacements (so at least the motif itself must come out verified), and
// checks all 436 string lists against a software search.
`timescale 1ns/1ps
module cas_m10d2_tb;
  import cas_pkg::*;

  localparam int M = 10;
  localparam int D = 2;
  localparam int N = 4;
  localparam int L = 60;

  function automatic int binom(int n, int k);
    int r = 1;
    for (int i = 0; i < k; i++) r = r * (n - i) / (i + 1);
    return r;
  endfunction
  function automatic int ball(int len);
    int r = 0, p = 1;
    for (int i = 0; i <= D && i <= len; i++) begin
      r += binom(len, i) * p;
      p *= 3;
    end
    return r;
  endfunction
  function automatic int count_nodes();
    int r = 0;
    for (int lv = 1; lv <= M; lv++) r += ball(lv);
    return r;
  endfunction

  localparam int NODES  = count_nodes();   // 1660
  localparam int LEAVES = ball(M);         // 436

  typedef int    node_tab_t [NODES];
  typedef int    leaf_tab_t [LEAVES];
  typedef base_t char_tab_t [NODES];

  // what = 0: level, 1: parent, 2: rank (0 = motif base, 1..3 = other bases)
  function automatic node_tab_t shape(int what);
    node_tab_t lvl, par, rk, er, res;
    int n = 0, s = 0, e;
    for (int r = 0; r < 4; r++)
      if (r == 0 || D > 0) begin
        lvl[n] = 1; par[n] = -1; rk[n] = r; er[n] = (r != 0) ? 1 : 0; n++;
      end
    for (int lv = 2; lv <= M; lv++) begin
      e = n;
      for (int p = s; p < e; p++)
        for (int r = 0; r < 4; r++)
          if (r == 0 || er[p] < D) begin
            lvl[n] = lv; par[n] = p; rk[n] = r; er[n] = er[p] + ((r != 0) ? 1 : 0); n++;
          end
      s = e;
    end
    res = (what == 0) ? lvl : (what == 1) ? par : rk;
    return res;
  endfunction
  function automatic leaf_tab_t leaves();
    leaf_tab_t t;
    for (int e = 0; e < LEAVES; e++) t[e] = NODES - LEAVES + e;
    return t;
  endfunction
  function automatic char_tab_t all_a();
    char_tab_t t;
    for (int i = 0; i < NODES; i++) t[i] = BASE_A;
    return t;
  endfunction

  localparam node_tab_t LV = shape(0);
  localparam node_tab_t PA = shape(1);
  localparam node_tab_t RK = shape(2);
  localparam leaf_tab_t LF = leaves();
  localparam char_tab_t CH = all_a();

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        d_we, char_we, start, busy, done, s_valid, s_ready, s_last;
  dist_t       d_in;
  logic [10:0] char_addr;
  base_t       char_data, s_char;
  logic [LEAVES-1:0] verified;
  logic [N-1:0] str_list [LEAVES];

  cas_top #(
    .M(M), .NODES(NODES), .LEAVES(LEAVES), .N_STRINGS(N),
    .NODE_LEVEL(LV), .NODE_PARENT(PA), .NODE_CHAR(CH), .LEAF_NODE(LF)
  ) dut (
    .clk, .rst_n, .d_we, .d_in, .char_we, .char_addr, .char_data,
    .start, .busy, .done, .s_valid, .s_ready, .s_char, .s_last,
    .verified, .str_list);

  base_t node_chr [NODES];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // path of leaf node ln read from leaf to root = motif in string order
  function automatic bit ref_hit(base_t s[$], int ln);
    for (int k = M - 1; k < s.size(); k++) begin
      int n = ln, mis = 0;
      for (int lv = M; lv >= 1; lv--) begin
        mis += (s[k-lv+1] != node_chr[n]) ? 1 : 0;
        n = PA[n];
      end
      if (mis <= D) return 1'b1;
    end
    return 1'b0;
  endfunction

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base_t g [M];
    base_t strs [N][$];
    int    nver, nhit, pos;
    check("1660 nodes, 436 leaves", NODES == 1660 && LEAVES == 436);
    d_we = 0; d_in = '0; char_we = 0; char_addr = '0; char_data = '0;
    start = 0; s_valid = 0; s_char = '0; s_last = 0;
    for (int i = 0; i < M; i++) g[i] = base_t'($urandom_range(0, 3));
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // bases: level lv faces motif position M - lv; rank r > 0 picks the
    // r-th base after the motif's, modulo 4
    for (int i = 0; i < NODES; i++) begin
      node_chr[i] = base_t'(g[M - LV[i]] + base_t'(RK[i]));
      @(negedge clk);
      char_we = 1; char_addr = 11'(i); char_data = node_chr[i];
    end
    @(negedge clk);
    char_we = 0; d_we = 1; d_in = dist_t'(D);
    @(negedge clk);
    d_we = 0; start = 1;
    @(negedge clk);
    start = 0;

    for (int s = 0; s < N; s++) begin
      for (int k = 0; k < L; k++) strs[s].push_back(base_t'($urandom_range(0, 3)));
      pos = $urandom_range(0, L - M);
      for (int i = 0; i < M; i++) strs[s][pos + i] = g[i];
      for (int j = 0; j < 2; j++)
        strs[s][pos + $urandom_range(0, M - 1)] = base_t'($urandom_range(0, 3));
      for (int k = 0; k < L; k++) begin
        s_valid = 1; s_char = strs[s][k]; s_last = (k == L - 1);
        while (!s_ready) @(negedge clk);
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
    end
    while (!done) @(negedge clk);

    nver = 0; nhit = 0;
    for (int e = 0; e < LEAVES; e++) begin
      logic [N-1:0] exp_l;
      for (int s = 0; s < N; s++) exp_l[s] = ref_hit(strs[s], LF[e]);
      check("string list", str_list[e] == exp_l);
      check("verified", verified[e] == (&exp_l));
      nhit += $countones(exp_l);
      nver += (&exp_l) ? 1 : 0;
    end
    $display("leaf hits %0d, verified leaves %0d", nhit, nver);
    check("some leaf hits", nhit > 0);
    check("the motif itself verified", nver > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
