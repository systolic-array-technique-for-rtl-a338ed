// cas_fig1_tb -- the four-string example workload: motifs of length m = 5 with
// d = 1 over the strings
//   TGACTCGACC  TACTGCCTCG  CTGGCTAATA  ATTCCTGACT.
//
// Preprocessing is done here, as host software would: every length-5 window
// of the first string and every motif one replacement away from it (94
// distinct motifs) becomes one path of a forest without sharing (94 chains of
// five nodes, 470 processing nodes, 94 exit nodes). Each path is loaded with
// its motif reversed, since level 1 faces the newest base. All four strings
// are then streamed through the engine. Exactly four motifs must come out
// verified: TGACT, TGCCT, TGGCT and TGTCT. Every exit node's string list is
// also checked against a direct software search.
`timescale 1ns/1ps
module cas_fig1_tb;
  import cas_pkg::*;

  localparam int M      = 5;
  localparam int P      = 94;          // distinct motifs
  localparam int NODES  = P * M;
  localparam int N      = 4;
  localparam int L      = 10;

  typedef int node_tab_t [NODES];
  typedef int leaf_tab_t [P];
  typedef base_t char_tab_t [NODES];

  function automatic node_tab_t chain_level();
    node_tab_t t;
    for (int i = 0; i < NODES; i++) t[i] = i % M + 1;
    return t;
  endfunction
  function automatic node_tab_t chain_parent();
    node_tab_t t;
    for (int i = 0; i < NODES; i++) t[i] = (i % M == 0) ? -1 : i - 1;
    return t;
  endfunction
  function automatic leaf_tab_t chain_leaf();
    leaf_tab_t t;
    for (int e = 0; e < P; e++) t[e] = e * M + M - 1;
    return t;
  endfunction
  function automatic char_tab_t all_a();
    char_tab_t t;
    for (int i = 0; i < NODES; i++) t[i] = BASE_A;
    return t;
  endfunction

  localparam node_tab_t LV = chain_level();
  localparam node_tab_t PA = chain_parent();
  localparam leaf_tab_t LF = chain_leaf();
  localparam char_tab_t CH = all_a();

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        d_we, char_we, start, busy, done, s_valid, s_ready, s_last;
  dist_t       d_in;
  logic [8:0]  char_addr;
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

  function automatic base_t enc(byte c);
    case (c)
      "A": return BASE_A;
      "C": return BASE_C;
      "G": return BASE_G;
      default: return BASE_T;
    endcase
  endfunction

  function automatic bit hits(string mo, string s);
    for (int k = 0; k + M <= s.len(); k++) begin
      int mis = 0;
      for (int i = 0; i < M; i++) mis += (mo[i] != s[k+i]) ? 1 : 0;
      if (mis <= 1) return 1'b1;
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
    string strs [N];
    string motifs [$];
    string w, v;
    string acgt;
    bit    seen [string];
    int    t0, nver;
    acgt = "ACGT";
    strs[0] = "TGACTCGACC"; strs[1] = "TACTGCCTCG";
    strs[2] = "CTGGCTAATA"; strs[3] = "ATTCCTGACT";

    // preprocessing: the distance-1 neighbourhood of every window of string 1
    for (int k = 0; k + M <= L; k++) begin
      w = strs[0].substr(k, k + M - 1);
      for (int i = -1; i < M; i++)
        for (int c = 0; c < 4; c++) begin
          v = w;
          if (i >= 0) v[i] = acgt[c];
          if (!seen.exists(v)) begin
            seen[v] = 1'b1;
            motifs.push_back(v);
          end
        end
    end
    check("94 distinct motifs", motifs.size() == P);

    d_we = 0; d_in = '0; char_we = 0; char_addr = '0; char_data = '0;
    start = 0; s_valid = 0; s_char = '0; s_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    // load path e with motif e reversed: level lv holds motif[M - lv]
    for (int e = 0; e < P; e++)
      for (int lv = 1; lv <= M; lv++) begin
        @(negedge clk);
        char_we = 1; char_addr = 9'(e * M + lv - 1);
        char_data = enc(motifs[e][M - lv]);
      end
    @(negedge clk);
    char_we = 0; d_we = 1; d_in = 4'd1;
    @(negedge clk);
    d_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    t0 = int'($time / 10);
    for (int s = 0; s < N; s++)
      for (int k = 0; k < L; k++) begin
        s_valid = 1; s_char = enc(strs[s][k]); s_last = (k == L - 1);
        while (!s_ready) @(negedge clk);
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
    while (!done) @(negedge clk);
    check("4 x (2l + m) clocks", int'($time / 10) - t0 == N * (2 * L + M));

    nver = 0;
    for (int e = 0; e < P; e++) begin
      logic [N-1:0] exp_l;
      bit           want;
      for (int s = 0; s < N; s++) exp_l[s] = hits(motifs[e], strs[s]);
      check("string list", str_list[e] == exp_l);
      want = (motifs[e] == "TGACT") || (motifs[e] == "TGCCT") ||
             (motifs[e] == "TGGCT") || (motifs[e] == "TGTCT");
      check({"verified ", motifs[e]}, verified[e] == want);
      if (verified[e]) begin
        nver++;
        $display("verified CAS solution: %s", motifs[e]);
      end
    end
    check("four solutions", nver == 4);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
