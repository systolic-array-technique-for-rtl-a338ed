// cas_top_tb -- end-to-end test of the CAS engine at its default size
// (motif ACT, m = 3, 21 processing nodes, 10 exit nodes, four query strings).
//
// The testbench is the host. It loads d, optionally rewrites the node bases,
// pulses start and streams four strings, sometimes stalling. When done rises
// it compares every exit node's string list and the verified vector with a
// reference model (string s hits leaf e when some window of m bases, read
// against the path from leaf up to root, has at most d mismatches). It also
// replays the paper's example string TCT, checks the 2l + m clocks per string
// when the host does not stall, and counts how often each mechanism occurred:
// stall bubbles, windows invalidated by the d+1 start value, node base
// reloads, hits, verified solutions and batches with no solution.
`timescale 1ns/1ps
module cas_top_tb;
  import cas_pkg::*;

  localparam int M      = FIG2A_M;
  localparam int NODES  = FIG2A_NODES;
  localparam int LEAVES = FIG2A_LEAVES;
  localparam int N      = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        d_we, char_we, start, busy, done, s_valid, s_ready, s_last;
  dist_t       d_in;
  logic [4:0]  char_addr;
  base_t       char_data, s_char;
  logic [LEAVES-1:0] verified;
  logic [N-1:0] str_list [LEAVES];

  cas_top dut (
    .clk, .rst_n, .d_we, .d_in, .char_we, .char_addr, .char_data,
    .start, .busy, .done, .s_valid, .s_ready, .s_char, .s_last,
    .verified, .str_list);

  base_t node_chr [NODES];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_stall = 0, n_reload = 0, n_hit = 0, n_verified = 0, n_none = 0;
  int n_invalid = 0, n_batches = 0, n_timed = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int mism(base_t s[$], int k, int ln);
    int n = ln, mis = 0;
    for (int lv = M; lv >= 1; lv--) begin
      mis += (s[k-lv+1] != node_chr[n]) ? 1 : 0;
      n = FIG2A_PARENT[n];
    end
    return mis;
  endfunction

  function automatic bit ref_hit(base_t s[$], int ln, int dv);
    for (int k = M - 1; k < s.size(); k++)
      if (mism(s, k, ln) <= dv) return 1'b1;
    return 1'b0;
  endfunction

  // counts windows that would pass if the first m-1 numbers were not d+1:
  // partial windows mixing in bases left over from the previous string
  function automatic int ref_partial(base_t s[$], int ln, int dv);
    int c = 0;
    int n, mis;
    for (int k = 0; k < M - 1 && k < s.size(); k++) begin
      n = ln; mis = 0;
      for (int lv = M; lv >= 1; lv--) begin
        if (k - lv + 1 >= 0) mis += (s[k-lv+1] != node_chr[n]) ? 1 : 0;
        n = FIG2A_PARENT[n];
      end
      if (mis <= dv) c++;
    end
    return c;
  endfunction

  task automatic run_batch(base_t strs [N][$], int dv, bit stall);
    int t0, expect_cycles;
    @(negedge clk);
    d_we = 1; d_in = dist_t'(dv);
    @(negedge clk);
    d_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cycle;
    expect_cycles = 0;
    for (int s = 0; s < N; s++) begin
      expect_cycles += 2 * strs[s].size() + M;
      for (int k = 0; k < strs[s].size(); k++) begin
        if (stall && $urandom_range(0, 3) == 0) begin
          s_valid = 0;
          repeat ($urandom_range(1, 2)) @(negedge clk);
          n_stall++;
        end
        s_valid = 1; s_char = strs[s][k]; s_last = (k == strs[s].size() - 1);
        while (!s_ready) @(negedge clk);
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
    end
    while (!done) @(negedge clk);
    if (!stall) begin
      check("2l+m clocks per string", cycle - t0 == expect_cycles);
      n_timed++;
    end
    n_batches++;
    for (int e = 0; e < LEAVES; e++) begin
      logic [N-1:0] exp_l;
      for (int s = 0; s < N; s++) begin
        exp_l[s] = ref_hit(strs[s], FIG2A_LEAF[e], dv);
        n_invalid += ref_partial(strs[s], FIG2A_LEAF[e], dv);
      end
      check("string list", str_list[e] == exp_l);
      check("verified", verified[e] == (&exp_l));
      if (str_list[e] != exp_l)
        $display("  leaf %0d got %b exp %b (d=%0d)", e, str_list[e], exp_l, dv);
      n_hit += $countones(exp_l);
      n_verified += (&exp_l) ? 1 : 0;
    end
    if (verified == '0) n_none++;
  endtask

  task automatic reload_bases();
    for (int i = 0; i < NODES; i++) begin
      @(negedge clk);
      char_we = 1; char_addr = 5'(i); char_data = base_t'($urandom_range(0, 3));
      node_chr[i] = char_data;
    end
    @(negedge clk);
    char_we = 0;
    n_reload++;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base_t strs [N][$];
    int    dv, l;
    d_we = 0; d_in = '0; char_we = 0; char_addr = '0; char_data = '0;
    start = 0; s_valid = 0; s_char = '0; s_last = 0;
    for (int i = 0; i < NODES; i++) node_chr[i] = FIG2A_CHAR[i];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("idle after reset", !busy && !done && verified == '0);

    // The paper's example: TCT with d = 1 is within one replacement of the
    // path T-C-A read upward (leaf 4, motif ACT) and of seven other leaves.
    for (int s = 0; s < N; s++) strs[s] = '{BASE_T, BASE_C, BASE_T};
    run_batch(strs, 1, 1'b0);
    check("TCT hits path ACT", str_list[4] == 4'b1111);

    for (int b = 0; b < 150; b++) begin
      dv = $urandom_range(0, 2);
      if (b % 10 == 9) reload_bases();
      for (int s = 0; s < N; s++) begin
        strs[s].delete();
        l = $urandom_range(1, 12);
        for (int k = 0; k < l; k++) strs[s].push_back(base_t'($urandom_range(0, 3)));
      end
      run_batch(strs, dv, b % 2 == 1);
    end

    $display("mechanisms: stalls %0d, invalidated partial windows %0d, reloads %0d, hits %0d, verified %0d, batches without solution %0d, timed batches %0d",
             n_stall, n_invalid, n_reload, n_hit, n_verified, n_none, n_timed);
    check("stall happened", n_stall > 0);
    check("d+1 invalidation happened", n_invalid > 0);
    check("base reload happened", n_reload > 0);
    check("hit happened", n_hit > 0);
    check("verified solution happened", n_verified > 0);
    check("batch without solution happened", n_none > 0);
    check("2l+m timing checked", n_timed > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
