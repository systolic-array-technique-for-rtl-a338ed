// cas_query_len_tb -- long queries through the default engine (motif ACT,
// m = 3, d = 1): one batch of four random strings of 200, 500, 1000 and 2000
// bases, the query lengths of the performance comparison. For every string it
// measures the clocks from its first base entering to the next string's first
// base (or to done) and requires exactly 2l + m, and it checks every exit
// node's string list against a software search.
`timescale 1ns/1ps
module cas_query_len_tb;
  import cas_pkg::*;

  localparam int M      = FIG2A_M;
  localparam int LEAVES = FIG2A_LEAVES;
  localparam int N      = 4;
  localparam int LEN [N] = '{200, 500, 1000, 2000};

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

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // first-base clocks, seen at the sequencer
  int sync_at [$];
  always @(posedge clk) if (dut.sync) sync_at.push_back(cycle);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic bit ref_hit(base_t s[$], int ln);
    for (int k = M - 1; k < s.size(); k++) begin
      int n = ln, mis = 0;
      for (int lv = M; lv >= 1; lv--) begin
        mis += (s[k-lv+1] != FIG2A_CHAR[n]) ? 1 : 0;
        n = FIG2A_PARENT[n];
      end
      if (mis <= 1) return 1'b1;
    end
    return 1'b0;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base_t strs [N][$];
    int    t_done;
    d_we = 0; d_in = '0; char_we = 0; char_addr = '0; char_data = '0;
    start = 0; s_valid = 0; s_char = '0; s_last = 0;
    for (int s = 0; s < N; s++)
      for (int k = 0; k < LEN[s]; k++) strs[s].push_back(base_t'($urandom_range(0, 3)));
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    d_we = 1; d_in = 4'd1;
    @(negedge clk);
    d_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    for (int s = 0; s < N; s++)
      for (int k = 0; k < LEN[s]; k++) begin
        s_valid = 1; s_char = strs[s][k]; s_last = (k == LEN[s] - 1);
        while (!s_ready) @(negedge clk);
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
    while (!done) @(negedge clk);
    t_done = cycle;
    check("one first base per string", sync_at.size() == N);
    for (int s = 0; s < N; s++) begin
      int t_end;
      t_end = (s == N - 1) ? t_done : sync_at[s+1];
      $display("query of %0d bases: %0d clocks (2l + m = %0d)", LEN[s],
               t_end - sync_at[s], 2 * LEN[s] + M);
      check("2l + m clocks", t_end - sync_at[s] == 2 * LEN[s] + M);
    end
    for (int e = 0; e < LEAVES; e++) begin
      logic [N-1:0] exp_l;
      for (int s = 0; s < N; s++) exp_l[s] = ref_hit(strs[s], FIG2A_LEAF[e]);
      check("string list", str_list[e] == exp_l);
      check("verified", verified[e] == (&exp_l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
