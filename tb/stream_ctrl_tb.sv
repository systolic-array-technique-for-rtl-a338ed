// stream_ctrl_tb -- self-checking test of the processing-step sequencer.
//
// Acts as the host: loads d, pulses start and streams N_STRINGS = 4 random
// strings per batch, with and without stalls. A monitor records every token
// the sequencer sends to the trees and compares it with the sequence the
// algorithm prescribes: each character followed by d+1 (while fewer than m
// characters of the string have entered) or 0, then m '-' tokens. Without
// stalls it also checks the paper's 2l + m clocks per string, the string
// number, the sync marker and the done flag.
`timescale 1ns/1ps
module stream_ctrl_tb;
  import cas_pkg::*;

  localparam int M = 3;
  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic       d_we, start, s_valid, s_ready, s_last, sync, clear, busy, done;
  dist_t      d_in, d;
  base_t      s_char;
  token_t     top;
  logic [1:0] str_idx;

  stream_ctrl #(.M(M), .N_STRINGS(N)) dut (
    .clk, .rst_n, .d_we, .d_in, .start, .s_valid, .s_ready, .s_char, .s_last,
    .top, .sync, .str_idx, .clear, .d, .busy, .done);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected non-'-' tokens, with the string number each belongs to
  token_t exp_q[$];
  int     exp_idx[$];
  int     cycle = 0;
  int     sync_cycle[$];
  int     dash_run = 0;
  int     flush_runs[$];
  int     stalls = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && busy) begin
      if (sync) sync_cycle.push_back(cycle);
      if (top.kind == TK_NONE) dash_run++;
      else begin
        if (top.kind == TK_CHAR && dash_run != 0) flush_runs.push_back(dash_run);
        dash_run = 0;
        if (exp_q.size() == 0) check("unexpected token", 1'b0);
        else begin
          token_t e;
          int     ei;
          e  = exp_q.pop_front();
          ei = exp_idx.pop_front();
          check("token", top == e);
          if (top != e) $display("  got %p exp %p", top, e);
          check("str_idx", int'(str_idx) == ei);
        end
      end
    end
  end

  task automatic run_batch(int dval, bit stall, output int cycles, output int total_l);
    int lens[N];
    int t0;
    total_l = 0;
    sync_cycle.delete(); flush_runs.delete();
    for (int s = 0; s < N; s++) begin
      lens[s] = $urandom_range(1, 9);
      total_l += lens[s];
    end
    @(negedge clk);
    d_we = 1; d_in = dist_t'(dval);
    @(negedge clk);
    d_we = 0;
    check("d loaded", d == dist_t'(dval));
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cycle;
    for (int s = 0; s < N; s++) begin
      for (int k = 0; k < lens[s]; k++) begin
        base_t c = base_t'($urandom_range(0, 3));
        exp_q.push_back(mk_char(c));            exp_idx.push_back(s);
        exp_q.push_back((k + 1 < M) ? mk_num(sum_t'(dval + 1)) : mk_num('0));
        exp_idx.push_back(s);
        if (stall && $urandom_range(0, 2) == 0) begin
          s_valid = 0;
          repeat ($urandom_range(1, 3)) @(negedge clk);
          stalls++;
        end
        s_valid = 1; s_char = c; s_last = (k == lens[s] - 1);
        while (!s_ready) @(negedge clk);
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
    end
    while (!done) @(negedge clk);
    cycles = cycle - t0;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, tl;
    d_we = 0; d_in = '0; start = 0; s_valid = 0; s_char = '0; s_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("idle after reset", !busy && !done && s_ready == 0);

    for (int b = 0; b < 30; b++) begin
      bit st;
      st = (b % 2) == 1;
      run_batch($urandom_range(0, 3), st, cyc, tl);
      check("all tokens sent", exp_q.size() == 0);
      check("one sync per string", sync_cycle.size() == N);
      if (!st) begin
        // sum of (2l + m) clocks, counted from the first character
        check("2l+m clocks per string", cyc == 2 * tl + N * M);
        for (int s = 0; s < N - 1; s++)
          check("m flush tokens", flush_runs[s] == M);
      end
      check("str_idx at end", str_idx == 2'(N - 1));
    end
    check("stalls happened", stalls > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
