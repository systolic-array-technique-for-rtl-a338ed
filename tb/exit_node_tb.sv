// exit_node_tb -- self-checking test of the exit node.
//
// Replays the end of the paper's worked example (d = 1, the sum 1 for the
// first string must set the rightmost list bit), then streams random sums on
// the half-rate strobe for four strings, tracking the expected list and the
// 'verified' output in the testbench. Also checks that d is reloadable, that
// clear empties the list and that tokens other than numbers change nothing.
`timescale 1ns/1ps
module exit_node_tb;
  import cas_pkg::*;

  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic         en, clear, d_we;
  dist_t        d_in;
  token_t       din;
  logic [1:0]   str_idx;
  logic         verified, sum_valid;
  logic [N-1:0] str_list;
  dist_t        d;
  sum_t         cur_sum;

  exit_node #(.N_STRINGS(N)) dut (
    .clk, .rst_n, .en, .clear, .d_we, .d_in, .din, .str_idx,
    .verified, .str_list, .d, .sum_valid, .cur_sum);

  logic [N-1:0] r_list;
  int unsigned  r_d;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // one clock with the given inputs; en is high only with numbers
  task automatic step(token_t t, int idx);
    din = t; str_idx = 2'(idx); en = (t.kind == TK_NUM);
    @(posedge clk); #1;
    if (t.kind == TK_NUM && int'(t.val) <= int'(r_d)) r_list[idx] = 1'b1;
    check("list", str_list == r_list);
    check("verified", verified == (&r_list));
    if (t.kind == TK_NUM) check("cur_sum", cur_sum == t.val && sum_valid);
    // the other half of the strobe period: a non-number slot
    din = ($urandom_range(0, 1) != 0) ? TOKEN_NONE : mk_char(base_t'($urandom_range(0, 3)));
    en = 1'b0;
    @(posedge clk); #1;
    check("list held", str_list == r_list);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clear = 0; d_we = 0; d_in = '0; din = TOKEN_NONE; str_idx = '0;
    r_list = '0; r_d = 1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("reset", str_list == '0 && !verified);
    d_we = 1; d_in = 4'd1; @(posedge clk); #1; d_we = 0;
    check("d loaded", d == 4'd1);

    // worked example: sums 3, 4 fail; 1 passes for string 1 (bit 0)
    step(mk_num(8'd3), 0);
    step(mk_num(8'd4), 0);
    check("ex: no bit yet", str_list == 4'b0000);
    step(mk_num(8'd1), 0);
    check("ex: 0001", str_list == 4'b0001);
    step(TOKEN_NONE, 1);

    for (int batch = 0; batch < 40; batch++) begin
      clear = 1; @(posedge clk); #1; clear = 0;
      r_list = '0;
      check("cleared", str_list == '0 && !verified);
      r_d = $urandom_range(0, 3);
      d_we = 1; d_in = dist_t'(r_d); @(posedge clk); #1; d_we = 0;
      for (int s = 0; s < N; s++)
        for (int k = 0; k < 8; k++)
          step(mk_num(sum_t'($urandom_range(0, 6))), s);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
