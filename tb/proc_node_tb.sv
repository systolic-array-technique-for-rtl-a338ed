// proc_node_tb -- self-checking test of the regular processing node.
//
// First replays the level-1 steps of the paper's worked example (a node with
// base A sees T, then the number 2, and must hold mismatch bit 1 and then the
// sum 3). Then it drives nodes of level 1 and level 3 with random streams of
// characters, numbers and '-' and compares data slot and mismatch history,
// every clock, with a reference model kept as a plain bit queue. Base
// reloading is exercised on the way.
`timescale 1ns/1ps
module proc_node_tb;
  import cas_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic   ld_en;
  base_t  ld_char;
  token_t din;
  token_t dout1, dout3;
  base_t  ch1, ch3;
  logic [0:0] bv1;
  logic [2:0] bv3;

  proc_node #(.LEVEL(1), .INIT_CHAR(BASE_A)) u1 (
    .clk, .rst_n, .ld_en, .ld_char, .din, .dout(dout1), .node_char(ch1), .bitvec(bv1));
  proc_node #(.LEVEL(3), .INIT_CHAR(BASE_T)) u3 (
    .clk, .rst_n, .ld_en, .ld_char, .din, .dout(dout3), .node_char(ch3), .bitvec(bv3));

  // reference state
  base_t  r_ch1, r_ch3;
  logic [0:0] r_bv1;
  logic [2:0] r_bv3;
  token_t r_out1, r_out3;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic token_t ref_step(token_t t, base_t ch, int level,
                                      ref logic [2:0] bv);
    token_t o;
    logic [2:0] mask = 3'((1 << level) - 1);
    unique case (t.kind)
      TK_CHAR: begin
        bv = ((bv << 1) | 3'(t.val[1:0] != ch)) & mask;
        o  = t;
      end
      TK_NUM:  o = mk_num(t.val + sum_t'(bv[level-1]));
      default: o = TOKEN_NONE;
    endcase
    return o;
  endfunction

  task automatic drive(token_t t, logic le, base_t lc);
    logic [2:0] b1;
    din = t; ld_en = le; ld_char = lc;
    @(posedge clk);
    #1;
    b1 = 3'(r_bv1);
    r_out1 = ref_step(t, r_ch1, 1, b1);
    r_bv1  = b1[0:0];
    r_out3 = ref_step(t, r_ch3, 3, r_bv3);
    if (le) begin r_ch1 = lc; r_ch3 = lc; end
    check("dout L1", dout1 == r_out1);
    check("bv L1",   bv1 == r_bv1);
    check("dout L3", dout3 == r_out3);
    check("bv L3",   bv3 == r_bv3);
    check("char",    ch1 == r_ch1 && ch3 == r_ch3);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = TOKEN_NONE; ld_en = 1'b0; ld_char = BASE_A;
    r_ch1 = BASE_A; r_ch3 = BASE_T; r_bv1 = '0; r_bv3 = '0;
    r_out1 = TOKEN_NONE; r_out3 = TOKEN_NONE;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("reset bv", bv1 == 1'b0 && bv3 == 3'b000 && dout1.kind == TK_NONE);

    // Worked example, level 1 node holding A: T then 2.
    drive(mk_char(BASE_T), 1'b0, BASE_A);
    check("ex: bv=1 after T", bv1 == 1'b1 && dout1 == mk_char(BASE_T));
    drive(mk_num(8'd2), 1'b0, BASE_A);
    check("ex: 2 becomes 3", dout1 == mk_num(8'd3));
    // the level 3 node (base T) has now seen T (match) and C (mismatch)
    drive(mk_char(BASE_C), 1'b0, BASE_A);
    check("ex: L3 history", bv3 == 3'b001);
    drive(TOKEN_NONE, 1'b0, BASE_A);
    check("dash keeps history", bv3 == 3'b001 && dout3.kind == TK_NONE);

    // random traffic with occasional reloads
    for (int i = 0; i < 3000; i++) begin
      token_t t;
      int k;
      k = $urandom_range(0, 9);
      if (k < 4)      t = mk_char(base_t'($urandom_range(0, 3)));
      else if (k < 8) t = mk_num(sum_t'($urandom_range(0, 200)));
      else            t = TOKEN_NONE;
      drive(t, ($urandom_range(0, 30) == 0), base_t'($urandom_range(0, 3)));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
