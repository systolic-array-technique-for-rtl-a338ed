// exit_clk_div_tb -- checks the half-rate exit-node strobe.
//
// For M = 3 and M = 4 it emulates the slot sequence of the sequencer (a sync
// on each string's first character, characters and numbers alternating, M
// flush slots, optional stall pairs) and requires the strobe to be high
// in every clock in which a number that entered M clocks earlier is at the
// exit nodes, and never on two clocks in a row except right after a resync.
`timescale 1ns/1ps
module exit_clk_div_tb;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // mode 0 drives the M = 3 divider, mode 1 the M = 4 one
  int   mode = 0;
  logic sync, sync3, sync4;
  logic en3, en4, en;
  logic num;   // a number enters this clock

  assign sync3 = sync && mode == 0;
  assign sync4 = sync && mode == 1;
  assign en    = (mode == 0) ? en3 : en4;

  exit_clk_div #(.M(3)) u3 (.clk, .rst_n, .sync(sync3), .en(en3));
  exit_clk_div #(.M(4)) u4 (.clk, .rst_n, .sync(sync4), .en(en4));

  logic [15:0] hist = '0;   // hist[k]: a number entered k+1 clocks ago
  logic        en_q = 1'b0;
  int          mode_q = 0;
  logic        sync_q = 1'b0;
  int          seen = 0;

  always @(posedge clk) begin
    hist <= {hist[14:0], num};
    en_q <= en;
    mode_q <= mode;
    sync_q <= sync;
  end

  logic armed = 1'b0;
  always @(negedge clk) if (rst_n && armed) begin
    // hist[M-1] = a number entered M clocks before this one
    if (hist[(mode == 0) ? 2 : 3]) begin
      checks++; seen++;
      if (!en) begin failures++; $display("FAIL M=%0d missed at %0t", mode + 3, $time); end
    end
    checks++;
    // a resync may repeat the strobe once; the trees hold no number then
    if (en && en_q && mode == mode_q && !sync_q) begin
      failures++; $display("FAIL strobe on consecutive clocks at %0t", $time);
    end
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic slot(logic s, logic n);
    @(negedge clk); sync = s; num = n;
    @(posedge clk); #1;
  endtask

  initial begin
    sync = 0; num = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    armed = 1'b1;
    for (int str = 0; str < 120; str++) begin
      int l;
      if (str == 60) begin
        repeat (6) slot(0, 0);
        mode = 1;
      end
      l = $urandom_range(1, 12);
      for (int k = 0; k < l; k++) begin
        if ($urandom_range(0, 4) == 0) begin slot(0, 0); slot(0, 0); end  // stall pair
        slot(k == 0, 0);   // character
        slot(0, 1);        // number
      end
      for (int f = 0; f < 3 + mode; f++) slot(0, 0);   // flush, M tokens
      if ($urandom_range(0, 3) == 0) begin slot(0, 0); slot(0, 0); end
    end
    repeat (6) slot(0, 0);
    checks++;
    if (seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
