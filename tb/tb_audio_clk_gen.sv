// tb_audio_clk_gen: checks the codec clock divider at its default CLK_DIV = 6.
// It counts processor cycles between BCLK edges (3 high, 3 low, period 6 =
// 13.33 MHz at 80 MHz), checks XCLK equals BCLK, that the rise/fall strobes come
// exactly one cycle before the edges, and that both clocks stay low while the
// enable is off and start again cleanly.
module tb_audio_clk_gen;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic bclk, xclk, bclk_rise, bclk_fall;
  int checks = 0, failures = 0;
  int cycle = 0;

  audio_clk_gen dut (.clk, .rst, .en, .bclk, .xclk, .bclk_rise, .bclk_fall);

  always #5 clk = !clk;
  always @(posedge clk) cycle++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // strobe/edge relation, checked every cycle while enabled
  logic prev_bclk, prev_rise, prev_fall;
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      if (prev_rise) check(bclk && !prev_bclk, "bclk rises after bclk_rise");
      if (prev_fall) check(!bclk && prev_bclk, "bclk falls after bclk_fall");
      if (bclk != prev_bclk && en) check(prev_rise || prev_fall, "edge without strobe");
      check(xclk == bclk, "xclk equals bclk");
    end
    prev_bclk = bclk;
    prev_rise = bclk_rise;
    prev_fall = bclk_fall;
  end

  initial begin
    int t_rise [$];
    int t_fall [$];
    logic lb;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    check(!bclk && !xclk, "clocks low while disabled");
    @(negedge clk) en = 1'b1;
    lb = bclk;
    for (int n = 0; n < 400; n++) begin
      @(posedge clk); #2;
      if (bclk && !lb) t_rise.push_back(cycle);
      if (!bclk && lb) t_fall.push_back(cycle);
      lb = bclk;
    end
    check(t_rise.size() > 50, "enough rising edges");
    check(t_rise[0] - (cycle - 400) == 3, "first rise 3 cycles after enable");
    for (int i = 1; i < t_rise.size(); i++)
      check(t_rise[i] - t_rise[i-1] == 6, "BCLK period is 6 cycles");
    for (int i = 0; i < t_fall.size(); i++)
      check(t_fall[i] - t_rise[i] == 3, "BCLK high for 3 cycles");
    @(negedge clk) en = 1'b0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 30; i++) begin
      @(posedge clk); #2;
      check(!bclk && !xclk && !bclk_rise, "stopped while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
