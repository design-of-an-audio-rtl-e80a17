// tb_audio_dac: checks the DSP-mode-A serialiser at its defaults (16-bit
// samples, BCLK = clock/6, 256 BCLK per sample) with the codec model as the
// receiver. Checked: every frame delivers the left/right pair that was
// latched; DACLRC is high for one BCLK (6 cycles) and frames are 1536 cycles
// apart; busy lasts 33 BCLK (198 cycles); DACLRC and DACDAT change only on
// falling BCLK edges; a write during busy waits for the next frame, and with
// req low the old pair is sent again.
module tb_audio_dac;
  logic clk = 1'b0, rst = 1'b1;
  logic en = 1'b0, req = 1'b0;
  logic [15:0] l_in = '0, r_in = '0;
  logic bclk, xclk, bclk_rise, bclk_fall;
  logic busy, lrc, dacdat;
  int checks = 0, failures = 0;
  longint cycle = 0;

  int dac_frames, adc_frames, i2c_writes, i2c_starts, nacks_sent;
  logic [15:0] dac_l_rx, dac_r_rx;
  logic [6:0] last_addr;
  logic [8:0] last_data;
  logic adc_dat, sda_pull;

  audio_clk_gen clkgen (.clk, .rst, .en, .bclk, .xclk, .bclk_rise, .bclk_fall);
  audio_dac dut (.clk, .rst, .en, .req, .audio_l_i(l_in), .audio_r_i(r_in), .bclk_fall,
                 .busy, .lrc, .dacdat);
  wm8731_model codec (
    .xclk, .bclk, .dac_dat(dacdat), .dac_lrc(lrc), .adc_dat, .adc_lrc(1'b0),
    .sclk(1'b1), .sda(1'b1), .sda_pull, .adc_l_src(16'h0), .adc_r_src(16'h0),
    .nack_next(1'b0), .dac_l_rx, .dac_r_rx, .dac_frames, .adc_frames, .i2c_writes,
    .i2c_starts, .nacks_sent, .last_addr, .last_data
  );

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pin timing, every cycle.
  logic pb, pl, pd, pbusy;
  longint lrc_rise = -1, busy_rise = -1;
  int lrc_periods = 0, lrc_period_err = 0, lrc_width_err = 0, busy_err = 0, edge_err = 0;
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      if ((lrc != pl || dacdat != pd) && !(pb && !bclk)) edge_err++;
      if (lrc && !pl) begin
        if (lrc_rise >= 0) begin
          lrc_periods++;
          if (cycle - lrc_rise != 1536) lrc_period_err++;
        end
        lrc_rise = cycle;
      end
      if (!lrc && pl && (cycle - lrc_rise != 6)) lrc_width_err++;
      if (busy && !pbusy) busy_rise = cycle;
      if (!busy && pbusy && (cycle - busy_rise != 198)) busy_err++;
    end
    pb = bclk; pl = lrc; pd = dacdat; pbusy = busy;
  end

  task automatic wait_frame();
    int f;
    f = dac_frames;
    wait (dac_frames == f + 1);
  endtask

  initial begin
    logic [15:0] l_old, r_old;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (10) @(posedge clk);
    check(!lrc && !dacdat && !busy, "quiet after reset");
    @(negedge clk);
    l_in = 16'd1234;        // the values of the published DAC simulation
    r_in = 16'd4567;
    req  = 1'b1;
    en   = 1'b1;
    wait_frame();
    check(dac_l_rx == 16'd1234 && dac_r_rx == 16'd4567, "first frame");

    for (int n = 0; n < 12; n++) begin
      logic [15:0] l, r;
      wait (!busy);
      @(negedge clk);
      l = 16'($urandom); r = 16'($urandom);
      l_in = l; r_in = r;
      wait_frame();
      check(dac_l_rx == l, $sformatf("left sample %h got %h", l, dac_l_rx));
      check(dac_r_rx == r, $sformatf("right sample %h got %h", r, dac_r_rx));
    end

    // Write during busy: the running frame keeps the old pair.
    l_old = l_in; r_old = r_in;
    wait (!busy);
    wait (busy);
    @(negedge clk);
    l_in = 16'hA5C3; r_in = 16'h0FF0;
    wait_frame();
    check(dac_l_rx == l_old && dac_r_rx == r_old, "write during busy not in the running frame");
    wait_frame();
    check(dac_l_rx == 16'hA5C3 && dac_r_rx == 16'h0FF0, "write during busy in the next frame");

    // req low: the latched pair is sent again.
    wait (!busy);
    @(negedge clk);
    req = 1'b0;
    l_in = 16'h1111; r_in = 16'h2222;
    wait_frame();
    check(dac_l_rx == 16'hA5C3 && dac_r_rx == 16'h0FF0, "req low keeps the old pair (1)");
    wait_frame();
    check(dac_l_rx == 16'hA5C3 && dac_r_rx == 16'h0FF0, "req low keeps the old pair (2)");
    @(negedge clk) req = 1'b1;
    wait_frame();
    wait_frame();
    check(dac_l_rx == 16'h1111 && dac_r_rx == 16'h2222, "req high again loads the new pair");

    check(lrc_periods >= 15 && lrc_period_err == 0, "LRC every 1536 cycles (52.08 kHz)");
    check(lrc_width_err == 0, "LRC high for one BCLK");
    check(busy_err == 0, "busy for 33 BCLK");
    check(edge_err == 0, "pins change only on falling BCLK");

    // Disable: no more frames.
    wait (!busy);
    @(negedge clk) en = 1'b0;
    begin
      int f;
      f = dac_frames;
      repeat (4000) @(posedge clk);
      check(dac_frames == f && !lrc, "no frames while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
