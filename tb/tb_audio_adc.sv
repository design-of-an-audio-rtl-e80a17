// tb_audio_adc: checks the DSP-mode-A deserialiser at its defaults with the
// codec model as the sender. Checked: each frame's left/right pair (random
// values set in the model before the frame) appears in the output registers
// when busy falls; ADCLRC is high for one BCLK (6 cycles), changes only on
// falling BCLK edges and repeats every 1536 cycles; busy covers the frame; with
// req low the outputs keep the last pair; with en low no frame starts.
module tb_audio_adc;
  logic clk = 1'b0, rst = 1'b1;
  logic en = 1'b0, req = 1'b0;
  logic bclk, xclk, bclk_rise, bclk_fall;
  logic busy, lrc, adc_dat;
  logic [15:0] l_out, r_out;
  logic [15:0] l_src = '0, r_src = '0;
  int checks = 0, failures = 0;
  longint cycle = 0;

  int dac_frames, adc_frames, i2c_writes, i2c_starts, nacks_sent;
  logic [15:0] dac_l_rx, dac_r_rx;
  logic [6:0] last_addr;
  logic [8:0] last_data;
  logic sda_pull;

  audio_clk_gen clkgen (.clk, .rst, .en, .bclk, .xclk, .bclk_rise, .bclk_fall);
  audio_adc dut (.clk, .rst, .en, .req, .bclk_rise, .bclk_fall, .adcdat(adc_dat),
                 .busy, .lrc, .audio_l_o(l_out), .audio_r_o(r_out));
  wm8731_model codec (
    .xclk, .bclk, .dac_dat(1'b0), .dac_lrc(1'b0), .adc_dat, .adc_lrc(lrc),
    .sclk(1'b1), .sda(1'b1), .sda_pull, .adc_l_src(l_src), .adc_r_src(r_src),
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

  logic pb, pl, pbusy;
  longint lrc_rise = -1, busy_rise = -1;
  int lrc_periods = 0, lrc_period_err = 0, lrc_width_err = 0, edge_err = 0, busy_err = 0;
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      if (lrc != pl && !(pb && !bclk)) edge_err++;
      if (lrc && !pl) begin
        if (lrc_rise >= 0) begin
          lrc_periods++;
          if (cycle - lrc_rise != 1536) lrc_period_err++;
        end
        lrc_rise = cycle;
        if (!busy) busy_err++;
      end
      if (!lrc && pl && (cycle - lrc_rise != 6)) lrc_width_err++;
      if (busy && !pbusy) busy_rise = cycle;
      // 1 BCLK of LRC, 32 data bits sampled on rising edges: ends 3 cycles
      // before the 33rd falling edge after LRC rose.
      if (!busy && pbusy && (cycle - busy_rise != 33 * 6 - 3)) busy_err++;
    end
    pb = bclk; pl = lrc; pbusy = busy;
  end

  task automatic frame_with(input logic [15:0] l, input logic [15:0] r);
    wait (!busy);
    @(negedge clk);
    l_src = l; r_src = r;
    wait (busy);
    wait (!busy);
    @(negedge clk);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (10) @(posedge clk);
    check(!lrc && !busy && l_out == 0 && r_out == 0, "quiet after reset");
    @(negedge clk);
    req = 1'b1;
    en  = 1'b1;
    for (int n = 0; n < 12; n++) begin
      logic [15:0] l, r;
      l = 16'($urandom); r = 16'($urandom);
      frame_with(l, r);
      check(l_out == l, $sformatf("left sample %h got %h", l, l_out));
      check(r_out == r, $sformatf("right sample %h got %h", r, r_out));
    end
    frame_with(16'h8001, 16'h7FFE);
    check(l_out == 16'h8001 && r_out == 16'h7FFE, "MSB and LSB positions");

    // req low: outputs hold
    @(negedge clk) req = 1'b0;
    frame_with(16'h1234, 16'h5678);
    check(l_out == 16'h8001 && r_out == 16'h7FFE, "req low holds the last pair");
    @(negedge clk) req = 1'b1;
    frame_with(16'h1234, 16'h5678);
    check(l_out == 16'h1234 && r_out == 16'h5678, "req high updates again");

    check(lrc_periods >= 14 && lrc_period_err == 0, "ADCLRC every 1536 cycles");
    check(lrc_width_err == 0, "ADCLRC high for one BCLK");
    check(edge_err == 0, "ADCLRC changes only on falling BCLK");
    check(busy_err == 0, "busy covers the frame");

    @(negedge clk) en = 1'b0;
    begin
      int f;
      repeat (20) @(posedge clk);
      f = adc_frames;
      repeat (4000) @(posedge clk);
      check(adc_frames == f && !lrc && !busy, "no frames while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
