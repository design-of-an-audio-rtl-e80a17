// tb_delay_effect: runs the delay (echo) effect on the whole audio interface
// at its default parameters, with the testbench as the processor program.
// Per sample the program syncs on the ADC frame, reads the input pair, mixes
// it with half of the output from DELAY samples earlier (a feedback delay
// line held in processor memory, here a testbench array), writes the result
// to the DAC and stores it in the delay line:
//     out[n] = in[n] + out[n - DELAY] / 2      (arithmetic shift, 16-bit)
// DELAY = 52083 samples is one second at 52.08 kHz, the longest delay of the
// original demonstration. Half-way through, the program changes the codec
// volume over I2C without stopping the audio loop: it raises the request and
// checks the acknowledge once per sample.
// The codec model plays a known input sequence (sparse pulses on a small
// noise floor); every pair the model receives on DACDAT is compared with the
// formula above, computed here from that input sequence alone.
// The feedback form, with the halving inside the loop and the delay line fed
// from the output, follows the original effect diagram; a plain echo of the
// input alone would take the same path through the hardware. The input
// sequence, the volume value and the check schedule are this testbench's own.
module tb_delay_effect;
  import audio_pkg::*;
  localparam int DELAY  = 52083;
  localparam int FRAMES = DELAY + 400;

  logic clk = 1'b0, rst = 1'b1;
  ocp_m_t ocp_m;
  ocp_s_t ocp_s;
  logic xclk, bclk, dac_dat, dac_lrc, adc_dat, adc_lrc;
  logic i2c_sclk, sda_pull;
  tri1  i2c_sdin;   // board pull-up
  logic [15:0] adc_l_src = '0, adc_r_src = '0;
  int dac_frames, adc_frames, i2c_writes, i2c_starts, nacks_sent;
  logic [15:0] dac_l_rx, dac_r_rx;
  logic [6:0] last_addr;
  logic [8:0] last_data;
  int checks = 0, failures = 0;
  longint cycle = 0;

  assign i2c_sdin = sda_pull ? 1'b0 : 1'bz;   // the codec pulls SDIN low

  audio_top dut (
    .clk, .rst, .ocp_m, .ocp_s, .xclk, .bclk, .dac_dat, .dac_lrc, .adc_dat, .adc_lrc,
    .i2c_sclk, .i2c_sdin
  );

  wm8731_model codec (
    .xclk, .bclk, .dac_dat, .dac_lrc, .adc_dat, .adc_lrc,
    .sclk(i2c_sclk), .sda(i2c_sdin), .sda_pull, .adc_l_src, .adc_r_src, .nack_next(1'b0),
    .dac_l_rx, .dac_r_rx, .dac_frames, .adc_frames, .i2c_writes, .i2c_starts,
    .nacks_sent, .last_addr, .last_data
  );

  always #5 clk = !clk;
  always @(posedge clk) cycle++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (longint'(FRAMES + 100) * 1536) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input sequence, a function of the sample number only
  function automatic logic [15:0] noise(input int n);
    logic [31:0] h;
    h = 32'(n) * 32'd2654435761;
    return 16'(int'(h[20:15]) - 32);
  endfunction
  function automatic logic [15:0] in_l(input int n);
    if (n % 9000 == 17) return 16'sd8000;
    return noise(n);
  endfunction
  function automatic logic [15:0] in_r(input int n);
    if (n % 7000 == 5) return -16'sd6000;
    return noise(n + 77777);
  endfunction

  // codec side: the model latches a pair at each LRC pulse; queue the next
  int src_n = 0;
  always @(negedge adc_lrc) begin
    src_n++;
    adc_l_src = in_l(src_n);
    adc_r_src = in_r(src_n);
  end

  // ---------------- processor side ----------------
  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_WR, addr: 32'(a), data: d, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
  endtask
  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_RD, addr: 32'(a), data: '0, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    d = ocp_s.data;
  endtask

  logic [15:0] line_l [DELAY], line_r [DELAY];   // the program's delay line

  // reference, from the input sequence only
  logic [15:0] ref_l [FRAMES + DELAY], ref_r [FRAMES + DELAY];

  // check every pair the codec receives against the reference
  int rx_n = 0, first = 0, matched = 0, echoes = 0;
  bit aligned = 0;
  always @(dac_frames) if (dac_frames > 0) begin
    if (!aligned) begin
      // the first looped pair identifies the sample number
      for (int k = 0; k < 16; k++)
        if (!aligned && dac_l_rx == ref_l[k] && dac_r_rx == ref_r[k]) begin
          first   = k - rx_n;
          aligned = 1;
        end
    end else if (rx_n + first < FRAMES - 2) begin
      check(dac_l_rx == ref_l[rx_n + first] && dac_r_rx == ref_r[rx_n + first],
            $sformatf("sample %0d: got %h/%h want %h/%h", rx_n + first, dac_l_rx, dac_r_rx,
                      ref_l[rx_n + first], ref_r[rx_n + first]));
      if ($signed(dac_l_rx) > 3000 && (rx_n + first) > DELAY) echoes++;
      matched++;
    end
    rx_n++;
  end

  initial begin
    logic [31:0] v, l, r;
    int vol_state = 0;
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    foreach (line_l[i]) begin line_l[i] = '0; line_r[i] = '0; end
    // reference: the program's sample n uses the pair the codec sent as its
    // n-th frame after the loop started, which is in_*(n + offset); the offset
    // is found from the first pair, so build the reference for offset 0 and
    // let the checker align it.
    for (int n = 0; n < FRAMES + DELAY; n++) begin
      logic [15:0] dl, dr;
      dl = (n >= DELAY) ? ref_l[n - DELAY] : 16'h0;
      dr = (n >= DELAY) ? ref_r[n - DELAY] : 16'h0;
      ref_l[n] = in_l(n + 1) + 16'($signed(dl) >>> 1);
      ref_r[n] = in_r(n + 1) + 16'($signed(dr) >>> 1);
    end
    repeat (5) @(posedge clk);
    rst = 1'b0;

    wr(REG_ADC_REQ, 1); wr(REG_DAC_REQ, 1);
    wr(REG_DAC_EN, 1);  wr(REG_ADC_EN, 1);
    for (int n = 0; n < FRAMES; n++) begin
      logic [15:0] yl, yr;
      int p;
      // wait until the ADC frame of this sample has been received
      do rd(REG_ADC_BUSY, v); while (v[0] == 1'b0);
      do rd(REG_ADC_BUSY, v); while (v[0] == 1'b1);
      rd(REG_ADC_L, l);
      rd(REG_ADC_R, r);
      p  = n % DELAY;
      yl = l[15:0] + 16'($signed(line_l[p]) >>> 1);
      yr = r[15:0] + 16'($signed(line_r[p]) >>> 1);
      line_l[p] = yl;
      line_r[p] = yr;
      wr(REG_DAC_L, 32'(yl));
      wr(REG_DAC_R, 32'(yr));
      // volume change, interleaved with the audio loop
      if (n == FRAMES / 2 && vol_state == 0) begin
        wr(REG_I2C_ADDR, 32'h02);
        wr(REG_I2C_DATA, 32'h160);
        wr(REG_I2C_REQ, 1);
        vol_state = 1;
      end else if (vol_state == 1) begin
        rd(REG_I2C_ACK, v);
        if (v[0]) begin
          wr(REG_I2C_REQ, 0);
          vol_state = 2;
        end
      end
    end
    repeat (4000) @(posedge clk);
    check(aligned, "output stream aligned with the input");
    check(matched >= FRAMES - 12, $sformatf("%0d output samples checked", matched));
    check(echoes >= 1, $sformatf("echo of a pulse heard one delay later (%0d)", echoes));
    check(vol_state == 2 && codec.regs[2] == 9'h160, "volume written during playback");
    $display("delay=%0d samples, frames=%0d, matched=%0d, echo samples=%0d", DELAY, FRAMES,
             matched, echoes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
