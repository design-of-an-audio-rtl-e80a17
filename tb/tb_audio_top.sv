// tb_audio_top: end-to-end test of the whole audio interface at its default
// parameters, with the testbench playing the processor (OCP reads and writes,
// written the way the C driver uses the registers) and the codec model on the
// pins. It runs, in order:
//  1. codec set-up over I2C: a sequence of register writes, one of them with
//     the slave address refused once, so the controller aborts and retries;
//  2. tone output: a table of samples written frame by frame, synchronised on
//     the DAC LRC pulse, and compared with what the codec model received;
//  3. loop-through: each frame the ADC pair is read (after its busy flag
//     falls) and written to the DAC; the sequence the codec sends must come
//     back on DACDAT in the same order;
//  4. ADC request low: the ADC registers must hold while frames go on;
//  5. converters switched off: no more frames.
// Each mechanism is counted and must have happened at least once.
module tb_audio_top;
  import audio_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  ocp_m_t ocp_m;
  ocp_s_t ocp_s;
  logic xclk, bclk, dac_dat, dac_lrc, adc_dat, adc_lrc;
  logic i2c_sclk, sda_pull;
  tri1  i2c_sdin;   // board pull-up
  logic [15:0] adc_l_src = '0, adc_r_src = '0;
  logic nack_next = 1'b0;
  int dac_frames, adc_frames, i2c_writes, i2c_starts, nacks_sent;
  logic [15:0] dac_l_rx, dac_r_rx;
  logic [6:0] last_addr;
  logic [8:0] last_data;
  int checks = 0, failures = 0;
  longint cycle = 0;

  // mechanism counters
  int n_i2c_write = 0, n_i2c_retry = 0, n_dac_frame = 0, n_adc_frame = 0;
  int n_busy_wait = 0, n_lrc_sync = 0, n_req_hold = 0, n_disable = 0;

  // The codec pulls SDIN low (open drain).
  assign i2c_sdin = sda_pull ? 1'b0 : 1'bz;

  audio_top dut (
    .clk, .rst, .ocp_m, .ocp_s, .xclk, .bclk, .dac_dat, .dac_lrc, .adc_dat, .adc_lrc,
    .i2c_sclk, .i2c_sdin
  );

  wm8731_model codec (
    .xclk, .bclk, .dac_dat, .dac_lrc, .adc_dat, .adc_lrc,
    .sclk(i2c_sclk), .sda(i2c_sdin), .sda_pull, .adc_l_src, .adc_r_src, .nack_next,
    .dac_l_rx, .dac_r_rx, .dac_frames, .adc_frames, .i2c_writes, .i2c_starts,
    .nacks_sent, .last_addr, .last_data
  );

  always #5 clk = !clk;   // 10 time units per processor cycle (80 MHz nominal)
  always @(posedge clk) cycle++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- processor side ----------------
  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_WR, addr: 32'(a), data: d, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    if (ocp_s.resp != OCP_RESP_DVA) check(1'b0, "write not accepted");
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_RD, addr: 32'(a), data: '0, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    if (ocp_s.resp != OCP_RESP_DVA) check(1'b0, "read not accepted");
    d = ocp_s.data;
  endtask

  // Codec register write, as the driver does it: address, data, request,
  // poll the acknowledge, drop the request.
  task automatic codec_write(input logic [6:0] a, input logic [8:0] d);
    logic [31:0] v;
    wr(REG_I2C_ADDR, 32'(a));
    wr(REG_I2C_DATA, 32'(d));
    wr(REG_I2C_REQ, 1);
    do rd(REG_I2C_ACK, v); while (v[0] == 1'b0);
    wr(REG_I2C_REQ, 0);
    do rd(REG_I2C_ACK, v); while (v[0] == 1'b1);
    n_i2c_write++;
  endtask

  // Wait for the LRC pulse of the DAC (sel = 0) or the ADC (sel = 1).
  task automatic sync_lrc(input bit sel);
    logic [31:0] v;
    do rd(sel ? REG_ADC_LRC : REG_DAC_LRC, v); while (v[0] == 1'b0);
    do rd(sel ? REG_ADC_LRC : REG_DAC_LRC, v); while (v[0] == 1'b1);
    n_lrc_sync++;
  endtask

  task automatic wait_adc_idle();
    logic [31:0] v;
    int polls = 0;
    do begin rd(REG_ADC_BUSY, v); polls++; end while (v[0] == 1'b1);
    if (polls > 1) n_busy_wait++;
  endtask

  // ---------------- codec side: a new ADC pair per frame ----------------
  logic [15:0] seq_l [64], seq_r [64];
  int src_idx = 0;
  bit src_on = 0;
  always @(negedge adc_lrc) if (src_on) begin
    // the model latched the current pair when it saw LRC; queue the next one
    src_idx++;
    adc_l_src = seq_l[src_idx % 64];
    adc_r_src = seq_r[src_idx % 64];
  end

  // Sine table, 16 points, amplitude 0x3000 (quarter-wave values rounded).
  function automatic logic [15:0] sine16(input int i);
    int q [5] = '{0, 4703, 8689, 11353, 12288};
    int k;
    k = i % 16;
    if (k <= 4)       return 16'(q[k]);
    else if (k <= 8)  return 16'(q[8 - k]);
    else if (k <= 12) return 16'(-q[k - 8]);
    else              return 16'(-q[16 - k]);
  endfunction

  // ---------------- the test ----------------
  initial begin
    logic [31:0] v, l, r;
    int f0, s0;
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    foreach (seq_l[i]) begin
      seq_l[i] = 16'($urandom);
      seq_r[i] = 16'($urandom);
    end
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (5) @(posedge clk);

    // 1. codec set-up (WM8731 register numbers): reset, power, format, sample
    //    control, headphone volume, active.
    codec_write(7'h0F, 9'h000);
    codec_write(7'h06, 9'h000);
    codec_write(7'h07, 9'h013);   // DSP mode, 16 bit, slave
    codec_write(7'h08, 9'h000);
    s0 = i2c_starts;
    nack_next = 1'b1;
    fork
      begin wait (nacks_sent == 1); nack_next = 1'b0; end
      codec_write(7'h02, 9'h179); // headphone volume, both channels
    join
    if (i2c_starts >= s0 + 2) n_i2c_retry++;
    codec_write(7'h09, 9'h001);
    check(i2c_writes == 6, "six codec registers written");
    check(codec.regs[7'h07] == 9'h013 && codec.regs[7'h02] == 9'h179 &&
          codec.regs[7'h09] == 9'h001, "codec register contents");

    // 2. tone output on the DAC
    wr(REG_DAC_EN, 1);
    wr(REG_DAC_REQ, 1);
    for (int i = 0; i < 24; i++) begin
      f0 = dac_frames;
      wr(REG_DAC_L, 32'(sine16(i)));
      wr(REG_DAC_R, 32'(sine16(i + 4)));
      sync_lrc(0);
      wait (dac_frames == f0 + 1);
      n_dac_frame++;
      check(dac_l_rx == sine16(i) && dac_r_rx == sine16(i + 4),
            $sformatf("tone sample %0d: got %h/%h", i, dac_l_rx, dac_r_rx));
    end

    // 3. loop-through
    adc_l_src = seq_l[0];
    adc_r_src = seq_r[0];
    src_on = 1;
    wr(REG_ADC_REQ, 1);
    wr(REG_ADC_EN, 1);
    begin
      int got_l [$], got_r [$];
      int fr;
      fork
        begin
          // the codec side: record what arrives on DACDAT
          fr = dac_frames;
          forever begin
            wait (dac_frames != fr);
            fr = dac_frames;
            got_l.push_back(int'(dac_l_rx));
            got_r.push_back(int'(dac_r_rx));
          end
        end
        begin
          for (int i = 0; i < 40; i++) begin
            sync_lrc(1);
            wait_adc_idle();
            rd(REG_ADC_L, l);
            rd(REG_ADC_R, r);
            wr(REG_DAC_L, l);
            wr(REG_DAC_R, r);
            n_adc_frame++;
          end
        end
      join_any
      disable fork;
      // find the first looped pair, then everything after must follow seq in order
      begin
        int start, k, ok;
        start = -1;
        foreach (got_l[i])
          if (start < 0 && got_l[i] == int'(seq_l[0]) && got_r[i] == int'(seq_r[0])) start = i;
        check(start >= 0, "looped audio reaches the DAC");
        ok = 1;
        k = 0;
        if (start >= 0) begin
          for (int i = start; i < got_l.size() - 1; i++) begin
            if (got_l[i] != int'(seq_l[k]) || got_r[i] != int'(seq_r[k])) ok = 0;
            k++;
          end
        end
        check(ok == 1 && k >= 30, $sformatf("looped sequence in order (%0d frames)", k));
      end
    end

    // 4. ADC request low: registers hold while frames go on
    wr(REG_ADC_REQ, 0);
    sync_lrc(1);
    wait_adc_idle();
    rd(REG_ADC_L, l);
    f0 = adc_frames;
    repeat (3) sync_lrc(1);
    wait_adc_idle();
    rd(REG_ADC_L, v);
    check(adc_frames >= f0 + 2 && v == l, "ADC registers hold with request low");
    n_req_hold++;

    // 5. switch off
    wr(REG_ADC_EN, 0);
    wr(REG_DAC_EN, 0);
    repeat (300) @(posedge clk);
    f0 = dac_frames;
    s0 = adc_frames;
    repeat (5000) @(posedge clk);
    check(dac_frames == f0 && adc_frames == s0 && !bclk && !xclk, "converters and clocks off");
    n_disable++;

    check(n_i2c_write  > 0, "mechanism: I2C register write");
    check(n_i2c_retry  > 0, "mechanism: I2C retry after missing ack");
    check(n_dac_frame  > 0, "mechanism: DAC frame");
    check(n_adc_frame  > 0, "mechanism: ADC frame into the processor");
    check(n_busy_wait  > 0, "mechanism: processor waited on busy");
    check(n_lrc_sync   > 0, "mechanism: LRC synchronisation");
    check(n_req_hold   > 0, "mechanism: ADC request low holds");
    check(n_disable    > 0, "mechanism: converters disabled");
    $display("mechanisms: i2c_write=%0d i2c_retry=%0d dac_frame=%0d adc_frame=%0d busy_wait=%0d lrc_sync=%0d req_hold=%0d disable=%0d",
             n_i2c_write, n_i2c_retry, n_dac_frame, n_adc_frame, n_busy_wait, n_lrc_sync,
             n_req_hold, n_disable);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
