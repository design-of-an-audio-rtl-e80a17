// tb_audio_i2c: checks the I2C configuration master against the codec model.
// For random register addresses and 9-bit values it runs the req/ack
// handshake and checks that the model stored exactly that value in exactly
// that register, that SCLK runs at 200 kHz (400 cycles at 80 MHz), that the
// master releases SDA during each acknowledge bit, and that one transfer takes
// 27 SCLK periods plus start and stop. It also makes the model refuse the
// slave address once and checks that the master gives up and then retries.
module tb_audio_i2c;
  logic clk = 1'b0, rst = 1'b1;
  logic req = 1'b0;
  logic [6:0] addr = '0;
  logic [8:0] data = '0;
  logic ack, sclk, sdin_o, we, sda, sda_pull;
  logic nack_next = 1'b0;
  int checks = 0, failures = 0;
  longint cycle = 0;

  int dac_frames, adc_frames, i2c_writes, i2c_starts, nacks_sent;
  logic [15:0] dac_l_rx, dac_r_rx;
  logic [6:0] last_addr;
  logic [8:0] last_data;
  logic adc_dat;

  assign sda = (we ? sdin_o : 1'b1) & !sda_pull;

  audio_i2c dut (.clk, .rst, .req, .addr, .data, .ack, .sclk, .sdin_o, .we, .sdin_i(sda));

  wm8731_model codec (
    .xclk(1'b0), .bclk(1'b0), .dac_dat(1'b0), .dac_lrc(1'b0), .adc_dat, .adc_lrc(1'b0),
    .sclk, .sda, .sda_pull, .adc_l_src(16'h0), .adc_r_src(16'h0), .nack_next,
    .dac_l_rx, .dac_r_rx, .dac_frames, .adc_frames, .i2c_writes, .i2c_starts,
    .nacks_sent, .last_addr, .last_data
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // SCLK period and acknowledge release, watched on every SCLK rising edge.
  longint last_rise = -1;
  int     bits_in_frame = 0;
  int     period_errors = 0, periods = 0;
  int     ack_bits_released = 0;
  always @(posedge sclk) begin
    if (last_rise > 100 && cycle - last_rise < 700) begin
      periods++;
      if (cycle - last_rise != 400) begin
        period_errors++;
        $display("SCLK period %0d at %0d", cycle - last_rise, cycle);
      end
    end
    last_rise = cycle;
    if (!we) ack_bits_released++;
  end

  task automatic write_reg(input logic [6:0] a, input logic [8:0] d, output longint dur);
    longint t0;
    @(negedge clk);
    addr = a;
    data = d;
    req  = 1'b1;
    t0   = cycle;
    while (!ack) @(posedge clk);
    dur = cycle - t0;
    @(negedge clk) req = 1'b0;
    @(posedge clk); @(posedge clk); #1;
    check(!ack, "ack drops after req is lowered");
  endtask

  initial begin
    longint dur;
    int w0, s0, rel0;
    repeat (5) @(posedge clk);
    rst = 1'b0;
    repeat (50) @(posedge clk);
    check(sclk && sda && !ack, "bus idle after reset");

    for (int n = 0; n < 6; n++) begin
      logic [6:0] a;
      logic [8:0] d;
      a    = 7'($urandom);
      d    = 9'($urandom);
      w0   = i2c_writes;
      rel0 = ack_bits_released;
      write_reg(a, d, dur);
      check(i2c_writes == w0 + 1, "one register write seen by the codec");
      check(last_addr == a, "register address on the wire");
      check(last_data == d, "register data on the wire");
      check(codec.regs[a] == d, "codec register holds the value");
      check(ack_bits_released - rel0 == 3, "SDA released for three acknowledge bits");
      check(dur >= 27 * 400 && dur <= 29 * 400, $sformatf("transfer time %0d cycles", dur));
    end
    check(periods > 100 && period_errors == 0, "SCLK period 400 cycles (200 kHz)");

    // The fixed frame layout of Fig. 5 example: register 1111011, value 110111100.
    write_reg(7'b1111011, 9'b110111100, dur);
    check(codec.regs[7'b1111011] == 9'b110111100, "published example transfer");

    // Missing acknowledge on the slave address: abort, then retry.
    s0 = i2c_starts;
    w0 = i2c_writes;
    nack_next = 1'b1;
    fork
      begin
        wait (nacks_sent == 1);
        nack_next = 1'b0;
      end
      write_reg(7'h02, 9'h079, dur);
    join
    check(nacks_sent == 1, "one address refused");
    check(i2c_starts == s0 + 2, "transfer started again after the missing ack");
    check(i2c_writes == w0 + 1 && codec.regs[2] == 9'h079, "retried write arrives");
    check(dur > 30 * 400, "retry took longer than one transfer");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
