// tb_audio_interface: checks the OCP register block on its own. It writes
// random values to every writable register and checks the value on the
// matching output and on read-back (masked to the register width), reads every
// read-only register with random input values, checks that each command gets
// DVA exactly one cycle later and an idle bus gets NULL, that writes to
// read-only offsets change nothing, and that the codec clocks are enabled when
// either converter is.
module tb_audio_interface;
  import audio_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  ocp_m_t ocp_m;
  ocp_s_t ocp_s;
  logic [15:0] dac_l, dac_r, adc_l, adc_r;
  logic dac_en, dac_req, dac_busy, dac_lrc, adc_en, adc_req, adc_busy, adc_lrc;
  logic [8:0] i2c_data;
  logic [6:0] i2c_addr;
  logic i2c_req, i2c_ack, clk_en;
  int checks = 0, failures = 0;
  longint cycle = 0;

  audio_interface dut (.clk, .rst, .ocp_m, .ocp_s,
    .dac_l, .dac_r, .dac_en, .dac_req, .dac_busy, .dac_lrc,
    .adc_l, .adc_r, .adc_en, .adc_req, .adc_busy, .adc_lrc,
    .i2c_data, .i2c_addr, .i2c_req, .i2c_ack, .clk_en);

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
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ocp_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_WR, addr: 32'(a), data: d, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    check(ocp_s.resp == OCP_RESP_DVA, "write answered with DVA next cycle");
    @(negedge clk);
    check(ocp_s.resp == OCP_RESP_NULL, "response lasts one cycle");
  endtask

  task automatic ocp_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_RD, addr: 32'(a), data: '0, byte_en: 4'hF};
    @(negedge clk);
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    check(ocp_s.resp == OCP_RESP_DVA, "read answered with DVA next cycle");
    d = ocp_s.data;
  endtask

  typedef struct { logic [5:0] off; int width; } rw_t;
  rw_t rw [9] = '{'{REG_DAC_L, 16}, '{REG_DAC_R, 16}, '{REG_DAC_EN, 1}, '{REG_DAC_REQ, 1},
                  '{REG_ADC_EN, 1}, '{REG_ADC_REQ, 1}, '{REG_I2C_DATA, 9},
                  '{REG_I2C_ADDR, 7}, '{REG_I2C_REQ, 1}};

  function automatic logic [31:0] out_of(input logic [5:0] off);
    unique case (off)
      REG_DAC_L:    return 32'(dac_l);
      REG_DAC_R:    return 32'(dac_r);
      REG_DAC_EN:   return 32'(dac_en);
      REG_DAC_REQ:  return 32'(dac_req);
      REG_ADC_EN:   return 32'(adc_en);
      REG_ADC_REQ:  return 32'(adc_req);
      REG_I2C_DATA: return 32'(i2c_data);
      REG_I2C_ADDR: return 32'(i2c_addr);
      REG_I2C_REQ:  return 32'(i2c_req);
      default:      return 32'hDEAD_BEEF;
    endcase
  endfunction

  initial begin
    logic [31:0] d, v, m;
    ocp_m = '{cmd: OCP_CMD_IDLE, addr: '0, data: '0, byte_en: '0};
    {dac_busy, dac_lrc, adc_busy, adc_lrc, i2c_ack} = '0;
    adc_l = '0; adc_r = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    check(ocp_s.resp == OCP_RESP_NULL, "idle bus, no response");
    check(!clk_en && !dac_en && !adc_en && !i2c_req, "registers cleared by reset");

    for (int n = 0; n < 20; n++) begin
      foreach (rw[i]) begin
        v = $urandom;
        m = (rw[i].width == 32) ? '1 : ((32'd1 << rw[i].width) - 1);
        ocp_write(rw[i].off, v);
        check(out_of(rw[i].off) == (v & m), $sformatf("output of reg %h", rw[i].off));
        ocp_read(rw[i].off, d);
        check(d == (v & m), $sformatf("read-back of reg %h", rw[i].off));
      end
      check(clk_en == (dac_en | adc_en), "clock enable follows the converters");
    end

    for (int n = 0; n < 20; n++) begin
      logic [15:0] l, r;
      logic [4:0] f;
      l = 16'($urandom); r = 16'($urandom); f = 5'($urandom);
      @(negedge clk);
      adc_l = l; adc_r = r;
      {dac_busy, dac_lrc, adc_busy, adc_lrc, i2c_ack} = f;
      ocp_read(REG_ADC_L, d);    check(d == 32'(l), "ADC left");
      ocp_read(REG_ADC_R, d);    check(d == 32'(r), "ADC right");
      ocp_read(REG_DAC_BUSY, d); check(d == 32'(f[4]), "DAC busy");
      ocp_read(REG_DAC_LRC, d);  check(d == 32'(f[3]), "DAC LRC");
      ocp_read(REG_ADC_BUSY, d); check(d == 32'(f[2]), "ADC busy");
      ocp_read(REG_ADC_LRC, d);  check(d == 32'(f[1]), "ADC LRC");
      ocp_read(REG_I2C_ACK, d);  check(d == 32'(f[0]), "I2C ack");
    end

    // Writes to read-only offsets are ignored.
    ocp_write(REG_DAC_L, 32'h0000_1357);
    ocp_write(REG_ADC_L, 32'h0000_FFFF);
    ocp_write(REG_DAC_BUSY, 32'h1);
    ocp_write(REG_I2C_ACK, 32'h1);
    check(dac_l == 16'h1357, "read-only writes leave the DAC left register");
    ocp_read(REG_ADC_L, d);
    check(d == 32'(adc_l), "ADC left still follows the ADC");

    // Enable combinations.
    ocp_write(REG_DAC_EN, 0); ocp_write(REG_ADC_EN, 0);
    check(!clk_en, "clocks off with both converters off");
    ocp_write(REG_ADC_EN, 1);
    check(clk_en, "clocks on with the ADC on");
    ocp_write(REG_ADC_EN, 0); ocp_write(REG_DAC_EN, 1);
    check(clk_en, "clocks on with the DAC on");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
