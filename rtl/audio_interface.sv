// audio_interface: processor-facing register block of the audio interface.
//
// Patmos reaches the audio hardware through memory-mapped I/O on its OCP port.
// This block decodes OCP read and write commands into the register map of
// audio_pkg and connects the registers to the ADC, DAC, I2C controller and
// clock generator. Software writes the output samples (AuLin/AuRin), the
// enable and request bits of the ADC and DAC, and the codec register address
// and data for the I2C controller; it reads the input samples (AuLo/AuRo), the
// busy flags, the two LRC lines (to synchronise with the sample rate) and the
// I2C acknowledge. Which registers exist follows the signals of the published
// block diagram; their addresses and bit positions are this design's choice.
//
// OCP timing: a command (WR or RD) is accepted in the cycle it is presented;
// the response DVA, with read data for RD, appears in the next cycle. Writes to
// read-only registers and accesses to unused offsets are acknowledged and have
// no effect (reads return 0). The widest register is AUDIO_BITS wide, so
// read-data bits above it are constant 0, as is the upper response bit: only
// NULL and DVA are ever sent. Only address bits [5:2] are decoded; the device
// select lies outside. Writes take the whole word (byte enables ignored).
// The codec clocks run while either the ADC or the DAC is enabled.
// Reset is synchronous and clears every register.
module audio_interface
  import audio_pkg::*;
#(
  parameter int unsigned AUDIO_BITS = 16
) (
  input  logic                  clk,
  input  logic                  rst,
  // OCP slave
  input  ocp_m_t                ocp_m,
  output ocp_s_t                ocp_s,
  // DAC
  output logic [AUDIO_BITS-1:0] dac_l,
  output logic [AUDIO_BITS-1:0] dac_r,
  output logic                  dac_en,
  output logic                  dac_req,
  input  logic                  dac_busy,
  input  logic                  dac_lrc,
  // ADC
  input  logic [AUDIO_BITS-1:0] adc_l,
  input  logic [AUDIO_BITS-1:0] adc_r,
  output logic                  adc_en,
  output logic                  adc_req,
  input  logic                  adc_busy,
  input  logic                  adc_lrc,
  // I2C controller
  output logic [8:0]            i2c_data,
  output logic [6:0]            i2c_addr,
  output logic                  i2c_req,
  input  logic                  i2c_ack,
  // clock generator
  output logic                  clk_en
);

  initial begin
    if (AUDIO_BITS > OCP_DATA_W) $error("audio_interface: AUDIO_BITS above 32");
  end

  logic [5:0]            off;
  logic                  wr, rd;
  logic [OCP_DATA_W-1:0] rdata;

  assign off = {ocp_m.addr[5:2], 2'b00};
  assign wr  = (ocp_m.cmd == OCP_CMD_WR);
  assign rd  = (ocp_m.cmd == OCP_CMD_RD);

  always_ff @(posedge clk) begin
    if (rst) begin
      dac_l    <= '0;
      dac_r    <= '0;
      dac_en   <= 1'b0;
      dac_req  <= 1'b0;
      adc_en   <= 1'b0;
      adc_req  <= 1'b0;
      i2c_data <= '0;
      i2c_addr <= '0;
      i2c_req  <= 1'b0;
    end else if (wr) begin
      unique case (off)
        REG_DAC_L:    dac_l    <= ocp_m.data[AUDIO_BITS-1:0];
        REG_DAC_R:    dac_r    <= ocp_m.data[AUDIO_BITS-1:0];
        REG_DAC_EN:   dac_en   <= ocp_m.data[0];
        REG_DAC_REQ:  dac_req  <= ocp_m.data[0];
        REG_ADC_EN:   adc_en   <= ocp_m.data[0];
        REG_ADC_REQ:  adc_req  <= ocp_m.data[0];
        REG_I2C_DATA: i2c_data <= ocp_m.data[8:0];
        REG_I2C_ADDR: i2c_addr <= ocp_m.data[6:0];
        REG_I2C_REQ:  i2c_req  <= ocp_m.data[0];
        default: ;
      endcase
    end
  end

  always_comb begin
    rdata = '0;
    unique case (off)
      REG_DAC_L:    rdata[AUDIO_BITS-1:0] = dac_l;
      REG_DAC_R:    rdata[AUDIO_BITS-1:0] = dac_r;
      REG_DAC_EN:   rdata[0]              = dac_en;
      REG_DAC_REQ:  rdata[0]              = dac_req;
      REG_DAC_BUSY: rdata[0]              = dac_busy;
      REG_DAC_LRC:  rdata[0]              = dac_lrc;
      REG_ADC_L:    rdata[AUDIO_BITS-1:0] = adc_l;
      REG_ADC_R:    rdata[AUDIO_BITS-1:0] = adc_r;
      REG_ADC_EN:   rdata[0]              = adc_en;
      REG_ADC_REQ:  rdata[0]              = adc_req;
      REG_ADC_BUSY: rdata[0]              = adc_busy;
      REG_ADC_LRC:  rdata[0]              = adc_lrc;
      REG_I2C_DATA: rdata[8:0]            = i2c_data;
      REG_I2C_ADDR: rdata[6:0]            = i2c_addr;
      REG_I2C_ACK:  rdata[0]              = i2c_ack;
      REG_I2C_REQ:  rdata[0]              = i2c_req;
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ocp_s <= '{resp: OCP_RESP_NULL, data: '0};
    end else begin
      ocp_s.resp <= (wr || rd) ? OCP_RESP_DVA : OCP_RESP_NULL;
      ocp_s.data <= rd ? rdata : '0;
    end
  end

  assign clk_en = dac_en | adc_en;

  // Every command is answered in the following cycle, and only then.
  a_resp: assert property (@(posedge clk) disable iff (rst)
    (ocp_m.cmd != OCP_CMD_IDLE) |=> (ocp_s.resp == OCP_RESP_DVA));
  a_no_spurious: assert property (@(posedge clk) disable iff (rst)
    (ocp_m.cmd == OCP_CMD_IDLE) |=> (ocp_s.resp == OCP_RESP_NULL));

endmodule
