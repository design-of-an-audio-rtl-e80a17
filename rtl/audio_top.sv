// audio_top: the audio interface for Patmos, with its codec pins.
//
// This is the whole design between the Patmos OCP I/O port and the WM8731
// codec of the DE2-115 board: the register block (audio_interface), the clock
// generator (audio_clk_gen) that makes XCLK and BCLK, the DSP-mode-A
// serialiser (audio_dac) and deserialiser (audio_adc), and the I2C
// configuration master (audio_i2c) with its pad buffer (i2c_out). The
// partition and the signals between the blocks follow the published block
// diagram.
//
// Defaults (all from the published design): 80 MHz processor clock assumed; CLK_DIV = 6
// gives 13.33 MHz XCLK/BCLK; FS_DIV = 256 bit clocks per sample gives one
// frame every 1536 cycles (52.08 kHz); 16-bit samples; I2C_HALF_PERIOD = 200
// cycles gives a 200 kHz SCLK.
//
// Pins: xclk, bclk, dac_dat, dac_lrc, adc_lrc are outputs and adc_dat an input,
// all in the processor clock domain. i2c_sclk is the I2C clock and i2c_sdin
// the bidirectional I2C data pin, driven through the three-state buffer
// i2c_out; the board must pull i2c_sdin up. Some synthesis front ends cannot
// flatten an inout port connection; they must then keep i2c_out as its own
// cell, which is the usual place for a pad buffer anyway.
module audio_top
  import audio_pkg::*;
#(
  parameter int unsigned AUDIO_BITS      = 16,
  parameter int unsigned CLK_DIV         = 6,
  parameter int unsigned FS_DIV          = 256,
  parameter int unsigned I2C_HALF_PERIOD = 200
) (
  input  logic   clk,
  input  logic   rst,
  input  ocp_m_t ocp_m,
  output ocp_s_t ocp_s,
  output logic   xclk,
  output logic   bclk,
  output logic   dac_dat,
  output logic   dac_lrc,
  input  logic   adc_dat,
  output logic   adc_lrc,
  output logic   i2c_sclk,
  inout  wire    i2c_sdin
);

  logic [AUDIO_BITS-1:0] dac_l, dac_r, adc_l, adc_r;
  logic dac_en, dac_req, dac_busy;
  logic adc_en, adc_req, adc_busy;
  logic [8:0] i2c_data;
  logic [6:0] i2c_addr;
  logic i2c_req, i2c_ack;
  logic clk_en, bclk_rise, bclk_fall;
  logic i2c_sclk_int, i2c_sdin_o, i2c_sdin_i, i2c_we;

  audio_interface #(.AUDIO_BITS(AUDIO_BITS)) u_if (
    .clk, .rst, .ocp_m, .ocp_s,
    .dac_l, .dac_r, .dac_en, .dac_req, .dac_busy, .dac_lrc,
    .adc_l, .adc_r, .adc_en, .adc_req, .adc_busy, .adc_lrc,
    .i2c_data, .i2c_addr, .i2c_req, .i2c_ack,
    .clk_en
  );

  audio_clk_gen #(.CLK_DIV(CLK_DIV)) u_clk (
    .clk, .rst, .en(clk_en), .bclk, .xclk, .bclk_rise, .bclk_fall
  );

  audio_dac #(.AUDIO_BITS(AUDIO_BITS), .CLK_DIV(CLK_DIV), .FS_DIV(FS_DIV)) u_dac (
    .clk, .rst, .en(dac_en), .req(dac_req),
    .audio_l_i(dac_l), .audio_r_i(dac_r), .bclk_fall,
    .busy(dac_busy), .lrc(dac_lrc), .dacdat(dac_dat)
  );

  audio_adc #(.AUDIO_BITS(AUDIO_BITS), .CLK_DIV(CLK_DIV), .FS_DIV(FS_DIV)) u_adc (
    .clk, .rst, .en(adc_en), .req(adc_req), .bclk_rise, .bclk_fall,
    .adcdat(adc_dat), .busy(adc_busy), .lrc(adc_lrc),
    .audio_l_o(adc_l), .audio_r_o(adc_r)
  );

  audio_i2c #(.HALF_PERIOD(I2C_HALF_PERIOD)) u_i2c (
    .clk, .rst, .req(i2c_req), .addr(i2c_addr), .data(i2c_data), .ack(i2c_ack),
    .sclk(i2c_sclk_int), .sdin_o(i2c_sdin_o), .we(i2c_we), .sdin_i(i2c_sdin_i)
  );

  i2c_out u_i2c_pad (
    .din(i2c_sdin_o), .dout(i2c_sdin_i), .we(i2c_we), .cin(i2c_sclk_int),
    .sclk(i2c_sclk), .sdin(i2c_sdin)
  );

endmodule
