// wm8731_model: behavioural model of the digital pins of the WM8731 codec,
// for simulation only (not synthesizable).
//
// It models what the audio interface talks to, in slave mode:
//  * Control port: an I2C write-only slave at address 0011010. It samples SDA
//    on rising SCLK, acknowledges each byte by pulling SDA low from the falling
//    SCLK edge after the 8th bit to the next falling edge, and on a stop
//    condition after three acknowledged bytes stores the 9-bit value in
//    regs[addr]. When nack_next is set, the next slave-address byte is left
//    unacknowledged (and nack_next's request is counted in nacks_sent).
//  * DAC input: DSP mode A. When DACLRC is seen high at a rising BCLK edge,
//    the next 2*AUDIO_BITS rising edges carry left then right, MSB first.
//  * ADC output: DSP mode A. When ADCLRC is seen high at a rising BCLK edge,
//    the model drives adc_l_src then adc_r_src, MSB first, changing ADCDAT on
//    each following falling BCLK edge.
// sda is the resolved bus line (pull-up, wired AND), computed by the testbench;
// sda_pull = 1 means this model pulls the line low.
module wm8731_model #(
  parameter int unsigned AUDIO_BITS = 16
) (
  input  logic                  xclk,
  input  logic                  bclk,
  input  logic                  dac_dat,
  input  logic                  dac_lrc,
  output logic                  adc_dat,
  input  logic                  adc_lrc,
  input  logic                  sclk,
  input  logic                  sda,
  output logic                  sda_pull,
  // testbench side
  input  logic [AUDIO_BITS-1:0] adc_l_src,
  input  logic [AUDIO_BITS-1:0] adc_r_src,
  input  logic                  nack_next,
  output logic [AUDIO_BITS-1:0] dac_l_rx,
  output logic [AUDIO_BITS-1:0] dac_r_rx,
  output int                    dac_frames,
  output int                    adc_frames,
  output int                    i2c_writes,
  output int                    i2c_starts,
  output int                    nacks_sent,
  output logic [6:0]            last_addr,
  output logic [8:0]            last_data
);

  logic [8:0] regs [128];
  int         xclk_edges;

  initial begin
    sda_pull   = 1'b0;
    adc_dat    = 1'b0;
    dac_l_rx   = '0;
    dac_r_rx   = '0;
    dac_frames = 0;
    adc_frames = 0;
    i2c_writes = 0;
    i2c_starts = 0;
    nacks_sent = 0;
    last_addr  = '0;
    last_data  = '0;
    xclk_edges = 0;
    foreach (regs[i]) regs[i] = '0;
  end

  always @(posedge xclk) xclk_edges++;

  // ---------------- DAC receiver ----------------
  initial begin
    logic [2*AUDIO_BITS-1:0] sh;
    forever begin
      @(posedge bclk);
      if (dac_lrc) begin
        for (int i = 0; i < 2 * AUDIO_BITS; i++) begin
          @(posedge bclk);
          sh = {sh[2*AUDIO_BITS-2:0], dac_dat};
        end
        dac_l_rx = sh[2*AUDIO_BITS-1:AUDIO_BITS];
        dac_r_rx = sh[AUDIO_BITS-1:0];
        dac_frames++;
      end
    end
  end

  // ---------------- ADC transmitter ----------------
  initial begin
    logic [2*AUDIO_BITS-1:0] sh;
    forever begin
      @(posedge bclk);
      if (adc_lrc) begin
        sh = {adc_l_src, adc_r_src};
        for (int i = 0; i < 2 * AUDIO_BITS; i++) begin
          @(negedge bclk);
          adc_dat = sh[2*AUDIO_BITS-1];
          sh      = {sh[2*AUDIO_BITS-2:0], 1'b0};
        end
        @(negedge bclk);
        adc_dat = 1'b0;
        adc_frames++;
      end
    end
  end

  // ---------------- I2C slave ----------------
  logic       in_frame;
  int         bit_n, byte_n;
  logic [7:0] sh8;
  logic [7:0] bytes [3];
  logic       acked;

  initial begin
    in_frame = 1'b0;
    bit_n    = 0;
    byte_n   = 0;
    acked    = 1'b0;
  end

  // start and stop conditions
  always @(negedge sda) if (sclk) begin
    in_frame = 1'b1;
    bit_n    = 0;
    byte_n   = 0;
    i2c_starts++;
  end
  always @(posedge sda) if (sclk && in_frame) begin
    in_frame = 1'b0;
    if (byte_n == 3) begin
      last_addr = bytes[1][7:1];
      last_data = {bytes[1][0], bytes[2]};
      regs[bytes[1][7:1]] = {bytes[1][0], bytes[2]};
      i2c_writes++;
    end
  end

  always @(posedge sclk) if (in_frame && !sda_pull) begin
    if (bit_n < 8) begin
      sh8 = {sh8[6:0], sda};
      bit_n++;
    end
  end

  always @(negedge sclk) if (in_frame) begin
    if (sda_pull) begin
      sda_pull = 1'b0;          // end of the acknowledge bit
      bit_n    = 0;
    end else if (bit_n == 8) begin
      if (byte_n < 3) bytes[byte_n] = sh8;
      acked = 1'b1;
      if (byte_n == 0 && (sh8 != {7'b0011010, 1'b0})) acked = 1'b0;
      if (byte_n == 0 && nack_next) begin
        acked = 1'b0;
        nacks_sent++;
      end
      if (acked) begin
        sda_pull = 1'b1;
        byte_n++;
      end else begin
        in_frame = 1'b0;        // ignore the rest of this transfer
      end
      bit_n = 0;
    end
  end

endmodule
