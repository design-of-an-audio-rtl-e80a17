// audio_pkg: types and constants shared by the audio interface blocks.
//
// The processor side is the Open Core Protocol (OCP) "core" flavour used by
// Patmos I/O devices: the master issues a one-cycle command (IDLE, WR, RD) with
// address, data and byte enables, and the slave answers with a response code
// (NULL, DVA = data valid/accepted) and read data. The command and response
// encodings below are those of the Patmos OCP definition; the register map of
// the audio device is this design's own choice (the C header that held the
// original addresses is not part of the published description).
//
// The codec constants (I2C slave address 0011010, write bit 0) follow the
// WM8731 as used on the DE2-115 board.
package audio_pkg;

  // ---------------- OCP ----------------
  typedef enum logic [2:0] {
    OCP_CMD_IDLE = 3'b000,
    OCP_CMD_WR   = 3'b001,
    OCP_CMD_RD   = 3'b010
  } ocp_cmd_e;

  typedef enum logic [1:0] {
    OCP_RESP_NULL = 2'b00,
    OCP_RESP_DVA  = 2'b01,
    OCP_RESP_FAIL = 2'b10,
    OCP_RESP_ERR  = 2'b11
  } ocp_resp_e;

  localparam int unsigned OCP_ADDR_W = 32;
  localparam int unsigned OCP_DATA_W = 32;

  typedef struct packed {
    ocp_cmd_e                cmd;
    logic [OCP_ADDR_W-1:0]   addr;
    logic [OCP_DATA_W-1:0]   data;
    logic [OCP_DATA_W/8-1:0] byte_en;
  } ocp_m_t;

  typedef struct packed {
    ocp_resp_e               resp;
    logic [OCP_DATA_W-1:0]   data;
  } ocp_s_t;

  // ---------------- register map (byte offsets, word aligned) ----------------
  // Written by the processor: DAC samples and controls, ADC controls, I2C
  // register address, data and request. Read-only: status, ADC samples, I2C ack.
  localparam logic [5:0] REG_DAC_L    = 6'h00;  // AuLin, RW
  localparam logic [5:0] REG_DAC_R    = 6'h04;  // AuRin, RW
  localparam logic [5:0] REG_DAC_EN   = 6'h08;  // RW
  localparam logic [5:0] REG_DAC_REQ  = 6'h0C;  // RW
  localparam logic [5:0] REG_DAC_BUSY = 6'h10;  // R
  localparam logic [5:0] REG_DAC_LRC  = 6'h14;  // R
  localparam logic [5:0] REG_ADC_L    = 6'h18;  // AuLo, R
  localparam logic [5:0] REG_ADC_R    = 6'h1C;  // AuRo, R
  localparam logic [5:0] REG_ADC_EN   = 6'h20;  // RW
  localparam logic [5:0] REG_ADC_REQ  = 6'h24;  // RW
  localparam logic [5:0] REG_ADC_BUSY = 6'h28;  // R
  localparam logic [5:0] REG_ADC_LRC  = 6'h2C;  // R
  localparam logic [5:0] REG_I2C_DATA = 6'h30;  // RW, 9 bits
  localparam logic [5:0] REG_I2C_ADDR = 6'h34;  // RW, 7 bits
  localparam logic [5:0] REG_I2C_ACK  = 6'h38;  // R
  localparam logic [5:0] REG_I2C_REQ  = 6'h3C;  // RW

  // ---------------- codec ----------------
  localparam logic [6:0] WM8731_I2C_ADDR = 7'b0011010;
  localparam logic       I2C_WRITE_BIT   = 1'b0;

  // I2C controller states, in the order of the published state machine; the
  // numeric values are the ones the simulation trace prints (0 to 9).
  typedef enum logic [3:0] {
    I2C_IDLE          = 4'd0,
    I2C_SEND_SLAVE    = 4'd1,
    I2C_WAIT_ACK1     = 4'd2,
    I2C_SEND_DATA1    = 4'd3,
    I2C_WAIT_ACK2     = 4'd4,
    I2C_SEND_DATA2    = 4'd5,
    I2C_WAIT_ACK3     = 4'd6,
    I2C_FINISH_1      = 4'd7,
    I2C_STOP_COND     = 4'd8,
    I2C_FINISH_PATMOS = 4'd9
  } i2c_state_e;

  // DAC frame states (values 0 to 4 as in the DAC simulation trace).
  typedef enum logic [2:0] {
    DAC_IDLE  = 3'd0,
    DAC_START = 3'd1,
    DAC_LEFT  = 3'd2,
    DAC_RIGHT = 3'd3,
    DAC_DONE  = 3'd4
  } dac_state_e;

  // ADC frame states, as in the published ADC state machine.
  typedef enum logic [1:0] {
    ADC_IDLE       = 2'd0,
    ADC_SET_LRC    = 2'd1,
    ADC_READ_LEFT  = 2'd2,
    ADC_READ_RIGHT = 2'd3
  } adc_state_e;

endpackage
