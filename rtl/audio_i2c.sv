// audio_i2c: write-only I2C master for the WM8731 control interface.
//
// One request writes one codec register: a 7-bit register address and 9 bits
// of data. The transfer follows the published state machine, states numbered
// 0 to 9 as in the published simulation trace:
//   idle/start cond -> send slave adr -> wait for ack -> send data 1st 8-bit
//   -> wait for ack -> send data 2nd 8-bit -> wait for ack -> finish_1
//   -> stop cond -> finish_patmos
// and any missing acknowledge returns to idle. The bytes on the wire are
//   {0011010, 0}  {addr[6:0], data[8]}  {data[7:0]}
// each MSB first and each followed by one acknowledge bit, during which the
// master releases the data line (we low) so the codec can pull it low. The
// slave address, the byte layout, the acknowledge after every byte and the
// 200 kHz SCLK (HALF_PERIOD = 200 processor cycles of 12.5 ns) follow the paper.
//
// Bit timing (this design's choice, within the I2C rules): SCLK toggles every
// HALF_PERIOD cycles; SDA is changed only in the middle of the SCLK low phase,
// except for the start condition (SDA falls while SCLK is high) and the stop
// condition (SDA rises while SCLK is high). The acknowledge is sampled on the
// rising SCLK edge.
//
// Handshake with the processor: raise req with addr/data stable; ack rises
// when the stop condition has been sent and stays high until req is lowered.
// After a missing acknowledge the controller puts a stop condition on the bus
// from idle and, with req still high, retries the whole transfer.
// The pins: sclk, sdin_o (data out), we (1 = drive sdin_o on the pad, 0 =
// release it), sdin_i (pad value read back). The three-state pad itself is
// outside this block. All outputs are registered; reset is synchronous.
module audio_i2c
  import audio_pkg::*;
#(
  parameter int unsigned HALF_PERIOD = 200
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       req,
  input  logic [6:0] addr,
  input  logic [8:0] data,
  output logic       ack,
  output logic       sclk,
  output logic       sdin_o,
  output logic       we,
  input  logic       sdin_i
);

  localparam int unsigned CW = (HALF_PERIOD > 1) ? $clog2(HALF_PERIOD) : 1;

  initial begin
    if (HALF_PERIOD < 4) $error("audio_i2c: HALF_PERIOD must be at least 4");
  end

  i2c_state_e   state_q;
  logic [CW-1:0] cnt_q;
  logic [2:0]    bit_cnt_q;
  logic [7:0]    byte_q;
  logic          ack_ok_q;
  logic          started_q;

  logic tick, mid_low, rise, fall;
  assign tick    = (cnt_q == CW'(HALF_PERIOD - 1));
  assign mid_low = !sclk && (cnt_q == CW'(HALF_PERIOD / 2 - 1));
  assign rise    = tick && !sclk;
  assign fall    = tick &&  sclk;

  // Half-period counter, free running.
  always_ff @(posedge clk) begin
    if (rst || tick) cnt_q <= '0;
    else             cnt_q <= cnt_q + 1'b1;
  end

  // The byte that follows a given acknowledge.
  function automatic logic [7:0] next_byte(input i2c_state_e s,
                                           input logic [6:0] a,
                                           input logic [8:0] d);
    unique case (s)
      I2C_WAIT_ACK1: next_byte = {a, d[8]};
      default:       next_byte = d[7:0];
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q   <= I2C_IDLE;
      sclk      <= 1'b1;
      sdin_o    <= 1'b1;
      we        <= 1'b1;
      ack       <= 1'b0;
      bit_cnt_q <= '0;
      byte_q    <= '0;
      ack_ok_q  <= 1'b0;
      started_q <= 1'b0;
    end else begin
      unique case (state_q)
        // Bring the bus to the free state (SCLK and SDA high), then on a
        // request send the start condition and pull SCLK low.
        I2C_IDLE: begin
          if (!sclk) begin
            if (mid_low) begin
              we     <= 1'b1;
              sdin_o <= 1'b0;
            end
            if (rise) sclk <= 1'b1;
          end else if (started_q) begin
            if (tick) begin
              sclk      <= 1'b0;
              started_q <= 1'b0;
              bit_cnt_q <= '0;
              byte_q    <= {WM8731_I2C_ADDR, I2C_WRITE_BIT};
              state_q   <= I2C_SEND_SLAVE;
            end
          end else if (!sdin_o) begin
            if (tick) sdin_o <= 1'b1;          // stop condition
          end else if (req && tick) begin
            sdin_o    <= 1'b0;                 // start condition
            started_q <= 1'b1;
          end
        end
        I2C_SEND_SLAVE, I2C_SEND_DATA1, I2C_SEND_DATA2: begin
          if (mid_low) begin
            we     <= 1'b1;
            sdin_o <= byte_q[3'd7 - bit_cnt_q];
          end
          if (tick) sclk <= !sclk;
          if (fall) begin
            bit_cnt_q <= bit_cnt_q + 1'b1;
            if (bit_cnt_q == 3'd7) begin
              unique case (state_q)
                I2C_SEND_SLAVE: state_q <= I2C_WAIT_ACK1;
                I2C_SEND_DATA1: state_q <= I2C_WAIT_ACK2;
                default:        state_q <= I2C_WAIT_ACK3;
              endcase
            end
          end
        end
        I2C_WAIT_ACK1, I2C_WAIT_ACK2, I2C_WAIT_ACK3: begin
          if (mid_low) we <= 1'b0;
          if (tick) sclk <= !sclk;
          if (rise) ack_ok_q <= !sdin_i;
          if (fall) begin
            bit_cnt_q <= '0;
            byte_q    <= next_byte(state_q, addr, data);
            if (!ack_ok_q)                     state_q <= I2C_IDLE;
            else if (state_q == I2C_WAIT_ACK1) state_q <= I2C_SEND_DATA1;
            else if (state_q == I2C_WAIT_ACK2) state_q <= I2C_SEND_DATA2;
            else                               state_q <= I2C_FINISH_1;
          end
        end
        // SDA is low; raise SCLK, then SDA (stop condition).
        I2C_FINISH_1: begin
          if (mid_low) begin
            we     <= 1'b1;
            sdin_o <= 1'b0;
          end
          if (rise) begin
            sclk    <= 1'b1;
            state_q <= I2C_STOP_COND;
          end
        end
        I2C_STOP_COND: begin
          if (tick) begin
            sdin_o  <= 1'b1;
            ack     <= 1'b1;
            state_q <= I2C_FINISH_PATMOS;
          end
        end
        I2C_FINISH_PATMOS: begin
          if (!req) begin
            ack     <= 1'b0;
            state_q <= I2C_IDLE;
          end
        end
        default: state_q <= I2C_IDLE;
      endcase
    end
  end

  // SDA may change while SCLK is high only in idle (start/stop) or at the stop.
  a_sda_stable: assert property (@(posedge clk) disable iff (rst)
    (sclk && $past(sclk) && we && $past(we) && (sdin_o != $past(sdin_o)))
      |-> ($past(state_q) inside {I2C_IDLE, I2C_STOP_COND}));

endmodule
