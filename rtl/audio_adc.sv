// audio_adc: deserialiser for the WM8731 analog-to-digital path, DSP mode A.
//
// The codec is a slave, so this block drives ADCLRC. Once per sample period
// (FS_DIV bit clocks = 1536 processor clocks at the defaults) it follows the
// published state machine: idle -> set LRC high (on a falling BCLK edge) ->
// read left -> read right -> idle. LRC is high for one BCLK period; the codec
// then shifts out the left and the right sample, MSB first, AUDIO_BITS each,
// and this block samples ADCDAT on each rising BCLK edge. The rising-edge
// capture, the one-BCLK LRC pulse, the MSB-first order and the 16-bit default
// follow the paper.
//
// Handshake (this design's reading of the published En/Req/Busy signals):
//   en   - runs the sample-rate counter and starts frames (the paper's power
//          saving enable); a frame in progress is completed.
//   busy - high from the LRC pulse until both samples have been received; the
//          processor must not read the sample registers while it is high.
//   req  - when the frame ends with req high, the received pair is copied to
//          audio_l_o / audio_r_o; with req low the registers keep the last pair.
// Outputs are registered; reset is synchronous.
module audio_adc
  import audio_pkg::*;
#(
  parameter int unsigned AUDIO_BITS = 16,
  parameter int unsigned CLK_DIV    = 6,
  parameter int unsigned FS_DIV     = 256
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,
  input  logic                  req,
  input  logic                  bclk_rise,
  input  logic                  bclk_fall,
  input  logic                  adcdat,
  output logic                  busy,
  output logic                  lrc,
  output logic [AUDIO_BITS-1:0] audio_l_o,
  output logic [AUDIO_BITS-1:0] audio_r_o
);

  localparam int unsigned FS_CYCLES = FS_DIV * CLK_DIV;
  localparam int unsigned FSW       = $clog2(FS_CYCLES);
  localparam int unsigned BW        = $clog2(AUDIO_BITS + 1);

  initial begin
    if (FS_DIV < 2 * AUDIO_BITS + 2)
      $error("audio_adc: FS_DIV too small for one frame of two samples");
  end

  adc_state_e             state_q;
  logic [FSW-1:0]         fs_cnt_q;
  logic                   fs_tick;
  logic                   pending_q;   // a sample tick is waiting for its frame
  logic [AUDIO_BITS-2:0]  shift_q;   // all but the last bit of a sample
  logic [AUDIO_BITS-1:0]  left_q;
  logic [BW-1:0]          bit_cnt_q;

  assign fs_tick = en && (fs_cnt_q == FSW'(FS_CYCLES - 1));

  always_ff @(posedge clk) begin
    if (rst || !en) fs_cnt_q <= '0;
    else if (fs_tick) fs_cnt_q <= '0;
    else fs_cnt_q <= fs_cnt_q + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q   <= ADC_IDLE;
      pending_q <= 1'b0;
      busy      <= 1'b0;
      lrc       <= 1'b0;
      shift_q   <= '0;
      left_q    <= '0;
      bit_cnt_q <= '0;
      audio_l_o <= '0;
      audio_r_o <= '0;
    end else begin
      unique case (state_q)
        ADC_IDLE: begin
          if (fs_tick) begin
            pending_q <= 1'b1;
            state_q   <= ADC_SET_LRC;
          end
        end
        // Raise LRC on the next falling BCLK edge; lower it on the following one.
        ADC_SET_LRC: begin
          if (bclk_fall) begin
            if (pending_q) begin
              pending_q <= 1'b0;
              lrc       <= 1'b1;
              busy      <= 1'b1;
            end else begin
              lrc       <= 1'b0;
              bit_cnt_q <= '0;
              state_q   <= ADC_READ_LEFT;
            end
          end
        end
        ADC_READ_LEFT: begin
          if (bclk_rise) begin
            shift_q   <= {shift_q[AUDIO_BITS-3:0], adcdat};
            bit_cnt_q <= bit_cnt_q + 1'b1;
            if (bit_cnt_q == BW'(AUDIO_BITS - 1)) begin
              left_q    <= {shift_q[AUDIO_BITS-2:0], adcdat};
              bit_cnt_q <= '0;
              state_q   <= ADC_READ_RIGHT;
            end
          end
        end
        ADC_READ_RIGHT: begin
          if (bclk_rise) begin
            shift_q   <= {shift_q[AUDIO_BITS-3:0], adcdat};
            bit_cnt_q <= bit_cnt_q + 1'b1;
            if (bit_cnt_q == BW'(AUDIO_BITS - 1)) begin
              if (req) begin
                audio_l_o <= left_q;
                audio_r_o <= {shift_q[AUDIO_BITS-2:0], adcdat};
              end
              busy    <= 1'b0;
              state_q <= ADC_IDLE;
            end
          end
        end
        default: state_q <= ADC_IDLE;
      endcase
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    fs_tick |-> (state_q == ADC_IDLE));

endmodule
