// audio_dac: serialiser for the WM8731 digital-to-analog path, DSP mode A.
//
// Once per sample period (FS_DIV bit clocks = FS_DIV*CLK_DIV processor clocks,
// 1536 at the defaults, i.e. 52.08 kHz at 80 MHz) the DAC sends one frame:
// DACLRC high for exactly one BCLK period, then the left sample, then the right
// sample, each AUDIO_BITS wide and MSB first, with no gap. Every change of
// DACLRC and DACDAT is made on a falling BCLK edge so that the codec can read
// it on the next rising edge. These framing rules, the falling-edge timing, the
// sample counter in processor cycles and the 16-bit sample width shown in the
// published simulations follow the paper.
//
// Handshake (this design's reading of the published En/Req/Busy signals):
//   en   - runs the sample-rate counter and the frames; low stops after the
//          current frame.
//   req  - while req is high and no frame is being sent (busy low), the sample
//          registers copy audio_l_i / audio_r_i; a frame always sends the copy,
//          so the processor may rewrite its registers at any time.
//   busy - high from the LRC pulse until the last right-channel bit has been
//          held for a full bit clock (2*AUDIO_BITS+1 bit clocks).
// lrc is the DACLRC pin; it is also returned to the processor so software can
// synchronise to the sample rate. Outputs are registered; reset is synchronous.
module audio_dac
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
  input  logic [AUDIO_BITS-1:0] audio_l_i,
  input  logic [AUDIO_BITS-1:0] audio_r_i,
  input  logic                  bclk_fall,
  output logic                  busy,
  output logic                  lrc,
  output logic                  dacdat
);

  localparam int unsigned FS_CYCLES = FS_DIV * CLK_DIV;
  localparam int unsigned FSW       = $clog2(FS_CYCLES);
  localparam int unsigned BW        = $clog2(2 * AUDIO_BITS + 1);

  initial begin
    if (FS_DIV < 2 * AUDIO_BITS + 2)
      $error("audio_dac: FS_DIV too small for one frame of two samples");
  end

  dac_state_e                state_q;
  logic [FSW-1:0]            fs_cnt_q;
  logic                      fs_tick;
  logic [AUDIO_BITS-1:0]     audio_l_q, audio_r_q;
  logic [2*AUDIO_BITS-1:0]   shift_q;
  logic [BW-1:0]             bit_cnt_q;

  // Sample-rate counter: counts processor cycles while enabled.
  assign fs_tick = en && (fs_cnt_q == FSW'(FS_CYCLES - 1));

  always_ff @(posedge clk) begin
    if (rst || !en) fs_cnt_q <= '0;
    else if (fs_tick) fs_cnt_q <= '0;
    else fs_cnt_q <= fs_cnt_q + 1'b1;
  end

  // Sample registers: loaded from the processor side only between frames.
  always_ff @(posedge clk) begin
    if (rst) begin
      audio_l_q <= '0;
      audio_r_q <= '0;
    end else if (req && !busy) begin
      audio_l_q <= audio_l_i;
      audio_r_q <= audio_r_i;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q   <= DAC_IDLE;
      busy      <= 1'b0;
      lrc       <= 1'b0;
      dacdat    <= 1'b0;
      shift_q   <= '0;
      bit_cnt_q <= '0;
    end else begin
      unique case (state_q)
        DAC_IDLE: begin
          if (fs_tick) state_q <= DAC_START;
        end
        // Wait for the next falling BCLK edge, then raise LRC for one BCLK.
        DAC_START: begin
          if (bclk_fall) begin
            lrc       <= 1'b1;
            busy      <= 1'b1;
            shift_q   <= {audio_l_q, audio_r_q};
            bit_cnt_q <= '0;
            state_q   <= DAC_LEFT;
          end
        end
        DAC_LEFT, DAC_RIGHT: begin
          if (bclk_fall) begin
            lrc       <= 1'b0;
            dacdat    <= shift_q[2*AUDIO_BITS-1];
            shift_q   <= {shift_q[2*AUDIO_BITS-2:0], 1'b0};
            bit_cnt_q <= bit_cnt_q + 1'b1;
            if (bit_cnt_q == BW'(AUDIO_BITS - 1))        state_q <= DAC_RIGHT;
            else if (bit_cnt_q == BW'(2 * AUDIO_BITS - 1)) state_q <= DAC_DONE;
          end
        end
        // The last bit has been held one BCLK: release the line, end the frame.
        DAC_DONE: begin
          if (bclk_fall) begin
            dacdat  <= 1'b0;
            busy    <= 1'b0;
            state_q <= DAC_IDLE;
          end
        end
        default: state_q <= DAC_IDLE;
      endcase
    end
  end

  // A frame must never be interrupted by the next sample tick.
  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    fs_tick |-> (state_q == DAC_IDLE));

endmodule
