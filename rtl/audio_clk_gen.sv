// audio_clk_gen: codec clock generator.
//
// The WM8731 runs as a slave, so the FPGA supplies both its master clock XCLK
// and the serial bit clock BCLK. Both come from one divide-by-CLK_DIV counter on
// the 80 MHz processor clock; with the default CLK_DIV = 6 they run at
// 13.33 MHz, which the codec divides by 256 into a 52.08 kHz sample rate. The
// divider value 6 and the shared divider for XCLK and BCLK follow the published
// design; the 50 % duty cycle (high for CLK_DIV/2 cycles, low for CLK_DIV/2)
// and the requirement that CLK_DIV be even are this design's choice.
//
// Interface: when en is low both clocks are held low and the divider is reset,
// so the first rising edge comes CLK_DIV/2 cycles after en rises. bclk_rise and
// bclk_fall are one-cycle strobes, asserted in the cycle before bclk changes,
// so that logic in the processor clock domain can update its outputs at the
// very clock edge on which BCLK rises or falls (the ADC samples on rising
// edges, the DAC drives on falling edges). All outputs are registered.
module audio_clk_gen #(
  parameter int unsigned CLK_DIV = 6
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  output logic bclk,
  output logic xclk,
  output logic bclk_rise,
  output logic bclk_fall
);

  localparam int unsigned HALF = CLK_DIV / 2;
  localparam int unsigned CW   = (HALF > 1) ? $clog2(HALF) : 1;

  logic [CW-1:0] cnt_q;
  logic          clk_q;
  logic          wrap;

  initial begin
    if (CLK_DIV < 2 || (CLK_DIV % 2) != 0)
      $error("audio_clk_gen: CLK_DIV must be even and at least 2");
  end

  assign wrap      = en && (cnt_q == CW'(HALF - 1));
  assign bclk_rise = wrap && !clk_q;
  assign bclk_fall = wrap &&  clk_q;

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      cnt_q <= '0;
      clk_q <= 1'b0;
    end else if (wrap) begin
      cnt_q <= '0;
      clk_q <= !clk_q;
    end else begin
      cnt_q <= cnt_q + 1'b1;
    end
  end

  assign bclk = clk_q;
  assign xclk = clk_q;

endmodule
