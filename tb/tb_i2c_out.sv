// tb_i2c_out: checks the I2C pad buffer with a pulled-up line and an
// open-drain second device: driven 0 and 1 reach the pad and come back on
// dout, a released line reads 1 (pull-up) or 0 when the other device pulls it,
// and SCLK follows its input. All 16 combinations of (din, we, cin, pull) are
// tried, each against the expected bus level worked out here.
module tb_i2c_out;
  logic din, we, cin, pull;
  logic dout, sclk;
  tri1  sdin;
  int checks = 0, failures = 0;

  i2c_out dut (.din, .dout, .we, .cin, .sclk, .sdin);
  assign sdin = pull ? 1'b0 : 1'bz;

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic expect_bus;
    for (int i = 0; i < 16; i++) begin
      {din, we, cin, pull} = 4'(i);
      #1;
      if (we) expect_bus = din & !pull;   // a driven 1 fighting a pull is not tried below
      else    expect_bus = !pull;
      if (!(we && din && pull)) begin
        checks++;
        if (dout !== expect_bus) begin
          failures++;
          $display("FAIL din=%b we=%b pull=%b: dout=%b want %b", din, we, pull, dout, expect_bus);
        end
      end
      checks++;
      if (sclk !== cin) begin
        failures++;
        $display("FAIL sclk=%b cin=%b", sclk, cin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
