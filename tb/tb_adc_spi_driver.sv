// tb_adc_spi_driver: checks the ADC SPI driver against the behavioural ADC.
// A new random conversion is made every 400 clocks; every word read must equal
// the word the ADC converted, `valid` must pulse once per conversion, and
// cs_n must stay low for exactly 130 clocks (2.6 us at 50 MHz). SCLK must
// show 24 rising edges per frame.
`timescale 1ns/1ps
module tb_adc_spi_driver;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;

  logic [23:0] value;
  logic drdy_n, cs_n, sclk, miso, valid;
  logic [23:0] data;
  int unsigned conversions;

  int checks = 0, failures = 0;

  adc_spi_driver dut (.clk, .rst_n, .drdy_n, .cs_n, .sclk, .miso, .data, .valid);
  adc_model #(.PERIOD_CLKS(400), .FIRST_CLKS(20)) adc (
    .clk, .value, .cs_n, .sclk, .drdy_n, .dout(miso), .conversions);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cs_low = 0, sclk_edges = 0, frames = 0;
  logic sclk_d = 1'b0;
  logic [23:0] expect_q [$];
  logic [23:0] last_conv = '0;

  // remember what the ADC converted
  always @(posedge clk) begin
    sclk_d <= sclk;
    if (!cs_n) cs_low <= cs_low + 1;
    if (!cs_n && sclk && !sclk_d) sclk_edges <= sclk_edges + 1;
    if (valid && rst_n) begin
      frames <= frames + 1;
      check(data == adc.conv, $sformatf("data %h expected %h", data, adc.conv));
      check(cs_low == 130, $sformatf("cs_n low for %0d clocks, expected 130", cs_low));
      check(sclk_edges == 24, $sformatf("%0d SCLK edges, expected 24", sclk_edges));
      cs_low <= 0;
      sclk_edges <= 0;
    end
  end

  always @(posedge clk) value <= $urandom;

  initial begin
    rst_n = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (400 * 40) @(posedge clk);
    check(frames >= 39, $sformatf("%0d frames for %0d conversions", frames, conversions));
    check(frames == conversions || frames + 1 == conversions, "one frame per conversion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400 * 60) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
