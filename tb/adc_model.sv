// adc_model: behavioural model of the SPI side of a 24-bit delta-sigma ADC
// (ADS127L01 style), for simulation only.
//
// Every PERIOD_CLKS cycles of `clk` (default 1600 = 32 us at 50 MHz, the
// 31.25 kSPS rate of the controller) it takes `value` as the new conversion
// result and pulls drdy_n low. While cs_n is low it shifts the word out MSB
// first, changing dout on each rising SCLK edge; drdy_n returns high when
// cs_n rises. `conversions` counts conversions. `start_conv` forces the next
// conversion at once, so a testbench can place it.
module adc_model #(
  parameter int unsigned PERIOD_CLKS = 1600,
  parameter int unsigned FIRST_CLKS  = 100
) (
  input  logic        clk,
  input  logic [23:0] value,
  input  logic        cs_n,
  input  logic        sclk,
  output logic        drdy_n,
  output logic        dout,
  output int unsigned conversions
);
  logic [23:0] conv;
  logic [23:0] sr;
  int unsigned cnt;

  initial begin
    drdy_n = 1'b1;
    dout = 1'b0;
    conv = '0;
    sr = '0;
    cnt = PERIOD_CLKS - FIRST_CLKS;
    conversions = 0;
  end

  always @(posedge clk) begin
    if (cnt == PERIOD_CLKS - 1) begin
      cnt <= 0;
      conv <= value;
      drdy_n <= 1'b0;
      conversions <= conversions + 1;
    end else begin
      cnt <= cnt + 1;
    end
  end

  always @(negedge cs_n) sr = conv;
  always @(posedge cs_n) drdy_n <= 1'b1;
  always @(posedge sclk) if (!cs_n) begin
    dout <= sr[23];
    sr = {sr[22:0], 1'b0};
  end
endmodule
