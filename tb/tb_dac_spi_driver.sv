// tb_dac_spi_driver: checks the DAC SPI driver against the behavioural DAC.
// After reset the first frame must load the control register with 0x00002
// (address 2); then random codes are written, some of them while a frame is
// in progress, and the DAC register must end up holding every code that was
// sent or, for back-to-back requests, the latest one. sync_n must stay low
// for exactly 130 clocks per frame and no malformed frame may occur.
`timescale 1ns/1ps
module tb_dac_spi_driver;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;

  logic start;
  logic [19:0] value;
  logic sync_n, sclk, mosi, busy, ready, done;
  logic [19:0] code, ctrl;
  int unsigned frames, bad_frames, dac_writes;

  int checks = 0, failures = 0;

  dac_spi_driver dut (.clk, .rst_n, .start, .value, .sync_n, .sclk, .mosi,
                      .busy, .ready, .done);
  dac_model dac (.sync_n, .sclk, .sdin(mosi), .code, .ctrl, .frames,
                 .bad_frames, .dac_writes);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int sync_low = 0;
  always @(posedge clk) begin
    if (!sync_n) sync_low <= sync_low + 1;
    if (done && rst_n) begin
      check(sync_low == 130, $sformatf("sync_n low for %0d clocks, expected 130", sync_low));
      sync_low <= 0;
    end
  end

  task automatic send(input logic [19:0] v);
    @(negedge clk);
    start = 1'b1;
    value = v;
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    logic [19:0] v, v2;
    start = 1'b0;
    value = '0;
    rst_n = 1'b0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    repeat (3) @(posedge clk);
    check(frames == 1, "one frame after reset");
    check(ctrl == 20'h00002, $sformatf("control register %h", ctrl));
    check(dac_writes == 0, "no DAC write before a start");
    for (int i = 0; i < 30; i++) begin
      v = 20'($urandom);
      send(v);
      wait (done);
      @(posedge clk);
      check(code == v, $sformatf("code %h expected %h", code, v));
    end
    // two requests during one frame: the latest is written next
    v = 20'($urandom);
    v2 = 20'($urandom);
    send(20'h12345);
    repeat (20) @(posedge clk);
    send(v);
    repeat (20) @(posedge clk);
    send(v2);
    wait (done);
    @(posedge clk);
    check(code == 20'h12345, "first of back-to-back frames");
    @(posedge clk);
    wait (done);
    @(posedge clk);
    check(code == v2, $sformatf("pending value %h expected %h", code, v2));
    repeat (200) @(posedge clk);
    check(!busy, "idle after pending frame");
    check(bad_frames == 0, $sformatf("%0d malformed frames", bad_frames));
    check(dac_writes == 32, $sformatf("%0d DAC writes, expected 32", dac_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
