// tb_workload_hold: the set-point-hold experiment of the controller's
// stability measurements, at full length and default parameters.
//
// Each realization is one experimental cycle as used for the Allan-deviation
// measurements: a 100 ms minimum-jerk ramp from 0 to the set-point followed
// by a 900 ms hold, i.e. 3,125 + 28,125 = 31,250 control steps of 32 us, with
// y and m of every step logged in memory. Set-points are 150 A (1.0 V at the
// ADC, 3,355,443 codes) and 337.5 A (2.25 V, 7,549,747 codes), assuming the
// +-2.5 V = +-375 A range of the feedback chain.
//
// The plant model is non-linear like the MOSFET bank: above a gate threshold
// U_TH the steady current is YMAX x^2 / (x^2 + X0^2) with x = u - U_TH,
// reached with a first-order lag of 1/4 per sample. Its small-signal gain
// therefore peaks (at about 100 A) and falls off on both sides. The scheduled
// gains for every step are computed from the linearised plant at that step's
// set-point so that the loop gain stays constant (Kp g = 0.4, Ki g = 0.1
// with A = 1, N = 16, Kd = 0), mirroring how the gains are derived from
// the measured system response. The set-point and gain sequences are loaded
// directly into the memory model; registers go over the UART.
//
// Checks, per scheduled realization: the run takes all 31,250 steps without
// overrun or DAC saturation; every logged y in the analysis window
// 250 ms...950 ms after the start of the ramp lies within the truncation band
// of the set-point; the logged m follows y; the latency is 275 clocks on every
// sample. A third realization ramps to 337.5 A with fixed gains tuned for
// 337.5 A; passing the gain peak with them must give a larger tracking error
// during the ramp than with gain scheduling.
`timescale 1ns/1ps
module tb_workload_hold;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;
  localparam int BIT = 50;
  localparam int PER = 1600;
  localparam int U_TH = 50000;
  localparam real YMAX = 9.0e6;
  localparam real X0 = 150.0e3;
  localparam int M_OFS = 7;
  localparam int RAMP = 3125;            // 100 ms
  localparam int NST = 31250;            // 1 s
  localparam int WIN0 = 7812, WIN1 = 29687;  // 250 ms .. 950 ms
  localparam real R_LOW = 2.0e5;
  // Truncating the integral term leaves a band of 2^N / (Ki A) codes in which
  // the error no longer changes u; the hold check allows that plus a margin.
  localparam int MARGIN = 40;

  logic uart_rx, uart_tx;
  logic fb_drdy_n, fb_cs_n, fb_sclk, fb_miso;
  logic val_drdy_n, val_cs_n, val_sclk, val_miso;
  logic dac_sync_n, dac_sclk, dac_mosi;
  logic mem_req, mem_gnt, mem_rvalid;
  mem_req_t mem_rq;
  logic [MEM_DW-1:0] mem_rdata;

  pid_top dut (.*);

  logic [23:0] plant_y = 24'd0, val_value;
  real plant_i = 0.0;
  int unsigned fb_conv, val_conv, mreads, mwrites;
  logic [19:0] dac_code, dac_ctrl;
  int unsigned dac_frames, dac_bad, dac_writes;

  adc_model #(.PERIOD_CLKS(PER), .FIRST_CLKS(300)) adc_fb (
    .clk, .value(plant_y), .cs_n(fb_cs_n), .sclk(fb_sclk), .drdy_n(fb_drdy_n),
    .dout(fb_miso), .conversions(fb_conv));
  assign val_value = plant_y + 24'(M_OFS);
  adc_model #(.PERIOD_CLKS(PER), .FIRST_CLKS(900)) adc_val (
    .clk, .value(val_value), .cs_n(val_cs_n), .sclk(val_sclk), .drdy_n(val_drdy_n),
    .dout(val_miso), .conversions(val_conv));
  dac_model dac (.sync_n(dac_sync_n), .sclk(dac_sclk), .sdin(dac_mosi), .code(dac_code),
                 .ctrl(dac_ctrl), .frames(dac_frames), .bad_frames(dac_bad),
                 .dac_writes(dac_writes));
  lpddr_model ram (.clk, .mem_req, .mem_rq, .mem_gnt, .mem_rvalid, .mem_rdata,
                   .reads(mreads), .writes(mwrites));

  function automatic real steady(real x);
    return (x > 0.0) ? YMAX * x * x / (x * x + X0 * X0) : 0.0;
  endfunction
  // small-signal gain at the operating point that gives current r
  function automatic real gain_at(real r);
    real x;
    if (r < 1.0) r = 1.0;
    x = X0 * $sqrt(r / (YMAX - r));
    return YMAX * 2.0 * x * X0 * X0 / ((x * x + X0 * X0) * (x * x + X0 * X0));
  endfunction

  int plant_cnt = 0;
  always @(posedge clk) begin
    plant_cnt <= (plant_cnt == PER - 1) ? 0 : plant_cnt + 1;
    if (plant_cnt == 0) begin
      plant_i = plant_i + (steady(real'($signed(dac_code)) - U_TH) - plant_i) / 4.0;
      plant_y <= 24'($rtoi(plant_i));
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int clk_count = 0;
  always @(posedge clk) clk_count++;
  int lat_ok = 0, lat_bad = 0, t_drdy = 0;
  always @(negedge fb_drdy_n) t_drdy = clk_count;
  always @(posedge dac_sync_n) if (rst_n && dac_writes > 0) begin
    if (clk_count - t_drdy == 275) lat_ok++; else lat_bad++;
  end
  int n_sat = 0;
  always @(posedge clk) if (rst_n && dut.u_loop.u_valid && dut.u_loop.saturated) begin
    if (n_sat == 0) $display("saturated at step %0d, u = %0d", dut.u_mem.step_idx, $signed(dut.u_loop.u));
    n_sat++;
  end

  // ---- UART host ----
  task automatic send_byte(input logic [7:0] b);
    uart_rx = 0;
    repeat (BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rx = b[i];
      repeat (BIT) @(posedge clk);
    end
    uart_rx = 1;
    repeat (BIT) @(posedge clk);
  endtask
  logic [7:0] rxq [$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_tx);
      repeat (BIT / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (BIT) @(posedge clk);
        b[i] = uart_tx;
      end
      repeat (BIT) @(posedge clk);
      if (uart_tx) rxq.push_back(b);
    end
  end
  task automatic get_bytes(input int n, output logic [31:0] v);
    int guard = 0;
    v = '0;
    while (rxq.size() < n && guard < 12 * 10 * BIT * n + 3000) begin
      @(posedge clk);
      guard++;
    end
    if (rxq.size() != n) check(0, $sformatf("reply of %0d bytes, got %0d", n, rxq.size()));
    for (int i = 0; i < n && rxq.size() > 0; i++) v = {v[23:0], rxq.pop_front()};
  endtask
  task automatic wreg(input logic [7:0] a, input logic [31:0] d);
    logic [31:0] v;
    send_byte(8'h57); send_byte(a);
    for (int i = 3; i >= 0; i--) send_byte(d[8*i +: 8]);
    get_bytes(1, v);
    if (v[7:0] != 8'h06) check(0, "no ACK");
  endtask
  task automatic rreg(input logic [7:0] a, output logic [31:0] d);
    send_byte(8'h52); send_byte(a);
    get_bytes(4, d);
  endtask

  // One realization; returns the largest |y - r| during the ramp and in the
  // analysis window.
  task automatic realization(input real r_final, input bit sched, output longint ramp_err,
                             output longint win_err, output int bad_m, output int band);
    mem_word_t w;
    logic [31:0] st;
    real tau, r;
    gains_t kfix;
    longint err;
    int guard;
    // fixed gains tuned at the final set-point
    kfix.kp = 16'($rtoi(0.4 / gain_at(r_final) * 65536.0));
    kfix.ki = 16'($rtoi(0.1 / gain_at(r_final) * 65536.0));
    kfix.kd = 16'd0;
    band = 65536 / int'(kfix.ki) + MARGIN;
    for (int s = 0; s < NST; s++) begin
      tau = (s >= RAMP) ? 1.0 : real'(s) / RAMP;
      r = r_final * (10.0 * tau**3 - 15.0 * tau**4 + 6.0 * tau**5);
      w = '0;
      w.r_arb = 24'($rtoi(r));
      if (sched) begin
        // below R_LOW the gains are held at their R_LOW values
        w.k.kp = 16'($rtoi(0.4 / gain_at((r < R_LOW) ? R_LOW : r) * 65536.0));
        w.k.ki = 16'($rtoi(0.1 / gain_at((r < R_LOW) ? R_LOW : r) * 65536.0));
        w.k.kd = 16'd0;
      end
      ram.backdoor_write(s, w);
    end
    // current off, then start the cycle
    wreg(8'h00, 32'h0);
    wreg(8'h08, 32'(U_TH));
    repeat (60 * PER) @(posedge clk);
    wreg(8'h03, 32'(kfix.kp)); wreg(8'h04, 32'(kfix.ki)); wreg(8'h05, 32'(kfix.kd));
    wreg(8'h06, 32'd1); wreg(8'h07, 32'd16);
    wreg(8'h09, 32'(NST));
    wreg(8'h00, sched ? 32'h7 : 32'h3);
    n_sat = 0;
    wreg(8'h01, 32'h1);
    guard = 0;
    do begin
      repeat (1000 * PER) @(posedge clk);
      rreg(8'h02, st);
      guard++;
    end while (st[0] && guard < NST / 1000 + 5);
    repeat (4 * PER) @(posedge clk);
    rreg(8'h02, st);
    check(!st[0] && !st[1], "run finished without overrun");
    rreg(8'h0B, st);
    check(st == NST, $sformatf("%0d steps run", st));
    ramp_err = 0; win_err = 0; bad_m = 0;
    for (int s = 0; s < NST; s++) begin
      w = ram.backdoor_read(s);
      err = longint'($signed(w.y)) - longint'($signed(w.r_arb));
      if (err < 0) err = -err;
      if (s < RAMP && err > ramp_err) ramp_err = err;
      if (s >= WIN0 && s <= WIN1 && err > win_err) win_err = err;
      if (s >= WIN0 && (longint'($signed(w.m)) - longint'($signed(w.y)) > M_OFS + 50 ||
                        longint'($signed(w.m)) - longint'($signed(w.y)) < M_OFS - 50)) bad_m++;
    end
  endtask

  initial begin
    longint re150, we150, re337, we337, ref337, wef337;
    int bm;
    int sat150, sat337, band, bad0;
    uart_rx = 1;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (400) @(posedge clk);
    bad0 = dac_bad;

    realization(3355443.0, 1'b1, re150, we150, bm, band);
    sat150 = n_sat;
    check(we150 <= band, $sformatf("150 A hold error %0d codes, band %0d", we150, band));
    check(bm == 0, "150 A validation record follows y");
    check(sat150 == 0, "150 A without saturation");

    realization(7549747.0, 1'b1, re337, we337, bm, band);
    sat337 = n_sat;
    check(we337 <= band, $sformatf("337.5 A hold error %0d codes, band %0d", we337, band));
    check(bm == 0, "337.5 A validation record follows y");
    check(sat337 == 0, "337.5 A without saturation");

    realization(7549747.0, 1'b0, ref337, wef337, bm, band);
    check(ref337 > re337, $sformatf("fixed gains ramp error %0d vs scheduled %0d", ref337, re337));

    check(lat_bad == 0 && lat_ok > 3 * NST, $sformatf("latency: %0d right, %0d wrong", lat_ok, lat_bad));
    check(dac_bad == bad0, "no malformed DAC frame");
    $display("150 A: ramp error %0d, window error %0d codes", re150, we150);
    $display("337.5 A: ramp error %0d, window error %0d codes", re337, we337);
    $display("337.5 A fixed gains: ramp error %0d, window error %0d codes", ref337, wef337);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
