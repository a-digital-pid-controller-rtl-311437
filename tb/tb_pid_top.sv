// tb_pid_top: end-to-end test of the controller at its default parameters.
//
// Around pid_top sit a behavioural feedback ADC and validation ADC (31.25 kSPS),
// a behavioural DAC, the behavioural sample memory and a plant model of the
// coil current: above a gate threshold of U_TH codes the current follows
// G*(u - U_TH) with a first-order lag of 1/4 per sample (y and m in ADC codes;
// the validation ADC reads the same current plus a fixed offset). Everything
// is configured over the UART exactly as a PC would do it.
//
//   1. loop off: the DAC must carry the manual code;
//   2. run 1: linear ramp (ramp generator) up and hold, fixed gains; the
//      current must settle on the set-point; the whole logged record is read
//      back over the UART and must be the feedback ADC's own conversion
//      sequence, with m matching the validation ADC;
//   3. run 2: arbitrary set-point (a minimum-jerk ramp down) and scheduled
//      gains, both preloaded into memory over the UART; every DAC code of the
//      run must equal the incremental PID law recomputed here from the logged
//      y, the programmed r and K and the previous DAC code; host memory reads
//      are sent during the run so that some wait behind loop traffic;
//   4. run 3: an unreachable set-point must drive the DAC to its upper limit.
// The current is expected to settle to within the truncation band of the
// integral term, 2^(N+1) / (2 Ki A) codes. The latency from the ADC's data-ready edge to the end of the DAC frame must
// be 275 clocks every sample. Each mechanism (manual drive, ramp set-point,
// memory set-point, fixed gains, scheduled gains, saturation, host stall,
// logging) is counted and must have occurred.
`timescale 1ns/1ps
module tb_pid_top;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;
  localparam int BIT = 50;      // UART bit time of the default build
  localparam int PER = 1600;    // clocks per sample (32 us)
  localparam int U_TH = 50000;
  localparam int G = 8;
  localparam int M_OFS = 7;

  logic uart_rx, uart_tx;
  logic fb_drdy_n, fb_cs_n, fb_sclk, fb_miso;
  logic val_drdy_n, val_cs_n, val_sclk, val_miso;
  logic dac_sync_n, dac_sclk, dac_mosi;
  logic mem_req, mem_gnt, mem_rvalid;
  mem_req_t mem_rq;
  logic [MEM_DW-1:0] mem_rdata;

  pid_top dut (.*);

  // ---- analog side ----
  logic [23:0] plant_y = 24'd0, val_value;
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

  // plant: one update per sample period, just before each conversion
  int plant_cnt = 0;
  always @(posedge clk) begin
    longint tgt, cur;
    plant_cnt <= (plant_cnt == PER - 1) ? 0 : plant_cnt + 1;
    if (plant_cnt == 0) begin
      tgt = (longint'($signed(dac_code)) > U_TH) ? (longint'($signed(dac_code)) - U_TH) * G : 0;
      cur = longint'($signed(plant_y));
      cur = cur + ((tgt - cur) >>> 2);
      plant_y <= 24'(cur);
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

  // ---- records ----
  int clk_count = 0;
  always @(posedge clk) clk_count++;
  logic [23:0] conv_list [$];            // every feedback conversion
  always @(negedge fb_drdy_n) conv_list.push_back(adc_fb.conv);
  // DAC codes in order, with the conversion each answers
  logic [23:0] pair_conv [$];
  logic [19:0] pair_code [$];
  int lat_ok = 0, lat_bad = 0, t_drdy = 0;
  always @(negedge fb_drdy_n) t_drdy = clk_count;
  always @(posedge dac_sync_n) begin
    if (rst_n && dac_writes > 0) begin
      #1;
      pair_conv.push_back(adc_fb.conv);
      pair_code.push_back(dac_code);
      if (clk_count - t_drdy == 275) lat_ok++;
      else begin
        lat_bad++;
        if (lat_bad < 5) $display("latency %0d clocks", clk_count - t_drdy);
      end
    end
  end
  int n_stall = 0;
  always @(posedge clk) if (rst_n && dut.u_mem.host_stall) n_stall++;
  int n_sat = 0;
  always @(posedge dac_sync_n) if (dac_code == 20'h7FFFF) n_sat++;

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

  task automatic get_bytes(input int n, output logic [127:0] v);
    int guard = 0;
    v = '0;
    while (rxq.size() < n && guard < 12 * 10 * BIT * n + 3000) begin
      @(posedge clk);
      guard++;
    end
    if (rxq.size() != n) check(0, $sformatf("reply of %0d bytes, got %0d", n, rxq.size()));
    for (int i = 0; i < n && rxq.size() > 0; i++) v = {v[119:0], rxq.pop_front()};
  endtask

  task automatic wreg(input logic [7:0] a, input logic [31:0] d);
    logic [127:0] v;
    send_byte(8'h57); send_byte(a);
    for (int i = 3; i >= 0; i--) send_byte(d[8*i +: 8]);
    get_bytes(1, v);
    if (v[7:0] != 8'h06) check(0, $sformatf("no ACK for register %h", a));
  endtask

  task automatic rreg(input logic [7:0] a, output logic [31:0] d);
    logic [127:0] v;
    send_byte(8'h52); send_byte(a);
    get_bytes(4, v);
    d = v[31:0];
  endtask

  task automatic wmem(input int a, input logic [127:0] w);
    logic [127:0] v;
    send_byte(8'h4D);
    for (int i = 2; i >= 0; i--) send_byte(8'(a >> (8 * i)));
    for (int i = 15; i >= 0; i--) send_byte(w[8*i +: 8]);
    get_bytes(1, v);
    if (v[7:0] != 8'h06) check(0, "no ACK for memory write");
  endtask

  task automatic rmem(input int a, output mem_word_t w);
    logic [127:0] v;
    send_byte(8'h6D);
    for (int i = 2; i >= 0; i--) send_byte(8'(a >> (8 * i)));
    get_bytes(16, v);
    w = v;
  endtask

  task automatic wait_run_end(input int max_samples);
    logic [31:0] st;
    int guard = 0;
    do begin
      repeat (PER) @(posedge clk);
      rreg(8'h02, st);
      guard++;
    end while (st[0] && guard < max_samples);
  endtask

  // reference PID step (same law as the controller, 64-bit arithmetic)
  function automatic longint pid_ref(longint u1, longint e0, longint e1, longint e2,
                                     gains_t k, longint a, int n);
    longint br, uw;
    br = 2 * longint'(k.kp) * (e0 - e1) + longint'(k.ki) * (e0 + e1)
       + 2 * longint'(k.kd) * (e0 - 2 * e1 + e2);
    uw = u1 + ((br * a) >>> (n + 1));
    if (uw > 524287) uw = 524287;
    if (uw < -524288) uw = -524288;
    return uw;
  endfunction

  int n_manual = 0, n_lin = 0, n_arb = 0, n_fixed = 0, n_sched = 0, n_logged = 0;

  localparam int N1 = 250, N2 = 120, RAMP_STEPS = 60;
  localparam int R0 = 80000, R1 = 280000, R2 = 150000;
  localparam logic [15:0] KP = 16'd3277, KI = 16'd819, KD = 16'd500;
  // With A = 1 and N = 16 an error below 2^17 / (2 Ki) = 80 codes no longer
  // moves u (the correction is rounded down), so the loop settles within
  // that band.
  localparam int DEADBAND = 100;

  initial begin
    logic [31:0] d;
    mem_word_t w;
    mem_word_t prog [N2];
    mem_word_t log1 [N1];
    mem_word_t log2 [N2];
    int j0, found, mism;
    real tau;
    uart_rx = 1;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (400) @(posedge clk);
    check(dac_frames == 1 && dac_ctrl == 20'h00002, "DAC control register set after reset");

    // 1. manual drive
    wreg(8'h08, 32'(U_TH + 10000));
    repeat (3 * PER) @(posedge clk);
    check($signed(dac_code) == U_TH + 10000, $sformatf("manual code %0d", $signed(dac_code)));
    n_manual++;

    // 2. run 1: linear ramp R0 -> R1 in 100 steps, then hold
    wreg(8'h03, 32'(KP)); wreg(8'h04, 32'(KI)); wreg(8'h05, 32'(KD));
    wreg(8'h06, 32'd1); wreg(8'h07, 32'd16);
    wreg(8'h20, 32'((R1 - R0) / 100) << 16); wreg(8'h21, 32'd100);
    wreg(8'h22, 32'd0);                      wreg(8'h23, 32'd150);
    wreg(8'h24, 32'd0);                      wreg(8'h25, 32'd0);
    wreg(8'h0A, 32'(R0));
    wreg(8'h09, 32'(N1));
    wreg(8'h00, 32'h1);                      // loop on, ramp set-point, fixed gains
    wreg(8'h01, 32'h1);
    wait_run_end(N1 + 20);
    n_lin += N1; n_fixed += N1;
    rreg(8'h0C, d);
    check($signed(d) > R1 - DEADBAND && $signed(d) < R1 + DEADBAND, $sformatf("run 1 settled at %0d, set-point %0d", $signed(d), R1));
    rreg(8'h10, d);
    check($signed(d) == R1, $sformatf("run 1 final set-point %0d", $signed(d)));
    rreg(8'h0B, d);
    check(d == N1, "run 1 step count");
    for (int s = 0; s < N1; s++) begin
      rmem(s, log1[s]);
      n_logged++;
    end
    // the logged y must be a contiguous run of the ADC's conversions
    found = -1;
    for (int j = 0; j + N1 <= conv_list.size() && found < 0; j++) begin
      mism = 0;
      for (int s = 0; s < N1 && mism == 0; s++) if (conv_list[j + s] != log1[s].y) mism = 1;
      if (mism == 0) found = j;
    end
    check(found >= 0, "run 1 log equals the feedback conversions");
    mism = 0;
    for (int s = 150; s < N1; s++)
      if ($signed(log1[s].m) - $signed(log1[s].y) > M_OFS + 20 ||
          $signed(log1[s].m) - $signed(log1[s].y) < M_OFS - 20) mism++;
    check(mism == 0, $sformatf("validation record off in %0d steps", mism));
    check($signed(log1[0].y) < R0 + 100 && $signed(log1[0].y) > R0 - 20000, "run 1 starts near R0");

    // 3. run 2: minimum-jerk ramp R1 -> R2 from memory, scheduled gains
    for (int s = 0; s < N2; s++) begin
      tau = (s >= RAMP_STEPS) ? 1.0 : real'(s) / RAMP_STEPS;
      prog[s] = '0;
      prog[s].r_arb = 24'($rtoi(R1 + (R2 - R1) * (10 * tau**3 - 15 * tau**4 + 6 * tau**5)));
      prog[s].k.kp = (s < RAMP_STEPS) ? KP / 2 : KP;
      prog[s].k.ki = (s < RAMP_STEPS) ? KI / 2 : KI;
      prog[s].k.kd = (s < RAMP_STEPS) ? 16'd0 : KD;
      prog[s].spare = 8'hA5;
      wmem(s, prog[s]);
    end
    wreg(8'h09, 32'(N2));
    wreg(8'h00, 32'h7);                      // loop on, memory set-point and gains
    wreg(8'h01, 32'h1);
    // host reads while the run goes on, at sweeping offsets to the samples
    for (int k = 0; k < 12; k++) begin
      @(negedge fb_drdy_n);
      repeat (1300 + 10 * k) @(posedge clk);   // request lands near the next sample
      rmem(k, w);
      check(w.r_arb == prog[k].r_arb && w.k == prog[k].k, "host read during run 2");
    end
    wait_run_end(N2 + 20);
    n_arb += N2; n_sched += N2;
    rreg(8'h0C, d);
    check($signed(d) > R2 - DEADBAND && $signed(d) < R2 + DEADBAND, $sformatf("run 2 settled at %0d, set-point %0d", $signed(d), R2));
    for (int s = 0; s < N2; s++) begin
      rmem(s, log2[s]);
      check(log2[s].r_arb == prog[s].r_arb && log2[s].k == prog[s].k && log2[s].spare == 8'hA5,
            "programmed bytes kept");
      n_logged++;
    end
    // align run 2 with the DAC record, then recompute every DAC code
    j0 = -1;
    for (int j = 0; j + N2 <= pair_conv.size() && j0 < 0; j++) begin
      mism = 0;
      for (int s = 0; s < N2 && mism == 0; s++) if (pair_conv[j + s] != log2[s].y) mism = 1;
      if (mism == 0) j0 = j;
    end
    check(j0 >= 2, "run 2 aligned with the DAC record");
    if (j0 >= 2) begin
      longint e0, e1, e2, uexp;
      mism = 0;
      for (int s = 2; s < N2; s++) begin
        e0 = longint'($signed(log2[s].r_arb)) - longint'($signed(log2[s].y));
        e1 = longint'($signed(log2[s-1].r_arb)) - longint'($signed(log2[s-1].y));
        e2 = longint'($signed(log2[s-2].r_arb)) - longint'($signed(log2[s-2].y));
        uexp = pid_ref(longint'($signed(pair_code[j0 + s - 1])), e0, e1, e2, prog[s].k, 1, 16);
        if (longint'($signed(pair_code[j0 + s])) != uexp) begin
          mism++;
          if (mism < 4) $display("step %0d: u %0d expected %0d", s, $signed(pair_code[j0 + s]), uexp);
        end
      end
      check(mism == 0, $sformatf("run 2: %0d DAC codes differ from the PID law", mism));
    end

    // 4. run 3: unreachable set-point
    wreg(8'h20, 32'd0); wreg(8'h21, 32'd0);
    wreg(8'h0A, 32'd8000000);
    wreg(8'h09, 32'd40);
    wreg(8'h00, 32'h1);
    wreg(8'h01, 32'h1);
    wait_run_end(60);
    n_lin += 40; n_fixed += 40;
    rreg(8'h02, d);
    check(d[2], "saturation flag");
    check(dac_code == 20'h7FFFF, $sformatf("DAC at upper limit, code %h", dac_code));
    wreg(8'h00, 32'h0);
    repeat (3 * PER) @(posedge clk);
    check($signed(dac_code) == U_TH + 10000, "back to manual drive");
    n_manual++;

    check(dac_bad == 0, "no malformed DAC frame");
    check(lat_bad == 0 && lat_ok > 300, $sformatf("latency: %0d right, %0d wrong", lat_ok, lat_bad));
    check(n_manual > 0 && n_lin > 0 && n_arb > 0 && n_fixed > 0 && n_sched > 0, "all set-point and gain modes used");
    check(n_sat > 0, "saturation occurred");
    check(n_stall > 0, $sformatf("host stalled %0d clocks", n_stall));
    check(n_logged == N1 + N2, "records read back");
    $display("manual=%0d lin=%0d arb=%0d fixed=%0d sched=%0d sat=%0d stall=%0d logged=%0d latency_ok=%0d samples=%0d",
             n_manual, n_lin, n_arb, n_fixed, n_sched, n_sat, n_stall, n_logged, lat_ok, fb_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
