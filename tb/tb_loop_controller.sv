// tb_loop_controller: checks the incremental PID law against a reference
// model computed here in 64-bit integer arithmetic.
//
// Random samples are fed with random set-points (ramp or memory), random gain
// triples (fixed or memory), random A and N, and the loop is switched between
// closed loop and manual drive. For every sample the output must equal
//   u_n = sat(u_{n-1} + ((2Kp d1 + Ki s + 2Kd d2) * A) >>> (N+1))
// and u_valid must come exactly 11 clocks after y_valid. The test counts how
// often each selector setting, the manual mode, the first-sample rule and
// saturation at either limit occurred, and fails if one never did.
`timescale 1ns/1ps
module tb_loop_controller;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;

  logic      y_valid;
  adc_t      y, r_lin, r_arb, r_used;
  gains_t    k_mem;
  loop_cfg_t cfg;
  dac_t      u;
  logic      u_valid, saturated, busy;
  logic signed [ADC_W:0] e_last;

  int checks = 0, failures = 0;

  loop_controller dut (.clk, .rst_n, .y_valid, .y, .r_lin, .r_arb, .k_mem, .cfg,
                       .u, .u_valid, .r_used, .e_last, .saturated, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference state
  longint ru = 0, re1 = 0, re2 = 0;
  bit     rprimed = 0;
  int n_arb = 0, n_lin = 0, n_sched = 0, n_fixed = 0, n_manual = 0;
  int n_first = 0, n_sat_hi = 0, n_sat_lo = 0;

  task automatic reference(input longint yv, input longint rv, input gains_t k,
                           input longint av, input int nv, input bit en,
                           input longint um, output longint uexp, output bit sat);
    longint e, d1, s, d2, br, pr, dl, uw;
    e = rv - yv;
    sat = 0;
    if (!en) begin
      ru = um;
      rprimed = 0;
      uexp = um;
      return;
    end
    if (!rprimed) begin
      d1 = 0; s = 2 * e; d2 = 0;
      n_first++;
    end else begin
      d1 = e - re1; s = e + re1; d2 = e - 2 * re1 + re2;
    end
    br = 2 * longint'(k.kp) * d1 + longint'(k.ki) * s + 2 * longint'(k.kd) * d2;
    pr = br * av;
    dl = pr >>> (nv + 1);
    uw = ru + dl;
    if (uw > 524287) begin uw = 524287; sat = 1; n_sat_hi++; end
    if (uw < -524288) begin uw = -524288; sat = 1; n_sat_lo++; end
    re2 = rprimed ? re1 : e;
    re1 = e;
    rprimed = 1;
    ru = uw;
    uexp = uw;
  endtask

  initial begin
    longint uexp;
    bit     sexp;
    int     lat;
    adc_t   rsel;
    gains_t ksel;
    y_valid = 0;
    y = '0; r_lin = '0; r_arb = '0; k_mem = '0; cfg = '0;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // change configuration now and then
      if (i % 50 == 0) begin
        cfg.loop_en  = ($urandom % 8) != 0;
        cfg.sp_arb   = $urandom % 2;
        cfg.k_sched  = $urandom % 2;
        cfg.k_fixed  = gains_t'({16'($urandom), 16'($urandom), 16'($urandom)});
        cfg.a        = 16'($urandom % 4 == 0 ? $urandom : $urandom % 64);
        cfg.n        = 6'(12 + $urandom % 20);
        cfg.u_manual = 20'($urandom);
      end
      y     = 24'($urandom);
      r_lin = y + 24'($signed(($urandom % 2001)) - 1000);
      r_arb = y + 24'($signed(($urandom % 20001)) - 10000);
      if ($urandom % 16 == 0) r_arb = 24'($urandom);
      k_mem = gains_t'({16'($urandom), 16'($urandom), 16'($urandom)});
      rsel = cfg.sp_arb ? r_arb : r_lin;
      ksel = cfg.k_sched ? k_mem : cfg.k_fixed;
      if (cfg.loop_en) begin
        if (cfg.sp_arb) n_arb++; else n_lin++;
        if (cfg.k_sched) n_sched++; else n_fixed++;
      end else n_manual++;
      reference(longint'(y), longint'(rsel), ksel, longint'(cfg.a), int'(cfg.n),
                cfg.loop_en, longint'(cfg.u_manual), uexp, sexp);
      y_valid = 1;
      @(negedge clk);
      y_valid = 0;
      y = 24'($urandom);         // inputs may change after the strobe
      r_lin = 24'($urandom);
      k_mem = '0;
      lat = 1;
      while (!u_valid && lat < 40) begin
        @(negedge clk);
        lat++;
      end
      check(lat == 11, $sformatf("latency %0d, expected 11", lat));
      check(longint'(u) == uexp, $sformatf("sample %0d: u %0d expected %0d", i, u, uexp));
      check(saturated == sexp, $sformatf("sample %0d: saturated flag", i));
      check(r_used == rsel, "r_used");
      repeat ($urandom % 5) @(negedge clk);
    end
    check(n_arb > 0 && n_lin > 0, "both set-point sources used");
    check(n_sched > 0 && n_fixed > 0, "both gain sources used");
    check(n_manual > 0, "manual mode used");
    check(n_first > 0, "first-sample rule used");
    check(n_sat_hi > 0 && n_sat_lo > 0, "both saturation limits hit");
    $display("arb=%0d lin=%0d sched=%0d fixed=%0d manual=%0d first=%0d sat+=%0d sat-=%0d",
             n_arb, n_lin, n_sched, n_fixed, n_manual, n_first, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
