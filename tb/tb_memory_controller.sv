// tb_memory_controller: checks the run sequencing and host access of the
// memory controller against the behavioural memory.
//
// The memory is preloaded with random set-points and gains. A run of NST
// steps must present, at each sample, exactly the word of that step on `cur`;
// afterwards every step's word must hold the y and m given at that sample
// while its r_arb and K bytes are unchanged, and the word after the run must
// be untouched. Host reads and writes issued during a run must return and
// store the right data, and must have been stalled at least once behind loop
// traffic. Samples spaced closer than the memory can serve must raise
// `overrun`; an abort must stop the run; samples outside a run write nothing.
`timescale 1ns/1ps
module tb_memory_controller;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;

  localparam int NST = 40;

  logic run_start, run_abort, sample, running, overrun;
  logic [MEM_AW:0] nsteps, step_idx;
  adc_t y, m;
  mem_word_t cur;
  logic host_req, host_we, host_done, host_busy, host_stall;
  logic [MEM_AW-1:0] host_addr;
  logic [MEM_DW-1:0] host_wdata, host_rdata;
  logic [MEM_BEW-1:0] host_be;
  logic mem_req, mem_gnt, mem_rvalid;
  mem_req_t mem_rq;
  logic [MEM_DW-1:0] mem_rdata;
  int unsigned reads, writes;

  int checks = 0, failures = 0;
  int n_stall = 0;

  memory_controller dut (.*);
  lpddr_model #(.AW(MEM_AW)) ram (.clk, .mem_req, .mem_rq, .mem_gnt, .mem_rvalid,
                                  .mem_rdata, .reads, .writes);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n && host_stall) n_stall++;

  mem_word_t pre [NST + 1];
  adc_t ys [NST], ms [NST];

  task automatic pulse_sample(input adc_t yv, input adc_t mv);
    @(negedge clk);
    y = yv; m = mv; sample = 1;
    @(negedge clk);
    sample = 0;
    y = 24'($urandom); m = 24'($urandom);
  endtask

  task automatic host_access(input bit we, input int a, input logic [127:0] w,
                             output logic [127:0] r);
    @(negedge clk);
    host_req = 1; host_we = we; host_addr = MEM_AW'(a); host_wdata = w; host_be = BE_ALL;
    @(negedge clk);
    host_req = 0;
    while (!host_done) @(negedge clk);
    r = host_rdata;
  endtask

  initial begin
    logic [127:0] r, w;
    mem_word_t got;
    int hw_addr;
    run_start = 0; run_abort = 0; sample = 0; nsteps = '0; y = '0; m = '0;
    host_req = 0; host_we = 0; host_addr = '0; host_wdata = '0; host_be = '0;
    for (int i = 0; i <= NST; i++) begin
      pre[i] = mem_word_t'({$urandom, $urandom, $urandom, $urandom});
      ram.backdoor_write(i, pre[i]);
    end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // a sample outside a run writes nothing
    pulse_sample(24'h111111, 24'h222222);
    repeat (50) @(posedge clk);
    check(writes == 0, "no write outside a run");

    nsteps = (MEM_AW + 1)'(NST);
    @(negedge clk); run_start = 1; @(negedge clk); run_start = 0;
    while (!running) @(negedge clk);
    hw_addr = 1000;
    for (int s = 0; s < NST; s++) begin
      check(cur.r_arb == pre[s].r_arb && cur.k == pre[s].k,
            $sformatf("step %0d: cur %h expected %h", s, cur, pre[s]));
      check(int'(step_idx) == s, "step index");
      ys[s] = 24'($urandom); ms[s] = 24'($urandom);
      pulse_sample(ys[s], ms[s]);
      if (s % 8 == 3) begin
        // host traffic right behind the loop's own accesses
        w = {$urandom, $urandom, $urandom, $urandom};
        host_access(1'b1, hw_addr, w, r);
        host_access(1'b0, hw_addr, '0, r);
        check(r == w, "host read-back during a run");
        hw_addr++;
      end
      repeat (150 + $urandom % 100) @(negedge clk);
    end
    check(!running, "run ended");
    check(int'(step_idx) == NST, "step count at end");
    check(!overrun, "no overrun at normal rate");
    for (int s = 0; s < NST; s++) begin
      got = ram.backdoor_read(s);
      check(got.y == ys[s] && got.m == ms[s], $sformatf("word %0d: y/m stored", s));
      check(got.r_arb == pre[s].r_arb && got.k == pre[s].k && got.spare == pre[s].spare,
            $sformatf("word %0d: control bytes kept", s));
    end
    check(ram.backdoor_read(NST) == pre[NST], "word after the run untouched");
    // a sample after the run writes nothing
    pulse_sample(24'h1, 24'h2);
    repeat (50) @(posedge clk);
    check(ram.backdoor_read(NST) == pre[NST], "no write after the run");
    check(n_stall > 0, $sformatf("host stalled %0d clocks", n_stall));

    // overrun: samples two clocks apart
    @(negedge clk); run_start = 1; @(negedge clk); run_start = 0;
    while (!running) @(negedge clk);
    pulse_sample(24'h5, 24'h6);
    pulse_sample(24'h7, 24'h8);
    repeat (5) @(negedge clk);
    check(overrun, "overrun raised");
    // abort
    @(negedge clk); run_abort = 1; @(negedge clk); run_abort = 0;
    check(!running, "abort stops the run");
    repeat (100) @(negedge clk);
    $display("stall clocks=%0d reads=%0d writes=%0d", n_stall, reads, writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
