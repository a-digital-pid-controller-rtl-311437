// tb_ramp_generator: checks the piece-wise linear set-point generator against
// a reference computed here.
//
// Several random tables are loaded (random slopes, lengths and number of
// segments, including a full 16-segment table and ramps that run into the ADC
// limits); after `start` the generator is stepped and every output value must
// equal r_start + the sum of the slopes so far (in 1/2^16 codes, rounded
// down, clamped to the 24-bit range), the segment index must follow the
// table, and `active` must fall after the last segment.
`timescale 1ns/1ps
module tb_ramp_generator;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;

  logic seg_we, start, step, active;
  logic [SEG_IW-1:0] seg_idx, seg_cur;
  ramp_seg_t seg_wdata;
  adc_t r_start, r_lin;

  int checks = 0, failures = 0;
  int n_clamp = 0, n_full = 0, n_end = 0;

  ramp_generator dut (.clk, .rst_n, .seg_we, .seg_idx, .seg_wdata, .start,
                      .r_start, .step, .r_lin, .active, .seg_cur);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  ramp_seg_t tbl [NSEG];

  initial begin
    longint acc, amax, amin;
    int nseg, seg, left, total;
    seg_we = 0; start = 0; step = 0; seg_idx = '0; seg_wdata = '0; r_start = '0;
    amax = (longint'(8388607)) <<< 16;
    amin = -((longint'(1)) <<< 39);
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      nseg = (t == 0) ? NSEG : 1 + $urandom % NSEG;
      for (int i = 0; i < NSEG; i++) begin
        tbl[i].slope = (t % 3 == 2) ? 32'($signed($urandom)) : 32'($signed($urandom % 2000001) - 1000000);
        tbl[i].count = (i < nseg) ? 1 + $urandom % 40 : 0;
        @(negedge clk);
        seg_we = 1; seg_idx = SEG_IW'(i); seg_wdata = tbl[i];
        @(negedge clk);
        seg_we = 0;
      end
      if (nseg == NSEG) n_full++;
      r_start = 24'($urandom);
      if (t == 5) begin  // run into the upper limit
        r_start = 24'sd8380000;
        for (int i = 0; i < NSEG; i++) begin
          tbl[i].slope = 32'sd30000000;
          @(negedge clk);
          seg_we = 1; seg_idx = SEG_IW'(i); seg_wdata = tbl[i];
          @(negedge clk);
          seg_we = 0;
        end
      end
      if (t == 8) begin  // and into the lower limit
        r_start = -24'sd8380000;
        for (int i = 0; i < NSEG; i++) begin
          tbl[i].slope = -32'sd30000000;
          @(negedge clk);
          seg_we = 1; seg_idx = SEG_IW'(i); seg_wdata = tbl[i];
          @(negedge clk);
          seg_we = 0;
        end
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      acc = longint'(r_start) <<< 16;
      seg = 0; left = int'(tbl[0].count);
      total = 0;
      for (int i = 0; i < nseg; i++) total += int'(tbl[i].count);
      for (int s = 0; s < total + 5; s++) begin
        check(longint'(r_lin) == (acc >>> 16), $sformatf("table %0d step %0d: r %0d expected %0d", t, s, r_lin, acc >>> 16));
        check(active == (s < total), $sformatf("table %0d step %0d: active", t, s));
        if (s < total) check(int'(seg_cur) == seg, $sformatf("segment %0d expected %0d", seg_cur, seg));
        // reference step
        if (s < total) begin
          acc += longint'(tbl[seg].slope);
          if (acc > amax) begin acc = amax; n_clamp++; end
          if (acc < amin) begin acc = amin; n_clamp++; end
          left--;
          if (left == 0 && seg + 1 < nseg) begin seg++; left = int'(tbl[seg].count); end
        end
        step = 1;
        @(negedge clk);
        step = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      if (!active) n_end++;
    end
    check(n_clamp > 0, "ramp reached an ADC limit");
    check(n_full > 0, "full table used");
    check(n_end == 12, "every ramp ended");
    $display("clamp=%0d full=%0d end=%0d", n_clamp, n_full, n_end);
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
