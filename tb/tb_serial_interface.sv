// tb_serial_interface: drives the UART command protocol byte by byte and
// checks every effect.
//
// Register writes must appear on the configuration outputs and read back
// unchanged; status inputs must read back sign-extended; the command register
// must pulse run_start/run_abort once; a slope+count pair must produce one
// ramp-table write; memory write and read commands must issue the right
// host requests (answered here by a small memory with a random delay) and
// return ACK or the 16 data bytes; an unknown command must return NAK. Bytes
// are sent and received at the default bit time (50 clocks), and a byte must
// take 10 bit times on the line.
`timescale 1ns/1ps
module tb_serial_interface;
  import pid_pkg::*;
  logic clk = 1'b0;
  always #10 clk = ~clk;
  logic rst_n;
  localparam int BIT = 50;

  logic uart_rx, uart_tx;
  loop_cfg_t cfg;
  logic run_start, run_abort, seg_we;
  logic [MEM_AW:0] nsteps;
  adc_t r_start;
  logic [SEG_IW-1:0] seg_idx;
  ramp_seg_t seg_wdata;
  logic st_running, st_overrun, st_saturated, st_dac_ready;
  logic [MEM_AW:0] st_step;
  adc_t st_y, st_m, st_r;
  dac_t st_u;
  logic signed [ADC_W:0] st_e;
  logic host_req, host_we, host_done;
  logic [MEM_AW-1:0] host_addr;
  logic [MEM_DW-1:0] host_wdata, host_rdata;
  logic [MEM_BEW-1:0] host_be;

  int checks = 0, failures = 0;

  serial_interface dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // --- host side UART ---
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
  int byte_clocks = 0;
  int clk_count = 0, last_edge = -100000;
  always @(posedge clk) clk_count++;
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_tx);
      // start-to-start distance of back-to-back bytes
      if (clk_count - last_edge < 12 * BIT) byte_clocks = clk_count - last_edge;
      last_edge = clk_count;
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
    while (rxq.size() < n && guard < 20 * 10 * BIT * n + 2000) begin
      @(posedge clk);
      guard++;
    end
    check(rxq.size() == n, $sformatf("reply of %0d bytes, got %0d", n, rxq.size()));
    for (int i = 0; i < n && rxq.size() > 0; i++) v = {v[119:0], rxq.pop_front()};
  endtask

  task automatic wreg(input logic [7:0] a, input logic [31:0] d);
    logic [127:0] v;
    send_byte(8'h57); send_byte(a);
    for (int i = 3; i >= 0; i--) send_byte(d[8*i +: 8]);
    get_bytes(1, v);
    check(v[7:0] == 8'h06, $sformatf("ACK for write of reg %h", a));
  endtask

  task automatic rreg(input logic [7:0] a, output logic [31:0] d);
    logic [127:0] v;
    send_byte(8'h52); send_byte(a);
    get_bytes(4, v);
    d = v[31:0];
  endtask

  // --- memory responder ---
  logic [127:0] hmem [64];
  int n_hreq = 0;
  initial begin
    host_done = 0;
    host_rdata = '0;
    forever begin
      @(posedge clk);
      host_done <= 0;
      if (host_req) begin
        n_hreq++;
        repeat (1 + $urandom % 30) @(posedge clk);
        if (host_we) hmem[host_addr[5:0]] = host_wdata;
        else host_rdata <= hmem[host_addr[5:0]];
        host_done <= 1;
      end
    end
  end

  int n_start = 0, n_abort = 0, n_seg = 0;
  ramp_seg_t last_seg;
  logic [SEG_IW-1:0] last_idx;
  always @(posedge clk) if (rst_n) begin
    if (run_start) n_start++;
    if (run_abort) n_abort++;
    if (seg_we) begin n_seg++; last_seg <= seg_wdata; last_idx <= seg_idx; end
  end

  initial begin
    logic [31:0] d;
    logic [127:0] v, w;
    uart_rx = 1;
    {st_running, st_overrun, st_saturated, st_dac_ready} = 4'b1010;
    st_step = 23'd12345; st_y = -24'sd77; st_m = 24'sd99; st_u = -20'sd5;
    st_e = -25'sd3; st_r = 24'sd4242;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    wreg(8'h00, 32'h5);
    check(cfg.loop_en && !cfg.sp_arb && cfg.k_sched, "CTRL bits");
    wreg(8'h03, 32'h1234); wreg(8'h04, 32'h5678); wreg(8'h05, 32'h9abc);
    check(cfg.k_fixed.kp == 16'h1234 && cfg.k_fixed.ki == 16'h5678 && cfg.k_fixed.kd == 16'h9abc, "gains");
    wreg(8'h06, 32'h00c3); wreg(8'h07, 32'd17); wreg(8'h08, 32'hfff80001);
    check(cfg.a == 16'h00c3 && cfg.n == 6'd17 && cfg.u_manual == 20'h80001, "A, N, U_MANUAL");
    wreg(8'h09, 32'd31250); wreg(8'h0A, 32'hff800000);
    check(nsteps == 23'd31250 && r_start == 24'h800000, "NSTEPS, R_START");
    rreg(8'h03, d); check(d == 32'h1234, "read Kp");
    rreg(8'h05, d); check(d == 32'h9abc, "read Kd");
    rreg(8'h08, d); check(d == 32'hfff80001, $sformatf("read U_MANUAL %h", d));
    rreg(8'h0A, d); check(d == 32'hff800000, "read R_START");
    rreg(8'h09, d); check(d == 32'd31250, "read NSTEPS");
    rreg(8'h00, d); check(d == 32'h5, "read CTRL");
    rreg(8'h02, d); check(d == 32'h5, $sformatf("read STATUS %h", d));
    rreg(8'h0B, d); check(d == 32'd12345, "read STEP");
    rreg(8'h0C, d); check(d == 32'hffffffb3, $sformatf("read Y %h", d));
    rreg(8'h0D, d); check(d == 32'd99, "read M");
    rreg(8'h0E, d); check(d == 32'hfffffffb, "read U");
    rreg(8'h0F, d); check(d == 32'hfffffffd, "read E");
    rreg(8'h10, d); check(d == 32'd4242, "read R");
    wreg(8'h01, 32'h1);
    check(n_start == 1 && n_abort == 0, "run_start pulse");
    wreg(8'h01, 32'h2);
    check(n_start == 1 && n_abort == 1, "run_abort pulse");
    wreg(8'h26, 32'hfffe0000);  // slope of segment 3
    check(n_seg == 0, "no table write on slope alone");
    wreg(8'h27, 32'd777);       // count of segment 3
    check(n_seg == 1 && last_idx == 3 && last_seg.slope == 32'hfffe0000 && last_seg.count == 777,
          "ramp segment write");
    // memory write then read
    w = {$urandom, $urandom, $urandom, $urandom};
    send_byte(8'h4D); send_byte(8'h00); send_byte(8'h00); send_byte(8'h2a);
    for (int i = 15; i >= 0; i--) send_byte(w[8*i +: 8]);
    get_bytes(1, v);
    check(v[7:0] == 8'h06, "ACK for memory write");
    check(hmem[42] == w, "memory word written");
    send_byte(8'h6D); send_byte(8'h00); send_byte(8'h00); send_byte(8'h2a);
    get_bytes(16, v);
    check(v == w, $sformatf("memory word read %h expected %h", v, w));
    check(n_hreq == 2, "two host requests");
    // unknown command
    send_byte(8'hAA);
    get_bytes(1, v);
    check(v[7:0] == 8'h15, "NAK for unknown command");
    check(byte_clocks >= 10 * BIT && byte_clocks <= 10 * BIT + 4,
          $sformatf("byte time %0d clocks", byte_clocks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
