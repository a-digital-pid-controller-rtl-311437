// pid_top: FPGA top level of the digital current controller.
//
// One control step per feedback-ADC conversion (31.25 kSPS, 32 us):
//   feedback ADC --SPI--> adc_spi_driver (y) --> loop_controller --> u
//   u --> dac_spi_driver --SPI--> DAC --> MOSFET gates
// The loop controller takes its set-point from the ramp generator (r_lin) or
// from the pre-programmed memory sequence (r_arb), and its gains from fixed
// registers or from memory (K(t), gain scheduling). The validation ADC is read
// by a second adc_spi_driver; during a run the memory controller stores y and
// m of every step next to r_arb and K(t) in the external memory. The
// serial_interface connects all of it to a PC over a UART.
//
// Latency from the feedback ADC's data-ready edge to the DAC frame end is
// 3 (synchroniser) + 130 (ADC read) + 11 (control law) + 1 + 130 (DAC write)
// clocks, about 5.5 us at 50 MHz.
//
// Ports: the UART pins, the SPI pins of the two ADCs and the DAC, and the
// word-wide port of the external memory (request/grant, read data returned
// later; see memory_controller). The block structure and its connections are
// those of the controller's architecture; the memory port and the per-run
// sequencing are this design's choices.
module pid_top
  import pid_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT   = 50,
  parameter int unsigned SPI_BIT_CYCLES = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // PC link
  input  logic               uart_rx,
  output logic               uart_tx,
  // feedback ADC
  input  logic               fb_drdy_n,
  output logic               fb_cs_n,
  output logic               fb_sclk,
  input  logic               fb_miso,
  // validation ADC
  input  logic               val_drdy_n,
  output logic               val_cs_n,
  output logic               val_sclk,
  input  logic               val_miso,
  // DAC
  output logic               dac_sync_n,
  output logic               dac_sclk,
  output logic               dac_mosi,
  // external memory
  output logic               mem_req,
  output mem_req_t           mem_rq,
  input  logic               mem_gnt,
  input  logic               mem_rvalid,
  input  logic [MEM_DW-1:0]  mem_rdata
);

  adc_t       y, m;
  logic       y_valid, m_valid;
  dac_t       u;
  logic       u_valid;
  adc_t       r_lin, r_used;
  logic signed [ADC_W:0] e_last;
  logic       saturated, loop_busy;
  logic       dac_busy, dac_ready, dac_done;

  loop_cfg_t  cfg;
  logic       run_start, run_abort;
  logic [MEM_AW:0] nsteps, step_idx;
  adc_t       r_start;
  logic       seg_we;
  logic [SEG_IW-1:0] seg_idx, seg_cur;
  ramp_seg_t  seg_wdata;
  logic       ramp_active;

  mem_word_t  cur;
  logic       running, overrun;
  logic       host_req, host_we, host_done, host_busy, host_stall;
  logic [MEM_AW-1:0]  host_addr;
  logic [MEM_DW-1:0]  host_wdata, host_rdata;
  logic [MEM_BEW-1:0] host_be;

  adc_spi_driver #(.DATA_W(ADC_W), .BIT_CYCLES(SPI_BIT_CYCLES)) u_fb_adc (
    .clk, .rst_n, .drdy_n(fb_drdy_n), .cs_n(fb_cs_n), .sclk(fb_sclk),
    .miso(fb_miso), .data(y), .valid(y_valid));

  adc_spi_driver #(.DATA_W(ADC_W), .BIT_CYCLES(SPI_BIT_CYCLES)) u_val_adc (
    .clk, .rst_n, .drdy_n(val_drdy_n), .cs_n(val_cs_n), .sclk(val_sclk),
    .miso(val_miso), .data(m), .valid(m_valid));

  ramp_generator u_ramp (
    .clk, .rst_n, .seg_we, .seg_idx, .seg_wdata,
    .start(run_start), .r_start, .step(y_valid && running),
    .r_lin, .active(ramp_active), .seg_cur);

  memory_controller u_mem (
    .clk, .rst_n, .run_start, .run_abort, .nsteps,
    .sample(y_valid), .y, .m, .cur, .running, .step_idx, .overrun,
    .host_req, .host_we, .host_addr, .host_wdata, .host_be,
    .host_rdata, .host_done, .host_busy, .host_stall,
    .mem_req, .mem_rq, .mem_gnt, .mem_rvalid, .mem_rdata);

  loop_controller u_loop (
    .clk, .rst_n, .y_valid, .y, .r_lin, .r_arb(cur.r_arb), .k_mem(cur.k),
    .cfg, .u, .u_valid, .r_used, .e_last, .saturated, .busy(loop_busy));

  dac_spi_driver #(.DATA_W(DAC_W), .BIT_CYCLES(SPI_BIT_CYCLES)) u_dac (
    .clk, .rst_n, .start(u_valid), .value(u), .sync_n(dac_sync_n),
    .sclk(dac_sclk), .mosi(dac_mosi), .busy(dac_busy), .ready(dac_ready),
    .done(dac_done));

  serial_interface #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_serial (
    .clk, .rst_n, .uart_rx, .uart_tx, .cfg, .run_start, .run_abort, .nsteps,
    .r_start, .seg_we, .seg_idx, .seg_wdata,
    .st_running(running), .st_overrun(overrun), .st_saturated(saturated),
    .st_dac_ready(dac_ready), .st_step(step_idx), .st_y(y), .st_m(m),
    .st_u(u), .st_e(e_last), .st_r(r_used),
    .host_req, .host_we, .host_addr, .host_wdata, .host_be,
    .host_rdata, .host_done);

endmodule
