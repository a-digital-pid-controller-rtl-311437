// pid_pkg: types and constants shared by the current-controller FPGA design.
//
// Word widths follow the converters of the control loop: a 24-bit ADC for the
// measurement y(t), a 20-bit DAC for the actuator u(t) and 16-bit gain
// coefficients. The external memory word layout (one 128-bit word per control
// step) is this design's own choice: 2^22 words of 128 bits fill a 512 Mbit
// LPDDR device and give about 4.2 million steps, i.e. 134 s at 32 us per step.
package pid_pkg;

  localparam int unsigned ADC_W     = 24;  // ADC result width
  localparam int unsigned DAC_W     = 20;  // DAC code width
  localparam int unsigned K_W       = 16;  // gain coefficient width
  localparam int unsigned MEM_AW    = 22;  // memory word address width
  localparam int unsigned MEM_DW    = 128; // memory word width
  localparam int unsigned MEM_BEW   = MEM_DW / 8;
  localparam int unsigned SHIFT_W   = 6;   // width of the right-shift N
  localparam int unsigned NSEG      = 16;  // ramp segments
  localparam int unsigned SEG_IW    = $clog2(NSEG);

  typedef logic signed [ADC_W-1:0] adc_t;
  typedef logic signed [DAC_W-1:0] dac_t;

  // One gain triple Kp, Ki, Kd (unsigned integers).
  typedef struct packed {
    logic [K_W-1:0] kp;
    logic [K_W-1:0] ki;
    logic [K_W-1:0] kd;
  } gains_t;

  // One memory word = one control step.  Bytes 0..5 hold what the loop
  // writes (m, y); bytes 6..14 hold what the host pre-programs (r_arb, K).
  typedef struct packed {
    logic [7:0] spare;   // [127:120]
    gains_t     k;       // [119:72]  kp[119:104] ki[103:88] kd[87:72]
    adc_t       r_arb;   // [71:48]
    adc_t       y;       // [47:24]
    adc_t       m;       // [23:0]
  } mem_word_t;

  localparam logic [MEM_BEW-1:0] BE_MEAS = 16'h003F;  // bytes of y and m
  localparam logic [MEM_BEW-1:0] BE_ALL  = 16'hFFFF;

  // Loop configuration written by the host.
  typedef struct packed {
    logic                       loop_en;   // 1: closed loop, 0: u = u_manual
    logic                       sp_arb;    // set-point: 0 r_lin, 1 r_arb
    logic                       k_sched;   // gains: 0 fixed, 1 from memory
    gains_t                     k_fixed;
    logic [15:0]                a;         // conversion factor A
    logic [SHIFT_W-1:0]         n;         // right shift N
    dac_t                       u_manual;
  } loop_cfg_t;

  // One segment of the linear ramp table.
  typedef struct packed {
    logic signed [31:0] slope;  // set-point increment per step, 16 fraction bits
    logic [31:0]        count;  // number of steps in the segment, 0 = end
  } ramp_seg_t;

  // Memory port request (simple request/grant, read data returns later).
  typedef struct packed {
    logic                we;
    logic [MEM_AW-1:0]   addr;
    logic [MEM_DW-1:0]   wdata;
    logic [MEM_BEW-1:0]  be;
  } mem_req_t;

endpackage
