// ramp_generator: produces the linear set-point r_lin as a piece-wise sequence
// of linear ramps, one value per control step.
//
// The host fills a table of NSEG segments; segment i holds a signed slope
// (set-point increment per step, with FRAC_W fraction bits) and a length in
// steps. `start` loads the set-point with r_start and begins at segment 0;
// every `step` pulse (one per ADC sample) then adds the current slope to a
// fixed-point accumulator and counts down the segment. When a segment ends the
// next one begins; a segment of length 0, or the end of the table, stops the
// ramp and holds the last value. The output is the accumulator rounded down to
// whole ADC codes and saturated to the ADC range. A hold is a segment with
// slope 0.
//
// Timing: r_lin is registered; it changes in the clock after `step`, so a
// consumer that samples r_lin together with `step` uses the value of the
// current step. Table writes take effect at once; writing during a ramp is
// allowed but the segment in progress keeps its loaded count. The existence
// of the generator and its purpose follow the paper; the table format, NSEG
// and FRAC_W are this design's choices.
module ramp_generator
  import pid_pkg::*;
#(
  parameter int unsigned NSEG_P = NSEG,
  parameter int unsigned FRAC_W = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // table write port
  input  logic                      seg_we,
  input  logic [$clog2(NSEG_P)-1:0] seg_idx,
  input  ramp_seg_t                 seg_wdata,
  // control
  input  logic                      start,
  input  adc_t                      r_start,
  input  logic                      step,
  output adc_t                      r_lin,
  output logic                      active,
  output logic [$clog2(NSEG_P)-1:0] seg_cur
);

  localparam int unsigned IW = $clog2(NSEG_P);
  localparam int unsigned ACC_W = ADC_W + FRAC_W + 2;

  localparam logic signed [ACC_W-1:0] ACC_MAX =
    ACC_W'({1'b0, {(ADC_W-1){1'b1}}}) <<< FRAC_W;
  localparam logic signed [ACC_W-1:0] ACC_MIN =
    -(ACC_W'(1) <<< (ADC_W - 1 + FRAC_W));

  ramp_seg_t               table_q [NSEG_P];
  logic signed [ACC_W-1:0] acc;
  logic [31:0]             left;
  logic signed [31:0]      slope_q;

  logic signed [ACC_W-1:0] acc_next;
  logic                    last_seg;

  always_comb begin
    acc_next = acc + ACC_W'(slope_q);
    if (acc_next > ACC_MAX) acc_next = ACC_MAX;
    if (acc_next < ACC_MIN) acc_next = ACC_MIN;
  end

  assign last_seg = (seg_cur == IW'(NSEG_P - 1));
  assign r_lin    = ADC_W'(acc >>> FRAC_W);

  always_ff @(posedge clk) begin
    if (seg_we) table_q[seg_idx] <= seg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      left    <= '0;
      slope_q <= '0;
      active  <= 1'b0;
      seg_cur <= '0;
    end else if (start) begin
      acc     <= ACC_W'(r_start) <<< FRAC_W;
      seg_cur <= '0;
      slope_q <= table_q[0].slope;
      left    <= table_q[0].count;
      active  <= (table_q[0].count != 0);
    end else if (step && active) begin
      acc <= acc_next;
      if (left == 32'd1) begin
        if (last_seg || table_q[seg_cur + 1'b1].count == 0) begin
          active  <= 1'b0;
        end else begin
          seg_cur <= seg_cur + 1'b1;
          slope_q <= table_q[seg_cur + 1'b1].slope;
          left    <= table_q[seg_cur + 1'b1].count;
        end
      end else begin
        left <= left - 1'b1;
      end
    end
  end

endmodule
