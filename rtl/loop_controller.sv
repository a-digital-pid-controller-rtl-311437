// loop_controller: the digital PID control law with gain scheduling.
//
// For every feedback sample y_n (y_valid) the controller computes
//
//   e_n = r_n - y_n
//   u_n = u_{n-1} + 2^-N * A * [ Kp (e_n - e_{n-1})
//                              + Ki/2 (e_n + e_{n-1})
//                              + Kd (e_n - 2 e_{n-1} + e_{n-2}) ]
//
// i.e. the incremental ("velocity") form of the PID law, which adds a
// correction to the previous actuator value instead of recomputing it. Because
// no integral sum is kept, the gains may change from one step to the next
// without a jump in u, which is what makes gain scheduling possible.
//
// The set-point r_n is taken from the linear ramp generator (r_lin) or from the
// pre-programmed sequence in memory (r_arb); the gains from fixed registers or
// from memory (k_mem), as selected in `cfg`. The bracket is formed at full
// precision as 2 Kp d1 + Ki s + 2 Kd d2 (so Ki/2 loses no bit), multiplied by
// A and only then shifted right by N+1, so nothing is truncated before the
// final shift. The new u is saturated to the DAC range; since the stored u is
// the saturated value there is no wind-up.
//
// With cfg.loop_en = 0 the output is cfg.u_manual on every sample (open-loop
// drive). On the first sample after the loop is enabled the error history is
// filled with the current error, so the loop starts from u_manual without a
// proportional or derivative kick.
//
// Timing: a multi-cycle state machine, one arithmetic step per state; u_valid
// pulses exactly 11 clocks after the y_valid clock, the processing
// time of the real controller. Samples arriving while busy are ignored (they
// come every 1600 clocks). Inputs r_*, k_*, cfg are sampled in the y_valid
// clock. The law, the 16-bit gains and the 11-clock latency follow the paper;
// the state split, unsigned gains and A, saturation and the start-up rule are
// this design's choices.
module loop_controller
  import pid_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      y_valid,
  input  adc_t      y,
  input  adc_t      r_lin,
  input  adc_t      r_arb,
  input  gains_t    k_mem,
  input  loop_cfg_t cfg,
  output dac_t      u,
  output logic      u_valid,
  output adc_t      r_used,     // set-point of the last sample
  output logic signed [ADC_W:0] e_last, // error of the last sample
  output logic      saturated,  // last update hit a DAC limit
  output logic      busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_ERR, S_DIFF, S_MULP, S_MULI, S_MULD, S_SUM, S_MULA, S_SHIFT,
    S_ADD, S_SAT, S_OUT
  } state_t;

  localparam int unsigned EW = ADC_W + 1;   // e
  localparam int unsigned DW = ADC_W + 3;   // differences
  localparam int unsigned PW = DW + K_W + 2; // one product
  localparam int unsigned SW = PW + 2;      // sum of three
  localparam int unsigned AW = SW + 17;     // times A

  localparam logic signed [DAC_W-1:0] U_MAX = {1'b0, {(DAC_W-1){1'b1}}};
  localparam logic signed [DAC_W-1:0] U_MIN = {1'b1, {(DAC_W-1){1'b0}}};

  state_t state;

  adc_t                 y_q, r_q;
  gains_t               k_q;
  logic [15:0]          a_q;
  logic [SHIFT_W-1:0]   n_q;
  logic                 en_q;
  logic                 primed;

  logic signed [EW-1:0] e0, e1, e2;
  logic signed [DW-1:0] d1, sm, d2;
  logic signed [PW-1:0] pp, pi, pd;
  logic signed [SW-1:0] bracket;
  logic signed [AW-1:0] prod_a, delta;
  logic signed [AW-1:0] u_wide;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      y_q       <= '0;
      r_q       <= '0;
      k_q       <= '0;
      a_q       <= '0;
      n_q       <= '0;
      en_q      <= 1'b0;
      primed    <= 1'b0;
      e0        <= '0;
      e1        <= '0;
      e2        <= '0;
      d1        <= '0;
      sm        <= '0;
      d2        <= '0;
      pp        <= '0;
      pi        <= '0;
      pd        <= '0;
      bracket   <= '0;
      prod_a    <= '0;
      delta     <= '0;
      u_wide    <= '0;
      u         <= '0;
      u_valid   <= 1'b0;
      r_used    <= '0;
      e_last    <= '0;
      saturated <= 1'b0;
    end else begin
      u_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (y_valid) begin
          y_q   <= y;
          r_q   <= cfg.sp_arb  ? r_arb : r_lin;
          k_q   <= cfg.k_sched ? k_mem : cfg.k_fixed;
          a_q   <= cfg.a;
          n_q   <= cfg.n;
          en_q  <= cfg.loop_en;
          if (!cfg.loop_en) u <= cfg.u_manual;
          state <= S_ERR;
        end
        S_ERR: begin
          e0    <= EW'(r_q) - EW'(y_q);
          state <= S_DIFF;
        end
        S_DIFF: begin
          // On the first closed-loop sample the history equals e_n.
          d1    <= primed ? DW'(e0) - DW'(e1) : '0;
          sm    <= primed ? DW'(e0) + DW'(e1) : DW'(e0) + DW'(e0);
          d2    <= primed ? DW'(e0) - (DW'(e1) <<< 1) + DW'(e2) : '0;
          state <= S_MULP;
        end
        S_MULP: begin
          pp    <= PW'(d1) * PW'($signed({1'b0, k_q.kp}));
          state <= S_MULI;
        end
        S_MULI: begin
          pi    <= PW'(sm) * PW'($signed({1'b0, k_q.ki}));
          state <= S_MULD;
        end
        S_MULD: begin
          pd    <= PW'(d2) * PW'($signed({1'b0, k_q.kd}));
          state <= S_SUM;
        end
        S_SUM: begin
          bracket <= (SW'(pp) <<< 1) + SW'(pi) + (SW'(pd) <<< 1);
          state   <= S_MULA;
        end
        S_MULA: begin
          prod_a <= AW'(bracket) * AW'($signed({1'b0, a_q}));
          state  <= S_SHIFT;
        end
        S_SHIFT: begin
          delta <= prod_a >>> (n_q + 1'b1);
          state <= S_ADD;
        end
        S_ADD: begin
          u_wide <= AW'(u) + delta;
          state  <= S_SAT;
        end
        S_SAT: begin
          if (en_q) begin
            if (u_wide > AW'(U_MAX)) begin
              u         <= U_MAX;
              saturated <= 1'b1;
            end else if (u_wide < AW'(U_MIN)) begin
              u         <= U_MIN;
              saturated <= 1'b1;
            end else begin
              u         <= DAC_W'(u_wide);
              saturated <= 1'b0;
            end
            e2     <= primed ? e1 : e0;
            e1     <= e0;
            primed <= 1'b1;
          end else begin
            saturated <= 1'b0;
            primed    <= 1'b0;
          end
          r_used <= r_q;
          e_last <= e0;
          state  <= S_OUT;
        end
        S_OUT: begin
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (state == S_SAT) u_valid <= 1'b1;
    end
  end

  // S_IDLE -> S_ERR ... S_SAT is 10 transitions and u_valid is registered,
  // so it rises 11 clocks after the sample strobe.

endmodule
