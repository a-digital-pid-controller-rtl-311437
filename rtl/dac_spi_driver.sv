// dac_spi_driver: writes actuator values to a 20-bit voltage-output DAC over
// SPI.
//
// Each `start` pulse loads `value` and sends one 24-bit frame, MSB first:
// {R/W = 0, register address 3'b001 (DAC register), 20 data bits}. SCLK idles
// high; data changes with SCLK rising and the DAC latches it on SCLK falling.
// Right after reset the driver first sends CTRL_INIT to the DAC's control
// register (default: output buffer on, ground clamp and tristate off,
// two's-complement coding) so that the output is released; `ready` goes high
// when that frame is done. A `start` that arrives during a frame is remembered
// and its latest value sent next.
//
// Timing: sync_n is low for CS_SETUP + 24*BIT_CYCLES + CS_HOLD clocks; with the
// defaults 130 clocks = 2.6 us at 50 MHz, the DAC write time of the real
// system. `done` pulses in the clock in which sync_n is high again; the DAC
// output updates at that rising edge (LDAC tied low on the board). The 20-bit width is the
// DAC's; the frame layout and control word follow the AD5791 data sheet, and
// the timing values are this design's choices.
module dac_spi_driver #(
  parameter int unsigned DATA_W     = 20,
  parameter int unsigned BIT_CYCLES = 5,
  parameter int unsigned CS_SETUP   = 5,
  parameter int unsigned CS_HOLD    = 5,
  parameter logic [23:0] CTRL_INIT  = 24'h200002
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DATA_W-1:0] value,
  output logic              sync_n,
  output logic              sclk,
  output logic              mosi,
  output logic              busy,
  output logic              ready,
  output logic              done
);

  localparam int unsigned FRAME_W   = 24;
  localparam int unsigned HI_CYCLES = BIT_CYCLES / 2;
  localparam int unsigned CW = $clog2(BIT_CYCLES + CS_SETUP + CS_HOLD + 1);
  localparam int unsigned BW = $clog2(FRAME_W + 1);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_SHIFT, S_HOLD} state_t;

  state_t             state;
  logic [CW-1:0]      cnt;
  logic [BW-1:0]      nbit;
  logic [FRAME_W-1:0] shreg;
  logic               pend;
  logic [DATA_W-1:0]  pend_val;
  logic               init_pend;

  function automatic logic [FRAME_W-1:0] dac_frame(logic [DATA_W-1:0] v);
    return {1'b0, 3'b001, v};
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      nbit      <= '0;
      shreg     <= '0;
      pend      <= 1'b0;
      pend_val  <= '0;
      init_pend <= 1'b1;
      ready     <= 1'b0;
      done      <= 1'b0;
      sync_n    <= 1'b1;
      sclk      <= 1'b1;
      mosi      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        pend     <= 1'b1;
        pend_val <= value;
      end
      unique case (state)
        S_IDLE: begin
          if (init_pend || pend || start) begin
            if (init_pend) begin
              shreg     <= CTRL_INIT;
              init_pend <= 1'b0;
            end else begin
              shreg <= dac_frame(start ? value : pend_val);
              pend  <= 1'b0;
            end
            sync_n <= 1'b0;
            cnt    <= CW'(CS_SETUP - 1);
            state  <= S_SETUP;
          end
        end
        S_SETUP: begin
          if (cnt == 0) begin
            state <= S_SHIFT;
            cnt   <= CW'(BIT_CYCLES - 1);
            nbit  <= BW'(FRAME_W - 1);
            sclk  <= 1'b1;
            mosi  <= shreg[FRAME_W-1];
            shreg <= {shreg[FRAME_W-2:0], 1'b0};
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        S_SHIFT: begin
          if (cnt == CW'(BIT_CYCLES - 1 - HI_CYCLES)) sclk <= 1'b0;
          if (cnt == 0) begin
            if (nbit == 0) begin
              state <= S_HOLD;
              cnt   <= CW'(CS_HOLD - 1);
              sclk  <= 1'b1;
            end else begin
              nbit  <= nbit - 1'b1;
              cnt   <= CW'(BIT_CYCLES - 1);
              sclk  <= 1'b1;
              mosi  <= shreg[FRAME_W-1];
              shreg <= {shreg[FRAME_W-2:0], 1'b0};
            end
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        S_HOLD: begin
          if (cnt == 0) begin
            sync_n <= 1'b1;
            done   <= 1'b1;
            ready  <= 1'b1;
            state  <= S_IDLE;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
