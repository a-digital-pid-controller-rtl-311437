// adc_spi_driver: reads one conversion from a 24-bit delta-sigma ADC over SPI
// each time the ADC signals that a new result is ready.
//
// The ADC pulls drdy_n low when a conversion is complete (31.25 kSPS, i.e.
// every 32 us, in the controller's main configuration). drdy_n is brought into
// the clock domain with two flip-flops; on its falling edge the driver lowers
// cs_n, waits CS_SETUP clocks, then runs DATA_W SCLK periods of BIT_CYCLES
// clocks each (SCLK high for the first BIT_CYCLES/2 clocks), sampling miso on
// every falling SCLK edge, MSB first, and after CS_HOLD clocks raises cs_n and
// pulses `valid` for one clock with the new two's-complement word on `data`.
//
// Timing: a read takes CS_SETUP + DATA_W*BIT_CYCLES + CS_HOLD clocks after the
// synchronised drdy_n edge; with the defaults 5 + 120 + 5 = 130 clocks, which
// is 2.6 us at the 50 MHz system clock, the ADC read time of the real system.
// The word width is the ADC's; the SPI mode (SCLK idle low, ADC shifts on the
// rising edge, host samples on the falling edge) and the frame timing are
// this design's choices.
module adc_spi_driver #(
  parameter int unsigned DATA_W     = 24,
  parameter int unsigned BIT_CYCLES = 5,
  parameter int unsigned CS_SETUP   = 5,
  parameter int unsigned CS_HOLD    = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              drdy_n,
  output logic              cs_n,
  output logic              sclk,
  input  logic              miso,
  output logic [DATA_W-1:0] data,
  output logic              valid
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_SHIFT, S_HOLD} state_t;

  localparam int unsigned HI_CYCLES = BIT_CYCLES / 2;
  localparam int unsigned CW = $clog2(BIT_CYCLES + CS_SETUP + CS_HOLD + 1);
  localparam int unsigned BW = $clog2(DATA_W + 1);

  state_t            state;
  logic [2:0]        drdy_sync;
  logic [CW-1:0]     cnt;
  logic [BW-1:0]     nbit;
  logic [DATA_W-1:0] shreg;

  wire drdy_fall = drdy_sync[2] & ~drdy_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drdy_sync <= '1;
      state     <= S_IDLE;
      cnt       <= '0;
      nbit      <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      cs_n      <= 1'b1;
      sclk      <= 1'b0;
    end else begin
      drdy_sync <= {drdy_sync[1:0], drdy_n};
      valid     <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (drdy_fall) begin
            cs_n  <= 1'b0;
            cnt   <= CW'(CS_SETUP - 1);
            state <= S_SETUP;
          end
        end
        S_SETUP: begin
          if (cnt == 0) begin
            state <= S_SHIFT;
            cnt   <= CW'(BIT_CYCLES - 1);
            nbit  <= BW'(DATA_W - 1);
            sclk  <= 1'b1;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        S_SHIFT: begin
          // SCLK is high for HI_CYCLES clocks, then low for the rest.
          if (cnt == CW'(BIT_CYCLES - 1 - HI_CYCLES)) begin
            sclk  <= 1'b0;
            shreg <= {shreg[DATA_W-2:0], miso};
          end
          if (cnt == 0) begin
            if (nbit == 0) begin
              state <= S_HOLD;
              cnt   <= CW'(CS_HOLD - 1);
            end else begin
              nbit <= nbit - 1'b1;
              cnt  <= CW'(BIT_CYCLES - 1);
              sclk <= 1'b1;
            end
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        S_HOLD: begin
          if (cnt == 0) begin
            cs_n  <= 1'b1;
            data  <= shreg;
            valid <= 1'b1;
            state <= S_IDLE;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
