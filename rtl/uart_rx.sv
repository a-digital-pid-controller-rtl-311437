// uart_rx: 8N1 UART receiver.
//
// The rx line is synchronised with two flip-flops. A falling edge starts a
// frame; the line is checked again half a bit later (a glitch returns to
// idle), then the eight data bits are sampled LSB first in the middle of each
// bit and the stop bit is checked. `valid` pulses for one clock with the byte
// on `data` when the stop bit is high; a frame with a low stop bit is dropped.
// One bit lasts CLKS_PER_BIT clocks (default 50: 1 Mbaud at 50 MHz, this
// design's choice).
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 50
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid
);

  typedef enum logic [1:0] {R_IDLE, R_START, R_DATA, R_STOP} state_t;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  state_t        state;
  logic [1:0]    rx_sync;
  logic [CW-1:0] cnt;
  logic [2:0]    nbit;
  logic [7:0]    shreg;

  wire rxs = rx_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sync <= 2'b11;
      state   <= R_IDLE;
      cnt     <= '0;
      nbit    <= '0;
      shreg   <= '0;
      data    <= '0;
      valid   <= 1'b0;
    end else begin
      rx_sync <= {rx_sync[0], rx};
      valid   <= 1'b0;
      unique case (state)
        R_IDLE: if (!rxs) begin
          cnt   <= CW'(CLKS_PER_BIT / 2 - 1);
          state <= R_START;
        end
        R_START: begin
          if (cnt == 0) begin
            if (!rxs) begin
              cnt   <= CW'(CLKS_PER_BIT - 1);
              nbit  <= '0;
              state <= R_DATA;
            end else begin
              state <= R_IDLE;
            end
          end else cnt <= cnt - 1'b1;
        end
        R_DATA: begin
          if (cnt == 0) begin
            shreg <= {rxs, shreg[7:1]};
            cnt   <= CW'(CLKS_PER_BIT - 1);
            if (nbit == 3'd7) state <= R_STOP;
            nbit <= nbit + 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        R_STOP: begin
          if (cnt == 0) begin
            if (rxs) begin
              data  <= shreg;
              valid <= 1'b1;
            end
            state <= R_IDLE;
          end else cnt <= cnt - 1'b1;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

endmodule
