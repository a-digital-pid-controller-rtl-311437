// uart_tx: 8N1 UART transmitter.
//
// `start` with `ready` high loads `data`; the line then carries a low start
// bit, eight data bits LSB first and a high stop bit, each CLKS_PER_BIT clocks
// long (default 50: 1 Mbaud at 50 MHz, this design's choice). `ready` is low
// from the clock after `start` until the stop bit has ended.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 50
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       tx,
  output logic       ready
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame;
  logic [3:0]    nbit;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      nbit  <= '0;
      cnt   <= '0;
      tx    <= 1'b1;
      ready <= 1'b1;
    end else if (ready) begin
      if (start) begin
        frame <= {1'b1, data, 1'b0};
        tx    <= 1'b0;
        nbit  <= 4'd0;
        cnt   <= CW'(CLKS_PER_BIT - 1);
        ready <= 1'b0;
      end
    end else begin
      if (cnt == 0) begin
        if (nbit == 4'd9) begin
          ready <= 1'b1;
          tx    <= 1'b1;
        end else begin
          nbit <= nbit + 1'b1;
          tx   <= frame[nbit + 1'b1];
          cnt  <= CW'(CLKS_PER_BIT - 1);
        end
      end else cnt <= cnt - 1'b1;
    end
  end

endmodule
