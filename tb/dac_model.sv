// dac_model: behavioural model of the SPI side of a 20-bit DAC (AD5791
// style), for simulation only.
//
// While sync_n is low it shifts in sdin on every falling SCLK edge. When
// sync_n rises after exactly 24 bits it decodes the frame {R/W, address[2:0],
// data[19:0]}: address 1 updates the DAC register (the output code `code`),
// address 2 the control register `ctrl`. Frames of another length are counted
// in `bad_frames`. `frames` counts good frames and `updated` toggles on every
// DAC register update.
module dac_model (
  input  logic        sync_n,
  input  logic        sclk,
  input  logic        sdin,
  output logic [19:0] code,
  output logic [19:0] ctrl,
  output int unsigned frames,
  output int unsigned bad_frames,
  output int unsigned dac_writes
);
  logic [23:0] sr;
  int unsigned nbits;

  initial begin
    code = '0;
    ctrl = '0;
    frames = 0;
    bad_frames = 0;
    dac_writes = 0;
    sr = '0;
    nbits = 0;
  end

  always @(negedge sync_n) nbits = 0;
  always @(negedge sclk) if (!sync_n) begin
    sr = {sr[22:0], sdin};
    nbits = nbits + 1;
  end
  always @(posedge sync_n) begin
    if (nbits == 24 && !sr[23]) begin
      frames = frames + 1;
      if (sr[22:20] == 3'b001) begin
        code = sr[19:0];
        dac_writes = dac_writes + 1;
      end else if (sr[22:20] == 3'b010) begin
        ctrl = sr[19:0];
      end
    end else begin
      bad_frames = bad_frames + 1;
    end
  end
endmodule
