// serial_interface: the PC link. A UART byte protocol that sets the loop and
// ramp parameters, starts and stops runs, reads status, and reads and writes
// the sample memory.
//
// Commands (host to FPGA, multi-byte fields most significant byte first):
//   'W' (0x57) addr[7:0] data[31:0]     register write     -> reply ACK (0x06)
//   'R' (0x52) addr[7:0]                register read      -> reply data[31:0]
//   'M' (0x4D) addr[23:0] word[127:0]   memory word write  -> reply ACK
//   'm' (0x6D) addr[23:0]               memory word read   -> reply word[127:0]
// Any other first byte is answered with NAK (0x15). The host waits for the
// reply before it sends the next command; bytes that arrive while a reply is
// pending are dropped.
//
// Register map (32-bit, unused bits read 0):
//   0x00 CTRL      [0] loop enable  [1] set-point from memory  [2] gains from memory
//   0x01 CMD       write 1 to [0] starts a run, to [1] aborts it
//   0x02 STATUS    [0] running [1] overrun [2] u saturated [3] DAC ready
//   0x03-0x05      Kp, Ki, Kd (16 bits, unsigned)
//   0x06 A         conversion factor (16 bits, unsigned)
//   0x07 NSHIFT    right shift N (6 bits)
//   0x08 U_MANUAL  DAC code used while the loop is off (20 bits, signed)
//   0x09 NSTEPS    steps in a run (23 bits)
//   0x0A R_START   initial linear set-point (24 bits, signed)
//   0x0B STEP      current step (read only)
//   0x0C-0x10      last y, m, u, e, r (read only, sign-extended)
//   0x20+2i        ramp segment i slope (held until the count is written)
//   0x21+2i        ramp segment i count (writes slope and count of segment i)
//
// The protocol and register map are this design's own; the paper states only
// that parameters, control values and ADC measurements travel over a UART.
// Timing: one byte takes 10*CLKS_PER_BIT clocks; a memory word read needs 4
// command and 16 reply bytes.
module serial_interface
  import pid_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 50
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                uart_rx,
  output logic                uart_tx,
  // configuration
  output loop_cfg_t           cfg,
  output logic                run_start,
  output logic                run_abort,
  output logic [MEM_AW:0]     nsteps,
  output adc_t                r_start,
  output logic                seg_we,
  output logic [SEG_IW-1:0]   seg_idx,
  output ramp_seg_t           seg_wdata,
  // status
  input  logic                st_running,
  input  logic                st_overrun,
  input  logic                st_saturated,
  input  logic                st_dac_ready,
  input  logic [MEM_AW:0]     st_step,
  input  adc_t                st_y,
  input  adc_t                st_m,
  input  dac_t                st_u,
  input  logic signed [ADC_W:0] st_e,
  input  adc_t                st_r,
  // memory access
  output logic                host_req,
  output logic                host_we,
  output logic [MEM_AW-1:0]   host_addr,
  output logic [MEM_DW-1:0]   host_wdata,
  output logic [MEM_BEW-1:0]  host_be,
  input  logic [MEM_DW-1:0]   host_rdata,
  input  logic                host_done
);

  localparam logic [7:0] C_WREG = 8'h57, C_RREG = 8'h52;
  localparam logic [7:0] C_WMEM = 8'h4D, C_RMEM = 8'h6D;
  localparam logic [7:0] ACK = 8'h06, NAK = 8'h15;

  typedef enum logic [2:0] {P_CMD, P_ARGS, P_EXEC, P_MEMWAIT, P_TX, P_TXWAIT} pstate_t;

  pstate_t      pstate;
  logic [7:0]   rx_data;
  logic         rx_valid;
  logic         tx_start, tx_ready;
  logic [7:0]   tx_data;

  logic [7:0]   cmd;
  logic [4:0]   nargs;
  logic [151:0] args;          // up to 19 argument bytes
  logic [127:0] txbuf;         // reply, sent from the top byte down
  logic [4:0]   ntx;
  logic signed [31:0] slope_hold;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rx), .data(rx_data), .valid(rx_valid));
  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(tx_data), .tx(uart_tx), .ready(tx_ready));

  // Argument fields, located from the end of the shift register.
  wire [7:0]   a_reg   = (cmd == C_WREG) ? args[39:32] : args[7:0];
  wire [31:0]  a_data  = args[31:0];
  wire [23:0]  a_maddr = (cmd == C_WMEM) ? args[151:128] : args[23:0];
  wire [127:0] a_mword = args[127:0];

  function automatic logic [4:0] args_of(logic [7:0] c);
    unique case (c)
      C_WREG:  return 5'd5;
      C_RREG:  return 5'd1;
      C_WMEM:  return 5'd19;
      C_RMEM:  return 5'd3;
      default: return 5'd0;
    endcase
  endfunction

  logic [31:0] rd_val;
  always_comb begin
    rd_val = '0;
    unique case (a_reg)
      8'h00: rd_val = {29'd0, cfg.k_sched, cfg.sp_arb, cfg.loop_en};
      8'h02: rd_val = {28'd0, st_dac_ready, st_saturated, st_overrun, st_running};
      8'h03: rd_val = {16'd0, cfg.k_fixed.kp};
      8'h04: rd_val = {16'd0, cfg.k_fixed.ki};
      8'h05: rd_val = {16'd0, cfg.k_fixed.kd};
      8'h06: rd_val = {16'd0, cfg.a};
      8'h07: rd_val = {26'd0, cfg.n};
      8'h08: rd_val = 32'(cfg.u_manual);
      8'h09: rd_val = 32'(nsteps);
      8'h0A: rd_val = 32'(r_start);
      8'h0B: rd_val = 32'(st_step);
      8'h0C: rd_val = 32'(st_y);
      8'h0D: rd_val = 32'(st_m);
      8'h0E: rd_val = 32'(st_u);
      8'h0F: rd_val = 32'(st_e);
      8'h10: rd_val = 32'(st_r);
      default: rd_val = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate     <= P_CMD;
      cmd        <= '0;
      nargs      <= '0;
      args       <= '0;
      txbuf      <= '0;
      ntx        <= '0;
      tx_start   <= 1'b0;
      tx_data    <= '0;
      cfg        <= '0;
      run_start  <= 1'b0;
      run_abort  <= 1'b0;
      nsteps     <= '0;
      r_start    <= '0;
      seg_we     <= 1'b0;
      seg_idx    <= '0;
      seg_wdata  <= '0;
      slope_hold <= '0;
      host_req   <= 1'b0;
      host_we    <= 1'b0;
      host_addr  <= '0;
      host_wdata <= '0;
      host_be    <= '0;
    end else begin
      run_start <= 1'b0;
      run_abort <= 1'b0;
      seg_we    <= 1'b0;
      host_req  <= 1'b0;
      tx_start  <= 1'b0;
      unique case (pstate)
        P_CMD: if (rx_valid) begin
          cmd   <= rx_data;
          nargs <= args_of(rx_data);
          if (args_of(rx_data) == 0) begin
            txbuf  <= {NAK, 120'd0};
            ntx    <= 5'd1;
            pstate <= P_TX;
          end else begin
            pstate <= P_ARGS;
          end
        end
        P_ARGS: if (rx_valid) begin
          args  <= {args[143:0], rx_data};
          nargs <= nargs - 1'b1;
          if (nargs == 5'd1) pstate <= P_EXEC;
        end
        P_EXEC: begin
          unique case (cmd)
            C_WREG: begin
              unique casez (a_reg)
                8'h00: begin
                  cfg.loop_en <= a_data[0];
                  cfg.sp_arb  <= a_data[1];
                  cfg.k_sched <= a_data[2];
                end
                8'h01: begin
                  run_start <= a_data[0];
                  run_abort <= a_data[1];
                end
                8'h03: cfg.k_fixed.kp <= a_data[15:0];
                8'h04: cfg.k_fixed.ki <= a_data[15:0];
                8'h05: cfg.k_fixed.kd <= a_data[15:0];
                8'h06: cfg.a          <= a_data[15:0];
                8'h07: cfg.n          <= a_data[SHIFT_W-1:0];
                8'h08: cfg.u_manual   <= a_data[DAC_W-1:0];
                8'h09: nsteps         <= a_data[MEM_AW:0];
                8'h0A: r_start        <= a_data[ADC_W-1:0];
                8'b001?_???0: slope_hold <= a_data;
                8'b001?_???1: begin
                  seg_we          <= 1'b1;
                  seg_idx         <= a_reg[SEG_IW:1];
                  seg_wdata.slope <= slope_hold;
                  seg_wdata.count <= a_data;
                end
                default: ;
              endcase
              txbuf  <= {ACK, 120'd0};
              ntx    <= 5'd1;
              pstate <= P_TX;
            end
            C_RREG: begin
              txbuf  <= {rd_val, 96'd0};
              ntx    <= 5'd4;
              pstate <= P_TX;
            end
            C_WMEM, C_RMEM: begin
              host_req   <= 1'b1;
              host_we    <= (cmd == C_WMEM);
              host_addr  <= a_maddr[MEM_AW-1:0];
              host_wdata <= a_mword;
              host_be    <= BE_ALL;
              pstate     <= P_MEMWAIT;
            end
            default: pstate <= P_CMD;
          endcase
        end
        P_MEMWAIT: if (host_done) begin
          txbuf  <= host_we ? {ACK, 120'd0} : host_rdata;
          ntx    <= host_we ? 5'd1 : 5'd16;
          pstate <= P_TX;
        end
        P_TX: if (tx_ready && !tx_start) begin
          tx_start <= 1'b1;
          tx_data  <= txbuf[127:120];
          txbuf    <= {txbuf[119:0], 8'd0};
          ntx      <= ntx - 1'b1;
          pstate   <= P_TXWAIT;
        end
        P_TXWAIT: begin
          // uart_tx drops ready in the clock after start
          if (!tx_start && tx_ready) pstate <= (ntx == 0) ? P_CMD : P_TX;
        end
        default: pstate <= P_CMD;
      endcase
    end
  end

endmodule
