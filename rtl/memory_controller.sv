// memory_controller: the FPGA side of the large sample memory.
//
// The external memory holds one 128-bit word per control step (layout in
// pid_pkg::mem_word_t): the host pre-programs the arbitrary set-point r_arb(t)
// and the scheduled gains K(t) in each word, and during a run the controller
// writes the feedback measurement y(t) and the validation measurement m(t) of
// that step into the same word, so a run leaves the measured record next to
// the control sequence that produced it.
//
// A run is started by `run_start` with `nsteps` steps. The controller first
// reads word 0; when it has arrived, `running` rises and `cur` (r_arb and K
// for the current step) is valid. On each `sample` strobe while running it
// queues a byte-masked write of {y, m} to word n and a read of word n+1, and
// advances n. After step nsteps-1 `running` falls and `cur` keeps the last
// word. The loop controller samples `cur` in the same clock as `sample`, so
// the prefetch of word n+1 never changes the values used for step n. If a
// sample arrives while the previous step's accesses are still pending,
// `overrun` is set (sticky until the next start).
//
// Host requests (read or write of a whole word, with byte enables) are served
// only when no loop access is pending; while they wait, `host_stall` is high.
// `host_done` pulses when a host access is complete, with read data on
// `host_rdata`.
//
// Memory port: a request/grant handshake; mem_req and mem_rq stay stable until
// mem_gnt; for a read exactly one mem_rvalid follows later. One access is in
// flight at a time. With a 32 us sample period (1600 clocks) two accesses per
// step leave a large margin. That the memory stores measured values and
// supplies K(t) and r_arb(t) follows the paper; the word layout, the
// prefetch scheme, the port and the arbitration are this design's choices.
module memory_controller
  import pid_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  logic                run_start,
  input  logic                run_abort,
  input  logic [MEM_AW:0]     nsteps,
  input  logic                sample,
  input  adc_t                y,
  input  adc_t                m,
  output mem_word_t           cur,
  output logic                running,
  output logic [MEM_AW:0]     step_idx,
  output logic                overrun,
  // host access
  input  logic                host_req,
  input  logic                host_we,
  input  logic [MEM_AW-1:0]   host_addr,
  input  logic [MEM_DW-1:0]   host_wdata,
  input  logic [MEM_BEW-1:0]  host_be,
  output logic [MEM_DW-1:0]   host_rdata,
  output logic                host_done,
  output logic                host_busy,
  output logic                host_stall,
  // external memory port
  output logic                mem_req,
  output mem_req_t            mem_rq,
  input  logic                mem_gnt,
  input  logic                mem_rvalid,
  input  logic [MEM_DW-1:0]   mem_rdata
);

  typedef enum logic [1:0] {M_IDLE, M_REQ, M_RDWAIT} mstate_t;
  typedef enum logic [1:0] {O_FETCH, O_WRITE, O_HOST} owner_t;

  mstate_t           mstate;
  owner_t            owner;

  logic              arming;     // waiting for word 0
  logic              wr_pend;
  logic [MEM_AW-1:0] wr_addr;
  logic [MEM_DW-1:0] wr_data;
  logic              rd_pend;
  logic [MEM_AW-1:0] rd_addr;
  logic              h_pend;
  mem_req_t          h_rq;

  mem_word_t         meas_w;
  wire loop_pend = wr_pend | rd_pend;

  always_comb begin
    meas_w   = '0;
    meas_w.y = y;
    meas_w.m = m;
  end

  assign host_busy  = h_pend;
  assign host_stall = h_pend & (loop_pend | (mstate != M_IDLE && owner != O_HOST));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate     <= M_IDLE;
      owner      <= O_FETCH;
      arming     <= 1'b0;
      running    <= 1'b0;
      step_idx   <= '0;
      overrun    <= 1'b0;
      cur        <= '0;
      wr_pend    <= 1'b0;
      wr_addr    <= '0;
      wr_data    <= '0;
      rd_pend    <= 1'b0;
      rd_addr    <= '0;
      h_pend     <= 1'b0;
      h_rq       <= '0;
      host_rdata <= '0;
      host_done  <= 1'b0;
      mem_req    <= 1'b0;
      mem_rq     <= '0;
    end else begin
      host_done <= 1'b0;

      // ---- run sequencing ----
      if (run_abort) begin
        arming  <= 1'b0;
        running <= 1'b0;
      end else if (run_start) begin
        if (nsteps != 0) begin
          arming  <= 1'b1;
          rd_pend <= 1'b1;
          rd_addr <= '0;
        end
        running  <= 1'b0;
        step_idx <= '0;
        overrun  <= 1'b0;
      end else if (sample && running) begin
        if (loop_pend) overrun <= 1'b1;
        wr_pend <= 1'b1;
        wr_addr <= MEM_AW'(step_idx);
        wr_data <= meas_w;
        if (step_idx + 1'b1 < nsteps) begin
          rd_pend <= 1'b1;
          rd_addr <= MEM_AW'(step_idx + 1'b1);
        end else begin
          running <= 1'b0;
        end
        step_idx <= step_idx + 1'b1;
      end

      if (host_req && !h_pend) begin
        h_pend      <= 1'b1;
        h_rq.we     <= host_we;
        h_rq.addr   <= host_addr;
        h_rq.wdata  <= host_wdata;
        h_rq.be     <= host_be;
      end

      // ---- memory port ----
      unique case (mstate)
        M_IDLE: begin
          if (wr_pend) begin
            mem_req   <= 1'b1;
            mem_rq.we    <= 1'b1;
            mem_rq.addr  <= wr_addr;
            mem_rq.wdata <= wr_data;
            mem_rq.be    <= BE_MEAS;
            owner     <= O_WRITE;
            mstate    <= M_REQ;
          end else if (rd_pend) begin
            mem_req   <= 1'b1;
            mem_rq.we    <= 1'b0;
            mem_rq.addr  <= rd_addr;
            mem_rq.wdata <= '0;
            mem_rq.be    <= BE_ALL;
            owner     <= O_FETCH;
            mstate    <= M_REQ;
          end else if (h_pend) begin
            mem_req   <= 1'b1;
            mem_rq    <= h_rq;
            owner     <= O_HOST;
            mstate    <= M_REQ;
          end
        end
        M_REQ: begin
          if (mem_gnt) begin
            mem_req <= 1'b0;
            if (owner == O_WRITE) wr_pend <= (sample && running) ? 1'b1 : 1'b0;
            if (mem_rq.we) begin
              mstate <= M_IDLE;
              if (owner == O_HOST) begin
                h_pend    <= 1'b0;
                host_done <= 1'b1;
              end
            end else begin
              mstate <= M_RDWAIT;
            end
          end
        end
        M_RDWAIT: begin
          if (mem_rvalid) begin
            mstate <= M_IDLE;
            if (owner == O_HOST) begin
              host_rdata <= mem_rdata;
              h_pend     <= 1'b0;
              host_done  <= 1'b1;
            end else begin
              cur <= mem_rdata;
              if (!(sample && running) && !run_start) rd_pend <= 1'b0;
              if (arming && !run_start && !run_abort) begin
                arming  <= 1'b0;
                running <= 1'b1;
              end
            end
          end
        end
        default: mstate <= M_IDLE;
      endcase
    end
  end

  // Memory port rules.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req && !mem_gnt |=> mem_req && $stable(mem_rq));
  a_no_rvalid_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid |-> mstate == M_RDWAIT);

endmodule
