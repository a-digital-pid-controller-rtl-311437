// lpddr_model: behavioural model of the external sample memory and its
// controller as seen through the word-wide request/grant port, for simulation
// only.
//
// Words of 128 bits, 2^AW of them, kept in a sparse array (unwritten words
// read as 0). A request is granted after GNT_WAIT clocks plus a pseudo-random
// 0..3 extra clocks; a write is applied with its byte enables at the grant,
// a read returns its word with mem_rvalid RD_LAT clocks after the grant.
// `backdoor_write` and `backdoor_read` let a testbench preload and inspect
// the contents.
module lpddr_model
  import pid_pkg::*;
#(
  parameter int unsigned AW       = MEM_AW,
  parameter int unsigned GNT_WAIT = 2,
  parameter int unsigned RD_LAT   = 12
) (
  input  logic              clk,
  input  logic              mem_req,
  input  mem_req_t          mem_rq,
  output logic              mem_gnt,
  output logic              mem_rvalid,
  output logic [MEM_DW-1:0] mem_rdata,
  output int unsigned       reads,
  output int unsigned       writes
);
  logic [MEM_DW-1:0] mem [int unsigned];
  int unsigned wait_cnt;
  int unsigned lat_cnt;
  logic        rd_busy;
  logic [MEM_DW-1:0] rd_word;
  logic [31:0] lfsr;

  function automatic logic [MEM_DW-1:0] peek(int unsigned a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  task automatic backdoor_write(int unsigned a, logic [MEM_DW-1:0] w);
    mem[a] = w;
  endtask

  function automatic logic [MEM_DW-1:0] backdoor_read(int unsigned a);
    return peek(a);
  endfunction

  initial begin
    mem_gnt = 1'b0;
    mem_rvalid = 1'b0;
    mem_rdata = '0;
    wait_cnt = 0;
    lat_cnt = 0;
    rd_busy = 1'b0;
    rd_word = '0;
    lfsr = 32'h1234_5678;
    reads = 0;
    writes = 0;
  end

  always @(posedge clk) begin
    logic [MEM_DW-1:0] w;
    int unsigned a;
    mem_gnt    <= 1'b0;
    mem_rvalid <= 1'b0;
    lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    if (rd_busy) begin
      if (lat_cnt == 0) begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= rd_word;
        rd_busy    <= 1'b0;
      end else begin
        lat_cnt <= lat_cnt - 1;
      end
    end
    if (mem_req && !mem_gnt) begin
      if (wait_cnt == 0) begin
        wait_cnt <= GNT_WAIT + int'(lfsr[1:0]);
      end else if (wait_cnt == 1) begin
        wait_cnt <= 0;
        mem_gnt  <= 1'b1;
        a = int'(mem_rq.addr) & ((1 << AW) - 1);
        if (mem_rq.we) begin
          w = peek(a);
          for (int b = 0; b < MEM_BEW; b++)
            if (mem_rq.be[b]) w[8*b +: 8] = mem_rq.wdata[8*b +: 8];
          mem[a] = w;
          writes <= writes + 1;
        end else begin
          rd_word <= peek(a);
          rd_busy <= 1'b1;
          lat_cnt <= RD_LAT - 1;
          reads <= reads + 1;
        end
      end else begin
        wait_cnt <= wait_cnt - 1;
      end
    end
  end
endmodule
