// tb_mem: behavioural model of the off-chip global memory for testbenches.
//
// WORDS words of 512 bits. A request is accepted when req.valid and
// rsp.ready are both high; ready drops at random in STALL_PCT percent of the
// cycles to exercise back-pressure. Writes take effect when accepted; read
// data is taken when the read is accepted and returned, in order, with
// rvalid LAT cycles later, together with the tag given with the request. stalls counts cycles in which a request waited.
// Reads/writes outside the array are reported as errors (bad counts them).
// Requests are ignored while active is low (the requesters are in reset).
module tb_mem
  import sf_pkg::*;
#(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     active,
  input  mem_req_t req,
  input  int       tag,
  output mem_rsp_t rsp,
  output int       rtag,
  output int       stalls,
  output int       bad
);

  bus_t mem [WORDS];
  typedef struct { longint due; bus_t data; int tag; } pend_t;
  pend_t  q [$];
  longint cyc = 0;

  initial begin
    stalls     = 0;
    bad        = 0;
    rsp.ready  = 1'b1;
    rsp.rvalid = 1'b0;
    rsp.rdata  = '0;
    rtag       = -1;
    for (int unsigned a = 0; a < WORDS; a++) mem[a] = '0;
  end

  // All outputs are registered: ready for the next cycle, and the next read
  // response once it is due.
  always @(posedge clk) begin
    if (active && req.valid && rsp.ready) begin
      if (req.addr >= WORDS) begin
        bad++;
        $display("tb_mem: access out of range, word %0d", req.addr);
      end else if (req.we) begin
        mem[req.addr] = req.wdata;
      end else begin
        q.push_back('{due: cyc + LAT, data: mem[req.addr], tag: tag});
      end
    end
    if (active && req.valid && !rsp.ready) stalls++;
    if (q.size() > 0 && q[0].due <= cyc + 1) begin
      rsp.rvalid <= 1'b1;
      rsp.rdata  <= q[0].data;
      rtag       <= q[0].tag;
      void'(q.pop_front());
    end else begin
      rsp.rvalid <= 1'b0;
      rsp.rdata  <= '0;
      rtag       <= -1;
    end
    rsp.ready <= ($urandom_range(99) >= STALL_PCT);
    cyc = cyc + 1;
  end

  // Direct access for testbenches.
  function automatic bus_t peek(input int unsigned a);
    return mem[a];
  endfunction
  function automatic void poke(input int unsigned a, input bus_t d);
    mem[a] = d;
  endfunction

endmodule
