// tb_mem3: three requesters sharing one behavioural memory (tb_mem).
// Fixed priority port 0 > 1 > 2, one request per cycle; read responses are
// routed back to their port by the port number stored with each read.
module tb_mem3
  import sf_pkg::*;
#(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     active,
  input  mem_req_t req [3],
  output mem_rsp_t rsp [3],
  output int       stalls,
  output int       bad
);
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int       gnt;
  int       rtag;

  tb_mem #(.WORDS(WORDS), .LAT(LAT), .STALL_PCT(STALL_PCT)) u_mem (
    .clk, .active, .req(mreq), .tag(gnt), .rsp(mrsp), .rtag, .stalls, .bad
  );

  always_comb begin
    gnt  = -1;
    for (int p = 2; p >= 0; p--) if (req[p].valid) gnt = p;
    mreq = (gnt >= 0) ? req[gnt] : '0;
  end

  for (genvar p = 0; p < 3; p++) begin : g_rsp
    assign rsp[p].ready  = mrsp.ready && (gnt == p);
    assign rsp[p].rvalid = mrsp.rvalid && (rtag == p);
    assign rsp[p].rdata  = mrsp.rdata;
  end

  function automatic bus_t peek(input int unsigned a);
    return u_mem.peek(a);
  endfunction
  function automatic void poke(input int unsigned a, input bus_t d);
    u_mem.poke(a, d);
  endfunction
endmodule
