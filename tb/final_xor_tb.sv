// final_xor_tb: checks the final XOR stage (N=64) through the behavioural
// memory with random back-pressure: two random vectors are placed in memory,
// the output vector must be their element-wise XOR, and the words around
// the output area must be untouched. Stalls must have occurred.
module final_xor_tb;
  import sf_pkg::*;

  localparam int N = 64, NW = N / 4;
  localparam addr_t LB = 0, VB = NW, OB = 2 * NW + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int stalls, bad;
  int checks = 0, failures = 0;

  final_xor #(.N(N)) dut (
    .clk, .rst_n, .start, .leaf_base(LB), .vm_base(VB), .out_base(OB),
    .busy, .done, .mem_req, .mem_rsp
  );

  tb_mem #(.WORDS(3 * NW + 2), .LAT(2), .STALL_PCT(30)) u_mem (
    .clk, .active(rst_n), .req(mem_req), .tag(0), .rsp(mem_rsp), .rtag(), .stalls, .bad
  );

  bus_t a [NW], b [NW];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NW; w++) begin
      for (int q = 0; q < 16; q++) begin
        a[w][32*q +: 32] = $urandom;
        b[w][32*q +: 32] = $urandom;
      end
      u_mem.poke(LB + w, a[w]);
      u_mem.poke(VB + w, b[w]);
    end
    u_mem.poke(OB - 1, '1);
    u_mem.poke(OB + NW, '1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int w = 0; w < NW; w++) begin
      checks++;
      if (u_mem.peek(OB + w) !== (a[w] ^ b[w])) begin
        failures++;
        $display("FAIL: word %0d", w);
      end
    end
    checks += 4;
    if (u_mem.peek(OB - 1) !== '1 || u_mem.peek(OB + NW) !== '1) begin
      failures++; $display("FAIL: write outside the output area");
    end
    if (u_mem.peek(LB) !== a[0]) begin failures++; $display("FAIL: input overwritten"); end
    if (stalls == 0) begin failures++; $display("FAIL: no memory stall happened"); end
    if (bad != 0)    begin failures++; $display("FAIL: out-of-range memory access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
