// vm_unit_tb: checks the LPN vector-matrix unit (N=96, K=37, D=4, BATCH=16,
// MAXOUT=8) through the behavioural memory with random back-pressure.
// A random 128-bit vector kvec of K elements is placed in memory; every
// output out[c] must equal the XOR of kvec at the D indices given by the
// reference index function (tb_ref_pkg::a_index) for batch i = c - c%BATCH,
// l = c%BATCH. The run is repeated with a second public seed, which must
// give different outputs. Stall cycles must have occurred, no access may
// leave the memory.
module vm_unit_tb;
  import sf_pkg::*;

  localparam int N = 96, K = 37, D = 4, BATCH = 16;
  localparam addr_t KB = 0, OB = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] a_seed = 32'h1234_5678;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int stalls, bad;
  int checks = 0, failures = 0;

  vm_unit #(.N(N), .K(K), .D(D), .BATCH(BATCH), .MAXOUT(8)) dut (
    .clk, .rst_n, .start, .k_base(KB), .out_base(OB), .a_seed,
    .busy, .done, .mem_req, .mem_rsp
  );

  tb_mem #(.WORDS(16 + N / 4), .LAT(3), .STALL_PCT(20)) u_mem (
    .clk, .active(rst_n), .req(mem_req), .tag(0), .rsp(mem_rsp), .rtag(), .stalls, .bad
  );

  blk_t kv [K];
  blk_t first [N];

  function automatic blk_t out_at(input int c);
    bus_t w;
    w = u_mem.peek(OB + c / 4);
    return w[128 * (c % 4) +: 128];
  endfunction

  task automatic run_check();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int c = 0; c < N; c++) begin
      blk_t ex;
      int i, l;
      i = c - c % BATCH;
      l = c % BATCH;
      ex = '0;
      for (int j = 0; j < D; j++) ex ^= kv[tb_ref_pkg::a_index(a_seed, i, l, j, K)];
      checks++;
      if (out_at(c) !== ex) begin
        failures++;
        if (failures < 10) $display("FAIL: out[%0d] got %h exp %h", c, out_at(c), ex);
      end
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int same;
    for (int a = 0; a < K; a++) kv[a] = {$urandom, $urandom, $urandom, $urandom};
    for (int w = 0; w < 16; w++) begin
      bus_t d;
      for (int q = 0; q < 4; q++) d[128*q +: 128] = (4*w + q < K) ? kv[4*w + q] : '0;
      u_mem.poke(KB + w, d);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_check();
    for (int c = 0; c < N; c++) first[c] = out_at(c);
    a_seed = 32'h0bad_cafe;
    run_check();
    same = 0;
    for (int c = 0; c < N; c++) if (first[c] === out_at(c)) same++;
    checks += 3;
    if (same > N / 8) begin failures++; $display("FAIL: seed change left %0d outputs unchanged", same); end
    if (stalls == 0)  begin failures++; $display("FAIL: no memory stall happened"); end
    if (bad != 0)     begin failures++; $display("FAIL: out-of-range memory access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
