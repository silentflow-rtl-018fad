// ggm_unit_tb: checks the GGM engine (H=8, S=4, T=3 trees, P=2 blocks)
// against the reference GGM expansion, through the behavioural memory with
// random back-pressure and a trusted-side model that answers tee_req after a
// random delay.
//  - sender run: all 3*256 leaves in memory must equal the reference leaves
//    of each tree's root; the sublayer XORs shown at each tree_done must
//    equal the reference per-level XOR of left and right nodes; trees must be
//    requested in order 0,1,2.
//  - receiver run with hidden leaves alpha_t and released seeds taken from
//    the sender trees: leaf j of tree t must equal the sender's leaf, except
//    leaf alpha_t, which must be s[alpha_t] ^ Delta (so r ^ s = e*Delta).
// Also counted: cycles with both subtree blocks busy (parallel subtrees)
// and memory stall cycles; each must have happened.
module ggm_unit_tb;
  import sf_pkg::*;
  import tb_ref_pkg::ggm_node;

  localparam int H = 8, S = 4, T = 3, P = 2;
  localparam int NL = T << H;
  localparam addr_t SCR = 0, LEAF_S = 64, LEAF_R = 64 + NL / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t rk0 [NRK], rk1 [NRK];
  tb_ref_pkg::blk_t r0 [11], r1 [11];
  role_e role = ROLE_SENDER;
  logic start = 0, busy, done;
  addr_t leaf_base = LEAF_S;
  logic tee_req, tee_ack = 0;
  logic [$clog2(T+1)-1:0] tee_tree;
  blk_t tee_root = '0, tee_m = '0, tee_red [H];
  logic [H-1:0] tee_alpha = '0;
  logic tree_done;
  blk_t sum0 [H], sum1 [H];
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic [P-1:0] blk_busy;
  int stalls, bad;
  int checks = 0, failures = 0;
  int par_cycles = 0, tree_cnt = 0, req_cnt = 0;

  ggm_unit #(.H(H), .S(S), .T(T), .P(P)) dut (
    .clk, .rst_n, .rk0, .rk1, .role, .start, .leaf_base, .scratch_base(SCR),
    .busy, .done, .tee_req, .tee_tree, .tee_ack, .tee_root, .tee_alpha, .tee_m,
    .tee_red, .tree_done, .sum0, .sum1, .mem_req, .mem_rsp, .blk_busy
  );

  tb_mem #(.WORDS(64 + 2 * NL / 4), .LAT(4), .STALL_PCT(25)) u_mem (
    .clk, .active(rst_n), .req(mem_req), .tag(0), .rsp(mem_rsp), .rtag(), .stalls, .bad
  );

  blk_t seeds [T], delta;
  logic [H-1:0] alphas [T];

  // trusted side model
  initial begin
    for (int l = 0; l < H; l++) tee_red[l] = '0;
    forever begin
      @(posedge clk);
      if (rst_n && tee_req && !tee_ack) begin
        int tt;
        repeat ($urandom_range(3)) @(posedge clk);
        tt = int'(tee_tree);
        checks++;
        if (tt != req_cnt) begin
          failures++;
          $display("FAIL: tree %0d requested, expected %0d", tt, req_cnt);
        end
        req_cnt++;
        tee_root  <= seeds[tt];
        tee_alpha <= alphas[tt];
        tee_m     <= ggm_node(seeds[tt], H, int'(alphas[tt]), r0, r1) ^ delta;
        for (int l = 1; l <= H; l++)
          tee_red[l-1] <= ggm_node(seeds[tt], l, (int'(alphas[tt]) >> (H - l)) ^ 1, r0, r1);
        tee_ack <= 1;
        @(posedge clk);
        tee_ack <= 0;
      end
    end
  end

  always @(posedge clk) if (&blk_busy) par_cycles++;

  // sublayer XOR check (sender run)
  always @(posedge clk) begin
    if (rst_n && tree_done) begin
      if (role == ROLE_SENDER) begin
        for (int l = 1; l <= H; l++) begin
          blk_t x0, x1;
          x0 = '0; x1 = '0;
          for (int q = 0; q < (1 << l); q++) begin
            if (q % 2 == 0) x0 ^= ggm_node(seeds[tree_cnt], l, q, r0, r1);
            else            x1 ^= ggm_node(seeds[tree_cnt], l, q, r0, r1);
          end
          checks++;
          if (sum0[l-1] !== x0 || sum1[l-1] !== x1) begin
            failures++;
            $display("FAIL: tree %0d sublayer XOR of level %0d", tree_cnt, l);
          end
        end
      end
      tree_cnt++;
    end
  end

  function automatic blk_t leaf_at(input addr_t base, input int c);
    bus_t w;
    w = u_mem.peek(base + c / 4);
    return w[128 * (c % 4) +: 128];
  endfunction

  task automatic run_and_wait();
    tree_cnt = 0;
    req_cnt  = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (tree_cnt != T) begin
      failures++;
      $display("FAIL: %0d trees completed", tree_cnt);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r0);
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r1);
    for (int r = 0; r < 11; r++) begin rk0[r] = r0[r]; rk1[r] = r1[r]; end
    for (int t = 0; t < T; t++) begin
      seeds[t]  = {$urandom, $urandom, $urandom, $urandom};
      alphas[t] = H'($urandom);
    end
    delta = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;

    run_and_wait();
    for (int t = 0; t < T; t++)
      for (int j = 0; j < (1 << H); j++) begin
        blk_t ex;
        ex = ggm_node(seeds[t], H, j, r0, r1);
        checks++;
        if (leaf_at(LEAF_S, t * (1 << H) + j) !== ex) begin
          failures++;
          if (failures < 10) $display("FAIL: sender tree %0d leaf %0d", t, j);
        end
      end

    role = ROLE_RECEIVER;
    leaf_base = LEAF_R;
    run_and_wait();
    for (int t = 0; t < T; t++)
      for (int j = 0; j < (1 << H); j++) begin
        blk_t d;
        d = leaf_at(LEAF_R, t * (1 << H) + j) ^ leaf_at(LEAF_S, t * (1 << H) + j);
        checks++;
        if (d !== ((j == int'(alphas[t])) ? delta : '0)) begin
          failures++;
          if (failures < 10) $display("FAIL: receiver tree %0d leaf %0d: r^s = %h", t, j, d);
        end
      end

    checks += 3;
    if (par_cycles == 0) begin failures++; $display("FAIL: subtree blocks never ran in parallel"); end
    if (stalls == 0)     begin failures++; $display("FAIL: no memory stall happened"); end
    if (bad != 0)        begin failures++; $display("FAIL: out-of-range memory access"); end
    $display("parallel-subtree cycles %0d, memory stalls %0d", par_cycles, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
