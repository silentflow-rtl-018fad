// silentflow_top_full_tb: end-to-end COT generation at the default size.
//
// Same environment as silentflow_top_tb, but both accelerators keep their
// default parameters (H=12, S=4, T=256 trees, P=2, K=32771, D=10,
// BATCH=256): one complete run generates N = 2^20 COTs per party. The
// reference checks cover 4096 random positions plus the hidden leaf of
// every tree. The testbench plays
// the trusted setup: random round keys, Delta, v, u, w = v ^ u*Delta, per
// tree a root seed and a hidden leaf alpha_t; the receiver's trusted side
// releases the off-path seeds and m_t = s_t[alpha_t] ^ Delta.
// Checks:
//  - sender output y[c] = s[c] ^ (v*A)[c] with s and A from the reference;
//  - COT relation z[c] ^ y[c] = x[c]*Delta with x = e ^ u*A, e one-hot per
//    tree at alpha_t (so z = r ^ w*A holds on the receiver too);
//  - both runs finish, all memory accesses in range.
// Mechanisms counted (each must happen at least once): GGM and VM busy in
// the same cycle (kernel fusion), both subtree blocks busy (parallel BOX),
// GGM root reads from scratch (a second pass), memory back-pressure, the
// masked hidden leaf, trees completed.
module silentflow_top_full_tb;
  import sf_pkg::*;
  import tb_ref_pkg::ggm_node;
  import tb_ref_pkg::a_index;

  localparam int H = 12, S = 4, T = 256, P = 2, K = 32771, D = 10, BATCH = 256;
  localparam int N = T << H;
  localparam int KW = (K + 3) / 4;
  localparam addr_t KB = 0, SB = KW, LB = KW + (1 << (H - S + 1)) / 4 + 1;
  localparam addr_t VB = LB + N / 4, OB = VB + N / 4;
  localparam int WORDS = OB + N / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // shared trusted setup
  tb_ref_pkg::blk_t r0 [11], r1 [11];
  blk_t delta, seeds [T];
  logic [H-1:0] alphas [T];
  blk_t v [K], w [K];
  logic u [K];
  logic [31:0] a_seed;

  // per-party signals (0 = sender, 1 = receiver)
  logic key_wr_en = 0;
  logic [4:0] key_wr_addr = '0;
  blk_t key_wr_data = '0;
  logic start = 0;
  logic busy [2], done [2], tee_req [2], tee_ack [2], tree_done [2];
  logic [$clog2(T+1)-1:0] tee_tree [2];
  blk_t tee_root [2], tee_m [2];
  logic [H-1:0] tee_alpha [2];
  blk_t tee_red [2][H];
  blk_t sum0 [2][H], sum1 [2][H];
  mem_req_t mreq [2][3];
  mem_rsp_t mrsp [2][3];
  logic ggm_busy [2], vm_busy [2], xor_busy [2];
  logic [P-1:0] box_busy [2];
  int stalls [2], bad [2];

  int fused_cycles = 0, par_box_cycles = 0, scratch_reads = 0, trees = 0, masked = 0;

  for (genvar g = 0; g < 2; g++) begin : g_party
    silentflow_top dut (
      .clk, .rst_n, .key_wr_en, .key_wr_addr, .key_wr_data,
      .role(g == 0 ? ROLE_SENDER : ROLE_RECEIVER), .start,
      .k_base(KB), .leaf_base(LB), .scratch_base(SB), .vm_base(VB), .out_base(OB), .a_seed,
      .busy(busy[g]), .done(done[g]),
      .tee_req(tee_req[g]), .tee_tree(tee_tree[g]), .tee_ack(tee_ack[g]),
      .tee_root(tee_root[g]), .tee_alpha(tee_alpha[g]), .tee_m(tee_m[g]), .tee_red(tee_red[g]),
      .tree_done(tree_done[g]), .sum0(sum0[g]), .sum1(sum1[g]),
      .ggm_mem_req(mreq[g][0]), .ggm_mem_rsp(mrsp[g][0]),
      .vm_mem_req(mreq[g][1]),  .vm_mem_rsp(mrsp[g][1]),
      .xor_mem_req(mreq[g][2]), .xor_mem_rsp(mrsp[g][2]),
      .ggm_busy(ggm_busy[g]), .vm_busy(vm_busy[g]), .xor_busy(xor_busy[g]), .box_busy(box_busy[g])
    );
    tb_mem3 #(.WORDS(WORDS), .LAT(3), .STALL_PCT(5)) mem (
      .clk, .active(rst_n), .req(mreq[g]), .rsp(mrsp[g]), .stalls(stalls[g]), .bad(bad[g])
    );

    // trusted side of this party
    initial begin
      tee_ack[g] = 0;
      tee_root[g] = '0; tee_m[g] = '0; tee_alpha[g] = '0;
      for (int l = 0; l < H; l++) tee_red[g][l] = '0;
      forever begin
        @(posedge clk);
        if (rst_n && tee_req[g] && !tee_ack[g]) begin
          int tt;
          tt = int'(tee_tree[g]);
          repeat ($urandom_range(2)) @(posedge clk);
          if (g == 0) begin
            tee_root[g] <= seeds[tt];
          end else begin
            tee_root[g]  <= '0;
            tee_alpha[g] <= alphas[tt];
            tee_m[g]     <= ggm_node(seeds[tt], H, int'(alphas[tt]), r0, r1) ^ delta;
            for (int l = 1; l <= H; l++)
              tee_red[g][l-1] <= ggm_node(seeds[tt], l, (int'(alphas[tt]) >> (H - l)) ^ 1, r0, r1);
          end
          tee_ack[g] <= 1;
          @(posedge clk);
          tee_ack[g] <= 0;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 2; g++) begin
      if (ggm_busy[g] && vm_busy[g]) fused_cycles++;
      if (&box_busy[g]) par_box_cycles++;
      if (mreq[g][0].valid && !mreq[g][0].we && mrsp[g][0].ready) scratch_reads++;
      if (tree_done[g]) trees++;
    end
  end

  function automatic blk_t elem(input int g, input addr_t base, input int c);
    bus_t x;
    x = (g == 0) ? g_party[0].mem.peek(base + c / 4) : g_party[1].mem.peek(base + c / 4);
    return x[128 * (c % 4) +: 128];
  endfunction

  initial begin
    #3000000000;
    failures++;
    $display("FAIL: watchdog (busy %0b %0b, ggm %0b %0b, vm %0b %0b, xor %0b %0b)", busy[0], busy[1],
             ggm_busy[0], ggm_busy[1], vm_busy[0], vm_busy[1], xor_busy[0], xor_busy[1]);
    $display("state: ggm st %0d t %0d L0 %0d e %0d blk %b; vm st %0d i %0d li %0d lr %0d outst %0d; reqv %b %b rdy %b %b",
      g_party[0].dut.u_ggm.state, g_party[0].dut.u_ggm.t, g_party[0].dut.u_ggm.L0, g_party[0].dut.u_ggm.e, box_busy[0],
      g_party[0].dut.u_vm.state, g_party[0].dut.u_vm.i, g_party[0].dut.u_vm.li, g_party[0].dut.u_vm.lr, g_party[0].dut.u_vm.outst,
      mreq[0][0].valid, mreq[0][1].valid, mrsp[0][0].ready, mrsp[0][1].ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r0);
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r1);
    delta  = {$urandom, $urandom, $urandom, $urandom};
    a_seed = $urandom;
    for (int t = 0; t < T; t++) begin
      seeds[t]  = {$urandom, $urandom, $urandom, $urandom};
      alphas[t] = H'($urandom);
    end
    for (int a = 0; a < K; a++) begin
      v[a] = {$urandom, $urandom, $urandom, $urandom};
      u[a] = 1'($urandom);
      w[a] = v[a] ^ (u[a] ? delta : '0);
    end
    for (int wd = 0; wd < KW; wd++) begin
      bus_t dv, dw;
      dv = '0; dw = '0;
      for (int q = 0; q < 4; q++) if (4 * wd + q < K) begin
        dv[128*q +: 128] = v[4*wd + q];
        dw[128*q +: 128] = w[4*wd + q];
      end
      g_party[0].mem.poke(KB + wd, dv);
      g_party[1].mem.poke(KB + wd, dw);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load both key schedules (shared by both parties)
    for (int e = 0; e < 22; e++) begin
      @(negedge clk);
      key_wr_en = 1; key_wr_addr = 5'(e); key_wr_data = (e < 11) ? r0[e] : r1[e - 11];
    end
    @(negedge clk); key_wr_en = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      while (!done[0]) @(negedge clk);
      while (!done[1]) @(negedge clk);
    join

    for (int n = 0; n < 4096 + T; n++) begin
      blk_t y, z, s, va;
      logic ua, x;
      int c, i, l, t;
      c = (n < T) ? (n << H) + int'(alphas[n]) : int'($urandom_range(N - 1));
      i = c - c % BATCH; l = c % BATCH; t = c >> H;
      va = '0; ua = 0;
      for (int j = 0; j < D; j++) begin
        int id;
        id = a_index(a_seed, i, l, j, K);
        va ^= v[id];
        ua ^= u[id];
      end
      s = ggm_node(seeds[t], H, c % (1 << H), r0, r1);
      y = elem(0, OB, c);
      z = elem(1, OB, c);
      x = ua ^ ((c % (1 << H)) == int'(alphas[t]));
      checks += 2;
      if (y !== (s ^ va)) begin
        failures++;
        $display("FAIL: sender y[%0d]", c);
      end
      if ((z ^ y) !== (x ? delta : '0)) begin
        failures++;
        $display("FAIL: COT relation at %0d (x=%0b)", c, x);
      end else if ((c % (1 << H)) == int'(alphas[t])) begin
        masked++;
      end
    end
    $display("mechanisms: fused GGM/VM cycles %0d, parallel BOX cycles %0d, scratch root reads %0d, stalls %0d/%0d, masked leaves %0d, trees %0d",
             fused_cycles, par_box_cycles, scratch_reads, stalls[0], stalls[1], masked, trees);
    checks += 7;
    if (fused_cycles == 0)   begin failures++; $display("FAIL: GGM and VM never overlapped"); end
    if (par_box_cycles == 0) begin failures++; $display("FAIL: subtree blocks never in parallel"); end
    if (scratch_reads == 0)  begin failures++; $display("FAIL: no root read from scratch"); end
    if (stalls[0] + stalls[1] == 0) begin failures++; $display("FAIL: no memory back-pressure"); end
    if (masked != T)         begin failures++; $display("FAIL: %0d masked leaves verified", masked); end
    if (trees != 2 * T)      begin failures++; $display("FAIL: %0d trees completed", trees); end
    if (bad[0] + bad[1] != 0) begin failures++; $display("FAIL: out-of-range access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
