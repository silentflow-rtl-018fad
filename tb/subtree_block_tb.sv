// subtree_block_tb: checks one BOX subtree block (tree height H=8, depth S=4).
// Round keys come from the reference key schedule of two random AES keys.
// Jobs:
//  1. sender, root at level 0: the 16 level-4 nodes written back must equal
//     the reference GGM expansion; the four sublayer XORs must match.
//  2. sender, root at level 4: the 16 leaves of that subtree.
//  3. receiver, root at level 0: path node replaced by zero, its sibling at
//     every level by the released seed.
//  4. receiver, root = the path node of level 4: leaves equal the sender's
//     except the hidden leaf, which must be the masked value m.
//  5. receiver, another level-4 root: leaves equal the sender's.
// Write-back must go to consecutive words from wb_base; job 1 runs with
// wb_ready always high and must take exactly (2^S - 1) + 11*S + 2^S/4 + 2
// cycles from start to done (one parent per cycle per level plus the 11-cycle
// AES latency, one write per word, two cycles of hand-over); the other jobs
// see random back-pressure.
module subtree_block_tb;
  import sf_pkg::*;
  import tb_ref_pkg::ggm_node;

  localparam int H = 8, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  blk_t rk0 [NRK], rk1 [NRK];
  tb_ref_pkg::blk_t r0 [11], r1 [11];
  role_e role = ROLE_SENDER;
  logic [H-1:0] alpha = '0;
  blk_t m = '0, red [H];
  logic start = 0;
  blk_t root = '0;
  logic [$clog2(H+1)-1:0] root_lvl = '0;
  logic [H-1:0] root_idx = '0;
  addr_t wb_base = '0;
  logic busy, done, wb_valid, wb_ready;
  addr_t wb_addr;
  bus_t wb_data;
  blk_t lx0 [S], lx1 [S];
  int checks = 0, failures = 0;
  int stall_pct = 0;

  subtree_block #(.H(H), .S(S)) dut (
    .clk, .rst_n, .rk0, .rk1, .role, .alpha, .m, .red,
    .start, .root, .root_lvl, .root_idx, .wb_base,
    .busy, .done, .lvl_xor0(lx0), .lvl_xor1(lx1),
    .wb_valid, .wb_addr, .wb_data, .wb_ready
  );

  always @(posedge clk) wb_ready <= ($urandom_range(99) >= stall_pct);

  blk_t got [1 << S];
  int   nwr;
  always @(posedge clk) begin
    if (wb_valid && wb_ready) begin
      checks++;
      if (wb_addr != wb_base + addr_t'(nwr)) begin
        failures++;
        $display("FAIL: write %0d to word %0d", nwr, wb_addr);
      end
      for (int q = 0; q < 4; q++) got[4*nwr + q] = wb_data[128*q +: 128];
      nwr++;
    end
  end

  task automatic run(input blk_t rt, input int lvl, input int idx, output int cycles);
    nwr = 0;
    @(negedge clk);
    root = rt; root_lvl = 4'(lvl); root_idx = H'(idx); wb_base = addr_t'($urandom_range(1000));
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (nwr != (1 << S) / 4) begin
      failures++;
      $display("FAIL: %0d words written", nwr);
    end
  endtask

  task automatic expect_leaves(input string what, input blk_t ex [1 << S]);
    for (int q = 0; q < (1 << S); q++) begin
      checks++;
      if (got[q] !== ex[q]) begin
        failures++;
        $display("FAIL %s: node %0d got %h exp %h", what, q, got[q], ex[q]);
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t seed, delta, ex [1 << S], x0, x1;
    int cyc, pidx;
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r0);
    tb_ref_pkg::expand_key({$urandom, $urandom, $urandom, $urandom}, r1);
    for (int r = 0; r < 11; r++) begin rk0[r] = r0[r]; rk1[r] = r1[r]; end
    for (int l = 0; l < H; l++) red[l] = '0;
    seed  = {$urandom, $urandom, $urandom, $urandom};
    delta = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. sender, level 0 root
    run(seed, 0, 0, cyc);
    for (int q = 0; q < 16; q++) ex[q] = ggm_node(seed, 4, q, r0, r1);
    expect_leaves("sender L0", ex);
    for (int j = 0; j < S; j++) begin
      x0 = '0; x1 = '0;
      for (int q = 0; q < (2 << j); q++) begin
        if (q % 2 == 0) x0 ^= ggm_node(seed, j + 1, q, r0, r1);
        else            x1 ^= ggm_node(seed, j + 1, q, r0, r1);
      end
      checks += 2;
      if (lx0[j] !== x0 || lx1[j] !== x1) begin
        failures++;
        $display("FAIL: sublayer XOR of level %0d", j + 1);
      end
    end
    checks++;
    if (cyc != (1 << S) - 1 + 11 * S + (1 << S) / 4 + 2) begin
      failures++;
      $display("FAIL: job took %0d cycles, expected %0d", cyc, (1 << S) - 1 + 11 * S + (1 << S) / 4 + 2);
    end

    // 2. sender, level 4 root (index 5)
    stall_pct = 40;
    run(ggm_node(seed, 4, 5, r0, r1), 4, 5, cyc);
    for (int q = 0; q < 16; q++) ex[q] = ggm_node(seed, 8, 5 * 16 + q, r0, r1);
    expect_leaves("sender L4", ex);

    // receiver context
    alpha = H'($urandom_range(255));
    for (int l = 1; l <= H; l++) red[l-1] = ggm_node(seed, l, (int'(alpha) >> (H - l)) ^ 1, r0, r1);
    m    = ggm_node(seed, H, int'(alpha), r0, r1) ^ delta;
    role = ROLE_RECEIVER;

    // 3. receiver, level 0 root (its value is unknown: use garbage)
    run({$urandom, $urandom, $urandom, $urandom}, 0, 0, cyc);
    pidx = int'(alpha) >> 4;
    for (int q = 0; q < 16; q++) ex[q] = (q == pidx) ? '0 : ggm_node(seed, 4, q, r0, r1);
    expect_leaves("receiver L0", ex);

    // 4. receiver, path subtree
    run('0, 4, pidx, cyc);
    for (int q = 0; q < 16; q++)
      ex[q] = (pidx * 16 + q == int'(alpha)) ? m : ggm_node(seed, 8, pidx * 16 + q, r0, r1);
    expect_leaves("receiver path subtree", ex);

    // 5. receiver, off-path subtree
    run(ggm_node(seed, 4, pidx ^ 3, r0, r1), 4, pidx ^ 3, cyc);
    for (int q = 0; q < 16; q++) ex[q] = ggm_node(seed, 8, (pidx ^ 3) * 16 + q, r0, r1);
    expect_leaves("receiver off-path subtree", ex);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
