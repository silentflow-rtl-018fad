// ggm_unit: GGM tree expansion engine built from parallel BOX subtree blocks.
//
// Produces the sparse-correlation vector of the COT: T trees of height H,
// 2^H leaves each, written to global memory as one contiguous vector of
// T*2^H 128-bit leaves starting at word address leaf_base (leaf j of tree t
// is element t*2^H + j). The sender expands every tree from its root seed;
// the receiver rebuilds the punctured trees from the seeds released by the
// trusted side (see subtree_block).
//
// How it works: each tree is cut into H/S passes. Pass p takes the 2^(pS)
// nodes of level pS as subtree roots; every root is handed to one of P
// subtree blocks, which expands it S levels on chip and writes the 2^S nodes
// of level pS+S back. Levels between passes live in a scratch area of global
// memory in heap order (node i of level L at node address 2^L + i, four
// nodes per word, from word address scratch_base); the last pass writes
// straight into the leaf vector. An address counter walks the roots: it
// reads each root from scratch (pass 0 uses the tree's root seed), waits for
// a free subtree block and starts it, so root reads overlap expansion in the
// other blocks. A pass ends when all blocks are idle. After the last pass
// the per-level XOR of left and right nodes ("sublayer XORs") of the tree is
// on sum0/sum1 (index L-1 for level L) while tree_done pulses.
//
// Trusted-side interface: before each tree the unit raises tee_req with
// tee_tree and waits for a one-cycle tee_ack carrying that tree's root seed,
// the hidden leaf index alpha (the path selector b), the masked leaf m and
// the H released seeds red[0..H-1] (level 1..H).
//
// Memory: one port (sf_pkg::mem_req_t / mem_rsp_t). Write-backs of the
// subtree blocks have priority (lowest block first); root reads go out when
// no block is writing; one root read is outstanding at a time.
//
// From the paper: blocked expansion in depth-S subtrees with the root read
// from global memory and intermediate nodes kept on chip, parallel subtrees
// of one level, address counter, trees processed in turn, secret m and
// selector b from the trusted side. This design's choices: the scratch
// layout, the number P of blocks, the request/acknowledge handshake with the
// trusted side and the arbitration.
module ggm_unit
  import sf_pkg::*;
#(
  parameter int unsigned H = 12,   // tree height
  parameter int unsigned S = 4,    // subtree depth
  parameter int unsigned T = 256,  // number of trees
  parameter int unsigned P = 2     // parallel subtree blocks
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  blk_t                     rk0 [NRK],
  input  blk_t                     rk1 [NRK],
  input  role_e                    role,
  input  logic                     start,
  input  addr_t                    leaf_base,
  input  addr_t                    scratch_base,
  output logic                     busy,
  output logic                     done,
  // trusted side
  output logic                     tee_req,
  output logic [$clog2(T+1)-1:0]   tee_tree,
  input  logic                     tee_ack,
  input  blk_t                     tee_root,
  input  logic [H-1:0]             tee_alpha,
  input  blk_t                     tee_m,
  input  blk_t                     tee_red [H],
  // sublayer XORs of the tree just finished
  output logic                     tree_done,
  output blk_t                     sum0 [H],
  output blk_t                     sum1 [H],
  // global memory
  output mem_req_t                 mem_req,
  input  mem_rsp_t                 mem_rsp,
  // activity, for observation
  output logic [P-1:0]             blk_busy
);

  localparam int unsigned TW    = $clog2(T + 1);
  localparam int unsigned LW    = $clog2(H + 1);
  localparam int unsigned PW    = (P > 1) ? $clog2(P) : 1;

  typedef enum logic [2:0] {
    ST_IDLE, ST_TEE, ST_ROOT, ST_RD, ST_RDW, ST_DISP, ST_PWAIT, ST_DONE
  } state_e;

  state_e          state;
  logic [TW-1:0]   t;
  logic [LW-1:0]   L0;           // root level of the current pass
  logic [H-1:0]    e;            // root index within the level
  logic [H:0]      e_cnt;        // roots in the current level (2^L0)
  blk_t            root_buf;
  // current tree context
  logic [H-1:0]    c_alpha;
  blk_t            c_m;
  blk_t            c_red [H];
  blk_t            c_root;

  // ------------------------------------------------------ subtree blocks
  logic [P-1:0]  b_start, b_busy, b_done, b_wbv, b_wbr, just_started;
  addr_t         b_wba [P];
  bus_t          b_wbd [P];
  blk_t          b_x0  [P][S];
  blk_t          b_x1  [P][S];
  logic [LW-1:0] b_lvl [P];
  addr_t         disp_base;

  assign blk_busy = b_busy;

  for (genvar f = 0; f < P; f++) begin : g_blk
    subtree_block #(.H(H), .S(S)) u_sub (
      .clk, .rst_n, .rk0, .rk1,
      .role, .alpha(c_alpha), .m(c_m), .red(c_red),
      .start(b_start[f]), .root(root_buf), .root_lvl(L0), .root_idx(e),
      .wb_base(disp_base),
      .busy(b_busy[f]), .done(b_done[f]),
      .lvl_xor0(b_x0[f]), .lvl_xor1(b_x1[f]),
      .wb_valid(b_wbv[f]), .wb_addr(b_wba[f]), .wb_data(b_wbd[f]),
      .wb_ready(b_wbr[f])
    );
  end

  // First free block.
  logic          free_any;
  logic [PW-1:0] free_idx;
  always_comb begin
    free_any = 1'b0;
    free_idx = '0;
    for (int f = P - 1; f >= 0; f--) begin
      if (!b_busy[f] && !just_started[f]) begin
        free_any = 1'b1;
        free_idx = PW'(f);
      end
    end
  end

  // Write-back destination of the job being dispatched.
  always_comb begin
    logic [31:0] node;
    if (32'(L0) + S == H) begin
      node      = (32'(t) << H) + (32'(e) << S);
      disp_base = leaf_base + addr_t'(node / LANES);
    end else begin
      node      = (32'(1) << (32'(L0) + S)) + (32'(e) << S);
      disp_base = scratch_base + addr_t'(node / LANES);
    end
  end

  always_comb begin
    b_start = '0;
    if (state == ST_DISP && free_any) b_start[free_idx] = 1'b1;
  end

  // --------------------------------------------------------- memory port
  logic          wb_any;
  logic [PW-1:0] wb_idx;
  logic [31:0]   rd_node;
  always_comb begin
    wb_any = 1'b0;
    wb_idx = '0;
    for (int f = P - 1; f >= 0; f--) begin
      if (b_wbv[f]) begin
        wb_any = 1'b1;
        wb_idx = PW'(f);
      end
    end
    rd_node = (32'(1) << L0) + 32'(e);
    mem_req = '0;
    b_wbr   = '0;
    if (wb_any) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = b_wba[wb_idx];
      mem_req.wdata = b_wbd[wb_idx];
      b_wbr[wb_idx] = mem_rsp.ready;
    end else if (state == ST_RD) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = scratch_base + addr_t'(rd_node / LANES);
    end
  end

  // Sublayer XORs with the results of every block finishing this cycle
  // (several blocks may finish together).
  blk_t sum0_nxt [H];
  blk_t sum1_nxt [H];
  always_comb begin
    for (int l = 0; l < H; l++) begin
      sum0_nxt[l] = sum0[l];
      sum1_nxt[l] = sum1[l];
    end
    for (int f = 0; f < P; f++) begin
      if (b_done[f]) begin
        for (int j = 0; j < S; j++) begin
          sum0_nxt[32'(b_lvl[f]) + j] = sum0_nxt[32'(b_lvl[f]) + j] ^ b_x0[f][j];
          sum1_nxt[32'(b_lvl[f]) + j] = sum1_nxt[32'(b_lvl[f]) + j] ^ b_x1[f][j];
        end
      end
    end
  end

  // ------------------------------------------------------------- control
  assign busy     = (state != ST_IDLE);
  assign tee_req  = (state == ST_TEE);
  assign tee_tree = t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      t            <= '0;
      L0           <= '0;
      e            <= '0;
      e_cnt        <= '0;
      done         <= 1'b0;
      tree_done    <= 1'b0;
      just_started <= '0;
      root_buf     <= '0;
      c_alpha      <= '0;
      c_m          <= '0;
      c_root       <= '0;
      for (int l = 0; l < H; l++) begin
        c_red[l] <= '0;
        sum0[l]  <= '0;
        sum1[l]  <= '0;
      end
      for (int f = 0; f < P; f++) b_lvl[f] <= '0;
    end else begin
      done         <= 1'b0;
      tree_done    <= 1'b0;
      just_started <= b_start;

      // sublayer XOR accumulation from finishing blocks
      for (int l = 0; l < H; l++) begin
        sum0[l] <= sum0_nxt[l];
        sum1[l] <= sum1_nxt[l];
      end
      for (int f = 0; f < P; f++) if (b_start[f]) b_lvl[f] <= L0;

      unique case (state)
        ST_IDLE: if (start) begin
          t     <= '0;
          state <= ST_TEE;
        end
        ST_TEE: if (tee_ack) begin
          c_root  <= tee_root;
          c_alpha <= tee_alpha;
          c_m     <= tee_m;
          for (int l = 0; l < H; l++) begin
            c_red[l] <= tee_red[l];
            sum0[l]  <= '0;
            sum1[l]  <= '0;
          end
          L0    <= '0;
          e     <= '0;
          e_cnt <= (H+1)'(1);
          state <= ST_ROOT;
        end
        ST_ROOT: begin
          if (L0 == '0) begin
            root_buf <= c_root;
            state    <= ST_DISP;
          end else begin
            state <= ST_RD;
          end
        end
        ST_RD: if (!wb_any && mem_rsp.ready) state <= ST_RDW;
        ST_RDW: if (mem_rsp.rvalid) begin
          root_buf <= mem_rsp.rdata[rd_node[1:0]*BLK_W +: BLK_W];
          state    <= ST_DISP;
        end
        ST_DISP: if (free_any) begin
          if ((H+1)'(e) + (H+1)'(1) == e_cnt) begin
            state <= ST_PWAIT;
          end else begin
            e     <= e + 1'b1;
            state <= ST_ROOT;
          end
        end
        ST_PWAIT: if (b_busy == '0 && just_started == '0 && b_start == '0) begin
          if (32'(L0) + S == H) begin
            tree_done <= 1'b1;
            if (32'(t) + 1 == T) state <= ST_DONE;
            else begin
              t     <= t + 1'b1;
              state <= ST_TEE;
            end
          end else begin
            L0    <= L0 + LW'(S);
            e     <= '0;
            e_cnt <= e_cnt << S;
            state <= ST_ROOT;
          end
        end
        ST_DONE: begin
          done  <= 1'b1;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  initial begin
    assert (H % S == 0) else $error("ggm_unit: S must divide H");
  end

endmodule
