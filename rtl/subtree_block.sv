// subtree_block: one Blocked On-chip eXpansion (BOX) unit.
//
// Expands a single GGM subtree of depth S. It is given the subtree root (a
// node at level root_lvl, index root_idx within that level of a tree of
// height H), expands it level by level on chip, keeps every intermediate
// node in a local heap-ordered register array, and writes only the 2^S
// nodes of its last level back to global memory, four 128-bit nodes per
// 512-bit write ("vectorized write-back").
//
// Node expansion: each parent p feeds two pipelined AES-128 engines keyed
// with the two precomputed key schedules; child 2p = AES_k0(p) and child
// 2p+1 = AES_k1(p). One parent enters per cycle; a level's children return
// aes_pipe's 11 cycles later and the next level starts when all of them are
// back. Per local level the block XOR-accumulates all left children and all
// right children (the "sublayer XORs"); they are valid when done pulses.
//
// Receiver masking: with role = ROLE_RECEIVER the block rebuilds the
// receiver's punctured tree. alpha is the hidden leaf index; the path node
// of level L is alpha >> (H-L). Whenever a child is the path node it is
// replaced by zero (its seed is unknown outside the trusted side), or by the
// masked value m at the leaf level H; when a child is the path node's
// sibling it is replaced by red[L-1], the seed released by the trusted side
// for that level. With role = ROLE_SENDER nothing is replaced.
//
// Interface: pulse start while busy is low (root, root_lvl, root_idx and
// wb_base are sampled then); wb_* is a valid/ready write stream whose first
// word goes to word address wb_base; done pulses for one cycle after the
// last write is accepted. S >= 2 so that the leaves fill whole bus words.
//
// From the paper: subtree decomposition of depth s, local storage of all
// intermediate states, AES-based expansion with precomputed keys, sublayer
// XORs, masking at leaf write-back, four nodes per write. This design's
// choices: one node-expansion pair per block fed one parent per cycle,
// level-by-level barrier, zero placeholder for the path node, child order
// (key 0 = left).
module subtree_block
  import sf_pkg::*;
#(
  parameter int unsigned H = 12,  // GGM tree height
  parameter int unsigned S = 4    // subtree depth
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  blk_t                     rk0 [NRK],
  input  blk_t                     rk1 [NRK],
  // receiver context of the current tree
  input  role_e                    role,
  input  logic [H-1:0]             alpha,
  input  blk_t                     m,
  input  blk_t                     red [H],
  // job
  input  logic                     start,
  input  blk_t                     root,
  input  logic [$clog2(H+1)-1:0]   root_lvl,
  input  logic [H-1:0]             root_idx,
  input  addr_t                    wb_base,
  output logic                     busy,
  output logic                     done,
  output blk_t                     lvl_xor0 [S],
  output blk_t                     lvl_xor1 [S],
  // leaf write-back stream
  output logic                     wb_valid,
  output addr_t                    wb_addr,
  output bus_t                     wb_data,
  input  logic                     wb_ready
);

  localparam int unsigned NN    = 1 << (S + 1);   // heap slots (index 0 unused)
  localparam int unsigned HW    = S + 1;          // heap index width
  localparam int unsigned LW    = $clog2(H + 1);
  localparam int unsigned NWORD = (1 << S) / LANES;
  localparam int unsigned WW    = (NWORD > 1) ? $clog2(NWORD) : 1;
  localparam int unsigned LVW   = (S > 1) ? $clog2(S) : 1;

  typedef enum logic [1:0] {ST_IDLE, ST_EXPAND, ST_WB, ST_DONE} state_e;

  state_e          state;
  blk_t            nodes [NN];
  logic [HW-1:0]   iss;        // next parent to issue
  logic [HW-1:0]   lvl_end;    // first heap index of the next level
  logic [HW-1:0]   ret_cnt;    // children pairs returned on this level
  logic [HW-1:0]   lvl_size;   // parents on this level
  logic [LVW-1:0]  lvl;        // local level being expanded (parents)
  logic [WW-1:0]   wcnt;
  logic [LW-1:0]   r_lvl;
  logic [H-1:0]    r_idx;
  addr_t           r_base;

  initial begin
    assert (S >= 2 && S <= H && (H % S) == 0)
      else $error("subtree_block: need 2 <= S <= H and S dividing H");
  end

  // ---------------------------------------------------------------- AES pair
  logic          a_in_v;
  blk_t          a_in_d;
  logic          a0_v, a1_v;
  blk_t          a0_d, a1_d;
  logic [HW-1:0] a0_t, a1_t;

  assign a_in_v = (state == ST_EXPAND) && (iss != lvl_end);
  assign a_in_d = nodes[iss];

  aes_pipe #(.TAG_W(HW)) u_aes0 (
    .clk, .rst_n, .rk(rk0), .in_valid(a_in_v), .in_data(a_in_d), .in_tag(iss),
    .out_valid(a0_v), .out_data(a0_d), .out_tag(a0_t)
  );
  aes_pipe #(.TAG_W(HW)) u_aes1 (
    .clk, .rst_n, .rk(rk1), .in_valid(a_in_v), .in_data(a_in_d), .in_tag(iss),
    .out_valid(a1_v), .out_data(a1_d), .out_tag(a1_t)
  );

  // ------------------------------------------------- receiver replacement
  // Global level and index of the children of returned parent a0_t.
  logic [LW-1:0] c_lvl;
  logic [H-1:0]  c_idx0;      // index of the left child in its level
  logic [H-1:0]  path_idx;
  blk_t          child0, child1;

  always_comb begin
    logic [H-1:0] off;
    c_lvl   = r_lvl + LW'(lvl) + LW'(1);
    // parent heap index p at local level lvl has offset p - 2^lvl
    off     = H'(a0_t) - (H'(1) << lvl);
    c_idx0  = (r_idx << (lvl + 1)) | (off << 1);
    path_idx = alpha >> (LW'(H) - c_lvl);
    child0  = a0_d;
    child1  = a1_d;
    if (role == ROLE_RECEIVER) begin
      if (c_idx0 == path_idx)                   child0 = (c_lvl == LW'(H)) ? m : '0;
      else if ((c_idx0 ^ H'(1)) == path_idx)    child0 = red[c_lvl - 1];
      if ((c_idx0 | H'(1)) == path_idx)         child1 = (c_lvl == LW'(H)) ? m : '0;
      else if (((c_idx0 | H'(1)) ^ H'(1)) == path_idx) child1 = red[c_lvl - 1];
    end
  end

  // ------------------------------------------------------------ control
  assign busy = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      iss      <= '0;
      lvl_end  <= '0;
      ret_cnt  <= '0;
      lvl_size <= '0;
      lvl      <= '0;
      wcnt     <= '0;
      done     <= 1'b0;
      r_lvl    <= '0;
      r_idx    <= '0;
      r_base   <= '0;
      for (int j = 0; j < S; j++) begin
        lvl_xor0[j] <= '0;
        lvl_xor1[j] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          state    <= ST_EXPAND;
          iss      <= HW'(1);
          lvl_end  <= HW'(2);
          lvl_size <= HW'(1);
          ret_cnt  <= '0;
          lvl      <= '0;
          r_lvl    <= root_lvl;
          r_idx    <= root_idx;
          r_base   <= wb_base;
          for (int j = 0; j < S; j++) begin
            lvl_xor0[j] <= '0;
            lvl_xor1[j] <= '0;
          end
        end
        ST_EXPAND: begin
          if (a_in_v) iss <= iss + HW'(1);
          if (a0_v) begin
            lvl_xor0[lvl] <= lvl_xor0[lvl] ^ child0;
            lvl_xor1[lvl] <= lvl_xor1[lvl] ^ child1;
            if (ret_cnt + HW'(1) == lvl_size) begin
              ret_cnt <= '0;
              if (32'(lvl) == S - 1) begin
                state <= ST_WB;
                wcnt  <= '0;
              end else begin
                lvl      <= lvl + 1'b1;
                lvl_size <= lvl_size << 1;
                lvl_end  <= lvl_end << 1;
              end
            end else begin
              ret_cnt <= ret_cnt + HW'(1);
            end
          end
        end
        ST_WB: if (wb_ready) begin
          if (32'(wcnt) == NWORD - 1) state <= ST_DONE;
          else                         wcnt  <= wcnt + 1'b1;
        end
        ST_DONE: begin
          state <= ST_IDLE;
          done  <= 1'b1;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == ST_IDLE && start) nodes[1] <= root;
    if (state == ST_EXPAND && a0_v) begin
      nodes[{a0_t[HW-2:0], 1'b0}] <= child0;
      nodes[{a0_t[HW-2:0], 1'b1}] <= child1;
    end
  end

  // --------------------------------------------------------- write-back
  assign wb_valid = (state == ST_WB);
  assign wb_addr  = r_base + addr_t'(wcnt);
  always_comb begin
    for (int q = 0; q < LANES; q++)
      wb_data[q*BLK_W +: BLK_W] = nodes[(1 << S) + 32'(wcnt) * LANES + q];
  end

  // The AES pair always returns matching results.
  a_pair_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    a0_v == a1_v && (!a0_v || a0_t == a1_t))
    else $error("subtree_block: AES pipelines out of step");

endmodule
