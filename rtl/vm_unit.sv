// vm_unit: LPN vector-matrix product with a pipelined XOR reducer (PXR).
//
// Computes out = kvec * A for a public sparse binary matrix A (K x N) with D
// ones per column: out[c] is the XOR of the D elements kvec[idx(c, j)],
// j = 0..D-1, all 128-bit. kvec is the initial correlation vector (v on the
// sender, w on the receiver) in global memory from word address k_base; out
// goes to global memory from word address out_base. This is the
// resource-constrained variant of the paper (its "Alg#1").
//
// Index generation, memory access and XOR reduction are separate stages:
//   for each batch i = 0, BATCH, 2*BATCH, ... < N
//     for l = 0..BATCH-1
//       s        = mlfsr(a_seed + (i+1)*(l+1), 1)
//       for j = 0..D-1
//         r      = mlfsr(mlfsr(s + 2^j + i + j, j), s)
//         idx    = (r[31:16] * K) >> 16          (uniform in 0..K-1)
//         l_n[l] = l_n[l] ^ kvec[idx]            (read from global memory)
//     write l_n[0..BATCH-1] to out[i..i+BATCH-1], four per 512-bit word
// No index depends on a previous read, so the read addresses stream out one
// per cycle (up to MAXOUT outstanding) while returning data is folded into an
// accumulator register; only the finished result is written to the local
// batch buffer l_n, so there is no read-modify-write of memory per XOR.
// The indices depend only on the public a_seed and the loop counters, so the
// sender and receiver build the same A.
//
// Interface: pulse start while busy is low; done pulses when the last word
// is written. One memory port (sf_pkg::mem_req_t / mem_rsp_t); reads return
// in order. N must be a multiple of BATCH and BATCH of 4.
//
// From the paper: loop structure and seed formulas of Alg#1, XOR in local
// memory, batch write-back, 512-bit bus with four elements per transfer,
// modified LFSR. This design's choices: a public seed word in place of the
// k[i] term of the seed formula (see the manifest), the range reduction by
// multiply-and-shift, the outstanding-read limit.
module vm_unit
  import sf_pkg::*;
#(
  parameter int unsigned N      = 1 << 20,  // output length n
  parameter int unsigned K      = 32771,    // input length k
  parameter int unsigned D      = 10,       // nonzeros per column of A
  parameter int unsigned BATCH  = 256,      // batch size
  parameter int unsigned MAXOUT = 16        // outstanding reads
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       k_base,
  input  addr_t       out_base,
  input  logic [31:0] a_seed,
  output logic        busy,
  output logic        done,
  output mem_req_t    mem_req,
  input  mem_rsp_t    mem_rsp
);

  localparam int unsigned LB  = $clog2(BATCH);
  localparam int unsigned JB  = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned OB  = $clog2(MAXOUT + 1);
  localparam int unsigned NWB = BATCH / LANES;
  localparam int unsigned WB  = (NWB > 1) ? $clog2(NWB) : 1;
  localparam int unsigned FB  = $clog2(MAXOUT);

  typedef enum logic [1:0] {ST_IDLE, ST_READ, ST_WRITE, ST_DONE} state_e;

  state_e         state;
  logic [31:0]    i;          // batch base
  logic [LB-1:0]  li, lr;     // output index: issue / response side
  logic [JB-1:0]  ji, jr;     // nonzero index: issue / response side
  logic           iss_end;    // all reads of this batch issued
  logic [OB-1:0]  outst;
  blk_t           acc;
  blk_t           l_n [BATCH];
  logic [WB-1:0]  wcnt;

  // ------------------------------------------------------ index generation
  logic [31:0] s_seed, s_val, r_seed, r_val, r_aux, q_val;
  logic [31:0] idx;

  assign s_seed = a_seed + (i + 32'd1) * (32'(li) + 32'd1);
  mlfsr u_lfsr_s (.seed(s_seed), .aux(32'd1), .out(s_val));
  assign r_seed = s_val + (32'd1 << ji) + i + 32'(ji);
  assign r_aux  = 32'(ji);
  mlfsr u_lfsr_r (.seed(r_seed), .aux(r_aux), .out(r_val));
  // second pass, keyed by the column seed: without it, nearby j often give
  // the same upper half and columns repeat indices
  mlfsr u_lfsr_q (.seed(r_val), .aux(s_val), .out(q_val));
  assign idx = (32'(q_val[31:16]) * K) >> 16;

  // lane of each outstanding read
  logic [1:0]    lane_q [MAXOUT];
  logic [FB-1:0] wp, rp;

  logic issue, resp;
  assign issue = (state == ST_READ) && !iss_end && (outst < OB'(MAXOUT)) && mem_rsp.ready;
  assign resp  = (state == ST_READ) && mem_rsp.rvalid;

  always_comb begin
    mem_req = '0;
    if (state == ST_READ && !iss_end && outst < OB'(MAXOUT)) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = k_base + addr_t'(idx >> 2);
    end else if (state == ST_WRITE) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = out_base + addr_t'(i >> 2) + addr_t'(wcnt);
      for (int q = 0; q < LANES; q++)
        mem_req.wdata[q*BLK_W +: BLK_W] = l_n[32'(wcnt) * LANES + q];
    end
  end

  blk_t rd_blk;
  assign rd_blk = mem_rsp.rdata[lane_q[rp]*BLK_W +: BLK_W];

  assign busy = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      i       <= '0;
      li      <= '0;
      lr      <= '0;
      ji      <= '0;
      jr      <= '0;
      iss_end <= 1'b0;
      outst   <= '0;
      acc     <= '0;
      wcnt    <= '0;
      wp      <= '0;
      rp      <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          state   <= ST_READ;
          i       <= '0;
          li      <= '0;
          lr      <= '0;
          ji      <= '0;
          jr      <= '0;
          iss_end <= 1'b0;
          outst   <= '0;
          wp      <= '0;
          rp      <= '0;
        end
        ST_READ: begin
          outst <= outst + OB'(issue) - OB'(resp);
          if (issue) begin
            wp <= wp + 1'b1;
            if (32'(ji) == D - 1) begin
              ji <= '0;
              if (32'(li) == BATCH - 1) iss_end <= 1'b1;
              else                      li <= li + 1'b1;
            end else begin
              ji <= ji + 1'b1;
            end
          end
          if (resp) begin
            rp <= rp + 1'b1;
            if (32'(jr) == D - 1) begin
              jr <= '0;
              if (32'(lr) == BATCH - 1) begin
                lr    <= '0;
                state <= ST_WRITE;
                wcnt  <= '0;
              end else begin
                lr <= lr + 1'b1;
              end
            end else begin
              jr  <= jr + 1'b1;
              acc <= (jr == '0) ? rd_blk : (acc ^ rd_blk);
            end
          end
        end
        ST_WRITE: if (mem_rsp.ready) begin
          if (32'(wcnt) == NWB - 1) begin
            if (i + BATCH == N) state <= ST_DONE;
            else begin
              i       <= i + BATCH;
              li      <= '0;
              ji      <= '0;
              iss_end <= 1'b0;
              state   <= ST_READ;
            end
          end else begin
            wcnt <= wcnt + 1'b1;
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

  // local buffer and lane FIFO
  always_ff @(posedge clk) begin
    if (issue) lane_q[wp] <= idx[1:0];
    if (resp && 32'(jr) == D - 1)
      l_n[lr] <= (D == 1 || jr == '0) ? rd_blk : (acc ^ rd_blk);
  end

  initial begin
    assert (N % BATCH == 0 && BATCH % LANES == 0 && (MAXOUT & (MAXOUT - 1)) == 0)
      else $error("vm_unit: N %% BATCH, BATCH %% 4 and MAXOUT a power of two required");
  end

  a_no_rvalid_idle: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp.rvalid |-> state == ST_READ)
    else $error("vm_unit: read data outside the read phase");

endmodule
