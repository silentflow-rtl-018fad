// silentflow_top: COT extension accelerator (GGM expansion + LPN).
//
// Generates N = T*2^H correlated OTs for one party without talking to the
// other party. The trusted side has already set up the initial correlation
// (v, Delta for the sender; u, w = v ^ u*Delta for the receiver) and hands
// over, per GGM tree, a root seed (sender) or the released seeds, the path
// selector and the masked leaf (receiver). The accelerator then computes
//   sender:   y = s ^ v*A
//   receiver: z = r ^ w*A
// where s / r are the GGM leaf vectors (r ^ s = e*Delta, e one-hot per tree)
// and A is a public sparse K x N matrix with D ones per column. Then
// z ^ y = (e ^ u*A)*Delta, i.e. z = y ^ x*Delta with x = e ^ u*A.
//
// Structure ("kernel fusion"): the only dependency between the GGM leaves
// and the vector-matrix product kvec*A is the final XOR, so start launches
// ggm_unit and vm_unit together; when both have finished, final_xor combines
// leaf and VM vectors into the output. Latency is max(GGM, VM) + XOR.
// round_key_mem holds the two precomputed AES key schedules used by all
// GGM node expansions; load it through key_wr_* before start.
//
// Memory map (word addresses of 512-bit words, four elements each, chosen by
// the caller): kvec (K elements) at k_base, GGM leaves at leaf_base, GGM
// inter-pass scratch at scratch_base (2^(H-S+1)/4 words), VM result at
// vm_base, output at out_base. Each of the three engines has its own memory
// port (mem_*); they may share one memory behind an arbiter.
//
// Interface timing: pulse start while busy is low; done pulses one cycle
// when the output is complete. role, the base addresses and a_seed must be
// stable while busy.
//
// From the paper: GGM (BOX) and VM engines running in parallel, final XOR,
// trusted-side inputs m and b, constant memory of round keys. This design's
// choices: the control sequencing, memory map and separate memory ports.
// The receiver's choice-bit vector x = e ^ u*A is not produced here.
module silentflow_top
  import sf_pkg::*;
#(
  parameter int unsigned H      = 12,
  parameter int unsigned S      = 4,
  parameter int unsigned T      = 256,
  parameter int unsigned P      = 2,
  parameter int unsigned K      = 32771,
  parameter int unsigned D      = 10,
  parameter int unsigned BATCH  = 256,
  parameter int unsigned MAXOUT = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // round-key load
  input  logic                   key_wr_en,
  input  logic [4:0]             key_wr_addr,
  input  blk_t                   key_wr_data,
  // job
  input  role_e                  role,
  input  logic                   start,
  input  addr_t                  k_base,
  input  addr_t                  leaf_base,
  input  addr_t                  scratch_base,
  input  addr_t                  vm_base,
  input  addr_t                  out_base,
  input  logic [31:0]            a_seed,
  output logic                   busy,
  output logic                   done,
  // trusted side
  output logic                   tee_req,
  output logic [$clog2(T+1)-1:0] tee_tree,
  input  logic                   tee_ack,
  input  blk_t                   tee_root,
  input  logic [H-1:0]           tee_alpha,
  input  blk_t                   tee_m,
  input  blk_t                   tee_red [H],
  // sublayer XORs per tree
  output logic                   tree_done,
  output blk_t                   sum0 [H],
  output blk_t                   sum1 [H],
  // global memory
  output mem_req_t               ggm_mem_req,
  input  mem_rsp_t               ggm_mem_rsp,
  output mem_req_t               vm_mem_req,
  input  mem_rsp_t               vm_mem_rsp,
  output mem_req_t               xor_mem_req,
  input  mem_rsp_t               xor_mem_rsp,
  // activity
  output logic                   ggm_busy,
  output logic                   vm_busy,
  output logic                   xor_busy,
  output logic [P-1:0]           box_busy
);

  localparam int unsigned N = T << H;

  blk_t rk0 [NRK];
  blk_t rk1 [NRK];

  round_key_mem u_keys (
    .clk, .rst_n, .wr_en(key_wr_en), .wr_addr(key_wr_addr), .wr_data(key_wr_data),
    .rk0, .rk1
  );

  typedef enum logic [1:0] {ST_IDLE, ST_FUSED, ST_XOR} state_e;
  state_e state;
  logic   ggm_done, vm_done, xor_done, ggm_fin, vm_fin, go, xor_go;

  assign go = (state == ST_IDLE) && start;

  ggm_unit #(.H(H), .S(S), .T(T), .P(P)) u_ggm (
    .clk, .rst_n, .rk0, .rk1, .role, .start(go),
    .leaf_base, .scratch_base, .busy(ggm_busy), .done(ggm_done),
    .tee_req, .tee_tree, .tee_ack, .tee_root, .tee_alpha, .tee_m, .tee_red,
    .tree_done, .sum0, .sum1,
    .mem_req(ggm_mem_req), .mem_rsp(ggm_mem_rsp), .blk_busy(box_busy)
  );

  vm_unit #(.N(N), .K(K), .D(D), .BATCH(BATCH), .MAXOUT(MAXOUT)) u_vm (
    .clk, .rst_n, .start(go), .k_base, .out_base(vm_base), .a_seed,
    .busy(vm_busy), .done(vm_done), .mem_req(vm_mem_req), .mem_rsp(vm_mem_rsp)
  );

  final_xor #(.N(N)) u_xor (
    .clk, .rst_n, .start(xor_go), .leaf_base, .vm_base, .out_base,
    .busy(xor_busy), .done(xor_done), .mem_req(xor_mem_req), .mem_rsp(xor_mem_rsp)
  );

  assign xor_go = (state == ST_FUSED) && (ggm_fin || ggm_done) && (vm_fin || vm_done);
  assign busy   = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      ggm_fin <= 1'b0;
      vm_fin  <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          state   <= ST_FUSED;
          ggm_fin <= 1'b0;
          vm_fin  <= 1'b0;
        end
        ST_FUSED: begin
          if (ggm_done) ggm_fin <= 1'b1;
          if (vm_done)  vm_fin  <= 1'b1;
          if (xor_go)   state   <= ST_XOR;
        end
        ST_XOR: if (xor_done) begin
          done  <= 1'b1;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
