// final_xor: the last LPN stage, out[c] = leaf[c] ^ vm[c] for c = 0..N-1.
//
// The GGM leaves (sparse correlation) and the vector-matrix products are
// computed independently and in parallel; this XOR is the only point where
// they meet, so it runs once both are in memory. It streams the two vectors
// word by word (four 128-bit elements per 512-bit word) from word addresses
// leaf_base and vm_base and writes the result from out_base. Per word: read
// the leaf word, read the VM word (the second read goes out while the first
// is in flight), XOR the two in a register, write it back. One memory port
// (sf_pkg::mem_req_t / mem_rsp_t); reads return in order. Pulse start while
// busy is low; done pulses after the last write.
// From the paper: the separate final XOR stage fed sequentially by GGM and
// VM results, with a result register. This design's choice: it works from
// memory rather than from direct streams, and handles one word at a time.
module final_xor
  import sf_pkg::*;
#(
  parameter int unsigned N = 1 << 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    leaf_base,
  input  addr_t    vm_base,
  input  addr_t    out_base,
  output logic     busy,
  output logic     done,
  output mem_req_t mem_req,
  input  mem_rsp_t mem_rsp
);

  localparam int unsigned NW = N / LANES;

  typedef enum logic [2:0] {ST_IDLE, ST_RDA, ST_RDB, ST_WAIT, ST_WR, ST_DONE} state_e;

  state_e      state;
  logic [31:0] w;         // word index
  logic [1:0]  got;       // read responses received for this word
  bus_t        res;       // XOR register

  assign busy = (state != ST_IDLE);

  always_comb begin
    mem_req = '0;
    unique case (state)
      ST_RDA: begin
        mem_req.valid = 1'b1;
        mem_req.addr  = leaf_base + addr_t'(w);
      end
      ST_RDB: begin
        mem_req.valid = 1'b1;
        mem_req.addr  = vm_base + addr_t'(w);
      end
      ST_WR: begin
        mem_req.valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = out_base + addr_t'(w);
        mem_req.wdata = res;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      w     <= '0;
      got   <= '0;
      res   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (mem_rsp.rvalid) begin
        res <= (got == 2'd0) ? mem_rsp.rdata : (res ^ mem_rsp.rdata);
        got <= got + 2'd1;
      end
      unique case (state)
        ST_IDLE: if (start) begin
          w     <= '0;
          got   <= '0;
          state <= ST_RDA;
        end
        ST_RDA:  if (mem_rsp.ready) state <= ST_RDB;
        ST_RDB:  if (mem_rsp.ready) state <= ST_WAIT;
        ST_WAIT: if (got + 2'(mem_rsp.rvalid) == 2'd2) state <= ST_WR;
        ST_WR: if (mem_rsp.ready) begin
          got <= '0;
          if (w == NW - 1) state <= ST_DONE;
          else begin
            w     <= w + 1;
            state <= ST_RDA;
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

endmodule
