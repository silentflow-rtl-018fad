// round_key_mem: constant memory for the precomputed AES round keys.
//
// GGM node expansion encrypts each parent with two AES-128 keys, one per
// child. Their expanded schedules (2 x 11 round keys) are computed once,
// outside the accelerator, and written here through a simple write port
// (wr_en, wr_addr 0..21, wr_data; entry key*11 + round, the layout of the
// paper's aes_key[offset + r] with offset = 11*i). All 22 entries are read
// in parallel every cycle by the AES pipelines (rk0 for the left child, rk1
// for the right child); a write becomes visible one cycle later. Reset
// clears the table.
module round_key_mem
  import sf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  logic [4:0] wr_addr,
  input  blk_t       wr_data,
  output blk_t       rk0 [NRK],
  output blk_t       rk1 [NRK]
);

  blk_t mem [2*NRK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2*NRK; i++) mem[i] <= '0;
    end else if (wr_en && wr_addr < 5'(2*NRK)) begin
      mem[wr_addr] <= wr_data;
    end
  end

  always_comb begin
    for (int r = 0; r < NRK; r++) begin
      rk0[r] = mem[r];
      rk1[r] = mem[NRK + r];
    end
  end

endmodule
