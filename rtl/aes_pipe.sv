// aes_pipe: fully pipelined AES-128 encryption, one block per cycle.
//
// This is the PRG behind every GGM node expansion. It follows the optimised
// AES loop of the accelerator: the round keys are not expanded on the fly but
// read from a precomputed table (rk, 11 keys, supplied by round_key_mem), and
// the round-key XOR is a separate step after each round:
//   stage 0      : x = in ^ rk[0]
//   stage 1..9   : x = Round(x) ^ rk[r]
//   stage 10     : x = FinalRound(x) ^ rk[10]
// Each stage is one register, so the latency from in_valid to out_valid is
// LATENCY = 11 cycles and a new block may enter every cycle. There is no
// back-pressure: the consumer must take out_data when out_valid is high.
// A TAG_W-bit tag travels with each block so that callers can tell results
// apart. The one-stage-per-round depth is this design's choice.
module aes_pipe
  import sf_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  blk_t             rk [NRK],
  input  logic             in_valid,
  input  blk_t             in_data,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output blk_t             out_data,
  output logic [TAG_W-1:0] out_tag
);

  blk_t             st  [NRK];
  logic             vld [NRK];
  logic [TAG_W-1:0] tag [NRK];
  blk_t             rnd [NRK];  // round output of stage r (index 0 unused)

  assign rnd[0] = '0;
  for (genvar r = 1; r < NRK; r++) begin : g_round
    aes_round #(.FINAL(r == NRK-1)) u_round (.state_in(st[r-1]), .state_out(rnd[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NRK; r++) vld[r] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int r = 1; r < NRK; r++) vld[r] <= vld[r-1];
    end
  end

  always_ff @(posedge clk) begin
    st[0]  <= in_data ^ rk[0];
    tag[0] <= in_tag;
    for (int r = 1; r < NRK; r++) begin
      st[r]  <= rnd[r] ^ rk[r];
      tag[r] <= tag[r-1];
    end
  end

  assign out_valid = vld[NRK-1];
  assign out_data  = st[NRK-1];
  assign out_tag   = tag[NRK-1];

endmodule
