// mlfsr: modified LFSR used to generate the sparse matrix indices of the
// LPN vector-matrix product.
//
// A plain LFSR is sequential: every output depends on the previous state, so
// index generation cannot be spread over parallel or pipelined iterations.
// Here each call is independent: the register is loaded from a seed that the
// caller derives from the loop indices, and STEPS shift steps are unrolled
// into combinational logic. At step t a multiplexer injects bit (t mod W) of
// the auxiliary word aux into the feedback XOR, so calls with the same seed
// but different aux give different outputs.
//   feedback_t = x[W-1] ^ x[TAP1] ^ x[TAP2] ^ x[TAP3] ^ aux[t mod W]
//   x          = {x[W-2:0], feedback_t}
// Default polynomial x^32 + x^22 + x^2 + x + 1, a maximal-length
// polynomial; W, taps and STEPS are this design's choices, the
// paper gives only the seeded, feedback-free structure with the injected
// auxiliary bit. Purely combinational.
module mlfsr #(
  parameter int unsigned W     = 32,
  parameter int unsigned STEPS = 32,
  parameter int unsigned TAP1  = 21,
  parameter int unsigned TAP2  = 1,
  parameter int unsigned TAP3  = 0
) (
  input  logic [W-1:0] seed,
  input  logic [W-1:0] aux,
  output logic [W-1:0] out
);

  always_comb begin
    logic [W-1:0] x;
    logic         fb;
    x = seed;
    for (int unsigned t = 0; t < STEPS; t++) begin
      fb = x[W-1] ^ x[TAP1] ^ x[TAP2] ^ x[TAP3] ^ aux[t % W];
      x  = {x[W-2:0], fb};
    end
    out = x;
  end

endmodule
