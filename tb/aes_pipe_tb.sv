// aes_pipe_tb: checks the pipelined AES-128 engine.
// The FIPS-197 appendix C.1 vector (key 000102..0f, plaintext 0011..ff,
// ciphertext 69c4e0d8...) and 300 random blocks under a random key, fed one
// per cycle with random gaps, are compared with the reference cipher of
// tb_ref_pkg; the tag must travel with its block and every result must come
// out exactly 11 cycles after its input.
module aes_pipe_tb;
  import sf_pkg::*;
  import tb_ref_pkg::aes_enc;
  import tb_ref_pkg::expand_key;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sf_pkg::blk_t rk [NRK];
  tb_ref_pkg::blk_t rkr [11];
  logic in_valid = 0, out_valid;
  sf_pkg::blk_t in_data = '0, out_data;
  logic [15:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0;

  aes_pipe #(.TAG_W(16)) dut (.clk, .rst_n, .rk, .in_valid, .in_data, .in_tag,
                              .out_valid, .out_data, .out_tag);

  typedef struct { tb_ref_pkg::blk_t exp; logic [15:0] tag; longint t_in; } exp_t;
  exp_t   q [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (in_valid) begin
      q.push_back('{exp: aes_enc(in_data, rkr), tag: in_tag, t_in: cyc});
    end
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output");
      end else begin
        e = q.pop_front();
        if (out_data !== e.exp || out_tag !== e.tag || cyc - e.t_in != 11) begin
          failures++;
          $display("FAIL: tag %0d got %h exp %h latency %0d", out_tag, out_data, e.exp, cyc - e.t_in);
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_ref_pkg::blk_t key;
    // FIPS-197 C.1
    key = 128'h000102030405060708090a0b0c0d0e0f;
    expand_key(key, rkr);
    for (int r = 0; r < 11; r++) rk[r] = rkr[r];
    checks++;
    if (aes_enc(128'h00112233445566778899aabbccddeeff, rkr) !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++;
      $display("FAIL: reference model disagrees with FIPS-197");
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    in_valid <= 1; in_data <= 128'h00112233445566778899aabbccddeeff; in_tag <= 16'h5a5a;
    @(posedge clk);
    in_valid <= 0;
    repeat (20) @(posedge clk);
    // direct check of the known answer at the output
    // random key, random traffic
    key = {$urandom, $urandom, $urandom, $urandom};
    expand_key(key, rkr);
    for (int r = 0; r < 11; r++) rk[r] = rkr[r];
    @(posedge clk);
    for (int n = 0; n < 300; ) begin
      if ($urandom_range(3) != 0) begin
        in_valid <= 1;
        in_data  <= {$urandom, $urandom, $urandom, $urandom};
        in_tag   <= 16'(n);
        n++;
      end else begin
        in_valid <= 0;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    if (q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
