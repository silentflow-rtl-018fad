// mlfsr_tb: checks the modified LFSR against the bit-serial reference in
// tb_ref_pkg for 3000 random (seed, aux) pairs plus the corner seeds 0 and
// all-ones, and checks that the injected auxiliary bits change the output
// (same seed, aux 0 versus aux 1 must differ).
module mlfsr_tb;
  logic [31:0] seed, aux, out;
  int checks = 0, failures = 0;

  mlfsr dut (.seed, .aux, .out);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp, o0;
    for (int n = 0; n < 3004; n++) begin
      case (n)
        0: begin seed = '0; aux = '0; end
        1: begin seed = '1; aux = '0; end
        2: begin seed = '0; aux = '1; end
        3: begin seed = '1; aux = '1; end
        default: begin seed = $urandom; aux = (n % 2) ? 32'($urandom_range(15)) : $urandom; end
      endcase
      #1;
      exp = tb_ref_pkg::mlfsr(seed, aux);
      checks++;
      if (out !== exp) begin
        failures++;
        $display("FAIL: seed %h aux %h got %h exp %h", seed, aux, out, exp);
      end
    end
    for (int n = 0; n < 100; n++) begin
      seed = $urandom; aux = 32'd0; #1; o0 = out;
      aux = 32'd1; #1;
      checks++;
      if (out === o0) begin
        failures++;
        $display("FAIL: auxiliary bit had no effect for seed %h", seed);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
