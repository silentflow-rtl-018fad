// round_key_mem_tb: checks the round-key constant memory.
// After reset every entry must read zero. Random keys are written to all 22
// entries in random order; each write must be visible on the right output
// (rk0 for entries 0..10, rk1 for 11..21) on the next cycle and leave the
// other entries alone. A write to an address above 21 must change nothing.
module round_key_mem_tb;
  import sf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0;
  logic [4:0] wr_addr = '0;
  blk_t wr_data = '0;
  blk_t rk0 [NRK];
  blk_t rk1 [NRK];
  blk_t model [22];
  int checks = 0, failures = 0;

  round_key_mem dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rk0, .rk1);

  task automatic compare(input string what);
    for (int a = 0; a < 22; a++) begin
      blk_t got;
      got = (a < 11) ? rk0[a] : rk1[a-11];
      checks++;
      if (got !== model[a]) begin
        failures++;
        $display("FAIL %s: entry %0d got %h exp %h", what, a, got, model[a]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [22];
    for (int a = 0; a < 22; a++) begin model[a] = '0; order[a] = a; end
    order.shuffle();
    #12 rst_n = 1;
    @(posedge clk); #1;
    compare("reset");
    for (int n = 0; n < 22; n++) begin
      blk_t d;
      d = {$urandom, $urandom, $urandom, $urandom};
      wr_en = 1; wr_addr = 5'(order[n]); wr_data = d;
      @(posedge clk); #1;
      wr_en = 0;
      model[order[n]] = d;
      compare("write");
    end
    for (int a = 22; a < 32; a++) begin
      wr_en = 1; wr_addr = 5'(a); wr_data = '1;
      @(posedge clk); #1;
    end
    wr_en = 0;
    compare("out-of-range write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
