// tb_gh_prng: compares the mask generator with a bit-serial model of the LFSR
// x^128 + x^126 + x^101 + x^99 + 1: reset value, one step per enabled cycle, no step when en
// is low, and no repeat of the state over the steps run.
module tb_gh_prng;
  import gh_pkg::*;
  localparam block_t SEED = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
  logic clk = 0, rst_n = 0, en = 0;
  block_t mask, model;
  int checks = 0, failures = 0;

  gh_prng dut (.clk, .rst_n, .en, .mask);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: mask=%h model=%h", what, mask, model); end
  endtask

  initial begin
    block_t first;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = SEED;
    check(mask == SEED, "reset value");
    first = mask;
    for (int i = 0; i < 400; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (en) model = {model[126:0], model[127] ^ model[125] ^ model[100] ^ model[98]};
      check(mask == model, $sformatf("step %0d", i));
      if (i > 0 && en) check(mask != first, "state repeats");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
