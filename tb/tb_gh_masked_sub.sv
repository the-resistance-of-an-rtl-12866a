// tb_gh_masked_sub: checks S_m(x + m) = S(x) + m for the standard's S test vectors under
// zero and random masks, and for random states and masks against the reference model.
module tb_gh_masked_sub;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  block_t din, mask, dout;
  int checks = 0, failures = 0;
  logic [127:0] v [5] = '{128'hffeeddccbbaa99881122334455667700, 128'hb66cd8887d38e8d77765aeea0c9a7efc,
                          128'h559d8dd7bd06cbfe7e7b262523280d39, 128'h0c3322fed531e4630d80ef5c5a81c50b,
                          128'h23ae65633f842d29c5df529c13f5acda};

  gh_masked_sub dut (.din, .mask, .dout);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: din=%h mask=%h dout=%h", what, din, mask, dout); end
  endtask

  initial begin
    for (int t = 0; t < 4; t++) begin
      mask = '0; din = v[t]; #1;
      check(dout == v[t+1], "unmasked vector");
      for (int k = 0; k < 8; k++) begin
        mask = rand128(); din = v[t] ^ mask; #1;
        check(dout == (v[t+1] ^ mask), "masked vector");
      end
    end
    for (int k = 0; k < 200; k++) begin
      block_t x;
      x = rand128(); mask = rand128(); din = x ^ mask; #1;
      check(dout == (ref_s(x) ^ mask), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
