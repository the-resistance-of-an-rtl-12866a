// tb_gh_lin_steps: checks one R step against the standard's four R test vectors, sixteen
// steps against its four L test vectors, four chained 4-step blocks (the configuration the
// cipher uses) against L, and random inputs against the reference model.
module tb_gh_lin_steps;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  block_t din, d1, d4, d16, c1, c2, c3, c4;
  int checks = 0, failures = 0;
  logic [127:0] rv [5] = '{128'h00000000000000000000000000000100, 128'h94000000000000000000000000000001,
                           128'ha5940000000000000000000000000000, 128'h64a59400000000000000000000000000,
                           128'h0d64a594000000000000000000000000};
  logic [127:0] lv [5] = '{128'h64a59400000000000000000000000000, 128'hd456584dd0e3e84cc3166e4b7fa2890d,
                           128'h79d26221b87b584cd42fbc4ffea5de9a, 128'h0e93691a0cfc60408b7b68f66b513c13,
                           128'he6a8094fee0aa204fd97bcb0b44b8580};

  gh_lin_steps #(.STEPS(1))  u1  (.din, .dout(d1));
  gh_lin_steps #(.STEPS(4))  u4  (.din, .dout(d4));
  gh_lin_steps #(.STEPS(16)) u16 (.din, .dout(d16));
  gh_lin_steps               ua  (.din, .dout(c1));
  gh_lin_steps               ub  (.din(c1), .dout(c2));
  gh_lin_steps               uc  (.din(c2), .dout(c3));
  gh_lin_steps               ud  (.din(c3), .dout(c4));

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: din=%h", what, din); end
  endtask

  initial begin
    for (int t = 0; t < 4; t++) begin
      din = rv[t]; #1; check(d1 == rv[t+1], "R vector");
      din = lv[t]; #1; check(d16 == lv[t+1], "L vector, 16 steps");
      check(c4 == lv[t+1], "L vector, 4 x 4 steps");
    end
    for (int k = 0; k < 100; k++) begin
      block_t e;
      din = rand128(); #1;
      e = din;
      for (int s = 0; s < 4; s++) e = ref_r(e);
      check(d4 == e, "R^4 random");
      check(d16 == ref_l(din), "L random");
      check(c4 == ref_l(din), "4 x R^4 random");
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
