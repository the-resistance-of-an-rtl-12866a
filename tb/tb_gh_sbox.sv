// tb_gh_sbox: checks the S' byte substitution exhaustively for being a permutation, against
// a few entries of the standard's table, and against the standard's four S test vectors
// (applied byte by byte through the block).
module tb_gh_sbox;
  import gh_pkg::*;
  byte_t din, dout;
  int checks = 0, failures = 0;
  logic seen [256];
  logic [127:0] v [5] = '{128'hffeeddccbbaa99881122334455667700, 128'hb66cd8887d38e8d77765aeea0c9a7efc,
                          128'h559d8dd7bd06cbfe7e7b262523280d39, 128'h0c3322fed531e4630d80ef5c5a81c50b,
                          128'h23ae65633f842d29c5df529c13f5acda};

  gh_sbox dut (.din, .dout);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 256; i++) seen[i] = 1'b0;
    for (int i = 0; i < 256; i++) begin
      din = byte_t'(i); #1;
      check(!seen[dout], $sformatf("S'(%0d)=%0d repeats", i, dout));
      seen[dout] = 1'b1;
    end
    din = 8'd0;   #1; check(dout == 8'd252, "S'(0)");
    din = 8'd1;   #1; check(dout == 8'd238, "S'(1)");
    din = 8'd128; #1; check(dout == 8'd223, "S'(128)");
    din = 8'd255; #1; check(dout == 8'd182, "S'(255)");
    for (int t = 0; t < 4; t++)
      for (int b = 0; b < 16; b++) begin
        din = v[t][8*b +: 8]; #1;
        check(dout == v[t+1][8*b +: 8], $sformatf("S vector %0d byte %0d", t, b));
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
