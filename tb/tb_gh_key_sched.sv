// tb_gh_key_sched: expands the standard's test key and compares the ten round keys with the
// published ones, then random keys against the reference model. Checks that keys_ready comes
// 161 cycles after start (the start cycle and 32 Feistel rounds of 5 cycles), that it is a single pulse, and that a
// start while busy does not disturb the expansion.
module tb_gh_key_sched;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  key_t key;
  round_keys_t sub_keys;
  logic busy, keys_ready;
  int checks = 0, failures = 0;

  gh_key_sched dut (.clk, .rst_n, .start, .key, .sub_keys, .busy, .keys_ready);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic expand(key_t k, logic poke_mid, output int cycles);
    key = k;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!keys_ready) begin
      if (poke_mid && cycles == 50) begin key = ~k; start = 1; end
      else start = 0;
      @(negedge clk) cycles++;
    end
    start = 0;
    key = k;
    @(negedge clk) check(!keys_ready, "keys_ready is one cycle");
  endtask

  initial begin
    int cyc;
    blk_t rk [10];
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!busy && !keys_ready, "idle after reset");
    expand(TV_KEY, 1'b0, cyc);
    check(cyc == 161, $sformatf("latency %0d, expected 161", cyc));
    for (int i = 0; i < 10; i++)
      check(sub_keys[i] == TV_K[i], $sformatf("K%0d = %h", i + 1, sub_keys[i]));
    for (int n = 0; n < 4; n++) begin
      key_t k;
      k = {rand128(), rand128()};
      expand(k, n == 1, cyc);
      check(cyc == 161, "latency");
      ref_keys(k, rk);
      for (int i = 0; i < 10; i++) check(sub_keys[i] == rk[i], $sformatf("random key %0d K%0d", n, i + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
