// tb_gh_encrypt: encrypts the standard's test plaintext under its round keys with a zero mask
// and with random masks, then random keys and plaintexts against the reference model. Checks
// the 47-cycle latency from start to start_transmit, that the unmasked cipher state never
// shows up in the state register while a non-zero mask is used, and that the block waits for
// transmit_done (a start before that is dropped).
module tb_gh_encrypt;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, transmit_done = 0;
  block_t plain_text, mask, cipher;
  round_keys_t sub_keys;
  logic start_transmit, busy;
  int checks = 0, failures = 0;

  gh_encrypt dut (.clk, .rst_n, .start, .plain_text, .sub_keys, .mask, .cipher,
                  .start_transmit, .transmit_done, .busy);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Runs one encryption; returns the cycles from start to start_transmit.
  task automatic run(block_t pt, block_t m, block_t exp_ct, output int cycles);
    logic leak = 0;
    plain_text = pt; mask = m;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    plain_text = ~pt; mask = ~m;            // inputs are sampled with start only
    cycles = 1;
    while (!start_transmit) begin
      if (m != '0 && dut.st == exp_ct) leak = 1;
      @(negedge clk) cycles++;
    end
    check(cipher == exp_ct, $sformatf("cipher %h expected %h", cipher, exp_ct));
    check(!leak, "unmasked value in state register");
    // a start before transmit_done must be ignored
    start = 1;
    @(negedge clk) start = 0;
    check(busy && !start_transmit, "waits for transmit_done");
    repeat (3) @(negedge clk);
    transmit_done = 1;
    @(negedge clk) transmit_done = 0;
    check(!busy, "idle after transmit_done");
  endtask

  initial begin
    int cyc;
    blk_t rk [10];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) sub_keys[i] = TV_K[i];
    run(TV_PT, '0, TV_CT, cyc);
    check(cyc == 47, $sformatf("latency %0d, expected 47", cyc));
    for (int n = 0; n < 5; n++) begin
      run(TV_PT, rand128(), TV_CT, cyc);
      check(cyc == 47, "latency");
    end
    for (int n = 0; n < 10; n++) begin
      key_t k;
      block_t pt;
      k = {rand128(), rand128()};
      pt = rand128();
      ref_keys(k, rk);
      for (int i = 0; i < 10; i++) sub_keys[i] = rk[i];
      run(pt, rand128(), ref_encrypt(k, pt), cyc);
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
