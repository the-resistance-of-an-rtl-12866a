// tb_gh_cpa_acquisition: the trace-acquisition workload. A host streams N_TRACES random
// plaintexts under one fixed key through the UART, one block at a time, the way a capture
// run does (each plaintext sent, its ciphertext read back before the next). Every ciphertext is
// checked against the reference model, and every block must be encrypted under a new mask.
// The UART bit time is shortened to CPB clocks to keep the run short; nothing else differs
// from the default design. The capture runs this design was built for used 100,000 traces;
// 25,000 keeps the simulation near one minute (100,000 take about four and a half).
module tb_gh_cpa_acquisition;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  localparam int CPB      = 4;
  localparam int N_TRACES = 25000;
  logic clk = 0, rst_n = 0, rx = 1, tx;
  key_t key = TV_KEY;
  int checks = 0, failures = 0, n_masks = 0, n_enc = 0;
  byte_t tx_bytes [$];
  block_t last_mask = '0;
  blk_t rk [10];

  gh_uart_top #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .key, .rx, .tx);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.keys_ready) begin
      if (dut.mask != last_mask) n_masks++;
      last_mask = dut.mask;
    end
    if (dut.start_transmit) n_enc++;
  end

  initial begin
    forever begin
      byte_t b;
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      tx_bytes.push_back(b);
    end
  end

  task automatic send_byte(byte_t b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(negedge clk);
    end
  endtask

  function automatic blk_t enc_with_keys(blk_t pt);
    for (int r = 0; r < 9; r++) pt = ref_l(ref_s(pt ^ rk[r]));
    return pt ^ rk[9];
  endfunction

  initial begin
    ref_keys(TV_KEY, rk);
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int n = 0; n < N_TRACES; n++) begin
      block_t pt, got, exp_ct;
      automatic int w = 0;
      pt = (n == 0) ? TV_PT : rand128();
      exp_ct = enc_with_keys(pt);
      tx_bytes.delete();
      for (int i = 0; i < 16; i++) send_byte(pt[127 - 8*i -: 8]);
      while (tx_bytes.size() < 16 && w < 20 * 10 * CPB + 1000) begin
        @(negedge clk);
        w++;
      end
      for (int i = 0; i < 16 && i < tx_bytes.size(); i++) got[127 - 8*i -: 8] = tx_bytes[i];
      check(tx_bytes.size() == 16 && got == exp_ct, $sformatf("trace %0d: %h expected %h", n, got, exp_ct));
      repeat (2 * CPB) @(negedge clk);
    end
    check(n_enc == N_TRACES, $sformatf("%0d encryptions for %0d traces", n_enc, N_TRACES));
    check(n_masks == N_TRACES, $sformatf("%0d fresh masks for %0d traces", n_masks, N_TRACES));
    $display("traces=%0d encryptions=%0d fresh_masks=%0d", N_TRACES, n_enc, n_masks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_TRACES * (32 * 10 * CPB + 600) + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
