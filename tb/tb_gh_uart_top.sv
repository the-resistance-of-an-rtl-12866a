// tb_gh_uart_top: end-to-end test of the UART-connected masked encryptor at its default
// parameters (247 clocks per UART bit). Plays the host: sends 16-byte plaintexts on rx as
// 8N1 frames, decodes the 16 ciphertext bytes from tx and compares them with the standard's
// test vector and with the reference model. Three blocks are sent: the test vector, a random
// key and plaintext, and the test vector again, which must give the same ciphertext under a
// different mask. It also measures key-expansion and encryption latency inside the design
// (161 and 47 cycles from the starting pulse to the finishing one) and counts each mechanism: bytes received, key expansions, mask draws,
// encryptions, bytes sent, transmit_done handshakes. A mechanism that never happened counts
// as a failure.
module tb_gh_uart_top;
  import gh_pkg::*;
  import gh_ref_pkg::*;
  localparam int CPB = 247;
  logic clk = 0, rst_n = 0, rx = 1, tx;
  key_t key;
  int checks = 0, failures = 0;
  int n_rx = 0, n_ks = 0, n_enc = 0, n_tx = 0, n_tdone = 0, n_mask_new = 0;
  byte_t tx_bytes [$];
  block_t last_mask = '0;
  int t_data_ready = 0, t_keys_ready = 0, cyc = 0;

  gh_uart_top dut (.clk, .rst_n, .key, .rx, .tx);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters and latencies, observed inside the design
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.rx_done_tick) n_rx++;
    if (dut.data_ready) t_data_ready = cyc;
    if (dut.keys_ready) begin
      n_ks++;
      t_keys_ready = cyc;
      check(cyc - t_data_ready == 161, $sformatf("key expansion took %0d cycles", cyc - t_data_ready));
      if (dut.mask != last_mask && dut.mask != '0) n_mask_new++;
      last_mask = dut.mask;
    end
    if (dut.start_transmit) begin
      n_enc++;
      check(cyc - t_keys_ready == 47, $sformatf("encryption took %0d cycles", cyc - t_keys_ready));
    end
    if (dut.tx_done) n_tx++;
    if (dut.transmit_done) n_tdone++;
  end

  // host receiver: decode 8N1 frames from tx
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
      check(tx == 1'b1, "stop bit on tx");
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

  task automatic encrypt_block(key_t k, block_t pt, block_t exp_ct, string what);
    block_t got;
    int w = 0;
    key = k;
    tx_bytes.delete();
    for (int i = 0; i < 16; i++) send_byte(pt[127 - 8*i -: 8]);
    while (tx_bytes.size() < 16 && w < 20 * 10 * CPB + 1000) begin
      @(negedge clk);
      w++;
    end
    check(tx_bytes.size() == 16, $sformatf("%s: %0d ciphertext bytes", what, tx_bytes.size()));
    for (int i = 0; i < 16 && i < tx_bytes.size(); i++) got[127 - 8*i -: 8] = tx_bytes[i];
    check(got == exp_ct, $sformatf("%s: ciphertext %h expected %h", what, got, exp_ct));
    repeat (3 * CPB) @(negedge clk);
  endtask

  initial begin
    key_t k2;
    block_t p2;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    encrypt_block(TV_KEY, TV_PT, TV_CT, "test vector");
    k2 = {rand128(), rand128()};
    p2 = rand128();
    encrypt_block(k2, p2, ref_encrypt(k2, p2), "random block");
    encrypt_block(TV_KEY, TV_PT, TV_CT, "test vector, new mask");
    check(n_rx == 48, $sformatf("%0d bytes received", n_rx));
    check(n_ks == 3, $sformatf("%0d key expansions", n_ks));
    check(n_mask_new == 3, $sformatf("%0d fresh masks", n_mask_new));
    check(n_enc == 3, $sformatf("%0d encryptions", n_enc));
    check(n_tx == 48, $sformatf("%0d bytes sent", n_tx));
    check(n_tdone == 3, $sformatf("%0d transmit_done", n_tdone));
    $display("mechanisms: rx_bytes=%0d key_expansions=%0d fresh_masks=%0d encryptions=%0d tx_bytes=%0d transmit_done=%0d",
             n_rx, n_ks, n_mask_new, n_enc, n_tx, n_tdone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
