// tb_gh_out_buf: loads random ciphertexts and plays the UART transmitter with a random
// per-byte delay. Checks that the 16 bytes leave most significant first, one tx_start per
// byte and never while a byte is in flight, and that transmit_done pulses once after the
// last tx_done.
module tb_gh_out_buf;
  import gh_pkg::*;
  logic clk = 0, rst_n = 0, start_transmit = 0, tx_done = 0;
  block_t cipher;
  logic transmit_done, tx_start, busy;
  byte_t tx_data_in;
  int checks = 0, failures = 0;

  gh_out_buf dut (.clk, .rst_n, .cipher, .start_transmit, .transmit_done,
                  .tx_data_in, .tx_start, .tx_done, .busy);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      block_t blk, got;

      blk = {$urandom, $urandom, $urandom, $urandom};
      cipher = blk;
      start_transmit = 1;
      @(negedge clk) start_transmit = 0;
      cipher = ~blk;
      for (int i = 0; i < 16; i++) begin
        automatic int w = 0;
        while (!tx_start) begin
          check(!transmit_done, "transmit_done early");
          @(negedge clk);
          if (++w > 10) break;
        end
        check(tx_start, "tx_start comes");
        got[127 - 8*i -: 8] = tx_data_in;
        @(negedge clk);
        repeat ($urandom_range(1, 20)) begin
          check(!tx_start, "tx_start while byte in flight");
          @(negedge clk);
        end
        tx_done = 1;
        @(negedge clk) tx_done = 0;
        if (i == 15) begin
          check(transmit_done, "transmit_done after last byte");
          @(negedge clk) check(!transmit_done && !busy, "transmit_done is one cycle");
        end
      end
      check(got == blk, $sformatf("sent %h expected %h", got, blk));
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
