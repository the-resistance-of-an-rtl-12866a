// tb_gh_uart_tx: sends random bytes and decodes the tx line by sampling each bit in its
// middle. Checks the start bit, data bits (LSB first), stop bit, idle level, and that tx_done
// is high 10 bit times after the cycle of tx_start.
module tb_gh_uart_tx;
  import gh_pkg::*;
  localparam int CPB = 12;
  logic clk = 0, rst_n = 0, tx_start = 0;
  byte_t tx_data_in;
  logic tx, busy, tx_done;
  int checks = 0, failures = 0;

  gh_uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .tx_data_in, .tx_start, .tx, .busy, .tx_done);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) check(tx == 1'b1, "idle high");
    for (int n = 0; n < 30; n++) begin
      automatic byte_t b = byte_t'($urandom);
      logic [9:0] f;
      automatic int done_at = -1;
      tx_data_in = b;
      tx_start = 1;
      @(negedge clk) tx_start = 0;
      tx_data_in = ~b;
      // now one cycle into the start bit; sample bit i at i*CPB + CPB/2
      for (int t = 1; t < 10 * CPB + 5; t++) begin
        if ((t - CPB / 2) % CPB == 0 && (t - CPB / 2) / CPB < 10) f[(t - CPB / 2) / CPB] = tx;
        if (tx_done && done_at < 0) done_at = t;
        @(negedge clk);
      end
      check(f[0] == 1'b0, "start bit");
      check(f[8:1] == b, $sformatf("data %h expected %h", f[8:1], b));
      check(f[9] == 1'b1, "stop bit");
      check(done_at == 10 * CPB + 1, $sformatf("tx_done at %0d, expected %0d", done_at, 10 * CPB + 1));
      check(!busy && tx, "idle after frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
