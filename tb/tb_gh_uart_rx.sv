// tb_gh_uart_rx: sends random bytes as 8N1 frames with a bit time of CPB clocks, with
// random idle gaps and a small bit-time error, and checks every byte and a single
// rx_done_tick per frame. A frame with a broken stop bit must be dropped.
module tb_gh_uart_rx;
  import gh_pkg::*;
  localparam int CPB = 32;
  logic clk = 0, rst_n = 0, rx = 1;
  byte_t rx_data_out;
  logic rx_done_tick;
  int checks = 0, failures = 0, ticks = 0;
  byte_t got [$];

  gh_uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx, .rx_data_out, .rx_done_tick);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && rx_done_tick) begin ticks++; got.push_back(rx_data_out); end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(byte_t b, logic stop, int bit_clks);
    logic [9:0] f = {stop, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (bit_clks) @(negedge clk);
    end
    rx = 1;
  endtask

  initial begin
    byte_t sent [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int n = 0; n < 40; n++) begin
      automatic byte_t b = byte_t'($urandom);
      send(b, 1'b1, CPB + (n % 3) - 1);
      sent.push_back(b);
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    send(8'hA5, 1'b0, CPB);                   // framing error: dropped
    repeat (3 * CPB) @(negedge clk);
    send(8'h3C, 1'b1, CPB);
    sent.push_back(8'h3C);
    repeat (2 * CPB) @(negedge clk);
    check(ticks == sent.size(), $sformatf("%0d ticks for %0d frames", ticks, sent.size()));
    for (int i = 0; i < sent.size() && i < got.size(); i++)
      check(got[i] == sent[i], $sformatf("byte %0d: %h expected %h", i, got[i], sent[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
