// tb_gh_in_buf: feeds three 16-byte blocks with random gaps and checks that data_ready pulses
// once per block, that plain_text then holds the block with the first byte in bits [127:120],
// and that plain_text stays put while the next block arrives.
module tb_gh_in_buf;
  import gh_pkg::*;
  logic clk = 0, rst_n = 0, rx_done_tick = 0;
  byte_t rx_data_out;
  block_t plain_text;
  logic data_ready;
  int checks = 0, failures = 0, readies = 0;

  gh_in_buf dut (.clk, .rst_n, .rx_data_out, .rx_done_tick, .plain_text, .data_ready);

  always #5 clk = ~clk;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    block_t prev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      block_t blk;
      blk = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 16; i++) begin
        rx_data_out = blk[127 - 8*i -: 8];
        rx_done_tick = 1;
        @(negedge clk) rx_done_tick = 0;
        rx_data_out = 8'hxx;
        if (i < 15) begin
          check(!data_ready, "no data_ready mid-block");
          check(plain_text == prev, "plain_text stable while filling");
        end
        repeat ($urandom_range(0, 4)) begin
          @(negedge clk);
          check(!data_ready, "data_ready is one cycle");
        end
      end
      check(plain_text == blk, $sformatf("block %0d: %h expected %h", n, plain_text, blk));
      prev = blk;
    end
    repeat (2) @(negedge clk);
    check(readies == 3, $sformatf("%0d data_ready pulses, expected 3", readies));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && data_ready) readies++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
