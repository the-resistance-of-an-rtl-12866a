// gh_in_buf: the 128-bit input buffer between the UART receiver and the cipher.
//
// Each rx_done_tick shifts rx_data_out into a 16-byte register. After the sixteenth byte the
// whole block is copied to plain_text and data_ready pulses for one cycle; plain_text then
// holds still while the next 16 bytes arrive. The first byte received becomes the most
// significant byte x15 of the block (bits [127:120]). The buffer's size and its two outputs are
// those of the block diagram; the byte order and the one-cycle pulse are this design's choice.
module gh_in_buf
  import gh_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,         // active-low synchronous reset
  input  byte_t  rx_data_out,
  input  logic   rx_done_tick,
  output block_t plain_text,
  output logic   data_ready     // one-cycle pulse: plain_text holds a new block
);
  block_t     shreg;
  logic [3:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg      <= '0;
      cnt        <= '0;
      plain_text <= '0;
      data_ready <= 1'b0;
    end else begin
      data_ready <= 1'b0;
      if (rx_done_tick) begin
        shreg <= {shreg[119:0], rx_data_out};
        cnt   <= cnt + 1'b1;
        if (cnt == 4'd15) begin
          plain_text <= {shreg[119:0], rx_data_out};
          data_ready <= 1'b1;
        end
      end
    end
  end
endmodule
