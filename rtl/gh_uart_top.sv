// gh_uart_top: masked Grasshopper encryptor reached through a UART.
//
// A host sends a 16-byte plaintext over rx. The UART receiver and the 128-bit input buffer
// assemble it; data_ready starts the sub-key scheduler, which expands the 256-bit key into
// ten round keys (160 cycles) while the PRNG advances to a fresh mask. When the keys are ready
// the encryption block encrypts the buffered plaintext under that mask (47 cycles), and the
// 128-bit output buffer sends the 16 ciphertext bytes back over tx through the UART
// transmitter, most significant byte first, then reports transmit_done to the encryption
// block. The block structure and signal names follow the design's block diagram; the key is an
// input port because the design does not say where it comes from (a board would tie it to
// switches or a constant).
module gh_uart_top
  import gh_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 247,  // 115200 baud at 28.5 MHz
  parameter int unsigned L_STEPS      = 4,    // R steps per cycle in L
  parameter block_t      PRNG_SEED    = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210
) (
  input  logic clk,
  input  logic rst_n,   // active-low synchronous reset
  input  key_t key,
  input  logic rx,
  output logic tx
);
  byte_t       rx_data_out, tx_data_in;
  logic        rx_done_tick, data_ready, keys_ready, ks_busy;
  logic        start_transmit, transmit_done, tx_start, tx_done;
  block_t      plain_text, cipher, mask;
  round_keys_t sub_keys;

  gh_uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx, .rx_data_out, .rx_done_tick
  );

  gh_in_buf u_in_buf (
    .clk, .rst_n, .rx_data_out, .rx_done_tick, .plain_text, .data_ready
  );

  gh_key_sched #(.L_STEPS(L_STEPS)) u_key_sched (
    .clk, .rst_n, .start(data_ready), .key, .sub_keys, .busy(ks_busy), .keys_ready
  );

  gh_prng #(.SEED(PRNG_SEED)) u_prng (
    .clk, .rst_n, .en(ks_busy), .mask
  );

  gh_encrypt #(.L_STEPS(L_STEPS)) u_encrypt (
    .clk, .rst_n, .start(keys_ready), .plain_text, .sub_keys, .mask,
    .cipher, .start_transmit, .transmit_done, .busy()
  );

  gh_out_buf u_out_buf (
    .clk, .rst_n, .cipher, .start_transmit, .transmit_done,
    .tx_data_in, .tx_start, .tx_done, .busy()
  );

  gh_uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .tx_data_in, .tx_start, .tx, .busy(), .tx_done
  );
endmodule
