// gh_out_buf: the 128-bit output buffer between the cipher and the UART transmitter.
//
// A start_transmit pulse loads cipher. The buffer then hands the block to the transmitter one
// byte at a time, most significant byte first: it puts the byte on tx_data_in, pulses tx_start,
// and waits for tx_done before the next. After the sixteenth tx_done it pulses transmit_done
// for one cycle and is ready again. The buffer's size and the five handshake signals are those
// of the block diagram; the byte order and the pulse handshakes are this design's choice.
module gh_out_buf
  import gh_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,           // active-low synchronous reset
  input  block_t cipher,
  input  logic   start_transmit,  // one-cycle pulse: cipher valid
  output logic   transmit_done,   // one-cycle pulse: all 16 bytes sent
  output byte_t  tx_data_in,
  output logic   tx_start,
  input  logic   tx_done,
  output logic   busy
);
  typedef enum logic [1:0] {OB_IDLE, OB_SEND, OB_WAIT} ob_state_e;
  ob_state_e state;

  block_t     data;
  logic [3:0] cnt;

  assign busy       = (state != OB_IDLE);
  assign tx_data_in = data[127:120];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= OB_IDLE;
      data          <= '0;
      cnt           <= '0;
      tx_start      <= 1'b0;
      transmit_done <= 1'b0;
    end else begin
      tx_start      <= 1'b0;
      transmit_done <= 1'b0;
      unique case (state)
        OB_IDLE: if (start_transmit) begin
          data  <= cipher;
          cnt   <= '0;
          state <= OB_SEND;
        end
        OB_SEND: begin
          tx_start <= 1'b1;
          state    <= OB_WAIT;
        end
        OB_WAIT: if (tx_done) begin
          data <= {data[119:0], 8'h00};
          cnt  <= cnt + 1'b1;
          if (cnt == 4'd15) begin
            transmit_done <= 1'b1;
            state         <= OB_IDLE;
          end else begin
            state <= OB_SEND;
          end
        end
        default: state <= OB_IDLE;
      endcase
    end
  end

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         !(start_transmit && busy))
    else $error("gh_out_buf: start_transmit while busy");
endmodule
