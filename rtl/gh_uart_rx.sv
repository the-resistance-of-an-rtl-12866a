// gh_uart_rx: UART receiver, 8 data bits, no parity, one stop bit, LSB first.
//
// The rx line is brought into the clock domain by two flip-flops. A falling edge starts a
// frame; the start bit is checked again half a bit later, and from there every bit is sampled
// in its middle, CLKS_PER_BIT cycles apart. When the stop bit reads 1 the byte appears on
// rx_data_out and rx_done_tick pulses for one cycle; a frame whose stop bit reads 0 is
// dropped, and the receiver waits for the line to go high again before it looks for the next
// start bit. The signal names follow the block diagram of the design; the frame format, the
// sampling scheme and the default of 247 clocks per bit (115200 baud at 28.5 MHz) are this
// design's choice.
module gh_uart_rx
  import gh_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 247
) (
  input  logic  clk,
  input  logic  rst_n,         // active-low synchronous reset
  input  logic  rx,            // serial input, idle high
  output byte_t rx_data_out,   // last byte received
  output logic  rx_done_tick   // one-cycle pulse: rx_data_out valid
);
  typedef enum logic [2:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP, RX_BREAK} rx_state_e;
  rx_state_e state;

  logic [1:0] sync;
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] BIT_LAST  = CW'(CLKS_PER_BIT - 1);
  localparam logic [CW-1:0] HALF_LAST = CW'((CLKS_PER_BIT - 1) / 2);
  logic [CW-1:0] cnt;
  logic [2:0] nbit;
  byte_t      shreg;
  logic       rxs;

  assign rxs = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync         <= 2'b11;
      state        <= RX_IDLE;
      cnt          <= '0;
      nbit         <= '0;
      shreg        <= '0;
      rx_data_out  <= '0;
      rx_done_tick <= 1'b0;
    end else begin
      sync         <= {sync[0], rx};
      rx_done_tick <= 1'b0;
      unique case (state)
        RX_IDLE: if (!rxs) begin
          cnt   <= '0;
          state <= RX_START;
        end
        RX_START: begin
          if (cnt == HALF_LAST) begin
            cnt   <= '0;
            nbit  <= '0;
            state <= rxs ? RX_IDLE : RX_DATA;  // glitch, not a start bit
          end else cnt <= cnt + 1'b1;
        end
        RX_DATA: begin
          if (cnt == BIT_LAST) begin
            cnt   <= '0;
            shreg <= {rxs, shreg[7:1]};
            nbit  <= nbit + 1'b1;
            if (nbit == 3'd7) state <= RX_STOP;
          end else cnt <= cnt + 1'b1;
        end
        RX_STOP: begin
          if (cnt == BIT_LAST) begin
            cnt   <= '0;
            if (rxs) begin
              rx_data_out  <= shreg;
              rx_done_tick <= 1'b1;
              state        <= RX_IDLE;
            end else begin
              state <= RX_BREAK;                // framing error: wait for the line to idle
            end
          end else cnt <= cnt + 1'b1;
        end
        RX_BREAK: if (rxs) state <= RX_IDLE;
        default: state <= RX_IDLE;
      endcase
    end
  end

  initial assert (CLKS_PER_BIT >= 4) else $error("gh_uart_rx: CLKS_PER_BIT too small");
endmodule
