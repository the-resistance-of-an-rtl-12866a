// gh_uart_tx: UART transmitter, 8 data bits, no parity, one stop bit, LSB first.
//
// A tx_start pulse while idle loads tx_data_in and sends a start bit, the eight data bits and a
// stop bit, each CLKS_PER_BIT cycles long. tx_done pulses for one cycle at the end of the stop
// bit; busy is high from the cycle after tx_start until then. tx_start while busy breaks the
// handshake and is flagged by an assertion. The signal names follow the block diagram of the
// design; the frame format and the default bit time (115200 baud at 28.5 MHz) are this
// design's choice.
module gh_uart_tx
  import gh_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 247
) (
  input  logic  clk,
  input  logic  rst_n,       // active-low synchronous reset
  input  byte_t tx_data_in,
  input  logic  tx_start,    // one-cycle pulse: send tx_data_in
  output logic  tx,          // serial output, idle high
  output logic  busy,
  output logic  tx_done      // one-cycle pulse: frame sent
);
  typedef enum logic [1:0] {TX_IDLE, TX_START, TX_DATA, TX_STOP} tx_state_e;
  tx_state_e state;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);
  localparam logic [CW-1:0] BIT_LAST  = CW'(CLKS_PER_BIT - 1);
  logic [CW-1:0] cnt;
  logic [2:0] nbit;
  byte_t      shreg;

  assign busy = (state != TX_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= TX_IDLE;
      cnt     <= '0;
      nbit    <= '0;
      shreg   <= '0;
      tx      <= 1'b1;
      tx_done <= 1'b0;
    end else begin
      tx_done <= 1'b0;
      unique case (state)
        TX_IDLE: if (tx_start) begin
          shreg <= tx_data_in;
          cnt   <= '0;
          tx    <= 1'b0;
          state <= TX_START;
        end
        TX_START: begin
          if (cnt == BIT_LAST) begin
            cnt   <= '0;
            nbit  <= '0;
            tx    <= shreg[0];
            shreg <= {1'b0, shreg[7:1]};
            state <= TX_DATA;
          end else cnt <= cnt + 1'b1;
        end
        TX_DATA: begin
          if (cnt == BIT_LAST) begin
            cnt  <= '0;
            nbit <= nbit + 1'b1;
            if (nbit == 3'd7) begin
              tx    <= 1'b1;
              state <= TX_STOP;
            end else begin
              tx    <= shreg[0];
              shreg <= {1'b0, shreg[7:1]};
            end
          end else cnt <= cnt + 1'b1;
        end
        TX_STOP: begin
          if (cnt == BIT_LAST) begin
            cnt     <= '0;
            tx_done <= 1'b1;
            state   <= TX_IDLE;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(tx_start && busy))
    else $error("gh_uart_tx: tx_start while busy");

  initial assert (CLKS_PER_BIT >= 2) else $error("gh_uart_tx: CLKS_PER_BIT too small");
endmodule
