// gh_encrypt: the masked Grasshopper encryption block.
//
// Computes C = X[k10] L S X[k9] ... L S X[k1](P) on a masked state. With m the mask drawn for
// this block, the state is first set to P + m; each of the nine main rounds then applies X[k_r]
// and the masked layer S_m (which keeps the mask unchanged) and then L, which turns the mask m
// into L(m). The mask register is carried through the same L in parallel, so round r uses
// mask L^(r-1)(m), and after the last X[k10] the state is C + L^9(m); a final XOR with the
// mask register gives C. The cipher never appears unmasked in the state register.
//
// Timing (L_STEPS = 4): 1 cycle masking, then per round 1 cycle X + S_m and 4 cycles L, then
// 1 cycle for X[k10] and unmasking: cipher is valid and start_transmit pulses 47 cycles after
// the cycle in which start was sampled. The block then waits for transmit_done before it takes
// a new start; a start in that time is dropped. The round order and the masking algebra are
// the standard's and the masking scheme's; the cycle split and the handshake are this design's.
module gh_encrypt
  import gh_pkg::*;
#(
  parameter int unsigned L_STEPS = 4  // R steps per cycle, must divide 16
) (
  input  logic        clk,
  input  logic        rst_n,           // active-low synchronous reset
  input  logic        start,           // sub-keys ready: encrypt plain_text
  input  block_t      plain_text,
  input  round_keys_t sub_keys,
  input  block_t      mask,            // fresh mask, sampled with start
  output block_t      cipher,
  output logic        start_transmit,  // one-cycle pulse: cipher valid
  input  logic        transmit_done,   // ciphertext sent, ready for the next block
  output logic        busy
);
  localparam int unsigned L_CYC = 16 / L_STEPS;

  typedef enum logic [2:0] {EN_IDLE, EN_SUB, EN_LIN, EN_LAST, EN_WAIT_TX} en_state_e;
  en_state_e state;

  block_t st, m;
  logic [3:0] r;                           // main round, 0 .. 8
  localparam int unsigned LW = $clog2(L_CYC + 1);
  localparam logic [LW-1:0] L_LAST = LW'(L_CYC - 1);
  logic [LW-1:0] lcnt;
  block_t s_out, l_st, l_m;

  gh_masked_sub u_sub (.din(st ^ sub_keys[r]), .mask(m), .dout(s_out));
  gh_lin_steps #(.STEPS(L_STEPS)) u_lin_st (.din(st), .dout(l_st));
  gh_lin_steps #(.STEPS(L_STEPS)) u_lin_m  (.din(m),  .dout(l_m));

  assign busy = (state != EN_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= EN_IDLE;
      st             <= '0;
      m              <= '0;
      r              <= '0;
      lcnt           <= '0;
      cipher         <= '0;
      start_transmit <= 1'b0;
    end else begin
      start_transmit <= 1'b0;
      unique case (state)
        EN_IDLE: if (start) begin
          st    <= plain_text ^ mask;      // masking the initial state
          m     <= mask;
          r     <= '0;
          state <= EN_SUB;
        end
        EN_SUB: begin                      // X[k_r], then S_m
          st    <= s_out;
          lcnt  <= '0;
          state <= EN_LIN;
        end
        EN_LIN: begin                      // L on state and on mask
          st   <= l_st;
          m    <= l_m;
          lcnt <= lcnt + 1'b1;
          if (lcnt == L_LAST) begin
            r     <= r + 1'b1;
            state <= (r == 4'(MAIN_ROUNDS - 1)) ? EN_LAST : EN_SUB;
          end
        end
        EN_LAST: begin                     // X[k10] and unmasking with L^9(m)
          cipher         <= st ^ sub_keys[NUM_ROUNDS-1] ^ m;
          start_transmit <= 1'b1;
          state          <= EN_WAIT_TX;
        end
        EN_WAIT_TX: if (transmit_done) state <= EN_IDLE;
        default: state <= EN_IDLE;
      endcase
    end
  end

  initial assert (16 % L_STEPS == 0) else $error("gh_encrypt: L_STEPS must divide 16");
endmodule
