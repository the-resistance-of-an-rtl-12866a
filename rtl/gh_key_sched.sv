// gh_key_sched: the Grasshopper sub-key scheduler.
//
// The 256-bit key K1 || K2 (K1 in the upper half) gives the first two round keys. Each further
// pair is produced from the previous one by eight Feistel rounds
//   F[C](a1, a0) = (L S X[C](a1) + a0, a1),   C = C_1 .. C_32,
// so (K3, K4) comes after F[C_1..C_8], (K5, K6) after F[C_9..C_16], and so on to (K9, K10).
// One Feistel round takes five cycles: one for X[C] and S, then four for L computed as R^4
// per cycle (gh_lin_steps). All 32 rounds take 160 cycles; keys_ready pulses for one cycle
// 161 cycles after the cycle in which start was high, in
// the cycle after the last one, when sub_keys holds all ten keys. A start pulse while busy is
// ignored. The Feistel structure and the constants are the standard's; the five-cycle round
// and the handshake are this design's choice.
module gh_key_sched
  import gh_pkg::*;
#(
  parameter int unsigned L_STEPS = 4  // R steps per cycle, must divide 16
) (
  input  logic        clk,
  input  logic        rst_n,       // active-low synchronous reset
  input  logic        start,       // Data_ready: begin a key expansion
  input  key_t        key,
  output round_keys_t sub_keys,    // k[0] = K1 ... k[9] = K10
  output logic        busy,
  output logic        keys_ready   // one-cycle pulse: sub_keys complete
);
  localparam c_table_t C = c_table();
  localparam int unsigned L_CYC = 16 / L_STEPS;

  typedef enum logic [1:0] {KS_IDLE, KS_SUB, KS_LIN} ks_state_e;
  ks_state_e state;

  block_t a1, a0, t;
  logic [4:0] j;                           // Feistel round, 0 .. 31
  localparam int unsigned LW = $clog2(L_CYC + 1);
  localparam logic [LW-1:0] L_LAST = LW'(L_CYC - 1);
  logic [LW-1:0] lcnt;
  block_t s_out, l_out;

  gh_masked_sub u_sub (.din(a1 ^ C[j]), .mask('0), .dout(s_out));
  gh_lin_steps #(.STEPS(L_STEPS)) u_lin (.din(t), .dout(l_out));

  assign busy = (state != KS_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= KS_IDLE;
      a1         <= '0;
      a0         <= '0;
      t          <= '0;
      j          <= '0;
      lcnt       <= '0;
      sub_keys   <= '0;
      keys_ready <= 1'b0;
    end else begin
      keys_ready <= 1'b0;
      unique case (state)
        KS_IDLE: if (start) begin
          a1          <= key[255:128];
          a0          <= key[127:0];
          sub_keys[0] <= key[255:128];
          sub_keys[1] <= key[127:0];
          j           <= '0;
          state       <= KS_SUB;
        end
        KS_SUB: begin
          t     <= s_out;
          lcnt  <= '0;
          state <= KS_LIN;
        end
        KS_LIN: begin
          t    <= l_out;
          lcnt <= lcnt + 1'b1;
          if (lcnt == L_LAST) begin
            a1 <= l_out ^ a0;
            a0 <= a1;
            if (j[2:0] == 3'd7) begin
              sub_keys[2 + 2*j[4:3]] <= l_out ^ a0;
              sub_keys[3 + 2*j[4:3]] <= a1;
            end
            j <= j + 1'b1;
            if (j == 5'd31) begin
              keys_ready <= 1'b1;
              state      <= KS_IDLE;
            end else begin
              state <= KS_SUB;
            end
          end
        end
        default: state <= KS_IDLE;
      endcase
    end
  end

  initial assert (16 % L_STEPS == 0) else $error("gh_key_sched: L_STEPS must divide 16");
endmodule
