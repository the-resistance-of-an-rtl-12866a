# Masked Grasshopper encryptor with a UART front end

This design encrypts 128-bit blocks with Grasshopper (Kuznyechik, GOST R 34.12-2015), the
Russian 128-bit block cipher with a 256-bit key. It works on a masked state, so that the values
held in the registers are not correlated with the plaintext/ciphertext pair. A plain UART serves
the cipher, so a PC can stream plaintexts to an FPGA and read the ciphertexts back while a probe
records the chip's power or electromagnetic emission. It is meant as a target for
correlation power analysis (CPA) experiments. It is not meant as a hardened product: see
[How far the masking goes](#how-far-the-masking-goes).

The structure follows a published FPGA experiment on the resistance of Grasshopper to CPA
(an Artix-7 board, 28.5 MHz, a ChipWhisperer capture setup). The block partition, the signal
names between the blocks, the masking algebra and the cipher itself come from that work and from
the standard. Widths, handshakes, the cycle-level schedule, the UART format, the random
generator and the masked S-box circuit are this design's own choices; they are listed in
[Departures and own choices](#departures-and-own-choices).

## Data flow

```
 rx ─► gh_uart_rx ──rx_data_out, rx_done_tick──► gh_in_buf ──data_ready──► gh_key_sched ──sub_keys──┐
                                                     │                       │ busy                  │
                                                     │                       ▼                       │
                                                     │                    gh_prng ──mask──┐          │
                                                     │                                    ▼          ▼
                                                     └──────────plain_text──────────► gh_encrypt ◄─keys_ready
                                                                                        │   ▲
                                                              cipher, start_transmit    │   │ transmit_done
                                                                                        ▼   │
 tx ◄─ gh_uart_tx ◄──tx_data_in, tx_start── gh_out_buf ◄────────────────────────────────┘   │
            └──────────tx_done──────────────►    └──────────────────────────────────────────┘
```

One block goes through these steps:

1. The host sends 16 bytes on `rx`, most significant byte first (8 data bits, no parity,
   1 stop bit, LSB first on the wire; 115200 baud at 28.5 MHz by default).
2. After the 16th byte, `gh_in_buf` updates `plain_text` and pulses `data_ready`.
3. `gh_key_sched` expands the 256-bit `key` input into ten round keys. This takes 161 cycles.
   `gh_prng` steps once per cycle during that time, so a new mask is ready when the keys are.
4. `keys_ready` starts `gh_encrypt`, which samples the plaintext and the mask. After 47 cycles
   it puts the ciphertext on `cipher` and pulses `start_transmit`.
5. `gh_out_buf` sends the 16 ciphertext bytes, most significant first, through `gh_uart_tx`.
   It then pulses `transmit_done`, which sets the encryption block free for the next block.

The key is expanded again for every block, in the window between receiving and encrypting.
This gives captured traces a fixed shape: a key-expansion burst, then the plaintext read, then
nine round bursts, then the last XOR and the write to the output buffer.

The key is an input port of the top. The reference design does not say where its key came from.
On a board, tie it to a constant or to switches.

## The cipher as built

A block is written x = x15 ‖ … ‖ x0, with x15 in bits [127:120]. With this order the
standard's published test vectors come out unchanged. Encryption is

    C = X[k10] L S X[k9] … L S X[k1] (P)

- **X[k]** XORs the state with a round key.
- **S** applies the byte bijection S' (`gh_pkg::SBOX`) to all 16 bytes.
- **L = R¹⁶**. R shifts the state down by one byte and puts
  l(x) = 148·x15 + 32·x14 + 133·x13 + 16·x12 + 194·x11 + 192·x10 + x9 + 251·x8 + x7 + 192·x6 +
  194·x5 + 16·x4 + 133·x3 + 32·x2 + 148·x1 + x0 into the top byte. The products are in
  GF(2⁸) with p(x) = x⁸ + x⁷ + x⁶ + x + 1.

`gh_lin_steps` does `STEPS` R-steps of combinational logic. Feeding its output back gives L in
16/`STEPS` cycles. The default `STEPS = 4` gives L in four cycles. `STEPS = 16` gives L in one
cycle at about four times the logic depth.

**Key schedule** (`gh_key_sched`). K1 ‖ K2 is the key, with K1 the upper 128 bits. Each further
pair of keys comes from eight Feistel rounds F[C](a1, a0) = (L S X[C](a1) ⊕ a0, a1). The
constants are C_i = L(i) for i = 1..32, where i is a 128-bit number. `gh_pkg::c_table()`
computes the 32 constants during elaboration, so they add no logic. Each Feistel round takes
5 cycles: one for X and S, four for L. The schedule shares no hardware with the encryption
path.

## Masking

The countermeasure is Boolean masking with one 128-bit mask m per block:

- X and L are linear, so X[k](x ⊕ m) = X[k](x) ⊕ m and L(x ⊕ m) = L(x) ⊕ L(m).
- S is not linear. It is replaced by a masked S-box S_m, defined by S_m(x ⊕ m) = S(x) ⊕ m.

So if a round starts with the state masked by m_r, it ends with the state masked by L(m_r).
`gh_encrypt` holds the mask in its own register `m`. It passes `m` through a second copy of
`gh_lin_steps` in the same cycles in which the state goes through L. Round r therefore uses
m_r = L^(r−1)(m). After nine rounds and X[k10], the state is C ⊕ L⁹(m). The last cycle XORs it
with the mask register, which then holds L⁹(m), and this gives C.

Cycle 0 is the cycle in which `start` is high:

| cycle | step | state register gets | mask register gets |
|---|---|---|---|
| 0 | masking | P ⊕ m | m |
| 1 + 5(r−1) | X and S_m of round r | S_{m_r}(state ⊕ k_r) | unchanged (m_r) |
| 2 + 5(r−1) … 5 + 5(r−1) | L of round r, four R⁴ steps | R⁴(state) | R⁴(mask) |
| 46 | X[k10] and unmasking | `cipher` gets state ⊕ k10 ⊕ mask | — |
| 47 | `start_transmit` is high, `cipher` is valid | | |

Rounds r = 1…9 fill cycles 1 to 45. The state register never holds an unmasked
intermediate value. `tb_gh_encrypt` checks that it never holds the ciphertext.

### How far the masking goes

`gh_masked_sub` builds S_m as S'(y_i ⊕ m_i) ⊕ m_i for each byte: one S' table, with the mask
byte XORed in before the look-up and again after it. This has exactly the function of S_m and
lets the mask change every round at no cost. But the unmasked byte exists on the wires
between the two XORs. On an FPGA these wires can leak through glitches and through LUT
packing. So the masking protects the registers (the Hamming-distance leakage that register
updates give) and not the combinational logic. A hardened version would need a re-computed
masked table or a threshold implementation. The published work does not say how its S_m was
built.

`gh_prng` is a 128-bit maximal-length LFSR (x¹²⁸ + x¹²⁶ + x¹⁰¹ + x⁹⁹ + 1) with a fixed seed.
Anyone who sees 128 of its output bits can predict the rest. It stands in for the PRNG that the
reference work names but does not describe. Replace it with a true random source for any use
beyond experiments.

## Timing and throughput

At the default parameters:

| phase | cycles | at 28.5 MHz |
|---|---|---|
| receive 16 bytes (115200 baud) | 16 × 10 × 247 = 39,520 | 1.39 ms |
| key expansion + mask draw | 161 | 5.6 µs |
| encryption, `keys_ready` to `start_transmit` | 47 | 1649 ns |
| send 16 bytes | ≈ 39,520 | 1.39 ms |

The encryption core on its own delivers 128 bits / 1649 ns = 77.6 Mbit/s at 28.5 MHz. The
reference implementation reports 1596.2 ns (80.8 Mbit/s) for its masked version, and 1526.2 ns
for the unmasked one, at the same clock. Its exact cycle split is not published, so 47 cycles
is this design's schedule. The UART limits the throughput of the whole system by three orders
of magnitude. That is fine for trace capture.

## Modules and parameters

| file | what it is | parameters (default) |
|---|---|---|
| `rtl/gh_pkg.sv` | types, S' table, l coefficients, GF(2⁸) multiply, R, L, constants C_i | — |
| `rtl/gh_sbox.sv` | one S' look-up, combinational | — |
| `rtl/gh_masked_sub.sv` | 16 masked S-boxes | — |
| `rtl/gh_lin_steps.sv` | `STEPS` R-steps, combinational | `STEPS` (4) |
| `rtl/gh_key_sched.sv` | sub-key scheduler, 32 Feistel rounds | `L_STEPS` (4) |
| `rtl/gh_prng.sv` | 128-bit LFSR mask generator | `SEED` |
| `rtl/gh_encrypt.sv` | masked encryption FSM and datapath | `L_STEPS` (4) |
| `rtl/gh_uart_rx.sv`, `rtl/gh_uart_tx.sv` | 8N1 UART | `CLKS_PER_BIT` (247) |
| `rtl/gh_in_buf.sv`, `rtl/gh_out_buf.sv` | 128-bit input and output buffers | — |
| `rtl/gh_uart_top.sv` | the whole design | `CLKS_PER_BIT`, `L_STEPS`, `PRNG_SEED` |

All handshakes between blocks are one-cycle pulses. All registers use an active-low
synchronous reset `rst_n`. Each file opens with a comment that gives its interface and its
cycle timing. `L_STEPS` must divide 16. `CLKS_PER_BIT` is the clock frequency divided by the
baud rate. The UART transmitter and the output buffer hold assertions that catch a start
pulse sent while they are busy.

Synthesized generically, the top has about 3,300 word-level cells and 2,650 flip-flops. The
34 S' copies show up as 256 × 8 ROMs. Most of the flip-flops are the ten 128-bit round keys,
the key-schedule state, the encryption state and mask, the two buffers and the LFSR. The
reference work reports 2,697 flip-flops for its masked design on an Artix-7 and 10,106 LUTs;
the flip-flop counts are close, while LUT counts need the vendor flow to compare.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it hangs.
`tb/gh_ref_pkg.sv` is a reference model written apart from the RTL: a carry-less multiply
followed by reduction, L from the printed coefficients, and the key schedule and cipher as
plain functions. It also holds the standard's test vectors: key, plaintext, ciphertext and all
ten round keys.

- `tb_gh_sbox`: S' is a permutation, spot entries are right, and it matches the standard's four
  S test vectors.
- `tb_gh_lin_steps`: the standard's R and L test vectors, for 1, 4, 16 and 4 × 4 steps, plus
  random inputs against the reference model.
- `tb_gh_masked_sub`: S_m(x ⊕ m) = S(x) ⊕ m under zero and random masks.
- `tb_gh_key_sched`: the ten published round keys, random keys against the model, the
  161-cycle latency, and that a start while busy is ignored.
- `tb_gh_encrypt`: the published ciphertext with zero and random masks, random keys and
  plaintexts, the 47-cycle latency, that the ciphertext never shows up in the state register,
  and the `transmit_done` handshake.
- `tb_gh_prng`, `tb_gh_uart_rx`, `tb_gh_uart_tx`, `tb_gh_in_buf`, `tb_gh_out_buf`: bit-level
  checks of each block. The receiver test includes bit-time error and a frame with a bad stop
  bit.
- `tb_gh_uart_top`: end to end at the default parameters, over the serial lines. It sends the
  standard's test vector, then a random key and plaintext, then the test vector again, which
  must give the same ciphertext under a new mask. It also checks the key-expansion and
  encryption latencies inside the design, and counts every mechanism: bytes in, key
  expansions, fresh masks, encryptions, bytes out and `transmit_done`.

- `tb_gh_cpa_acquisition`: the trace-capture workload. It streams 25,000 random plaintexts
  under one fixed key through the UART, one block at a time, with a shortened bit time of
  4 clocks. It checks every ciphertext against the model and checks that every block got a
  new mask. A capture of 100,000 blocks runs the same way; it takes about four and a half
  minutes of simulation instead of one.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/gh_pkg.sv tb/gh_ref_pkg.sv rtl/gh_*.sv \
          tb/tb_gh_encrypt.sv --top-module tb_gh_encrypt -o sim
./obj_dir/sim
```

The end-to-end test simulates about 250,000 cycles and takes under a second.

## Departures and own choices

- **R's definition.** The printed formula for R reads l(x) ‖ x15 ‖ x1. It is implemented as the
  standard defines it, l(x) ‖ x15 ‖ … ‖ x1, and the standard's R vectors confirm this.
- **Round constants and byte order.** The reference work uses C_1 … C_32 without defining
  them, and gives no bit numbering. Both are taken from the standard.
- **Mask schedule.** m_r = L^(r−1)(m), carried in a register. This is the only reading that
  matches the final correction by L⁹(m) in the masking algebra.
- **Masked S-box circuit.** A functional S_m, not a re-tabulated or glitch-resistant one (see
  above).
- **PRNG.** An LFSR of our choosing. The reference work only names a PRNG and says the mask is
  drawn during key scheduling.
- **Cycle schedule.** L in four cycles, 5 cycles per round, 47 cycles per encryption, against
  about 45.5 cycles reported.
- **Handshakes.** `keys_ready`, `busy` and the pulse conventions are our own. The reference
  diagram names `Data_ready`, `Sub_keys`, `Plain_text`, `Cipher`, `Start_transmit` and
  `Transmit_done` but not their timing. A new block that completes while the previous
  ciphertext is still being sent is expanded, but its encryption start is dropped. The host is
  expected to wait for the 16 ciphertext bytes before it sends the next plaintext.
- **UART.** 8N1, 115200 baud, most significant byte of each block first. A frame with a bad
  stop bit is dropped.
- **Key.** A 256-bit input port, because its source is not given.
- **Not included.** The unmasked variants and the AES-256 design that the reference work
  compares against, the board's clocking and USB-UART bridge, and the capture and attack
  software.
