# PHYsec: encrypting the 8b10b symbol stream of 1000BASE-X Ethernet

Gigabit Ethernet over fibre (1000BASE-X) sends each byte as an 8b10b
code-group. Control code-groups mark idles, frame starts and frame ends. An
eavesdropper on the fibre can read the frames. Even if the frames were
encrypted, the eavesdropper could still see when traffic flows: an idle line
alternates control and data symbols, and a frame is a long run of data symbols.

PHYsec encrypts below the MAC, in the physical coding sublayer (PCS). It works
on the symbol stream just before the 8b10b encoder and undoes the encryption
just after the decoder. Every symbol is encrypted: idles, frame delimiters and
data alike. The encryption adds no bytes and changes no frame. The encoder
still sees only valid symbols, so the line keeps its DC balance and transition
density. SERDES, clock recovery and optical modules work unchanged.

The cipher is a stream cipher over an alphabet of 267 symbols:

    cipher = (map(symbol) + k) mod 267        plain = (map(cipher) - k) mod 267

Here `k` is a keystream value in 0..266. The keystream comes from a bank of
perturbed chaotic maps, reduced modulo 267. Each end of the link has its own
generator and must hold the other end's transmit key. A four-symbol ordered set,
/X/, switches the cipher on and off at the same symbol on both ends.

This repository holds synthesizable SystemVerilog for:
- the encryption path;
- the synchronisation machinery;
- the keystream generator;
- the standard 8b10b encoder and decoder it sits between;
- one self-checking testbench per block, plus end-to-end and workload tests.

## The 267-symbol alphabet

Encryption must produce only symbols the encoder can code. The 8b10b code has
256 data symbols (Dx.y, K = 0) and 12 control symbols. K28.7 is left out: it
is not used in normal traffic, and it could form false commas. That leaves 267
symbols, numbered as follows:

| value   | symbol                                      |
|---------|---------------------------------------------|
| 0..255  | data octet D (value = D)                    |
| 256..262| K28.0, K28.1, K28.2, K28.3, K28.4, K28.5, K28.6 |
| 263     | K23.7 (/R/)                                 |
| 264     | K27.7 (/S/)                                 |
| 265     | K29.7 (/T/)                                 |
| 266     | K30.7 (/V/)                                 |

The most significant bit of the 9-bit value is therefore the K flag. The
control code order is this design's choice; both ends only have to agree on
it. A symbol is carried as `sym_t = {k, d[7:0]}` (`physec_pkg`). If a K28.7
arrives at the cipher anyway, it passes through unchanged.

On an encrypted line every value 0..266 is equally likely. The K flag is set on
about 11/267 = 4.1 % of the symbols, whether frames or idles are being sent.
The traffic pattern cannot be seen.

## Datapath and clocking

```
            clk_tx (system clock)                         clk_rx (recovered clock)
 TX PCS ->  INSERT (18) -> CIPHER_OP_TX (6) -> ENC (1) ... DEC (1) -> CIPHER_OP_RX (6) -> EXTRACT (5) -> RX PCS
  ctrl        ^                ^    ^                                   ^     ^               |
              |            CAPTURE  KEYSTREAM_GEN TX              CAPTURE  KEYSTREAM_GEN RX   |
         MANAGEMENT <------------------------------- sync_monitor <---------------------------+
```

`physec` (top) takes one symbol per clock on each side:
- The TX half runs on `clk_tx`.
- The RX half runs on `clk_rx`.

The top includes the 8b10b encoder and decoder, so its line ports carry
10-bit code-groups:
- `tx_code` goes to the serializer;
- `rx_code` comes from the deserializer, already word-aligned.

`tx_din` comes from the TX PCS controller and `rx_dout` goes to the RX PCS
controller, as 9-bit symbols. The PCS controllers, the comma alignment, the
SERDES and the MAC are not part of this RTL.

| path | stages | cycles |
|------|--------|--------|
| TX, `tx_din` to encoder input | INSERT pipeline 18 + cipher 6 | 24 (192 ns at 125 MHz) |
| TX, `tx_din` to `tx_code` | + encoder 1 | 25 |
| RX, decoder output to `rx_dout` | cipher 6 + extract 5 | 11 (88 ns) |
| RX, `rx_code` to `rx_dout` | + decoder 1 | 12 |

Signals that cross between the clocks:
- Single-cycle events go through a toggle synchroniser (`pulse_sync`):
  - the RX restart, towards RX;
  - sync-loss, mismatch and received-message events, towards TX.
- Status levels use a two-flop synchroniser (`level_sync`): RX key ready and
  RX cipher on.

## The 8b10b code (`code8b10b_pkg`, `enc_8b10b`, `dec_8b10b`)

The encoder and decoder implement the standard 1000BASE-X code. They are here
so that the whole path can be checked down to the line.

Each symbol becomes a 6-bit sub-block (from the low five bits) and a 4-bit
sub-block (from the high three bits):
- The tables give each sub-block's form for negative running disparity.
- At positive running disparity the complement is sent when the sub-block is
  unbalanced. It is also sent for D.7 and K28 (6-bit) and for D.x.3 and all
  control codes (4-bit).
- D.x.7 uses its alternate form for x = 17, 18, 20 at negative and x = 11, 13,
  14 at positive disparity.
- Bit 9 of a code-group is the first bit on the line.

The decoder works in three steps:
1. It finds the symbol from the two sub-blocks.
2. It codes that symbol again at its current running disparity.
3. If the result is the received code-group, the group was valid. If only the
   other disparity gives it, `disp_err` is raised. Otherwise `code_err` is
   raised.

Since the cipher's output is always one of the 267 symbols, the line never
carries an invalid code-group, encrypted or not.

## Cipher operation (`cipher_op`)

Six registered stages:

1. input register;
2. map to 0..266;
3. add or subtract the keystream modulo 267;
4. map back to `{k, d}`;
5. and 6. delay.

The modular step is one addition, or subtraction, and one conditional
correction by 267. The enable `en` is sampled together with `ks` in stage 3.
When `en` is high, `ks_advance` tells the generator that the value was used.
The next value then appears one clock later. The cipher never stalls. The
generator delivers exactly one value per ciphered symbol, and no value while
the cipher is off.

The same module is used with `DECRYPT = 0` at TX and `DECRYPT = 1` at RX. It
also outputs `plain_q`: the plaintext value of the symbol that has just been
through stage 3. For TX that is the mapped input; for RX it is the decrypted
result. CAPTURE watches this value.

## Switching encryption on and off: the /X/ ordered set

This is the part that needs the most care. The two generators start from the
same key, but nothing on the line tells the receiver which ciphertext symbol
used which keystream value. The receiver must begin decrypting at exactly the
symbol where the transmitter began encrypting.

The link does this with a new ordered set:

    /X/ = K28.1 D21.5 D21.2 D21.2

K28.1 contains the comma pattern, as K28.5 does. A normal 1000BASE-X stream
never contains K28.1.

**Sending it (INSERT, `insert_fifo` + `insert_machine`).**
1. MANAGEMENT writes the four symbols into a 16-symbol buffer. It does so only
   when the buffer has room for a whole message (`space_ok`).
2. The TX symbols pass through an 18-cycle pipeline.
3. While a whole message waits, the insert machine watches the last four
   pipeline positions. It waits for two complete idle ordered sets there, each
   K28.5 D5.6 or K28.5 D16.2, starting on a set boundary.
4. It then switches the output multiplexer to the buffer for four cycles. The
   four idle symbols leave the pipeline unused.

The stream keeps its length and its latency. Only idles are ever replaced. A
frame is never cut, because inside a frame there are no idle sets. Ethernet's
minimum inter-frame gap of 12 octets is long enough for one /X/.

**Acting on it (CAPTURE).** Each CAPTURE module keeps the last four plaintext
values from its cipher. When they spell /X/, the cipher state toggles, taking
effect from the very next symbol. Since the TX cipher is off when /X/ switches
it on:
- /X/ goes onto the line in clear;
- every symbol after /X/ is encrypted, idles and frames alike.

At the receiver the same detector sees the clear /X/ and starts decrypting
with the symbol after it. At that moment both generators are still at their
first value, so the two ends stay aligned from the first encrypted symbol on.

To switch off, /X/ is sent while encryption is on:
- It travels encrypted.
- The receiver recognises it after decryption, which is why CAPTURE looks at
  plaintext values and not at the line.
- Both ends stop after it.

Further rules of CAPTURE:
- It refuses to switch on while its keystream is not ready.
- A restart (`sync_reset`) forces it off.

**Removing it (EXTRACT).** After decryption, a four-symbol window looks for a
message starting with K28.1. The message is passed to MANAGEMENT
(`msg_valid`, four symbols). In the stream it is replaced by two /I2/ idle sets
(K28.5 D16.2), so the receiving PCS sees an ordinary idle pattern. Messages
that start with K28.1 but are not /X/ are counted as "other". They are left
for future control messages.

## Keeping the ends in step

**Keystream hand-over (`keystream_gen`).**
- After `load`, the generator fills its pipeline until the first value is at
  the output, then raises `ready`.
- From then on, the LFSR, the chaotic cells, the word register and the modulo
  pipeline share one clock enable. The whole chain moves one step only when
  the cipher consumed a value.
- A generator that waits a long time for /X/ therefore still starts at the
  first value of its sequence.
- The first value comes about 133 cycles after `load`:
  - 1 cycle to load;
  - 65 cycles to compute the reciprocals;
  - 2 cycles for the first iteration and the word register;
  - 65 cycles through the modulo pipeline.

**Detecting misalignment (`sync_monitor`).** A keystream slip, a wrong key or
a missed /X/ makes the decrypted stream look uniformly random. A correctly
decrypted stream obeys a small grammar:
- the only control codes are K28.5, /S/, /T/, /R/, /V/ and K28.1;
- K28.5 is followed by D5.6, D16.2, D21.5 or D2.2;
- /T/ is followed by /R/;
- /R/ is followed by /R/ or K28.5;
- /S/ follows an idle set, /X/ or /R/.

Random symbols break these rules about nine times in 267 symbols. The monitor
works as follows:
- Each break is a violation.
- The first violation opens a window of 267 symbols (2.136 µs at 125 MHz).
- If at least 2 violations fall in it, the monitor raises an alarm when the
  window closes.

So one bit error does not raise an alarm, while a slip is reported about 267
symbols after it first shows. The alarm type depends on the receiver's state:
- **sync loss** if the receiver is decrypting;
- **mismatch** if it is not: the far end ciphers, this end reads ciphertext
  as clear.

**Recovery (`management`).**
- Alarms latch until `alarm_clear`.
- `restart` reloads both generators and forces both ciphers off.
- A new `x_req` then starts encryption again from aligned generators.
- Clear the alarms only after one monitor window (267 symbols) has passed
  since the restart. A window opened by the fault, or by the few ciphertext
  symbols still in flight at the restart, can still close and latch an alarm.
- The far end of a real link has its own management. Both ends must be
  restarted, which is the user's action described by the source design.
- MANAGEMENT also counts received /X/ and other messages (16 bits each).

## The keystream generator

The generator (`keystream_gen`) has three parts, described in the next
subsections:
- one shared LFSR;
- a bank of nine chaotic cells;
- a modulo-267 reduction pipeline.

The key of one generator (`key_t`) is:
- `y0`: the 61-bit LFSR seed, which must not be 0;
- `gamma[9]`: nine 64-bit control parameters, strictly between 0 and 1;
- `x0[9]`: nine 64-bit initial states.

### Skew tent map cells (`stm_cell`)

Each cell iterates the skew tent map on a 64-bit fraction x = X / 2^64:

    x' = x / gamma             if x <= gamma
    x' = (1 - x) / (1 - gamma) otherwise

A finite-precision chaotic map falls into short cycles. To break them, the low
W bits of each new state are XORed with fresh LFSR bits. The perturbed value
becomes the state, and its low W bits are the cell's output. Eight cells give
8 bits each and one gives 9: 73 bits per clock.

The fixed-point arithmetic is this design's own:
- **Reciprocals.** Division is done by multiplying with a reciprocal. After
  each `load`, a restoring divider computes the two reciprocals in 65 cycles.
  For a divisor G with its top one at bit p:
  - Gn = G << (63 - p) is normalised;
  - R = floor(2^127 / Gn);
  - then X/G scaled by 2^64 is (X * R) >> p.
- **Iteration.** One iteration is one 64x64 multiply per clock.
- **Saturation.** Results of 1.0 or more saturate to 2^64 - 1.
- **1 - x.** It is computed as the two's complement of X. This is exact on the
  branch where x > gamma > 0.

### LFSR (`lfsr61`)

The LFSR is a 61-stage Fibonacci LFSR with polynomial
x^61 + x^60 + x^46 + x^45 + 1. The cells need 73 fresh bits per clock, so it is
advanced 73 steps per enabled cycle. The steps are unrolled into logic. Cell j
takes bits [8j+7:8j] and the 9-bit cell takes bits [72:64].

### Modulo 267 (`mod267`)

Reducing a 9-bit value modulo 267 would be visibly biased. Reducing a 73-bit
value makes the bias negligible: at most 2^-64 relative.

The reduction is a 65-stage pipeline, one stage for each n = 64 down to 0:
- Stage n compares its operand with 267 * 2^n.
- If the operand is at least that, the stage subtracts it.
- Each stage keeps the operand below 2 * 267 * 2^(n-1).
- After stage 0 the operand lies in 0..266.

Latency is 65 cycles, with one result per clock.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `lfsr61` | `LEN`, `OUT_W` | 61, 73 | LFSR length, bits per clock |
| `stm_cell` | `W`, `N` | 8, 64 | output bits, state bits |
| `mod267` | `IN_W`, `STAGES` | 73, 65 | input width, pipeline stages |
| `cipher_op` | `DECRYPT`, `LATENCY` | 0, 6 | direction, cycles |
| `insert_machine` | `LATENCY`, `MSG_LEN` | 18, 4 | pipeline cycles, message length |
| `insert_fifo` | `DEPTH` | 16 | message buffer, symbols |
| `sync_monitor` | `WINDOW`, `THRESH` | 267, 2 | window, violations for an alarm |

## Where this RTL departs from, or adds to, the source design

The source design gives:
- the cipher;
- the 267-symbol alphabet;
- the /X/ set;
- the INSERT/CAPTURE/EXTRACT structure;
- the 24-cycle TX latency and its 18 + 6 split;
- the keystream structure: 61-bit LFSR, 64-bit STM cells, 8 x 8 + 9 bits,
  73-bit word, 65-stage modulo pipeline;
- the 2.136 µs detection time.

This design chose the following itself:
- the numbering of the control codes;
- the LFSR polynomial and the bit slicing;
- the fixed-point division scheme;
- the generator hand-over with one shared clock enable;
- the toggle rule of CAPTURE;
- where the insert machine looks for idles;
- the idle pattern EXTRACT writes back;
- the buffer depth;
- the monitor's grammar and threshold;
- the management commands.

Known differences:
- **Comparator.** The source design's modulo figure labels the comparator
  "A > θ". Here it is A ≥ θ; with ">" an exact multiple of 267 would leave 267
  at the output.
- **33-stage modulo.** The 33-stage overclocked variant of the modulo pipeline
  is mentioned but not described, and is not built. The 65-stage form is used.
- **RX latency.** The source design states an RX latency increase of about
  the same as TX (192 ns). This RX path takes 11 cycles (88 ns). The RX side
  has no insert pipeline, and no breakdown of the RX figure is given.
- **Resources.** The source design's resource figures, for an FPGA, are not
  reproduced:
  - 3629 registers and 144 multipliers per generator;
  - 16 multipliers per STM cell.

  Here one generator holds about 5100 flip-flop bits, mostly the 73-bit-wide
  modulo pipeline. Each cell has one 64x64 multiplier, which a synthesis tool
  splits into DSP blocks.
- **Management interface.** The link from MANAGEMENT to the user (an FPGA
  debug system in the source) is replaced by plain ports.
- **Pass-through outputs.** A few management outputs are direct functions of
  inputs (`restart` fans out to the load, restart and reset requests), and so
  is `ks_advance = en` of the cipher. These combinational paths are
  intentional.
- **Parts not built.** The PCS control, elastic buffer, MAC, SERDES (with
  comma alignment) and optical module are standard parts and are not
  included. The 8b10b encoder and decoder are included. They follow the
  standard's tables, and their error handling is kept simple.

## Verification

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values are
computed independently in `tb/physec_ref_pkg.sv`:
- the symbol mapping;
- the modular cipher;
- the skew tent map using exact division;
- the LFSR stepped one bit at a time;
- a full keystream model;
- a random traffic generator.

| testbench | what it checks |
|-----------|----------------|
| `tb_lfsr61` | 73-step output against a bit-serial LFSR |
| `tb_stm_cell` | reciprocal latency, iterations against exact-division model (also W = 9) |
| `tb_mod267` | random and edge words (multiples of 267, max) against `%`, latency 65, `ce` hold |
| `tb_keystream_gen` | full sequence against the model, ready latency, hold while `advance` low, reload |
| `tb_cipher_op` | TX/RX against reference, round trip, 6-cycle latency, K28.7 pass-through |
| `tb_capture` | toggling on /X/, refusal while not ready, sync reset |
| `tb_insert_fifo` | order, `space_ok`/`msg_avail` thresholds, random traffic |
| `tb_insert_machine` | 18-cycle latency, only idle sets replaced, frames untouched |
| `tb_extract` | removal and idle replacement, message hand-over, latency 5 |
| `tb_sync_monitor` | no alarm on clean traffic or single errors, alarm and type on random streams, window timing |
| `tb_management` | restart fan-out, /X/ write sequence, alarm latch and clear, counters |
| `tb_tx_encrypt`, `tb_rx_decrypt` | each half against the reference cipher with /X/ on and off, latency 24 / 11 |
| `tb_code8b10b` | code-groups from the standard's tables, round trip of all 268 symbols, disparity and run length on the line, bit-error detection |
| `tb_physec` | whole design, default size, two clocks, link model (below) |
| `tb_workload_traffic` | 1500-byte frames at 98 % and 10 % load, encrypted |
| `tb_keystream_hist` | 53 400 keystream values, chi-square over 267 bins |

`tb_physec` loops the code-group output back to the input through a link
model in which a code-group can be dropped or altered. It takes the link
through eight phases and counts each mechanism:
1. key load;
2. clear traffic;
3. /X/ insertion and switch-on;
4. a symbol slip on the link, which must raise `alarm_sync`;
5. restart and re-synchronisation;
6. switch-off;
7. a corrupted /X/, which leaves the far end in clear and must raise
   `alarm_mismatch`;
8. a wrong receive key, which must deliver no valid frame.

Throughout, the decoder must see no invalid code-group, apart from at most
two caused by the dropped code-group of phase 4.

`tb_workload_traffic` sends 60 frames at 98 % load and 6 at 10 %. It checks:
- every frame arrives intact;
- the load is within 2 % of target;
- the K flag on the encrypted line stays near 11/267 at both loads;
- no code or disparity error reaches the decoder.

`tb_keystream_hist` checks that the chi-square statistic stays under 330. That
is about the 0.5 % point for 266 degrees of freedom; a typical run gives about
230.

To run a testbench with plain Verilator, for example the end-to-end one:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/physec_pkg.sv rtl/code8b10b_pkg.sv tb/physec_ref_pkg.sv \
        tb/tb_physec.sv --top-module tb_physec
    ./obj_dir/Vtb_physec

Replace `tb_physec` with any testbench name. The `-Irtl` path lets Verilator
find the other modules by name. With `+verilator+seed+N` and
`+verilator+rand+reset+2`, runs use different random stimulus and initial
values.
