# A four-byte-per-clock RC4 keystream generator

RC4 is a byte-serial stream cipher. Every keystream byte needs a read of the
S-box permutation, an index update, a swap of two S-box entries and a second
read that depends on the swap. Run directly in hardware, that gives at most
one byte per clock. This design gets four bytes per clock with two ideas:

1. **Two iterations per clock.** Each RC4 core unrolls two iterations of the
   RC4 loop into one clock. The indices of both iterations are found in one
   clock. The two swaps are merged into one four-register move. The two
   keystream addresses are worked out from the S-box as it was at the start
   of the clock. All the cross-effects of the first iteration on the second
   are handled by three 8-bit comparators.
2. **Two cores side by side.** Two such cores run in lockstep, each with its
   own part of the secret key. Their 2 + 2 bytes fill one 32-bit bus word
   per clock, which a processor XORs with four plaintext bytes.

Each core uses the same datapath for the key schedule (KSA) and the
keystream generator (PRGA). One latched signal, `prga_en`, zeroes the key
terms of the index adders and switches the core from KSA to PRGA. This is
called a *dynamic KSA-PRGA* (DKP) core below.

The design is a SystemVerilog rendering of "Design 6" of the paper
*Hardware Implementation of four byte per clock RC4 algorithm* (R. Paul,
A. Chakrabarti, R. Ghosh). The structure, block names, clock schedule and
case tables follow that paper. The section "Departures and own choices"
lists where this RTL differs from it or fills in what it leaves open.

## RC4 in brief

```
KSA:  S[n] = n;  K[n] = key[n mod l];  j = 0
      for i = 0..255:  j = j + S[i] + K[i];  swap(S[i], S[j])
PRGA: i = j = 0
      loop: i = i + 1;  j = j + S[i];  swap(S[i], S[j]);  Z = S[S[i] + S[j]]
```

All arithmetic is mod 256. The KSA and PRGA loop bodies differ only in the
`K[i]` term, and that is what the DKP core uses.

## System view (`rc4_quad_top`)

```
              key[0], key_len[0]           key[1], key_len[1]
                     |                            |
   start ---> +-------------+             +-------------+
              | DKP core 0  |             | DKP core 1  |      (rc4_dkp2_core)
              +-------------+             +-------------+
          z1,z2 | z_valid ^ z_req     z1,z2 | z_valid ^
                v         |                 v         |
              +-------------------------------------------+
              |  co-processor interface controller        |  (rc4_coproc_if)
              |  word = {Z0, Z1, Z2, Z3}, 4-word FIFO      |
              +-------------------------------------------+
                        | word[31:0], word_valid  ^ word_ready
                        v                         |
                 main processor: C = P xor word (outside this RTL)
```

Byte lanes: Z0 (core 0, first byte) is on `word[31:24]`, Z1 (core 0, second
byte) on `[23:16]`, Z2 (core 1, first byte) on `[15:8]` and Z3 (core 1,
second byte) on `[7:0]`. The two cores produce two independent RC4
keystreams, one for each key. Each 32-bit word holds the next two bytes of
each stream. A receiver that decrypts needs the same two keys and the same
lane order.

## Inside one DKP core (`rc4_dkp2_core`)

```
 i counter --i1,i2--> storage block (S-box, 4 read / 4 write ports) --S[i1],S[i2],S[j1],S[j2]--+
     |                    ^  ^                                                                 |
     +--> K array --K[i1],K[i2]--> j generator --j1,j2--+                                      |
                          |                             |                                      |
                          +---- swap controller <-------+--------------------------------------+
                                (writes S2 back)        +--> Z generator --(next clock)--> z1, z2
```

Notation for one clock: `S0` is the S-box at the start of the clock, `S1`
is the S-box after the first swap and `S2` after the second. The counter
gives `i1` and `i2 = i1 + 1`. `j0` is the `j` left by the previous clock.

### Two index updates in one clock (`rc4_j_gen`)

```
j1 = j0 + S0[i1] + K[i1]
j2 = j1 + S1[i2] + K[i2]
```

`S1` differs from `S0` only at `i1` and `j1`, and `i2` can never equal
`i1`. So `S1[i2]` is `S0[i1]` if `i2 == j1`, and `S0[i2]` otherwise. Both
candidate sums `j0 + S0[i1] + S0[i1] + K1 + K2` and
`j0 + S0[i1] + S0[i2] + K1 + K2` are formed in parallel. A comparator on
`(i2, j1)` picks one. In PRGA, `prga_en` forces `K[i1]` and `K[i2]` to
zero through 2:1 multiplexers, and the same adders compute the PRGA `j`.

### Two swaps as one move (`rc4_swap_ctrl`)

The storage block can write four registers in one edge. The swap controller
works out the final contents `S2` of the four addresses `i1, i2, j1, j2`
from the four bytes read out of `S0`. Three comparators decide the case:
`c1 = (i2 == j1)`, `c2 = (j2 == i1)` and `c3 = (j2 == j1)`.

| case | c1 c2 c3 | new S[i1] | new S[i2] | new S[j1] | new S[j2] |
|------|----------|-----------|-----------|-----------|-----------|
| 1    | 0 0 0    | S0[j1]    | S0[j2]    | S0[i1]    | S0[i2]    |
| 2    | 0 0 1    | S0[j1]    | S0[i1]    | S0[i2]    | = S[j1]   |
| 3    | 0 1 0    | S0[i2]    | S0[j1]    | S0[i1]    | = S[i1]   |
| 4    | 0 1 1    | S0[i2]    | S0[i1]    | = S[i1]   | = S[i1]   |
| 5    | 1 0 0    | S0[j1]    | S0[j2]    | = S[i2]   | S0[i1]    |
| 6    | 1 0 1    | S0[j1]    | S0[i1]    | = S[i2]   | = S[i2]   |
| 7    | 1 1 0    | S0[i1]    | S0[i2]    | = S[i2]   | = S[i1]   |
| –    | 1 1 1    | cannot happen (it would need i1 = i2)                 ||||

"= S[x]" means the address is the same register as `x` and gets the same
byte. Both DEMUX ports then carry that byte, so the order in which the
storage block applies its four write ports does not matter. An assertion in
`rc4_sbox_storage` checks this. The case `i1 == j1` has no row of its own:
it lands in case 1 or case 4, and those rows are still correct for it.

### Keystream addresses and the one-clock lag (`rc4_z_gen`)

```
Z1 = S1[t1],  t1 = S1[i1] + S1[j1] = S0[i1] + S0[j1]
Z2 = S2[t2],  t2 = S2[i2] + S2[j2] = S1[i2] + S1[j2]
```

`t1` is one adder. `t2` is one of seven sums of two `S0` bytes, chosen by
an 8:1 multiplexer. Its select is the same three comparisons as the swap
cases:

| c1 c2 c3 | t2                |
|----------|-------------------|
| 0 0 0    | S0[i2] + S0[j2]   |
| 0 0 1    | S0[i2] + S0[i1]   |
| 0 1 x    | S0[i2] + S0[j1]   |
| 1 0 0    | S0[i1] + S0[j2]   |
| 1 0 1    | S0[i1] + S0[i1]   |
| 1 1 0    | S0[i1] + S0[j1]   |

`t1`, `t2`, `i2` and `j2` are registered at the edge that writes the swaps.
In the next clock the bank holds `S2`, and a 256:2 multiplexer reads the two
keystream bytes. `Z2 = S2[t2]` is read directly. `Z1` must come from `S1`,
not `S2`. `S1` is `S2` with the second swap undone, so `Z1` is read at `t1`
with `i2` and `j2` exchanged (`t1 == i2` reads `j2`, `t1 == j2` reads `i2`).
This correction is not in the paper's block diagram; see below.

### Clock schedule

Clocks are counted from the one in which `start` is high (clock 1).

| clock          | phase            | what happens                                            |
|----------------|------------------|---------------------------------------------------------|
| 1              | initialisation   | `S[n] = n` and `K[n] = key[n mod l]` loaded in parallel, `i = j = 0` |
| 2 .. 129       | KSA              | pairs (0,1) … (254,255), two swaps per clock            |
| 130            | PRGA init        | `i = j = 0`, no swap, `prga_en` high from here on       |
| 131 …          | PRGA             | one clock per request, pairs (1,2), (3,4) … (255,0), (1,2) … |
| 132 …          | keystream        | `z1, z2` of the previous PRGA clock, `z_valid` high      |

So n bytes of one core take `129 + 2 + n/2` clocks from start. The system
delivers 4 bytes per clock. At the top, `ksa_done` rises in clock 130, and
with `word_ready` high the first word is on `word` three clocks later
(request, Z read, FIFO). After that one word comes every clock.

## Interface of `rc4_quad_top`

| port                | dir | width    | meaning |
|---------------------|-----|----------|---------|
| `clk`, `rst_n`      | in  | 1        | single clock, synchronous active-low reset |
| `start`             | in  | 1        | one clock: load both keys, start both key schedules, drop queued words |
| `key[c][0:15]`      | in  | 2×16×8   | key bytes of core c (K0 for core 0, K1 for core 1) |
| `key_len[c]`        | in  | 2×5      | key length 1..16 (0 acts as 1, >16 as 16) |
| `ksa_done`          | out | 1        | both cores have finished the key schedule |
| `word`              | out | 32       | {Z0, Z1, Z2, Z3} |
| `word_valid`        | out | 1        | a word is waiting |
| `word_ready`        | in  | 1        | the word is taken at this edge when valid |
| `overflow`          | out | 1        | FIFO overrun; cannot happen by construction, kept for checking |
| `swap_we`, `swap_case` | out | 2, 2×3 | observation of the swap controller (for coverage) |

`key`, `key_len` must be stable in the `start` clock only. Lowering
`word_ready` stalls the cores. The controller requests a new pair only while
its 4-word FIFO has room for every word already requested, so nothing is
lost and both cores stay in step. A `start` in the middle of a stream
re-keys both cores and empties the FIFO.

## Files

| file | content |
|------|---------|
| `rtl/rc4_pkg.sv` | shared types (`byte_t`), `N = 256`, `KEY_MAX = 16`, phase enum |
| `rtl/rc4_i_counter.sv` | i counter: `i1`, `i2 = i1 + 1`, steps of 2 |
| `rtl/rc4_sbox_storage.sv` | 256-byte S-box register bank, quad read MUX, quad write DEMUX |
| `rtl/rc4_key_array.sv` | K[256] array, two read ports |
| `rtl/rc4_j_gen.sv` | unrolled j1/j2 generator with the `prga_en` key multiplexers |
| `rtl/rc4_swap_ctrl.sv` | merged two-swap controller (seven cases) |
| `rtl/rc4_z_gen.sv` | keystream addresses, pipeline register, 256:2 read |
| `rtl/rc4_dkp2_core.sv` | one 2-byte-per-clock DKP core (control and wiring) |
| `rtl/rc4_coproc_if.sv` | packing of the cores' bytes into 32-bit words, FIFO, handshake |
| `rtl/rc4_quad_top.sv` | two cores plus the interface controller |
| `tb/rc4_ref_pkg.sv` | plain software RC4 used as the reference by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Departures and own choices

Follows the paper:
- the block structure, with the names used in the comments;
- the unrolled `j` equations, the seven swap cases and the `Z2` address
  table;
- the counter sequence;
- the 1 + 128 clock key schedule;
- the PRGA initialisation clock without a swap;
- the `prga_en` switch;
- two cores of two bytes on one 32-bit word, with the lanes as the paper
  draws them.

Differs from the paper or fills a gap:
- **Z1 read address.** The paper's timing list and its unrolling table read
  Z1 from `S1`. Its block diagram feeds `S0[i1] + S0[j1]` straight into the
  S-box read, and that read happens after both swaps are written. Read
  literally, the diagram gives a wrong byte whenever that address equals
  `i2` or `j2`. This design follows the algorithm and exchanges `i2`/`j2`
  in the Z1 address (one comparator pair and a multiplexer on registered
  values).
- **One clock edge.** The paper reads the S-box on the falling edge and
  writes on the rising edge. Here reads are combinational and every
  register uses the rising edge, with the same one-clock read-modify-write.
  The per-entry hold flip-flops drawn in the storage block are therefore
  not separate registers.
- **Key loading.** The paper does not say how the key reaches the K array.
  Here the key bytes and length arrive in parallel with `start`. All 256
  entries are loaded in the initialisation clock, using a running index
  rather than modulo circuits.
- **Flow control.** The paper's processor "requests" keystream and waits
  for it, with no signal protocol given. Here the interface is `z_req` to
  the cores, `z_valid` back (the paper's "synchronisation signal"), and
  `word_valid`/`word_ready` to the processor (its "control signal"). The
  4-word FIFO and the request rule are this design's own.
- **Bus bit order.** The paper labels the lanes "PLB bus(24 to 31)" for Z0
  … "(0 to 7)" for Z3. They are used here as little-endian bit numbers
  (Z0 = `word[31:24]`). The PLB numbers its bits big-endian, so on that bus
  the lanes would appear mirrored.
- **Clocks.** The paper's clock control circuit (clk, bus_clk, main clock)
  is not specified and not built. Everything runs on `clk`.
- **Reset and re-key.** Reset is not specified; a synchronous active-low
  reset is used. The S-box resets to the identity. `start` during a run
  restarts.
- **Key split.** The caller supplies the two key parts K0 and K1
  separately.

Not built: the main processor and its XOR, the Ethernet/RS-232/PS2
interfaces, and the clock control circuit. The paper's other designs (1 to
5: the 1-byte-per-clock cores, the non-dynamic versions and the
four-core variant) are alternatives to this one and are not included.

## Verification

Every module has a self-checking testbench. Each one compares with values
computed independently in the testbench. Each ends with a line
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

- `tb_rc4_swap_ctrl`, `tb_rc4_j_gen`, `tb_rc4_z_gen`: random S-boxes and
  indices, with every equality case forced often. They are compared with
  two plain sequential RC4 iterations. All seven swap cases are required to
  occur.
- `tb_rc4_sbox_storage`, `tb_rc4_key_array`, `tb_rc4_i_counter`: compared
  with array and counter models.
- `tb_rc4_dkp2_core`: the published RC4 vectors (keys "Key", "Wiki",
  "Secret"), random keys of 1..16 bytes with and without stalls, a re-key
  in mid-stream, and the clock schedule: PRGA reached in clock 131 and the
  k-th pair valid in clock 131 + k.
- `tb_rc4_coproc_if`: lane order, ordering under random back-pressure,
  one word per clock at full rate, and the flush on re-key.
- `tb_rc4_quad_top`: the whole system at its default size.
  - It plays the processor: it encrypts random plaintext with the hardware
    words.
  - A software RC4 pair with the same keys decrypts the ciphertext.
  - About 600,000 words are checked, one word per clock is confirmed at
    full rate, and stalls and a re-key are exercised.
  - All seven swap cases happen in real keystreams; the rarest occur about
    once per 2^16 clocks.
  - The test runs in a few seconds.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rc4_pkg.sv tb/rc4_ref_pkg.sv tb/tb_rc4_quad_top.sv \
    --top-module tb_rc4_quad_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another. The simulator has no X values,
so everything that is read is reset or initialised.

## Size

A coarse synthesis of `rc4_quad_top` gives about 8,300 flip-flop bits. Per
core these are the 256-byte S-box and the 256-byte K array, plus the
counter, `j`, the pipeline registers and the FIFO. The 256-way read and
write multiplexers of the two banks make up most of the logic. The
critical path runs through the chain S-box read → `j1` → S-box read at `j1`
→ comparators → `t2` multiplexer.
