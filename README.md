# RC4 key stream coprocessor: one byte per clock

RC4 is a stream cipher built on a single 256-byte permutation S. Each key
stream byte takes one step: advance i, update j from S[i], swap S[i] and
S[j], then read S[S[i] + S[j]]. In hardware the awkward part is the swap. Two
entries are read and the same two are written back crossed. In a plain
single-edge design that costs more than one clock per byte.

This design puts a whole RC4 step into one clock by using both clock edges:

* **falling edge:** compute the new i and j, and capture S[i] and S[j];
* **rising edge:** write the two captured values back crossed, and register
  the output byte Z.

The S-box is a register bank, not a RAM. So one multiplexer can read S[i]
and S[j] at the same time, and one demultiplexer can write S[j] and S[i] at
the same time. A key schedule of n output bytes then needs
257 + (1 + n) clocks:

* one initial clock;
* 256 swap clocks of the key scheduling algorithm (KSA);
* one start-up clock of the key stream generator (PRGA);
* one clock per byte.

The RTL follows the architecture of R. Paul et al., "A simple 1-byte 1-clock
RC4 design and its efficient implementation in FPGA coprocessor for secured
ethernet communication". There the RC4 engine is a coprocessor beside a
MicroBlaze soft processor. The processor requests key stream bytes and XORs
them with the text, and two boards exchange the cipher text over Ethernet.
This RTL covers the coprocessor. The processor, the serial port and the
Ethernet link are modelled in the testbench.

## Block structure

```
                         main clock
                              |
            +-----------------+--------------------------+
            |                 |                          |
   rc4_clock_gating     rc4_mode_ctrl ---- prga_en ------+--> sel
   ksa_clk  prga_clk     (falling edge)                  |
      |        |                                         |
   ksa_unit    prga_unit  <--- z_req        storage_block (S-box, main clock)
   counter i   counter i  ---> z, z_valid    256 x 8 register bank
   K[256]      j adder                       256 x 8 hold flip-flops
   j adder     t adder                       dual-select MUX / DEMUX
      |           |                          read ports, Z port (MUX3)
      +--- KSA port (MUX0/DEMUX0) --------->|
                  +--- PRGA port (MUX2/DEMUX2) ->|
```

| File | Role |
|---|---|
| `rtl/rc4_pkg.sv` | constants (256 entries, 8-bit bytes, keys up to 16 bytes) and types |
| `rtl/storage_block.sv` | the S-box: register bank, hold flip-flops, swap MUX/DEMUX, read ports, Z port |
| `rtl/ksa_unit.sv` | key schedule: K array, one-round counter, j = j + S[i] + K[i] |
| `rtl/prga_unit.sv` | key stream: counter, j = j + S[i], t = S[i] + S[j], Z register, request handshake |
| `rtl/rc4_mode_ctrl.sv` | `prga_en`: which unit owns the S-box |
| `rtl/rc4_clock_gating.sv` | `ksa_clk` and `prga_clk`, each running only in its own mode |
| `rtl/rc4_coprocessor.sv` | top level |

## The storage block and its two-edge swap

The storage block is the centre of the design, and its timing decides
everything else.

* `bank[256]` holds S. It is written only on the **rising** edge. On a swap
  it takes `bank[i] <= s_j` and `bank[j] <= s_i`. On `init` it loads the
  identity, S[n] = n, in one clock.
* `hold[256]` is one 8-bit flip-flop per entry. All 256 load from the bank on
  every **falling** edge.
* The dual-select MUX outputs `s_i = hold[i]` and `s_j = hold[j]`. The `i`
  and `j` come from the port pair chosen by `sel`: the KSA's or the PRGA's.

Between a falling edge and the next rising edge, `hold` is a frozen copy of
S. The swap writes from that copy, so it is a single clean exchange. It is
correct even for i = j, because both writes then carry the same value.

Each unit must compute its new j on the falling edge. For that it needs
S[new i] as it is *after* the previous rising edge's swap. The hold copy is
only being captured at that moment, so it cannot supply this value. Each unit
therefore has its own combinational read port into the bank (`*_rd_addr`,
`*_rd_data`). The source diagrams draw the j adder fed from the storage
block's S[i] output. The separate port is how this RTL makes that
connection well defined.

The Z port (MUX3) returns S[t] as it will be *after* the swap being written
on the same rising edge. If t equals i, it forwards the old S[j]. If t equals
j, it forwards the old S[i]. Otherwise it returns `hold[t]`. This is why Z
can be registered on the same edge as the swap and still match RC4, where
the output is read after the swap.

## Key schedule (`ksa_unit`)

On the rising edge where `start` is high:

* the S-box loads the identity;
* the K array loads the key repeated, `K[n] = key[n % key_len]`.

Each entry's modulo has a constant n, so it is a small table indexed by
`key_len`. Then, on each of the next 256 falling edges, the unit:

1. takes i from a one-round counter (0 to 255);
2. computes j = j + S[i] + K[i], with K[i] chosen by a 256:1 MUX from the K
   array;
3. raises `swap` for the following rising edge.

The first of these edges uses 0 for the old j. The j register changes only on
falling edges, so "j = 0" cannot be a write of its own.

`finish` is high through the falling edge that ends the 257th clock. A new
`start` restarts the schedule at any time.

## Key stream (`prga_unit`) and the processor handshake

The PRGA's first rising edge is marked by `prga_fresh` and is the
"initialise j = 0" clock. After it, every falling edge with `z_req` high:

* advances i (1, 2, ..., 255, 0, ...);
* sets j = j + S[i];
* requests a swap.

The next rising edge swaps and registers Z, with `z_valid` high for one
clock. On a falling edge with `z_req` low nothing advances, and the next
rising edge has no byte. This is a stall: the processor waits for its
acknowledge.

Timing from the processor's side, with the request held high from `start`
(edges counted from the rising edge that samples `start`):

| rising edge | event |
|---|---|
| 0 | S-box identity and K array loaded |
| 1 ... 256 | KSA swaps for i = 0 ... 255 |
| (falling edge after 256) | `prga_en` rises |
| 257 | PRGA start-up, j = 0 |
| 257 + n | byte n: `z_valid` high, `z` valid until the next rising edge |

So a key and n bytes take 257 + (1 + n) clocks. After the first byte there
is one byte per clock for as long as `z_req` stays high. `z_req` may be high
during the key schedule; it has no effect until `prga_en` is 1. Drive all
inputs just after a rising edge. `z_req` is sampled on the falling edge, so
the host can decide each clock's request from the byte it has just
received.

The coprocessor outputs the key stream only. Encryption and decryption are
the same operation, an XOR with the text, done by the processor.

## Mode switch and clock gating

`prga_en` decides which unit owns the S-box. It is 0 after reset and after
each `start`, and 1 from the end of the 257th clock on. `rc4_mode_ctrl`
changes it only on the falling edge, while the main clock is low.
`rc4_clock_gating` derives:

```
ksa_en   = !prga_en
ksa_clk  = clk & ksa_en
prga_clk = clk & prga_en
```

Because the enable only moves while `clk` is low, these AND gates never cut
a pulse short, and no latch-based gating cell is needed. On an FPGA the same
function is a clock buffer with an enable.

The mode bit lives on the ungated main clock, not inside the KSA. This lets
a new `start` clear it while the KSA clock is stopped. The S-box also stays
on the main clock, because both modes use it. When the PRGA clock is stopped
its `z_valid` register keeps its last value, so the top masks it with
`prga_en`. Parameter `GATING = 0` feeds the main clock to both units (the
ungated arrangement); the units then idle through their enables.

## Where this RTL departs from, or adds to, the source description

* **Processor interface.** The source shows only "START", "Request for Z",
  the key stream Z and an acknowledge that releases the processor. The
  `start` / `key` / `key_len` / `z_req` / `z_valid` signals and their timing
  are this design's own. So are the asynchronous active-low reset of the
  control registers and the restart on a new `start`.
* **Z.** The clock-by-clock description writes the first key stream byte as
  `(S[i] + S[j]) % 256`. The algorithm listing and the PRGA description give
  `Z = S[t]` with t that sum. This RTL follows the algorithm, `Z = S[t]`, and
  matches published RC4 test vectors.
* **Read ports for the j adders and forwarding on the Z port.** These are
  added so that a whole step fits one clock with well-defined values (see
  above).
* **Port direction.** The source describes the storage block's data ports as
  inout. Here they are separate inputs and outputs. The crossed MUX-to-DEMUX
  wiring is kept inside the block.
* **Key length.** 1 to 16 bytes. The source names 5 to 16 as typical. An
  assertion flags a `key_len` of 0 or over 16, which is then treated as 1.
* **Mode control.** The mode control is a block of its own on the main clock,
  not a register inside the KSA block.
* **Not in the RTL.** The soft processor, the RS232 port and the Ethernet/UDP
  path are vendor parts used by the original system. The testbench stands
  in for them with tasks and a byte queue. The source's software-only
  variant is a baseline and is not built.

## Size

After coarse synthesis, the top holds:

* 6,144 register bits: S-box bank, hold bank and K array, 2,048 each;
* 56 control flip-flops.

That is 6,200 flip-flops in all; the source reports 6,404 for its
coprocessor system. The K-array fill is the largest block of logic: 256
entries, each a 16-way choice by key length.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
with a watchdog. The reference is `tb/rc4_ref_pkg.sv`, a line-by-line
software RC4 (KSA and PRGA) with no knowledge of the hardware timing.

| Testbench | What it checks |
|---|---|
| `tb_storage_block` | random swaps on both ports, i = j cases, held values, read ports, forwarded S[t], final bank contents |
| `tb_ksa_unit` | keys of every length 1..16; `finish` exactly 256 edges after start; S equals the software KSA; restart in mid-schedule |
| `tb_prga_unit` | PRGA from a scrambled S: first byte on the second PRGA edge, one byte per clock, 600 bytes (i wraps), random stalls |
| `tb_rc4_mode_ctrl` | `prga_en` and `prga_fresh` against a reference; changes only while the clock is low |
| `tb_rc4_clock_gating` | gated clocks equal clk AND enable; edge counts per mode |
| `tb_rc4_coprocessor` | two boards at default parameters, sender and receiver (details below) |
| `tb_rc4_coprocessor_nogate` | the same checks with `GATING = 0` |
| `tb_rc4_long_stream` | three keys, 167,800 bytes (1,342,400 bits) each, the length used per key for randomness testing: every byte and the clock count |

`tb_rc4_coprocessor` checks:

* the cipher text against the software model;
* the test vectors for key "Secret" and for key 01 02 03 04 05;
* that the receiver recovers the text;
* the 257 + (1 + n) clock count;
* that no gated clock ticks in the wrong mode.

It also counts key schedules, mode switches, stalls, i wrap-around, re-keys
while streaming and gated clock cycles, and fails if any of them never
happens.

The RTL also carries assertions, which fire in any simulation run with
`--assert`:

* the storage block never sees an identity load and a swap on the same edge;
* the KSA gets a `key_len` in range;
* the KSA and the PRGA never swap in the same clock;
* `prga_en` rises only on the falling edge after the key schedule's last
  swap.

To simulate, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_rc4_coprocessor rtl/rc4_pkg.sv tb/rc4_ref_pkg.sv \
  tb/tb_rc4_coprocessor.sv
./obj_dir/Vtb_rc4_coprocessor
```

Any other testbench runs the same way with its name. The two-state
simulator starts registers at random values. Only the S-box bank, the hold
bank and the K array have no reset, and they are always loaded before they
are read.

## Changing it

* The S-box size and the byte width are fixed by RC4. All index arithmetic
  relies on 8-bit wrap-around, so `SBOX_N` and `BYTE_W` are not meant to
  change.
* `KEY_MAX` in `rc4_pkg` sets the longest key. `klen_t` follows it.
* A memory-based S-box would lose the single-clock swap. The two reads and
  two writes per clock are what the register bank provides.
