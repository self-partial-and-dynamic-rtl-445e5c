# A self-reconfiguring AES coprocessor: RTL

This design is an AES coprocessor for an FPGA system. The key length picks the
hardware. AES-128, AES-192 and AES-256 are each built as a separate *partial module*.
Only one of them sits in a reconfigurable region of the FPGA at a time. When the
application changes the key length, the system reconfigures that region while it runs.
An embedded soft processor, the *manager*, starts the change, and the static logic
around the region keeps working. The published design this RTL follows (Alaoui Ismaili
and Moussa, *Self-Partial and Dynamic Reconfiguration Implementation for AES using
FPGA*) gives:

* the AES transformations;
* the key/round table;
* a four-state configuration controller;
* the block diagrams of the system;
* the cycle count per block of its AES implementation: 250, 300 and 350 cycles for
  AES-128/192/256.

It gives no datapath. This RTL supplies one that meets those cycle counts, and all the
logic of the system that can be written as RTL.

Plain synthesizable RTL cannot swap bitstreams. Here the three partial modules are
therefore one core, and the key length is a mode of that core. Everything around the
swap is kept as the system sees it:

* the decision to reconfigure;
* which bitstream to load;
* the request/acknowledge handshake with the configuration port;
* isolation of the region while it is being rewritten;
* the key reload that follows.

## System structure

```
      manager processor (outside)                 configuration access port (outside)
        |  cfg_we/cfg_key_len/cfg_key                ^ reconf_req, pr_sel   | reconf_ack
        |  blk_start/blk_decrypt/blk_din             |                      v
  +-----v--------------------------------------------+----------------------+----+
  | aes_sdpr_top                                                                 |
  |  +----------------------------+   core_key_start/len/key   +---------------+ |
  |  | aes_config_ctrl            |--------------------------->| aes_core      | |
  |  |  configuration register    |   region_en (isolation)    |  (the region) | |
  |  |  FSM START/128/192/256     |<---------------------------|  aes_key_expand |
  |  +----------------------------+   core busy                |  aes_sbox     | |
  |                                                            |  aes_mixcolumn| |
  |                                   blk_dout, blk_done <-----+---------------+ |
  +------------------------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `aes_pkg` | Key-length type; the Nk and Nr functions; GF(2^8) arithmetic; computed S-box functions |
| `aes_sbox` | SubBytes for one byte, forward or inverse |
| `aes_mixcolumn` | MixColumns or InvMixColumns for one column |
| `aes_key_expand` | Key schedule, one word per cycle, into a round-key memory of 15 × 128 bits |
| `aes_core` | Byte-serial encrypt/decrypt engine. Holds ShiftRows (as byte addressing) and AddRoundKey |
| `aes_config_ctrl` | Configuration register, configuration FSM and reconfiguration handshake |
| `aes_sdpr_top` | Connects the two and brings the external parts out as ports |

These parts of the described system are not RTL and are reached through ports:

* the soft processor and its software;
* the internal configuration access port (ICAP);
* the bitstream cache and the host that stores the bitstreams;
* the bus macros at the region boundary;
* the attack detector;
* an "initialisation" block that the source only names.

## The configuration controller

The manager writes the *configuration register* with `cfg_we`: a key length and a key.
The key is left-aligned in 256 bits. The controller has four global states:

| state (`cfg_state`) | meaning |
|---|---|
| 0 `START` | nothing configured since reset |
| 1 `AES128`, 2 `AES192`, 3 `AES256` | that variant is (being) loaded in the region |

The first write leaves `START` for the state of the written key length. A later write
with a different key length (a *change of length*) goes straight to the new length's
state. Every move into a crypto state needs a different partial module, so the
controller:

1. raises `reconf_req`, with `pr_sel` naming the bitstream (0 = AES-128, 1 = AES-192,
   2 = AES-256);
2. holds both until the configuration port answers with a one-cycle `reconf_ack`;
3. pulses `core_key_start` in the cycle after the acknowledge, and the key is expanded
   into the freshly loaded region.

While the request is open, `region_en` is low. The region then refuses blocks:
`blk_ready` is low and `blk_start` is ignored.

A write with the same key length as the loaded one changes only the key. No
reconfiguration takes place, and the key goes to the core in the next cycle.

`cfg_ready` is low while any of these is open:

* a reconfiguration;
* a key hand-over or key expansion;
* a block.

A write at such a time is dropped and counted in `dropped_writes`. `reconf_count`
counts the requests. An assertion in `aes_config_ctrl` checks the handshake: a request
and its `pr_sel` hold steady until acknowledged.

Departures and choices:

* **Length-change arcs.** The source's state diagram draws these arcs as a ring:
  128→256, 256→192, 192→128. Its text says the key length can be changed at run time
  without stopping the system. This FSM goes directly to the requested length, so one
  change is one reconfiguration.
* **"Best parameters".** The source describes a second controller. It computes the
  "best parameters under input constraints" and writes them into the configuration
  register. Those constraints are not given. Here the register holds only the key
  length and the key, and the bitstream choice follows from the key length alone.
* **Run time or power-up only.** One sentence of the source limits the controller to
  power-up configuration. The state diagram and the conclusion have it act at run time.
  This RTL follows the latter.

## The AES core: 25 cycles per round

The reported implementation needs 250, 300 and 350 clock cycles per block for 10, 12
and 14 rounds, which is 25 cycles per round. The core meets this exactly. It keeps the
state in sixteen byte registers and a second, working copy. It uses **one S-box and
one MixColumns unit**, walked over the state:

| step | encryption | decryption |
|---|---|---|
| 0–15 | byte k (row r, column c) ← S(state[r][(c+r) mod 4]): SubBytes and ShiftRows together | byte k ← S⁻¹(state[r][(c−r) mod 4]): InvShiftRows, InvSubBytes |
| 16–19 | MixColumns, one column per step. The last round leaves the column as is | AddRoundKey with round key Nr−round, one word per step |
| 20–23 | AddRoundKey with round key `round`, one word per step | InvMixColumns, one column per step. The last round leaves the column as is |
| 24 | working copy → state; next round, or result out | same |

Byte k of the state is row k mod 4, column k div 4. ShiftRows needs no hardware of its
own: it is the address of the byte the S-box reads. The first AddRoundKey is done as
the block is loaded: round key 0 for encryption, round key Nr for decryption. The order
of operations follows the usual flow diagrams:

* **Encryption:** AddRoundKey; then Nr−1 rounds of SubBytes, ShiftRows, MixColumns,
  AddRoundKey; then a final round without MixColumns.
* **Decryption:** AddRoundKey with the last round key; InvShiftRows, InvSubBytes,
  AddRoundKey; then repeated rounds of InvMixColumns, InvShiftRows, InvSubBytes,
  AddRoundKey.

The last round idles through its MixColumns steps so that every round is 25 cycles. The
division into 16 + 4 + 4 + 1 steps is this design's choice. The source gives only the
total.

**Timing.** `start` is accepted in a cycle where `ready` is high. `done` pulses exactly
Nr × 25 clock edges later, and `dout` then holds the result until the next block ends.
`ready` is high again in the cycle `done` pulses, so blocks can follow each other with
one idle cycle. At the clock rates reported for a Virtex-II part (78.59, 71.78 and
70.975 MHz), the cycle counts give:

| variant | throughput |
|---|---|
| AES-128 | 40.2 Mbit/s |
| AES-192 | 30.6 Mbit/s |
| AES-256 | 26.0 Mbit/s |

**Block length.** The block is always 128 bits, as in AES. Rijndael, from which AES
was taken, also allows other block lengths. This design does not support them.

**Byte order.** Blocks and keys follow the AES standard's hex notation: the first byte
is in the most significant bits. A 128-bit key sits in `key[255:128]`, a 192-bit key in
`key[255:64]`.

**S-box.** The S-box is computed: the inverse in GF(2^8) as a^254, then the affine
transform with constant 0x63. The inverse S-box uses the inverse affine transform with
constant 0x05, then the GF inverse. The reported implementation used six block RAMs per
variant, probably for S-box tables. Here the S-box is logic. This keeps the RTL free of
tables, and a synthesis tool may map it either way.

## The key schedule

`aes_key_expand` takes `start` together with a key length and a key. It then produces
the 4(Nr+1) words of the standard key schedule, one per cycle: 44, 52 or 60 cycles.
Word i goes into row i/4, column i mod 4 of a 15-row round-key memory.

* An 8-word shift register holds the last Nk words, newest first, so w[i−Nk] is entry
  Nk−1.
* Four S-boxes form SubWord.
* Rcon is doubled in GF(2^8) at each use.

The schedule is expanded once per key, not on the fly. Decryption needs the round keys
in reverse order, and the memory serves both directions.

The read port is combinational. On an FPGA this maps to distributed RAM. For a
block-RAM mapping, add a register stage on the read address and start the reads one
cycle earlier.

## Interface of `aes_sdpr_top`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_key_len`, `cfg_key` | in | 1, 2, 256 | configuration register write |
| `cfg_ready` | out | 1 | a write now will be taken |
| `reconf_req`, `pr_sel` | out | 1, 2 | bitstream request to the configuration port |
| `reconf_ack` | in | 1 | one-cycle answer: bitstream loaded |
| `blk_start`, `blk_decrypt`, `blk_din` | in | 1, 1, 128 | start a block |
| `blk_ready` | out | 1 | region configured, key expanded, idle |
| `blk_done`, `blk_dout` | out | 1, 128 | result pulse and data |
| `active_len`, `key_loaded`, `cfg_state` | out | 2, 1, 2 | status |
| `reconf_count`, `dropped_writes` | out | 16, 16 | event counters |

`cfg_key_len` and `active_len` use `aes_pkg::key_len_e`: 0 = 128, 1 = 192, 2 = 256.

A full key change with reconfiguration takes:

* the bitstream load time (outside this design);
* 1 cycle for the acknowledge;
* 1 cycle for the key hand-over;
* the 44/52/60 cycles of key expansion;

after which `blk_ready` rises.

## How far to trust it

Each block has a self-checking testbench in `tb/`. The reference is
`tb/aes_ref_pkg.sv`, a separately written behavioural AES. Its S-box finds inverses by
search instead of exponentiation, and its cipher works on a whole 4×4 state.

| testbench | checks |
|---|---|
| `tb_aes_sbox` | all 256 inputs, both directions, and published S-box entries |
| `tb_aes_mixcolumn` | published column examples, 500 random columns, inverse round trip |
| `tb_aes_key_expand` | published last words of the AES-128/192/256 expansion examples, every round key of random keys, expansion time |
| `tb_aes_core` | the standard's cipher examples for all three key lengths, both directions; random keys and blocks; Nr × 25 latency |
| `tb_aes_config_ctrl` | every FSM transition, handshake hold, same-length reload, dropped writes |
| `tb_aes_sdpr_top` | whole system: START → 128 → 256 → 192 → 192 (new key) → 128 → 256, known-answer and random blocks in each, refused starts and dropped writes; counts each mechanism |
| `tb_aes_workloads` | 8 back-to-back random blocks per key length; cycles per block and throughput |

Each testbench was also run against a copy of its block with one deliberate bug, and
caught it. The bugs were:

* wrong order in the inverse S-box;
* swapped MixColumns coefficients;
* Rcon that never advances;
* ShiftRows in the wrong direction;
* no reconfiguration on a change of length;
* a region that is not isolated.

The AES part is checked against the standard's published answers and can be trusted as
AES. The system part matches the source's diagrams in structure. Its signal-level
behaviour (handshake, register layout, refusals) is this design's own. The published
resource figures (under 110 flip-flops per variant) cannot be compared with this RTL:

* it keeps the state, the working copy and the key in registers;
* it holds all three variants in one core;
* it computes the S-box instead of reading block RAM.

## Simulating and changing it

Simulate with Verilator 5, for example the whole system:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_sdpr_top.sv --top-module tb_aes_sdpr_top
./obj_dir/Vtb_aes_sdpr_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a watchdog
that fails it if it hangs. All testbenches run at the design's only size. There are no
size parameters: the widths are fixed by AES.

Things that are simple to change:

* **Round length.** The per-round step schedule is the `step` decode in `aes_core`.
  `ROUND_CYCLES` in `aes_pkg` must match it.
* **Bitstream numbering.** `pr_sel` is the key-length code. Change its assignment in
  `aes_config_ctrl` to map onto other bitstream numbers.
* **Ring transitions.** To follow the ring drawing literally, change the
  `state_of(cfg_key_len)` target in `aes_config_ctrl`.
