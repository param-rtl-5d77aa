# PARAM — a RISC-V core whose data path never holds plain data

A power side-channel attack correlates a chip's supply current with intermediate values of a
computation, such as `S(p ^ k)` in AES. The current is dominated by registers and buses that switch.
On an ordinary processor, every register, pipeline buffer and cache line that a secret passes
through is therefore a leak. The cache set that an access lands in leaks as well, because its
index is a fixed slice of the address.

This design removes that correlation at the architecture level, in three ways:

1. **Data are stored in obfuscated form.** Every word in the register file, the forwarding
   register file (PRF), the pipeline buffers and the data cache (with its line and hit buffers) is
   kept as `d' = O_k(d)`. `O_k` is a keyed, invertible 32-bit permutation. Plain values exist only
   inside the execute stage, between the de-obfuscators and the re-obfuscator, and in the
   memory-access logic that handles sub-word loads and stores.
2. **The cache set is chosen by an obfuscated address.** The tag and set bits of an address are
   passed through the same function, so a given address maps to an unpredictable set. That mapping
   changes whenever the key changes.
3. **Operand registers take data only for their own instructions.** In a unit that does not own
   the current instruction (mul/div, branch predictor), the operand register loads zero. In the
   ID-EX buffer, an operand slot the instruction does not read also loads zero. Secrets handled by
   the ALU therefore do not toggle registers elsewhere.

A key change request makes the remapping unit do four things:

- draw a new key from an on-chip LFSR;
- write back and invalidate the data cache;
- re-encode the register file and the PRF under the new key;
- switch the key.

The key never leaves the chip. The memory bus carries plain addresses and data.

## Block map

```
                   +------------------------ param_core -----------------------------+
  param_icache <-->| IF (param_bpu) | ID (param_regfile, param_prf) | EX | MEM | WB   |
                   |                   EX: param_alu, param_muldiv, 4x obfuscator    |
                   |                   MEM: 3x obfuscator                             |
                   +------------------------------------------------------|---------+
                                                                          |  38-bit obfuscated address,
                                                                          v  obfuscated data
  param_key_lfsr --> param_remap_unit --key--> core, param_dcache (LB, HB, 3x obfuscator)
                         | hold/idle, flush, RF/PRF rewrite                |
  param_icache ---------------------------------------------+             |
                                                            v             v
                                                     param_cache_ctrl --> bus (plain)
```

All modules share `param_pkg` (widths, the affine matrix, round constants, RV32IM encodings and the
`mem_req_t` bus struct).

## The obfuscation function

`param_obfuscator` is a 4-round Feistel network on a 32-bit word, built from combinational logic
only.

- **Halves and keys.** The word splits into `L = d[31:16]` and `R = d[15:0]`. The 64-bit key holds
  four 16-bit round keys, with `K_i = key[16i +: 16]`.
- **Rounds 1 to 3** compute `(L, R) <- (R, L ^ F_i(K_i, R))`.
- **Round 4** computes `L ^ F_4(K_4, R)` without swapping, so the network is its own structural
  inverse.
- **Inverse.** The `inverse` input applies the round keys in reverse order, together with their
  round constants.

`param_affine` is the round function `F(K, R) = A·(R‖K) ⊕ C` over GF(2):

- `A` is a fixed 16×32 bit matrix (`param_pkg::AFFINE_ROW`). Row `i` gives output bit `y_i`.
- Bit `j` of a row selects input `x_j`. Inputs `x_0..x_15` are `R[0..15]` and `x_16..x_31` are
  `K[0..15]`.
- Each output bit is the parity of the selected inputs, XORed with one bit of the round constant.
- The four rounds use the same matrix and differ only in their constants.

The function is a permutation for every key, because a Feistel network is invertible whatever its
round function is. The round function need not be invertible, and this one is not.

Address obfuscation uses the same function. For a byte address `a`:

```
a' = { O_k({6'b0, a[31:6]}), a[5:0] }        // 38 bits; the 6 offset bits stay plain
set = a'[12:6]  (7 bits)     tag = a'[37:13]  (25 bits)
```

The obfuscated field keeps all 32 bits. Its lower 7 bits choose the set and the rest form the tag.
The cache can therefore de-obfuscate a stored tag and set back to the plain line address when it
writes a line back.

## Where values are plain

| place | contents |
|---|---|
| register file, PRF, ID-EX / EX-MEM / MEM-WB operand and result fields | `O_k(d)` |
| data cache lines, line buffer (LB), hit buffer (HB) | `O_k(d)` |
| data cache tags / set index | part of `O_k(a[31:6])` |
| execute stage, between its de-obfuscators and re-obfuscator | plain |
| memory stage, sub-word extract / merge | plain (for the length of one combinational path) |
| instruction cache, fetch, decode, PC, branch predictor | plain (control path, not protected) |
| bus to memory | plain |

`x0` is never written. Execute reads it as a plain zero, so a stored `O_k(0)` is never needed.

Execute de-obfuscates both operands, runs the ALU or mul/div unit, and re-obfuscates the result. It
also computes the obfuscated address of a load or store, and the store data travels to memory
still obfuscated.

Memory access handles sub-word loads and stores. It de-obfuscates the cache word and the store
data, extracts or merges the byte or half-word, and re-obfuscates the result before it reaches the
cache, the PRF or MEM-WB. A full-word store writes the obfuscated word unchanged.

## Pipeline (`param_core`)

The core is a classic 5-stage RV32IM pipeline: IF, ID, EX, MEM and WB.

- **Branch prediction.** IF asks `param_bpu` for a prediction. The predictor is a bimodal table of
  256 two-bit counters plus a 32-entry BTB, both indexed by PC bits. Branches and jumps resolve in
  EX. A misprediction flushes IF-ID and ID-EX and redirects fetch.
- **Forwarding.** ID reads the register file. It forwards from the EX output (ALU results only)
  and from the PRF. The PRF has two slots, holding the results of the instructions in MEM and in
  WB, and the younger slot wins. Forwarded values are obfuscated like everything else.
- **Stalls.** ID stalls in three cases:
  - load-use, while the load is in EX or MEM;
  - while the mul/div unit is busy;
  - while the remapping unit holds issue.
- **Memory stage.** MEM stalls the whole pipeline while the data cache misses.
- **Halting.** ECALL and EBREAK halt the core once the pipeline has drained.

`param_muldiv` multiplies in 2 cycles and divides in 35 (restoring division), counted from the
start cycle to `done`. Its operand register loads `a`/`b` only on `start`; otherwise it loads zero.
The branch predictor's update register is gated the same way, by `upd_valid`.

## Caches and the memory side

- **`param_icache`.** 16 KB, direct mapped, 256 lines of 64 bytes. It is not obfuscated. A miss
  fetches the line word by word.
- **`param_dcache`.** 16 KB, 2-way set associative, 128 sets, 64-byte lines, write-back,
  write-allocate, LRU replacement. Everything in it is obfuscated.
  - **Lookup.** A request carries the 38-bit obfuscated address and, for stores, an obfuscated
    word. The tag arrays, the LB and the HB are searched in the same cycle.
  - **HB.** One cycle after a hit in the array, the hit line is copied into the HB, merging that
    cycle's store.
  - **Miss.** A dirty victim is written back first. The controller de-obfuscates the victim's
    tag/set into the plain line address and de-obfuscates each word. The 16 words of the new line
    then arrive one at a time, critical word first, are obfuscated, and collect in the LB.
  - **Early restart.** A missing load is answered in the cycle its word arrives. It then passes
    into MEM-WB and the PRF while the rest of the line streams in. Any later request waits until
    the line is installed, one cycle after its last word. A missing store waits for the install.
    The LB keeps the last refilled line.
  - **Busy.** The cache reports `busy` during a miss, so a key change cannot start under an
    unfinished refill.
  - **Flush.** The flush walks all 256 lines, writes back the dirty ones and invalidates
    everything. The remapping unit uses it.
- **`param_cache_ctrl`.** Shares one word-wide bus between the two caches. A request is
  `valid/ready` carrying `{we, addr, wdata}`, followed by a `resp_valid` pulse that carries the read
  data or acknowledges a write. The data cache wins ties, and one request is outstanding at a time.

## Key change (`param_remap_unit`)

`param_key_lfsr` is a 64-bit Fibonacci LFSR (taps 64, 63, 61, 60) that steps every cycle. A pulse
on `key_change_req` runs this sequence:

1. **Capture.** Latch the LFSR state as the new key `kn`.
2. **DRAIN.** Hold issue in ID until EX, MEM and WB are empty and no data-cache miss is pending.
3. **FLUSH.** Write back and invalidate the data cache, still under the old key `ko`. Memory then
   holds plain data and the cache is empty, so no set mapping survives the change.
4. **RF.** Rewrite `x1..x31` one per cycle as `O_kn(O_ko⁻¹(d'))`.
5. **PRF.** Rewrite both PRF slots in the same way.
6. **COMMIT.** Switch `key` to `kn`, release the core, and increment `remap_count`.

A request that arrives during a change is remembered and served afterwards. A change costs about
300 cycles: 256 to walk the cache, plus 33 rewrites and a few cycles of handshake. The write-back
traffic of the dirty lines comes on top, and so do the later misses.

## Departures from the published design

- **Width.** The datapath is 32-bit (RV32IM), matching the 32-bit obfuscation function. The
  original core is 64-bit.
- **Affine matrix.** Only the first round's matrix is published, and it is used in all four
  rounds. Two of its printed rows have the wrong length:
  - row `y2` has 31 entries and was padded with a final 0;
  - row `y14` has 33 entries and its last entry was dropped.
- **Constants of this design's own choosing.** The round constants are `5A3C, C3A5, 9E37, 7F4A`,
  since none are published. The LFSR polynomial and seed, the reset key, and the predictor sizes
  are also this design's own.
- **Cache layout.** The data cache is 128 sets × 2 ways. That reconciles a published total of
  16 KB with a published count of 128 lines.
- **Bus.** A simple word bus replaces the AXI4 / TileLink fabric.
- **Key change trigger.** The request is a pin, not a CSR write.
- **Not built:** CSRs, traps and interrupts, the FPU, virtual memory and `FENCE.I`.
- **Unit register gating.** Gated unit registers load 0. The published text gives both 0 and an
  all-ones constant for this, and 0 was used.
- **Key quality.** The LFSR is not a cryptographic key source. A real chip would use a TRNG or a
  keyed generator.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Example with plain verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/param_pkg.sv tb/tb_ref_pkg.sv tb/tb_asm_pkg.sv tb/tb_prog_pkg.sv tb/tb_param_top.sv \
  --top-module tb_param_top -Mdir obj_top -o sim
./obj_top/sim
```

The modules are found through `-Irtl -Itb`. Support files in `tb/`:

- `tb_ref_pkg` is an independent model of the obfuscation function. It is written from strings of
  the matrix rows.
- `tb_asm_pkg` is an RV32IM encoder.
- `tb_prog_pkg` generates the self-checking test program and its expected results.
- `param_mem_model` is a behavioural word memory with a configurable latency.

`tb_param_top` runs the processor at its default sizes. It exercises the 16 KB caches, with many
misses and write-backs and both buffers hitting. The program mixes ALU, branch, load and store,
sub-word and mul/div code. Two key changes are requested while it runs. The testbench checks:

- the final memory image, which is correct only if every line left the chip de-obfuscated under
  the key it was written with;
- that a register holds `O_k(d)` under the key currently in use, not `d`;
- that each mechanism occurred at least once: retire, misprediction, load-use stall, data-cache
  stall, mul/div stall, forwarding from EX and from the PRF, miss, write-back, HB hit, LB hit, early restart
  and key change.

`tb_param_core` runs the same program against behavioural caches.

`tb_param_aes` runs AES-128 as software on the default-size processor. The program does the key
expansion and then encrypts 8 blocks. SubBytes is done byte by byte through a 256-byte table, with
separate loops for ShiftRows, MixColumns and AddRoundKey. A key change happens halfway. The
testbench computes the S-box from its definition and checks its own reference model against the
FIPS-197 example. It then compares every ciphertext byte. It retires 30,407 instructions in 42,452
cycles, about 5.3K cycles per block including the one-off key expansion and the cache misses.

## Test results

All testbenches pass. Each unit testbench compares the unit against an independent model. The
unit testbenches are run at reduced sizes where that shortens the run: predictor tables 64/8, the
instruction cache at 16 lines, the data cache at 16 sets. The two full-processor testbenches run at
the default sizes. Each block also has a version with a deliberate fault, and its testbench fails
against it. Examples:

- an ungated operand register;
- de-obfuscating with the wrong key order;
- re-encoding under the old key;
- a missing load-use wait.

What these tests do not cover:

- Leakage itself. No power traces or leakage metrics are simulated. The design only reproduces
  the mechanisms meant to reduce leakage.
- Timing closure and FPGA resource use. These were not measured, and the design has several
  obfuscators on its critical paths.

