# A RISC-V core that never holds a plain value

Power and electromagnetic side channels leak whatever a chip's wires carry.
This design protects a small RISC-V processor against them without changing
its software: every signal in the protected core is split into two random
*shares* whose XOR is the real value, so no single wire, register or memory
word ever carries a secret in the clear. The masked core is made
mechanically from the gate netlist of an ordinary core, so the method
applies to any synchronous design. Three more mechanisms support it:

* a clock-edge randomizer that skips a programmable share of clock edges,
  so that power traces no longer line up in time;
* address scrambling and data encryption with per-session keys in front of
  the two SRAMs, which hold only one share;
* a random number generator built from a jittery ring oscillator and an
  LFSR/cellular-automaton post-processor, which supplies 243 fresh bits on
  every system clock.

The RTL describes a testchip with the unprotected core (here called NCM) and
the masked core (BM). A third variant of the chip, the same masked netlist
built from differential domino cells, is a transistor-level design. It is
not part of this RTL, but the top has ports for it.

## Chip organisation

```
 ro_clk ─► clk_divider ─► sys_clk ─► clk_randomizer ─► core_clk ─► cores, SRAMs
 rng_ro ─► clk_divider ─► rng_pad (to a pin)
                     └──► rng_sampler ─► rng_postproc ─► rng_xor_net ─► rand[242:0]
                              ▲ clk_divider (sample tick)   (LFSR-43 + CASR-37)

 bitserial_core (NCM) ───────────────────────────────► mux ─► sram_sp 1024x32
 bm_core (BM)        ─┐                                     └► sram_dp 512x2
 ddl_* ports (DDL)   ─┴─► mux ─► mem_protect (main) ──► mux
                              └► mem_protect (RF)   ──► mux
 test-access port (tl_mem_*) overrides the main-memory port
```

`secure_rv_top` contains all of the above. The ring oscillators, the test
logic and the DDL core are outside it, and their signals are ports. The test
logic selects the core (`core_sel`), sets the divider ratios, the skip rate
and the perturbation period, supplies the four session keys, and loads and
reads main memory through `tl_mem_*`. The core that is not selected stays in
reset. Each core reset is passed through one `core_clk` register, so it
releases in step with the clock.

## The bit-serial core (`bitserial_core`)

The core implements RV32I with one-bit-wide datapath. CSRs, interrupts,
ECALL/EBREAK and M are left out; SYSTEM and FENCE execute as no-ops. Its
wide state lives in three 32-bit shift registers:

* PC;
* BUF: a branch, load or store address, or the value being shifted;
* DAT: the fetched instruction, store data or load data.

Operands stream LSB first through serial adders whose carries sit in
flip-flops.

| instruction | core cycles |
|---|---|
| ALU, LUI, AUIPC, JAL, JALR, branch not taken | 36 |
| store | 37 |
| taken branch, SLT/SLTU, SLL | 68 |
| SRL/SRA | 68 + shamt |
| load | 70 |

Each instruction begins with 4 cycles: fetch, instruction capture and two
register-file pre-reads. Then come 32 execute cycles. The second phase that
some instructions need is another 32 cycles:

* a load shifts DAT into rd;
* a taken branch shifts the target from BUF into PC;
* SLT writes its one-bit result;
* a shift reads BUF.

Right shifts first pre-shift BUF by shamt cycles.

**Register file layout.** The 32 registers sit in a 512x2 dual-port SRAM.
The address is `{reg[4:0], pair[3:0]}`, and pair *p* holds bits 2p+1:2p.
The one read port alternates between rs1 and rs2 on even and odd cycles,
running two cycles ahead of the execute counter. Each read therefore brings
two bits of one operand, which is enough for one bit per cycle of each. The
write port stores two result bits every second cycle. x0 is never written,
so its 16 words must be cleared before the core starts; it then reads as
zero.

**Main memory** is a 1024x32 single-port SRAM with byte enables and a
one-cycle read latency. Accesses must be naturally aligned.

## From core to masked core (`bm_core`, `masked_and`, `masked_or`)

`bm_core` is a generated gate netlist. `bitserial_core` is synthesized into
2-input AND, OR and XOR gates, inverters and flip-flops with asynchronous
reset. Each element is then replaced as follows:

| element | in the masked core |
|---|---|
| XOR | one XOR per share (the operation is linear) |
| NOT | inverts share 1 only |
| AND | `masked_and`: z1 = (x1·y1) ⊕ (x1 + ¬y2), z2 = (x2 + ¬y2) ⊕ (x2·y1) |
| OR | `masked_or`: z1 = (x1·y1) ⊕ (x1 + y2), z2 = (y1 + x2) ⊕ (x2·y2) |
| flip-flop | one per share; both D inputs are XORed with the same fresh bit rnd[k] |
| constant | share 1 = the constant, share 2 = 0 |
| port p | p_s1 and p_s2 |

For the AND and OR gates, z1 ⊕ z2 equals the AND or OR of the inputs, and no
fresh randomness is needed. The remask XOR on every register keeps its
value but changes its representation every cycle. This is what stops
glitches and register transitions from leaking across cycles.

Clock and reset stay single signals. For this reason the source core uses
them only as clock and reset, and its reset is asynchronous. A register
resets share 1 to its reset value and share 2 to zero.

The netlist has 151 register pairs and 1304 masked AND/OR gates. It
therefore needs 151 fresh random bits on each core clock.

`bm_core` behaves exactly like `bitserial_core`, including its cycle
timing. If you change the core, synthesize it again to the same gate set
and re-apply the rules. A yosys flow that gives this gate set is:

1. `proc; flatten; opt -full; fsm -nomap; memory; techmap`
2. `dfflegalize -cell $_DFF_PN0_ 01 -cell $_DFF_PN1_ 01`
3. `abc -g AND,OR,XOR`
4. `opt_clean -purge`

## Memory protection (`mem_protect`)

The SRAMs store a single share. Values are unmasked only inside
`mem_protect`, and only after a session key has been applied.

| path | formula |
|---|---|
| address | `addr = (a_s1 ^ addr_key) ^ a_s2` |
| write | `mem  = (d_s1 ^ data_key) ^ d_s2` |
| read | `r_s1 = (mem ^ rnd) ^ data_key`, `r_s2 = rnd` |

XORs are evaluated left to right as written, so no intermediate node carries
a plain value. Read data is remasked with 32 (main memory) or 2 (register
file) fresh bits before the key is removed. The control bits (enables,
write enable, byte enables) are unmasked by a plain XOR, because they carry
no data.

The register-file unit uses one key for both its read and write addresses.
As a result:

* a program image must be written to main memory as `phys[i ^ addr_key] =
  word[i] ^ data_key`;
* the register-file words of x0 must start equal to the register-file data
  key, so that x0 decrypts to zero.

The testbenches prepare both.

## Randomness (`rng_sampler`, `rng_postproc`, `rng_xor_net`)

The divided entropy oscillator is sampled every `smp_div+1` system cycles.
The sample passes a two-flip-flop metastability filter, and `raw_valid`
rises 3 cycles after the tick. Each raw bit is XORed into three places:

* the feedback of a 43-stage XNOR LFSR (x^43+x^42+x^38+x^37+1);
* cell 1 of a 37-cell hybrid cellular automaton;
* cell 37 of the same automaton.

The automaton uses rule 90 with null boundaries, except cell 9, which uses
rule 150. Its period is 2^37−1, coprime to the LFSR's 2^43−1. After reset
the two registers form one 80-bit chain that takes in the first 80 raw bits
before normal operation begins (`ready`).

The XOR network forms output k as `lfsr[(7k+40) mod 43] ^ casr[11k mod
37]`. The multipliers are invertible and 43 and 37 are coprime, so each of
the 243 outputs uses a different pair. At most 43·37 = 1591 outputs could be
formed this way.

The bits are allocated in `secure_rv_pkg`:

| bits | use |
|---|---|
| 0–31 | main-memory read remask |
| 32–33 | register-file read remask |
| 34 | clock randomizer init/perturbation |
| 35–185 | the masked core's register remask |

The DDL ports receive the same remask bits as `bm_core`, because only one
core runs at a time.

## Clock-edge randomizer (`clk_randomizer`, `clk_divider`)

An 8-bit XNOR LFSR (x^8+x^6+x^5+x^4+1) steps on every system clock. Its
last two stages feed an AND, an XOR and an OR gate, and `skip_sel` picks
one of them (or none). When the picked gate outputs 1, the toggle flip-flop
that generates `core_clk` holds instead of inverting.

| setting | edges skipped |
|---|---|
| AND | 25 % |
| XOR | 50 % |
| OR | 75 % |
| none | 0 %; `core_clk` = `sys_clk`/2 |

Without perturbation, every 255-cycle window has the same number of
edges, so run time stays predictable. An update that would lead to the
all-ones (lock-up) state is skipped. After the RNG is ready, the LFSR is
loaded serially with 8 random bits. It is then perturbed with an RNG bit
every `pert_period` cycles (0 = never, 1 = every cycle). Until the load is
complete no edges are produced, unless skipping is off.

The dividers divide by `div+1` (2–256), with `div`=0 treated as 2.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself through a watchdog.

* `tb_bitserial_core` runs random programs that use every RV32I class. It
  checks the core against the reference model in `rv_asm_pkg`, both the
  architectural results and the cycle count of each instruction.
* `tb_bm_core` runs the masked and unmasked cores side by side with random
  shares and random remask bits. On every cycle it compares the recombined
  outputs and checks that the shares themselves look random.
* `tb_secure_rv_top` runs the whole chip at its default sizes, in five
  runs:
  * all three cores (`bm_core` stands in for the DDL core);
  * all skip rates;
  * several perturbation periods.

  Each run checks results and cycle counts. The ratio of system to core
  cycles must match the skip rate. The testbench also counts RNG init,
  perturbations, skipped edges, protected accesses and two-phase
  instructions, and fails if any of them never happened.
* `tb_aes_sbox` runs the operation that a side-channel attack on AES
  targets: SubBytes(plaintext ⊕ key) for a 16-byte block. The S-box is
  computed in software (GF(2^8) inverse as a^254, then the affine map). The
  testbench checks:
  * both the NCM and the BM core against an independently built S-box;
  * that the stored masked shares recombine correctly, while share 1
    alone does not equal the value.

  One run takes about 0.83 M core cycles.

* `tb_rng_nist` runs the RNG chain at its default sizes, sampling about
  every 67 system cycles. The oscillator model is a square wave with
  jitter. Stream *s* is output bit *s* over 1 M cycles, which gives 100
  streams of 1 Mbit. Three SP 800-22 tests are applied to each stream:
  frequency, block frequency and runs. The testbench requires at least 96
  of 100 streams to pass each test.

  The bits of one output word must not be concatenated into one stream.
  The 243 outputs are linear in only 80 state bits, so any two LFSR stages
  and two CASR cells that appear in four outputs make those outputs XOR to
  zero. A stream made of whole words therefore fails the block-frequency
  test. This dependence comes from using two-input XORs. The remask bits
  of the masked core and of the protection units have it too: they are
  fresh on every cycle, but they are not independent of each other.

To simulate with plain Verilator 5, for example the full chip:

```
verilator --binary --timing -Irtl -Itb rtl/secure_rv_pkg.sv tb/rv_asm_pkg.sv \
    rtl/*.sv tb/tb_secure_rv_top.sv --top-module tb_secure_rv_top -o sim
./obj_dir/sim
```

For a single block, list the package, the module's own file and its
testbench. The simulator has no X state, so everything that is read is
reset or initialised.

Lint reports three warnings, all harmless:

* an ascending `[1:8]` range in the clock LFSR, kept on purpose so that
  stage numbers match the polynomial;
* reset used both as an asynchronous reset and in an assertion's `disable
  iff`;
* unused package constants.

## Departures and limits

* **Stores take 37 cycles**, one phase plus a memory cycle. Byte enables
  place the data, so no second phase is needed. Load and branch timing
  match the 70-cycle worst case.
* **Shift and SLT timing** (second phase) is this design's own.
* **XOR-network wiring** follows a fixed formula, not a random draw, and
  only output 0 (LFSR stage 41 ⊕ CASR cell 1) is a known pairing. The
  network has one XOR per output, 243 in total. The published instance
  count is one lower.
* **The sampling register** is an enabled flip-flop on the system clock,
  not a flip-flop clocked by a separate sample clock.
* **The masked netlist** comes from this RTL's own synthesis. Its gate and
  register counts will differ from any other implementation of the same
  core.
* **No scope-trigger output and no clock glitch suppression.** Neither is
  specified closely enough to build: how software sets the trigger pin is
  not described, and the glitch suppression is not shown.
* **Not in RTL**, because they are analog, process-specific or not
  specified in enough detail:
  * the domino-logic (DDL) cells and core;
  * both ring oscillators;
  * the RNG test pad;
  * the JTAG controller.

  A simulation of a square-wave oscillator cannot show the RNG's
  statistical quality, and RTL cannot show side-channel leakage. The
  testbenches check function, timing and the masking structure only.
