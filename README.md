# A configurable hyperdimensional-computing accelerator for always-on sensing

Hyperdimensional computing (HDC) classifies data by mapping every input
into a very long random-looking binary vector (a *hypervector*, here
D = 2048 bits by default) and comparing it with stored class prototypes by
Hamming distance. Three operations do all the work:

* **bind** – bitwise XOR of two vectors (associates a value with a key),
* **bundle** – bitwise majority over many vectors (builds a set or a
  prototype); done with a small saturating up/down counter per bit,
* **permute** – a fixed scrambling of bit positions (encodes order).

This RTL implements an accelerator that runs such algorithms on its own
while a host processor sleeps. It is *configurable*: the encoding
algorithm is not hardwired but given as a short microcode program, so the
same silicon runs text classification, gesture recognition from EMG
channels or vibration anomaly detection. The accelerator only wakes the
host (interrupt) when the lookup result meets programmable thresholds.
The key hardware ideas are

* a **wide, combinational encoder**: all D/K bits are processed in one
  cycle, with no pipeline registers, so one microinstruction = one cycle;
* a **latch-style register file as associative memory** (AM) that doubles
  as the encoder's scratchpad, with row-sequential Hamming search;
* **vector fold K**: the datapath is only D/K bits wide and a vector is
  processed in K parts, trading time for area;
* a **similarity manipulator** that maps a 7-bit value to a vector whose
  distance from its input grows linearly with the value, so nearby sensor
  values give similar vectors.

The design is a digital-only block in one clock domain. The RTL follows a
published silicon design ("Hypnos"); where that description leaves gaps,
the choices made here are listed in [Departures and own choices](#departures-and-own-choices).

## Block overview

```
             APB                        in_data/in_valid/in_ready
              |                                   |
      +-------v-------+   +-----------+   +-------v---------------------------+
      | hdc_config_   |-->| hdc_algo_ |-->| hdc_controller                    |
      | unit          |   | storage   |   |  NISC decode, MIX/SEARCH/INTR FSM,|
      +--+--------+---+   +-----------+   |  3 hw loops, part index counter   |
         |        | run/irq_clear          +--+---------------+--------+-------+
         |        +------------------------->|  enc_ctrl       | AM addr| search/irq
         | 32-bit word port                  v                 v        v
      +--v-------------------------------------------+   +-----------------------+
      | hdc_assoc_mem                                |   | hdc_encoder           |
      |  hdc_scm (N*K entries x D/K bits)  <--wr-----+---+  input stage          |
      |  hdc_am_lookup (popcount tree, min search) --+rd>|  -> sim. manipulator  |
      +----------------------------------------------+   |  -> mixer (+serializer)|
                              irq_o <-- controller       |  -> D/K encoder units |
                                                         +-----------------------+
```

`hdc_accelerator` is the top. Default parameters: `D = 2048`, `K = 1`,
`N = 32` memory rows, `ALGO_DEPTH = 64` microcode words.

## The encoder datapath

Each cycle the encoder computes, from left to right, one D/K-bit vector:

1. **Input stage** (`hdc_input_stage`) selects one of four sources with
   ENCSEL: 0 all zeros, 1 a hardwired pseudo-random seed vector, 2 the
   memory read port, 3 the encoder's own output register.
2. **Similarity manipulator** (`hdc_sim_manip`, enabled by SMEN). A 7-bit
   word `w` (external input if SMSEL = 1, otherwise an internal register
   loaded by the `SMREG` instruction) becomes a 128-bit thermometer code
   with its `w` lowest bits set. Each bit is repeated D/(128·K) times, the
   result is scrambled by a fixed permutation and XORed with the vector.
   Thus `w` flips `w·D/128` bits: value 0 leaves the vector unchanged and
   value 64 flips half of it. Because the flipped set for `w` contains the
   set for every smaller value, the Hamming distance between the codes of
   two values is proportional to their difference.
3. **Mixer** (`hdc_mixer`, enabled by MXEN) applies one of four fixed
   permutations: π0, π1 (MXSEL) or their inverses (MXINV). During a `MIX`
   instruction the select comes bit by bit from the 16-bit serializer
   (`hdc_serializer`, LSB first): for a value `v` with bits `v_k`, `n`
   cycles apply `π_{v_{n-1}} ∘ … ∘ π_{v_0}` to the register. Since π0 and
   π1 do not commute, every `n`-bit value yields a distinct, quasi-orthogonal
   permutation of the seed: this is how item-memory vectors (one random
   vector per symbol) are produced on the fly instead of being stored.
4. **Encoder units** (`hdc_encoder_unit`, one per bit) combine the vector
   `x` with the unit's register `q` and keep a 5-bit saturating bundle
   counter (+15 … −16):

| OP | name   | register after the edge       | counter                         |
|----|--------|-------------------------------|---------------------------------|
| 0  | PASS   | `x`                           | –                               |
| 1  | XOR    | `x ^ q` (bind)                | –                               |
| 2  | AND    | `x & q`                       | –                               |
| 3  | OR     | `x \| q`                      | –                               |
| 4  | NOT    | `~x`                          | –                               |
| 5  | THRESH | `counter > 0` (majority)      | –                               |
| 6  | EVICT  | counter MSB                   | rotated left by one             |
| 7  | LOAD   | `x`                           | `{counter[3:0], x}`             |

With BNDEN set, the counter also counts the unit's result of this cycle
(+1 for a one, −1 for a zero); BNDRST clears it to 0. EVICT and LOAD move a
counter bit-serially (five cycles for five bits) into and out of memory, so
bundles larger than one fold part, or partial sums, can be parked in
memory. Five EVICTs restore the counter to its original value.

The whole path from input multiplexer to register is combinational. The
result of the cycle (`wb_data`) is written to memory row WIDX at the same
clock edge that loads the output register, if WBEN is set. The next
instruction can therefore read that row or the register without a bubble.

## Associative memory and lookup

`hdc_scm` stores N·K entries of D/K bits; entry = row·K + part. Reads are
combinational. One write port serves the encoder, a second 32-bit word port
serves the host (word `w` of entry `e` is APB word `e·(D/K/32) + w`). The
last row (N−1) is the *search vector*. The published silicon uses latches
with one clock gate per row. This RTL uses an edge-triggered array with a
row write enable, which has the same behaviour at the clock edge.

`AM_SEARCH max` (`hdc_am_lookup`) compares rows `0 … max−1` with the search
row. It reads one D/K-bit part per cycle, counts the differing bits with a
balanced adder tree (`hdc_popcount`) and accumulates the distance over the K
parts. It keeps the smallest distance and its row, and on ties keeps the
lower row. It takes `max·K + 2` cycles. The result is readable by the host
and feeds the interrupt check.

## Microcode

Instructions are 26 bits wide. Bit 25 = 0 marks a **NISC** instruction, a
direct bundle of datapath control fields that executes in one cycle:

| bits  | field  | meaning                                               |
|-------|--------|-------------------------------------------------------|
| 25:23 | ENCSEL | input source 0..3 (bit 25 is 0)                       |
| 22    | SMEN   | enable similarity manipulator                         |
| 21    | SMSEL  | manipulator word: 1 external input, 0 internal reg    |
| 20    | MXEN   | enable mixer                                          |
| 19    | MXINV  | use inverse permutations                              |
| 18    | MXSEL  | π1 instead of π0                                      |
| 17:15 | OP     | encoder-unit operation (table above)                  |
| 14    | BNDEN  | bundle this cycle's result into the counters          |
| 13    | BNDRST | clear the counters                                    |
| 12    | WBEN   | write the result to memory row WIDX                   |
| 11:6  | RIDX   | memory row read by ENCSEL = 2                         |
| 5:0   | WIDX   | memory row written                                    |

The part index counter is appended to RIDX and WIDX, so one program body
inside a loop over K parts handles all parts of a folded vector. A NISC
instruction with SMEN = SMSEL = 1 consumes one external input word. It waits
(`in_ready_o` high) until `in_valid_i` is high.

Bit 25 = 1 marks a **CISC** instruction, with opcode in bits 24:22:

| op | mnemonic  | operand bits                                         | cycles            |
|----|-----------|------------------------------------------------------|-------------------|
| 0  | AM_SEARCH | 5:0 rows to search                                   | max·K + 2         |
| 1  | MIX       | 21:20 source (0 imm, 1 part index, 2 external), 19:16 bits−1, 15:0 immediate | bits + 2 |
| 2  | INTR      | 21:6 distance threshold, 5:0 index threshold         | 1, or until host clears |
| 3  | LOOP      | 19:10 iteration count, 9:0 end address               | 1                 |
| 4  | JMP       | 9:0 target                                           | 1                 |
| 5  | PIDX      | 1:0: 0 clear, 1 increment, 2 decrement part index    | 1                 |
| 6  | SMREG     | 6:0 internal similarity-manipulator word             | 1                 |
| 7  | NOP       | –                                                    | 1                 |

**Loops.** Up to three loops nest. `LOOP count, end` starts a body at the
next address. `end` is the address of the first instruction *after* the
body. When the program counter would reach `end`, it returns to the body
start until `count` iterations are done. A count of 0 skips the body.
Nested loops must end at different addresses.

**INTR.** If the last lookup found `distance ≤ dist_thr` and
`index ≤ idx_thr`, the control unit raises `irq_o` and stops. It continues
with the next instruction once the host writes IRQ_CLR. Otherwise INTR
takes one cycle and the program continues, typically with a `JMP` back to
the start for the next window of input.

**MIX** loads the serializer in its first cycle, which also takes an
external word if the source is external, runs `bits` permutation cycles on
the encoder register and retires in a closing cycle.

A typical n-gram text classifier (n = 5) looks like this, written for a
16-row memory. Rows 11–15 hold the n-gram FIFO. Row 15 = N−1 is also the
search row and finally receives the query. The class prototypes sit in
rows 0 and up:

```
      SMREG 64                      ; manipulator word = half flip
start: PASS zero, BNDRST            ; clear register and counters
      LOOP nchars, end
        reg -> π -> reg             ; age the n-gram accumulator
        row12 -> π, XOR -> row11    ; shift the FIFO, one permutation per age
        row13 -> π -> row12 ... row15 -> π -> row14
        zero -> manip(64) -> reg    ; random seed from zero
        MIX external, 5             ; item vector of the character
        reg -> row15                ; newest element
        row11 XOR reg, BNDEN        ; n-gram, bundled
end:  THRESH -> row N-1             ; majority = query
      AM_SEARCH classes
      INTR thr, idx
      JMP start
```

## Host interface

APB slave (`hdc_config_unit`), zero wait states, PSLVERR on unmapped words.
`PADDR[21:20]` selects a region and `PADDR[19:2]` the word within it:

| region | word | name    | access | content                                        |
|--------|------|---------|--------|------------------------------------------------|
| 0      | 0    | CTRL    | rw     | bit 0 RUN (0 holds the program at address 0)   |
| 0      | 1    | STATUS  | ro     | bit 0 irq pending, bit 1 running, 25:16 PC     |
| 0      | 2    | IRQ_CLR | wo     | write bit 0 = 1 to clear the interrupt         |
| 0      | 3    | RESULT  | ro     | 5:0 best row, 31:16 its Hamming distance       |
| 1      | i    | program | rw     | microcode word i (bits 25:0)                   |
| 2      | w    | memory  | rw     | 32-bit word w of the associative memory        |

Typical use: write prototypes and program, set RUN, stream sensor words on
`in_data_i/in_valid_i` (`in_ready_o` marks the cycle a word is consumed),
sleep until `irq_o`, read RESULT, write IRQ_CLR.

## Departures and own choices

The published description gives the architecture, the field names of the
NISC word, the operations of the complex instructions and their cycle
counts, but not every encoding. In this RTL:

* **Instruction format.** The paper speaks of a 26-bit word split into
  25-bit NISC and CISC spaces, while its NISC field figure shows a 3-bit
  ENCSEL. Here ENCSEL's top bit is the class bit, so NISC keeps all
  figure fields at their printed positions. The CISC opcode numbers and
  operand layout, and the SMREG and NOP instructions, are this design's.
* **Stage order.** The block diagrams place the similarity manipulator
  before the mixer, while one sentence says it acts on the mixer's
  output. The RTL follows the diagrams.
* **Permutations and seed** are fixed pseudo-random wirings computed by a
  bijective integer hash of the bit index (`hdc_pkg::perm_idx`, multiply by
  an odd constant, add, xor-shift, three rounds modulo 2^n) and a hashed
  seed bit per index. D/K must therefore be a power of two and at least
  128. The actual random wiring of the chip is unknown.
* **Encoder-unit operations** and their codes, the saturation range, the
  majority rule (`> 0`, ties give 0) and the EVICT/LOAD mechanism are own
  choices; the paper gives a 3-bit OP field, a 5-bit saturating counter and
  bit-serial eviction.
* **Memory**: flip-flop array instead of latches with clock gates; host word
  port and its address map, priority of host over encoder on a
  simultaneous write, and lookup tie-break are own choices.
* **External input** uses a valid/ready handshake (not described).
* **INTR** stalls the program while the interrupt is pending.
* Row indices are 6 bits, so N ≤ 64.
* **Cycle counts of the example programs.** The text program above takes
  15 cycles per character: 8 one-cycle instructions plus a 7-cycle `MIX`.
  The published figure is 14. The vibration program takes 11 cycles per
  sample and about 13.8 k cycles per measurement. The published figure is
  about 12.5 k cycles, from a 9-instruction program that is not given.

## Verification

Every block has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=… failures=…`:

* `tb_hdc_ref_pkg` is an independent bit-level model of seed,
  permutations, manipulator, item-memory mapping and bundling.
  `tb_hdc_iss_pkg` is an instruction-level model of the whole accelerator
  that also counts cycles. `tb_hdc_asm_pkg` assembles instructions.
* Unit tests: `tb_hdc_serializer`, `tb_hdc_input_stage`, `tb_hdc_sim_manip`
  (flip counts, monotone distance), `tb_hdc_mixer` (bijectivity, inverses,
  non-commuting π0/π1), `tb_hdc_encoder_unit` (every op, saturation,
  eviction round-trip), `tb_hdc_encoder` (random control words against the
  model), `tb_hdc_scm`, `tb_hdc_am_lookup` (random rows, cycle count
  `max·K+2`, ties, interrupt condition), `tb_hdc_assoc_mem`,
  `tb_hdc_algo_storage`, `tb_hdc_controller` (loops, MIX length, stalls,
  INTR) and `tb_hdc_config_unit`.
* `tb_hdc_accelerator` runs the whole design through its pins with two
  programs. One is the n-gram text classifier above (D = 256, N = 16). The
  other is a multi-channel sensor program with vector fold K = 2 that uses
  the part index counter, the manipulator on external samples, inverse
  permutations and counter eviction. At each interrupt it compares the
  complete memory, the lookup result and the cycle count with the
  instruction-level model. It also counts each mechanism (loop back-edges,
  lookups, interrupts taken and not taken, bundling, input stalls,
  manipulator, MIX, part index, inverse, eviction) and fails if any of them
  never happened.
* `tb_hdc_accelerator_full` runs the text program on the top with its
  default parameters (D = 2048, N = 32, K = 1).
* `tb_hdc_workload_bearing` runs a vibration-monitoring program at the
  default parameters. It maps 7-bit samples to item vectors with a 7-bit
  `MIX`, bundles five windows of 250 samples into one measurement vector,
  and reports the measurement's Hamming distance to a calibration vector
  in row 0.
* `tb_hdc_workload_emg` runs the multi-channel program at the default
  parameters, over 64 channels and two windows.

To simulate with plain Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hdc_accelerator \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/hdc_pkg.sv tb/tb_hdc_asm_pkg.sv tb/tb_hdc_ref_pkg.sv tb/tb_hdc_iss_pkg.sv \
  tb/tb_hdc_accelerator.sv
./obj_dir/Vtb_hdc_accelerator
```

Replace the top module and file for any other testbench. The default-size
build takes a minute or two to compile and seconds to run.
