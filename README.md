# Data-stationary emulation of quantum circuits

A quantum circuit built from NOT, controlled-NOT and doubly-controlled-NOT
gates does nothing to a state vector but permute its entries. On n lines, a
NOT on line t swaps every entry at address x with the entry at x XOR 2^t. A
controlled NOT does the same, but only for addresses whose control bits are 1.
A classical machine can therefore run such a circuit without arithmetic. It
only has to move numbers around.

This design does not even move them. Every entry of the state vector sits in a
word of its own, next to a field that says which address the entry currently
has. A gate flips one bit of that address field. It does so in every word at
once, in each word that meets the gate's control condition. The data never
moves while the circuit runs. When the circuit is done, the words are read
out, sorted by their address fields, and transformed to give the answer.

The architecture follows J. R. Burger, "Data-stationary Architecture to
Execute Quantum Algorithms Classically" (2004). This RTL is an independent
implementation of it. Where that description stops, this implementation makes
its own choices, and they are marked below.

## The chain

```
 user inputs ─► pre_processing ─► core_memory ─► post_processing ─► results
                      │                ▲  │              │
                      └─ writes words ─┘  └─ reads words ┘   (one shared I/O port)
```

| module                | role |
|-----------------------|------|
| `qsim_pkg`            | gate instruction type, opcodes, data coding |
| `pre_processing`      | builds the Hadamard-transformed start vector and writes it into the core |
| `instruction_decoder` | turns a gate into the TO / FM1 / FM2 row lines shared by all words |
| `core_memory`         | the L = 2^N words and their parallel update; one multiplexed I/O port |
| `post_processing`     | sorts by address field, Walsh–Hadamard transform, decodes the answer |
| `qsim_top`            | wires the chain and decides who owns the core's I/O port |

The user side (choosing the circuit) and the display of results are outside
the design. Their signals are ports of `qsim_top`.

## Words, address fields and how a gate becomes a toggle

A word holds an N-bit address field and an M-bit data field (M = 2). The data
is +1, −1 or 0, with the common normalisation factor left out. The coding is
two's complement: `01` = +1, `11` = −1 and `00` = 0. Word *p* (its physical
position in the array) holding address field *a* and data *d* means that the
state vector has *d* at position *a*. The position *p* itself carries no
meaning once the computation has started.

Every address bit position has three row lines, driven by the instruction
decoder and shared by all words:

* **TO[i]**: toggle bit i.
* **FM1[i]** and **FM2[i]**: put bit i on the word's first or second control
  bus.

FM1 and FM2 each have one extra row, number N, that reads a constant TRUE. A
word's control bus is the OR of the bits whose row is selected. Only one row
is ever selected, so in practice the bus carries that one bit. If both control
buses of a word read 1, the word inverts the bits whose TO row fires. The
three gate classes use the rows as follows:

| gate | TO | FM1 | FM2 |
|------|----|-----|-----|
| UNC  (unconditional NOT on t)     | t | TRUE | TRUE |
| SCN  (NOT on t if line c)         | t | c    | TRUE |
| DCN  (NOT on t if lines c1 and c2)| t | c1   | c2   |

Example on 4 lines, starting with word p holding address p. An SCN with
control A2 and target A0 changes the address 0100 to 0101, 0101 to 0100, 1110
to 1111, and so on. It leaves every address with A2 = 0 alone. A DCN with
controls A2 and A1 and target A0 only swaps 0110↔0111 and 1110↔1111. Pairs
that a gate aimed at line k swaps are always 2^k apart. `tb_core_memory`
checks the whole table for these gates.

Because a gate toggles the same bit in both words of a swapped pair, the
address fields stay a permutation of 0 … L−1. The post-processor relies on
this.

## Instruction format

`gate_instr_t` packs a 2-bit opcode (`OP_NOP`, `OP_UNC`, `OP_SCN`, `OP_DCN`)
and three 6-bit line indices `to`, `fm1` and `fm2`. Six bits cover address
fields of up to 64 lines. Unused indices are ignored. Assertions in
`instruction_decoder` require every named line to be below N, and the target
and the controls to be distinct lines. This format belongs to this design; the
original description gives none.

## Pre-processing: the start vector

The circuits of interest start from a basis state |k⟩ on their lowest n lines,
with all higher lines at |0⟩, followed by a Hadamard transform on the n lines.
Without normalisation, the result has a closed form:

  y[j] = (−1)^popcount(j AND k)  for j < 2^n,   y[j] = 0  for j ≥ 2^n.

`pre_processing` walks the words p = 0 … L−1 and writes word p with address
field p and data y[p], one word per cycle. For |001⟩ on three lines this gives
1 −1 1 −1 1 −1 1 −1, as in the worked example below. To start from any other
vector of +1/−1/0 values, the host writes the words itself through the core's
I/O port.

## Post-processing: sort, transform, decide

`post_processing` runs three phases and keeps a buffer of L entries, each N+2
bits wide:

1. **Sort.** It reads word p through the I/O port and writes its data to
   buffer entry a_p, its address field. After L reads the buffer holds the
   state vector in order.
2. **Transform.** It runs an in-place fast Walsh–Hadamard transform over the
   first 2^n entries, without normalisation. For line s = 0 … n−1 and every
   pair (i, i+2^s) with bit s of i clear, the pair (a, b) becomes (a+b, a−b).
   It does one butterfly per clock, n·2^(n−1) in all.
3. **Scan.** It walks the 2^n results. It counts the non-zero entries, keeps
   the entry of largest magnitude, and keeps the coefficient at |0…01⟩.

The flags are the decoding rules of the function test that the architecture
was demonstrated with (a Deutsch–Jozsa style test; see below):

| flag           | condition | meaning for f |
|----------------|-----------|---------------|
| `is_basis`     | exactly one non-zero entry | – |
| `is_constant`  | a single basis vector, at \|0…01⟩ | f is constant |
| `is_symmetric` | a single basis vector anywhere else | f is symmetric or anti-symmetric about the middle of its truth table |
| `is_balanced`  | coefficient at \|0…01⟩ is 0 | f is balanced |

The flags compare magnitudes, so a constant-1 function, which gives −2^n at
|0…01⟩, also counts as constant. After `done`, any transformed entry can be
read through `rd_en`/`rd_idx`.

## Worked example: one oracle call tells a 2-bit function's shape

Lines A2 A1 carry the function's 2-bit input, and A0 receives f(x). The start
is |001⟩, which after pre-processing is 1 −1 1 −1 1 −1 1 −1. The oracle for
f(x) = x1 XOR x2 is two SCNs: A1→A0, then A2→A0. After the first, the words
at addresses 010/011 and 110/111 have exchanged address fields. After the
second, 100/101 and 110/111 have too. Read out in address order, the vector
is 1 −1 −1 1, −1 1 1 −1. The Walsh–Hadamard transform of that vector is
(0 0 0 0, 0 0 0 8), that is 8·|111⟩. There is a single basis vector that is
not |001⟩, so f is symmetric or anti-symmetric (its truth table is 01,10).
There is nothing at |001⟩, so f is also balanced. With no oracle gates at all
(a constant f), the result is 8·|001⟩. `tb_qsim_top` runs both cases, plus the
AND function (DCN A2,A1→A0), which is none of the three.

## Interfaces and timing of `qsim_top`

All logic is on one clock, `clk`. `rst_n` is a synchronous, active-low reset.
The core's words are not reset; they are meant to be loaded first.

| action | how | time |
|--------|-----|------|
| load start vector | pulse `pre_start` with `nlines` (1…N) and `basis` | `pre_busy` for L cycles; `pre_done` pulses after |
| apply a gate | hold `instr_valid` with `instr` until `instr_ready` | 1 cycle per gate, whatever L is; back to back allowed |
| read out | pulse `post_start` with `nlines` | `post_busy` for L + 2 + n·2^(n−1) + 2^n cycles; `post_done` one cycle later |
| result vector | `res_rd_en`, `res_rd_idx` | `res_rd_val` one cycle later |
| direct word access | `host_io_en/we/word/waddr/wdata` while `host_io_ready` | write at the edge; read answer on `host_io_r*` one cycle later |

The core has a single I/O port. Pre-processing owns it while it is busy, then
post-processing while it is busy, and otherwise the host. Host requests made
while a unit is busy are ignored. `instr_ready` is low during loading and
read-out, so no gate can overlap a port write. An assertion in `core_memory`
also checks this. Starting one unit while the other runs is not allowed, and
an assertion in `qsim_top` checks that too.

The gate time is the point of the architecture. A gate costs one cycle
whether the core holds 16 words or 2^28. Loading and reading out cost one
cycle per word. The original estimate puts one gate at roughly 320 ns on a
wafer-sized array, which is the time the buses need to settle. The RTL does
not model that physical delay.

## Sizes

| parameter | default | original | note |
|-----------|---------|----------|------|
| `N` (address bits, L = 2^N words) | 28 | 32 (as an example) | see below |
| `M` (data bits) | 2 | 2 | +1, −1, 0 |
| buffer entry width | N+2 | – | holds ±2^N |

The core and the post-processing buffer are arrays of 2^N entries. Verilator
refuses an array of 2^29 or more entries, and slang refuses one whose size
passes 2^31 bytes. N = 28 is therefore the largest address field these tools
accept, 16 times fewer words than the 32-bit example. Every circuit on up to
28 lines fits. The wafer-scale estimate of over 51·2^30 words (more than 35
address bits) is about 200 times the default core. The instruction format
could still name all 35 lines.

The words are written as one array that a single loop updates every cycle. The
alternative, one module instance per word, matches the picture of a "sea of
cells" more literally. But Verilator's generate unrolling stops at 16,384
instances, which would cap N at 14. Both forms describe the same per-word
hardware.

The default size cannot be simulated. Each cycle evaluates all 2^28 words, and
one load alone is 2^28 cycles. The largest size run here is N = 17 (131,072
words, `tb_qsim_large`, about 1.5 minutes under Verilator). Gate-level
synthesis of the default size is not practical either: the core alone is
2^28 × 30 flip-flops.

## Departures and choices of this implementation

* The per-word control buses and pass-transistor rows are modelled as logic:
  an OR of selected bits, then an AND of the two buses. Their electrical form
  is not modelled.
* The I/O port count (one), the request protocol, the one-cycle read latency
  and the port arbitration are this design's own. The original only says that
  the I/O ports are multiplexed.
* Pre-processing only produces Hadamard-transformed basis states. Other start
  vectors go in through the host port.
* Post-processing implements only the Hadamard transform and the three
  decoding rules from the worked example. The original also mentions general
  real-time digital filtering, such as Fourier transforms, which is not built.
* Sorting assumes the address fields are a permutation of 0…L−1. This holds
  after pre-processing and any sequence of gates. A host load that breaks it
  leaves some buffer entries stale.
* The gate timing is one clock cycle, not a physical settling time.

## Simulating

Every testbench checks itself, prints `TB_RESULT checks=… failures=…` and has
a watchdog. Build and run one with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_qsim_top \
    -y rtl -y tb -Irtl rtl/qsim_pkg.sv tb/tb_qsim_top.sv
./obj_dir/Vtb_qsim_top
```

| testbench | what it checks |
|-----------|----------------|
| `tb_instruction_decoder` | row lines for all gate classes, exhaustive over lines 0–5, random over 28 lines |
| `tb_core_memory` | the 4-line interchange table gate by gate, random circuits against a software model, one cycle per gate, read latency |
| `tb_pre_processing` | start vectors for the worked example and random (n, k), one write per word, L cycles |
| `tb_post_processing` | sorting, transform and flags against the transform computed from its definition; exact cycle count |
| `tb_qsim_top` | end-to-end at N = 5: XOR, constant, AND, the 4-line example, random circuits, host-loaded vectors. It counts every mechanism: UNC/SCN/DCN, gates held off, back-to-back gates, host writes, reads and ignored requests, each outcome |
| `tb_qsim_large` | both worked examples at N = 17 |

To change the size, override `N` on `qsim_top`. Simulation time grows as
about L² for a full load and read-out, because every cycle evaluates every
word.
