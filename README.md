# A garbled-circuit accelerator with compiler-managed wire reuse

Garbled circuits (GC) let two parties compute a function on private inputs.
One party, the *garbler*, gives every wire of a Boolean circuit two random
128-bit labels, one meaning 0 and one meaning 1, and encrypts each AND gate
into a small table. The other party, the *evaluator*, learns exactly one label
per wire and, gate by gate, uses the tables to get the label of each gate's
output, without learning what the labels mean. In privacy-preserving inference
of Transformers, the nonlinear layers (Softmax, GeLU, LayerNorm) run this
way, and they turn out to be the slowest part of the whole protocol.

This RTL implements an accelerator for both sides of that computation,
following the APINT design (Cho, Jeon, Heo, Kim). Its main idea is that a
*compiler*, not the hardware, decides where every wire label lives on chip.
The compiler simulates the machine cycle by cycle ahead of time. It picks the
Wire Memory slot of every output, evicting the wire that will be used last.
It marks which results must also go to DRAM because they will be evicted
before their last use, and when a spilled wire must be fetched back. The
hardware then only has to follow the instruction bits and stall safely when
data is late.

Two standard garbling tricks shape the datapath:

* **FreeXOR.** All 1-labels are the 0-label XOR one global secret `R`. An XOR
  gate then costs a single 128-bit XOR, in both garbling and evaluation, and
  needs no table.
* **Half-Gates.** An AND gate costs four AES hashes to garble and two to
  evaluate. It produces a table of two 128-bit ciphertexts.

## Block structure

```
                         DRAM (outside: ports of apint_accel)
   instructions |     OoRWs, tables |  per core         ^ live wires, tables
                v                   v                   |
        +--------------------+   +--------------------------------------------+
        | instruction_memory |-->| apint_core  x16 (same instruction, own data)|
        |  16KB, shared      |   |  wire_memory 8192x128b + BlockBit + OoRBit   |
        +--------------------+   |  table_memory 64 tables (2KB)                |
                                 |  oorw_prefetch_buffer 64 labels (1KB)        |
                                 |  pe: freexor_unit (1 cyc) + halfgate_unit    |
                                 |      (18 cyc evaluate / 21 cyc garble)       |
                                 +--------------------------------------------+
```

| File | Role |
|---|---|
| `rtl/apint_pkg.sv` | Instruction word, label and table types, mode and OP encodings |
| `rtl/aes_pkg.sv` | AES-128 round functions. The S-box is computed at elaboration. |
| `rtl/aes128_pipe.sv` | Fixed-key AES-128, one round per stage, 11-cycle latency |
| `rtl/halfgate_unit.sv` | Half-Gate garbling and evaluation, four AES lanes |
| `rtl/freexor_unit.sv` | FreeXOR, one cycle |
| `rtl/pe.sv` | Steers each operation by its OP bit and merges the two result streams |
| `rtl/wire_memory.sv` | Labels plus BlockBit/OoRBit flags. Two read ports and two write ports. |
| `rtl/table_memory.sv` | FIFO of garbled tables used in evaluation |
| `rtl/oorw_prefetch_buffer.sv` | FIFO of spilled wires fetched back from DRAM |
| `rtl/instruction_memory.sv` | Circular instruction buffer that DRAM refills |
| `rtl/apint_core.sv` | The per-core pipeline and its interlocks |
| `rtl/apint_accel.sv` | Top level: 16 cores in lockstep |

## Coarse-grained operation: 16 cores, one program

The nonlinear functions split into independent pieces: a Softmax row, a
LayerNorm row, a group of GeLU elements. The compiler gives each core one
piece, so all 16 cores run the *same* netlist on different data. That is why
a single Instruction Memory feeds every core. `apint_accel` issues the head
instruction to all cores in the same cycle, and only when every core reports
`core_ready`. The cores therefore stay in step, and their DRAM requests line
up in time, so a shared DRAM bus can serve them together. The cores never
exchange data.

## The instruction word

Each instruction is 44 bits (`instr_t` in `apint_pkg`):

| Field | Bits | Meaning |
|---|---|---|
| `rd_addr0`, `rd_addr1` | 13 + 13 | Wire Memory slots of the two input wires |
| `oorw_fetch[1:0]` | 2 | After reading `rd_addr<k>`, refill that slot with the next spilled wire (OoRW) |
| `wr_addr` | 13 | Slot that receives the output wire |
| `wen` | 1 | Write Enable *Not*: 1 means do not write Wire Memory |
| `op` | 1 | 0 = FreeXOR, 1 = Half-Gate (AND) |
| `live` | 1 | Also send the output wire to DRAM, because it will be needed after eviction |

The field widths are the paper's. The order of the fields inside the word is
this design's choice. INV gates never appear: the compiler removes them by
swapping the meaning of a wire's two labels.

## The core pipeline and its flags

Every Wire Memory slot has two flag bits:

* **BlockBit**: the slot's next value has not arrived yet, so reading it must wait.
* **OoRBit**: that value is a spilled wire coming from the Prefetch Buffer,
  not a PE result.

An instruction moves through four stages.

1. **Write-address preemption and read check (issue, 1 cycle).** The
   instruction may issue only if each input slot is readable. A slot is
   readable if its BlockBit is clear. It is also readable if the value it
   waits for is being written in this very cycle; the value is then taken
   from the *forwarding path*: the PE write-back when the OoRBit is clear, the
   OoRW transfer when it is set. On issue:
   * the BlockBit of `wr_addr` is set, unless `wen = 1`;
   * the reads start;
   * each input slot with its `oorw_fetch` bit set is reserved for the next
     OoRW: its BlockBit and OoRBit are set, and the slot address joins a small
     transfer queue.
2. **Read (3 cycles).** The operands travel to the PE.
3. **OoRW transfer and execution.** When the transfer queue and the Prefetch
   Buffer are both non-empty, the oldest OoRW is written into the oldest
   reserved slot, which clears both of its flags. Independently, the PE runs
   FreeXOR (1 cycle) or Half-Gate (18 cycles evaluating, 21 garbling).
4. **Write (2 cycles).** The output label is written to `wr_addr` unless
   `wen = 1`; the write clears the BlockBit. If `live = 1`, the label also
   leaves on `wire_out_*`.

The **WEN bit** covers one case. An OoRW may be transferred into slot X while
a later instruction was also given X as its output slot. That write would
destroy the OoRW before it is read, so the compiler sets WEN on the later
instruction, whose result then goes only to DRAM.

From issue to DRAM output, a lone FreeXOR takes 3 + 1 + 2 = 6 cycles. A lone
evaluated AND takes 3 + 18 + 2 = 23 cycles, and a garbled one 26 cycles.

### Interlocks added by this design

The paper leaves these points open. This design chooses as follows.

* **Write-back slots.** FreeXOR and Half-Gate results can finish out of
  order. Each core keeps a reservation bit-vector of future write-back cycles
  and holds an instruction back if its result would land in a cycle already
  taken. The Wire Memory therefore needs only one PE write port.
* **Write-after-write.** An instruction whose `wr_addr` is still blocked by
  an earlier, unfinished write waits. A correct compiler never emits this
  case, but the check makes any instruction stream safe.
* **WEN and preemption.** An instruction with `wen = 1` does not set the
  BlockBit of its `wr_addr`. That slot belongs to a pending OoRW transfer,
  and since the instruction never writes it, nothing would clear that
  BlockBit again.
* **Table availability.** An evaluated AND issues only if its garbled table
  is already in the Table Memory.

With these rules, the pipeline's results equal those of executing the
instructions one at a time in order, for any instruction stream. This is the
property the testbenches check.

## Half-Gate unit

The unit takes one gate per cycle. For AND gate number `g` (counted per core
in issue order), let `j = 2g` and `j' = 2g+1`.

Garbling, from input 0-labels `A0`, `B0`, with `pa = lsb(A0)` and `pb = lsb(B0)`:

```
TG = H(A0,j) ^ H(A0^R,j) ^ pb*R         WG0 = H(A0,j)  ^ pa*TG
TE = H(B0,j') ^ H(B0^R,j') ^ A0         WE0 = H(B0,j') ^ pb*(TE^A0)
output 0-label C0 = WG0 ^ WE0, table = {TG, TE}
```

Evaluation, from active labels `A`, `B`:

```
C = H(A,j) ^ lsb(A)*TG ^ H(B,j') ^ lsb(B)*(TE^A)
```

`R` must have its least significant bit set (point-and-permute).

The hash is `H(X,t) = AES_K(2X ^ t) ^ 2X ^ t`. Here `2X` is doubling in
GF(2^128) (shift left, then XOR 0x87 if the top bit fell out), and `K` is a
fixed public key (parameter `AES_KEY`). The paper states only how many AES
calls each mode needs, so the hash construction is this design's choice. To
interoperate with a particular software GC library, set `dbl` and the tweak
in `halfgate_unit.sv` to match that library.

Four pipelined AES lanes run side by side; evaluation uses two of them. The
datapath is 13 register stages long (input preparation, 11 AES stages,
combination). A delay line then brings the latency to exactly 18 cycles
(evaluate) or 21 cycles (garble), the figures the paper gives. To use a
faster implementation, change `EVAL_LAT`/`GARBLE_LAT` (both must be at least
14). The core's write-back slot logic follows those parameters.

## Interfaces of the top level

`apint_accel` has these ports:

* `mode`: `MODE_GARBLE` (client) or `MODE_EVAL` (server). `r_delta` is the
  FreeXOR offset `R`, used when garbling. Hold both constant during a run.
  Reset between runs; reset also clears the gate and sequence counters.
* `imem_wr_valid/data/ready`: the instruction stream.
* Per-core arrays `load_*`: write the circuit's input labels into Wire
  Memory before the first instruction.
* `oorw_in_*`: spilled wires, in the order the program fetches them back.
* `table_in_*`: garbled tables in AND-gate order (evaluation only).
* `wire_out_*`: live wires, tagged with the producing instruction's sequence
  number. The DRAM address of each item follows from its sequence number,
  because the compiler fixes all DRAM addresses in advance.
* `table_out_*`: garbled tables produced while garbling, tagged the same way.
* `busy`, `issue`, `stall_*`: status. The stall flags name why the current
  instruction cannot issue: waiting on forwarding, on an OoRW, on a table,
  on a write-back slot, or on a write address or full transfer queue.

All default parameters are the paper's:

* 16 cores;
* 16KB Instruction Memory (2978 44-bit words);
* per core, 128KB Wire Memory (8192 labels), 2KB Table Memory (64 tables)
  and 1KB Prefetch Buffer (64 labels);
* latencies of 3 (read), 1 (FreeXOR), 18/21 (Half-Gate) and 2 (write) cycles.

## Where this departs from the paper, and what is missing

* **One clock.** The paper runs memories at 2 GHz and logic at 1 GHz. Here
  everything runs on one clock, and all latencies are counted in it.
* **DRAM is not modelled.** HBM2 sits outside the design: each core exposes
  plain stream ports, and there is no shared-bus arbiter or address
  generator.
* **The compiler is not included.** That covers netlist scheduling (coarse
  and fine-grained) and the compiler speculation that assigns addresses and
  the LIVE, OoRW-fetch and WEN bits. It is software. The testbenches instead
  generate random instruction streams that follow the same rules.
* **Memory organisation is this design's own.** The paper gives only sizes
  for the Table Memory, Prefetch Buffer and Instruction Memory; here they are
  simple FIFOs. The Wire Memory is a plain array with two read ports and two
  write ports. Its flags are registers, which is how the paper keeps its
  special bits.
* **The Half-Gate hash and AES pipeline** are as described in the section
  above, not taken from the paper.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. The reference models in
`tb/gc_ref_pkg.sv` are written independently of the RTL:

* an AES-128 with a search-based S-box, checked against the FIPS-197
  example;
* Half-Gates garbling and evaluation;
* an in-order interpreter of the instruction set;
* a random program generator.

Example, the end-to-end test at full size:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/apint_pkg.sv rtl/aes_pkg.sv tb/gc_ref_pkg.sv tb/tb_apint_accel.sv \
    --top-module tb_apint_accel
./obj_dir/Vtb_apint_accel
```

`tb_apint_accel` runs all 16 cores at their default sizes through the same
random 300-instruction program:

1. It garbles, on different data per core.
2. It switches to evaluation, with random plaintext inputs and the tables
   from step 1.
3. It checks every live label and every table against the reference.
4. It checks that each evaluated label decodes (equals the 0-label, or the
   0-label XOR `R`) to the plaintext result.

It also counts the forwarding, OoRW, table, write-back-slot and
write-address stalls, the OoRW transfers, the WEN and LIVE instructions and
the mode switch, and fails if any of them never happened. A run takes about
2000 cycles per mode.

`tb_apint_core` does the same on one core. It also measures the 6-cycle
FreeXOR and 23-cycle Half-Gate latencies from issue to output.

Block tests:

* `tb_halfgate_unit` checks garbling and evaluation of 24 gates against the
  reference, at 21 and 18 cycles.
* `tb_pe` checks OP steering.
* `tb_wire_memory` checks the flag rules.
* The FIFO testbenches cover the three buffers.
