# RODENT: an intermittently powered in-memory accelerator for encrypted SVM inference

A small battery-free sensor can't afford to classify its own data, and it can't
trust a remote helper with the data either. This design is a helper device that
lives on harvested energy. It receives an input vector over Bluetooth Low
Energy and computes the linear part of a support-vector-machine inference
(element-wise products and sums) on BFV-encrypted ciphertexts. It then sends
the encrypted result back.

The whole computation happens inside non-volatile memory. A grid of magnetic
(MTJ) crossbar arrays stores the ciphertexts, and each array computes on them
in place with bit-level logic gates. Every cell keeps its value when the power
fails, and every gate writes a separate output cell. So an instruction can be
repeated safely after a power cut. The only state that must be protected
across power failures is small:

- which phase the device is in;
- which instruction comes next;
- which rows and columns of each array take part in a gate.

This state is protected by double buffering plus a parity bit. The accelerator
checkpoints after every instruction and never loses more than one instruction
of work.

This RTL models the digital behaviour of the device at bit and clock-cycle
level. The MTJ cell is an analog device, so it is modelled only by the Boolean
function it computes.

## The array grid

The default grid holds `ARR_ROWS x ARR_COLS = 16 x 3` computation arrays of
`M x N = 512 x 512` cells (`comp_array`).

A BFV ciphertext with 4096 coefficients is laid out one coefficient per array
row, across the 16 arrays of a grid column. So one instruction processes all
coefficients at once. Each row holds:

- 432 bits for two ciphertexts (2 polynomials x 3 residues x 36 bits each);
- the twiddle factors of the number-theoretic transform;
- temporary workspace.

The three grid columns together give 1530 usable bits per row.

Each grid column has one **driver** (`driver`) and one **instruction memory**
(`instr_mem`). The 16 arrays of a grid column receive the same command every
cycle and act as one tall array. All drivers read their memories at the same
program counter, which the controller broadcasts. So the program is one stream
of instructions, with one slice per grid column, executed in lock step.

An instruction applies one gate to all active lines of an array in parallel:

- **row logic** (`col_mode=0`): in every active row `r`,
  `cell[r][out] = f(cell[r][a], cell[r][b])`;
- **column logic** (`col_mode=1`): in every active column `c`,
  `cell[out][c] = f(cell[a][c], cell[b][c])`.

Arithmetic on ciphertexts (adders, multipliers, modular reduction) is built
from sequences of these gates. That software isn't part of the RTL.

### Instruction word (40 bits)

| bits    | field      | meaning                                            |
|---------|------------|----------------------------------------------------|
| 39:37   | `op`       | 0 NOP, 1 NOT, 2 AND, 3 NAND, 4 OR, 5 NOR, 6 SET, 7 ACT |
| 36:25   | `in_a`     | first input line                                   |
| 24:13   | `in_b`     | second input line                                  |
| 12:1    | `out`      | output line                                        |
| 0       | `col_mode` | 0 row logic, 1 column logic                        |

The instruction has a 3-bit opcode, three 12-bit addresses and a row/column
bit. The rest of the encoding is this design's own:

- Bits 8:0 of an address select a line inside a 512-line array.
- Bit 11 of `out` is the **neighbour flag**. The result then goes to the
  adjacent array instead of this one. Column logic sends it to the array below
  in the same grid column. Row logic sends it to the array to the right, in the
  next grid column. In silicon this is a row of transistors that connects the
  lines of neighbouring arrays. Transfers only go down and right.
- `SET` writes the constant `in_a[0]` into the output line. With bit 11 of
  `in_b` set, it writes the row-parity cell (row mode) or the column-parity
  cell (column mode) instead.
- `ACT` reloads the activation latches from the valid bitmask: rows in row
  mode, columns in column mode.

## Active rows and columns: the hardest part

Which rows and columns take part in a gate is architectural state. The
peripheral circuit keeps it in volatile latches, so a power cut loses it. The
latches are rebuilt from **bitmasks stored in the array itself**. The reserved
cells are:

```
            col 0        col 1        col 2 ... N-1
row 0..M-3  rowmask[0]   rowmask[1]   data  (M-2 rows x N-2 columns)
row M-2     -            -            colmask[1]
row M-1     RP           CP           colmask[0]
```

- The row bitmask has two copies, `rowmask[0]` and `rowmask[1]`, stored as
  columns 0 and 1. They hold one bit per data row.
- The column bitmask has two copies, stored as rows M-1 and M-2. They hold one
  bit per data column.
- The parity cells `RP` and `CP` name the valid copy: a value `p` selects copy
  `p`.

A bitmask is changed in three steps, each an ordinary instruction:

1. Write the **invalid** copy. For the row bitmask this is a row-logic gate
   whose output is column `1-RP`. The gate reaches only active rows, so this
   is how a subset is selected.
2. Flip the parity cell with `SET` plus the parity flag.
3. Issue `ACT` to load the new mask into the latches.

A power cut at any point leaves a consistent valid copy. Each step can be
repeated without harm, because none of them overwrites its own inputs.

The latches reset to all data lines active. After a restart in the compute
phase, the controller has every driver issue `ACT` rows then `ACT` columns
before it re-issues the interrupted instruction.

Programs must follow two rules that the hardware doesn't check:

- An output line is never an input of the same instruction.
- An output line is never the valid bitmask copy.

Together they make every instruction idempotent.

## Controller and checkpointing

The `controller` runs the cycle **Reception → Encode → Compute → Transmit →
Reception**. Its state lives in non-volatile registers, which `rst_n` (the
restart after a power failure) doesn't touch:

- the status register SR and the program counter PC, each with two copies and
  one parity bit;
- an "encode complete" flag.

An update writes the invalid copy, then flips the parity bit in a later cycle.
An interrupted update therefore leaves the old value in force.

**Compute.** Each instruction takes `INSTR_CYCLES` (4) cycles:

| cycle | action |
|-------|--------|
| 0 | broadcast PC and trigger the drivers |
| 1 | write PC+1 into the invalid copy |
| 2 | the arrays execute the gate |
| 3 | flip the PC parity bit (the commit) |

The next instruction starts only after the commit. A power cut repeats at most
the one instruction that wasn't committed. When PC equals `prog_end`, the
controller clears transmit-complete and moves SR to Transmit. The PC is set to
0 on entry to Compute.

**After a restart**, the controller resumes in the phase named by the valid SR
copy:

- Reception and Transmit hand control back to the radio. Only the packet in
  flight is repeated.
- Encode restarts the encoder from the beginning unless encode-complete is
  set.
- Compute re-activates rows and columns (about `RESTORE_CYCLES` cycles), then
  re-issues the instruction at the valid PC.

`rst_n` plays two roles in every block with non-volatile state. It is the
asynchronous reset of the volatile registers. It also acts, synchronously, as
the enable of every non-volatile write, so nothing is written while power is
failing. Lint tools flag this mixed use; it is intended.

`nv_init` is a separate input. It puts all non-volatile control state into
Reception at the very first power-up, since silicon MTJ registers start at
unknown values.

## Reception, encoding and transmission

**Input buffer (`nv_buffer`).** The input has a fixed size: `NUM_PACKETS`
elements of 3 bits, 784 for a 28x28 image. Each element has its own region
and a valid bit.

- The receiver offers a packet (`rx_pkt_v`, index, data) while `rx_pkt_ready`
  is high.
- The data is written in that cycle. The valid bit is set in the next cycle,
  while `rx_pkt_ack` is high.
- A power cut between the two leaves the packet invalid, and it is accepted
  again when resent.
- When all valid bits are set, the completed bit rises, and the controller
  moves on to encoding.

**Encoder.** The BFV encoder is an external chip. It reads the buffer
(`enc_rd_idx/enc_rd_data`) and writes plaintext rows into grid column 0
through the sense-amplifier write port (`arr_wr_*`, row-wide, bit-masked). It
signals `enc_done` when finished. The same port loads the encrypted model.

**Transmit unit (`tx_unit`).** Only grid column 0 has sense amplifiers. The
program leaves its results there. Packet `k` is row `k mod TX_ROWS` of array
`k div TX_ROWS`, a whole 512-bit row. 4096 packets cover 16 arrays x 256
rows.

- The unit reads a row (1 cycle) and offers it on `tx_valid/tx_idx/tx_data`
  until `tx_ack`.
- The count of acknowledged packets is non-volatile, so a power cut resends
  only the packet in flight.
- While the transmit unit reads, it takes the shared sense port over from the
  encoder.

## Top-level interface (`rodent_top`)

| group | signals | notes |
|-------|---------|-------|
| power | `clk`, `rst_n`, `nv_init` | `rst_n` low = power lost / restart |
| program | `imem_we`, `imem_col`, `imem_addr`, `imem_wdata`, `prog_end` | one memory per grid column |
| receiver | `rx_enable`, `rx_pkt_v/idx/data`, `rx_pkt_ready`, `rx_pkt_ack` | packet handshake |
| transmitter | `tx_enable`, `tx_valid`, `tx_idx`, `tx_data`, `tx_ack` | packet = one array row |
| encoder | `enc_start`, `enc_done`, `enc_rd_idx`, `enc_rd_data`, `arr_wr_v/arr/row/data/mask` | writes grid column 0 |
| status | `sr`, `pc`, `commit`, `restore` | observation |

Parameters and their defaults:

| parameter | default | note |
|-----------|---------|------|
| `M`, `N` | 512 | cells per array (powers of two) |
| `ARR_ROWS` | 16 | 16 x 512 rows cover a 4096-coefficient ciphertext |
| `ARR_COLS` | 3 | third column for the twiddle factors |
| `IMEM_DEPTH` | 4096 | own choice; no program length is known |
| `NUM_PACKETS` | 784 | MNIST input size |
| `PKT_W` | 3 | 3-bit input elements |
| `INSTR_CYCLES` | 4 | minimum 4 |
| `TX_ROWS` | 256 | result rows per array |

The target clock is 30.3 MHz with current MTJs, or 90.9 MHz with projected
MTJ devices.

## Where this RTL departs from or goes beyond the source design

- **MTJ logic is modelled as Boolean functions.** Voltages, output presets,
  currents and device variation are not modelled. One gate completes in one
  clock edge.
- **Own encodings:**
  - opcode values and field order;
  - the neighbour flag and the parity-cell flag;
  - `SET` and `NOP`;
  - the exact cell positions of the bitmasks and parity cells. The drawing
    only names them.
- **Duplicated bitmasks.** One description of the bitmask speaks of a single
  row and column per array. The duplicated layout with parity bits is used
  here, because the checkpointing needs it.
- **One parity bit per variable** for SR and PC. A single shared parity bit is
  also drawn in the source.
- **Separate input buffer.** Received elements go to a dedicated
  non-volatile buffer. The first array column holds the encoder output and
  the results. One description also lets the first column buffer the radio
  input.
- **Activation on a row/column switch.** The source design also issues the
  activate instructions whenever the program switches between row and column
  logic. Here the row and column latches are independent, so that is left to
  the program and isn't needed for correctness.
- **Neighbour transfers** go only down (column logic) and right (row logic).
  If a neighbour write and a local write hit the same line in one cycle, the
  neighbour wins.
- **Handshakes and packets are own choices:**
  - ready/ack on receive;
  - valid/ack on transmit;
  - one element per received packet;
  - one array row per transmitted packet.
  The radio protocol itself was left open by the source design.
- **Same cycle timing for every gate.** The real instruction latency depends
  on the MTJ switching time. `INSTR_CYCLES` is the single knob for it.
- **Not built as RTL:**
  - the BLE radio;
  - the homomorphic encoder, a separate chip;
  - the energy harvester, capacitor and voltage converters;
  - the analog MTJ cell and decoders.
  They appear as ports, and the testbenches contain simple behavioural models
  of the radio and encoder. The encoder model writes each input element
  replicated across a row. It is not a real BFV encoding.
- **No programs are included.** The NTT and modular-arithmetic routines of the
  SVM are software for this machine and aren't specified. The testbenches use
  generated random programs that follow the idempotency rules.
- **Model storage.** The encrypted support vectors need one 110 KB ciphertext
  per input element, which far exceeds the 1.5 MiB of the grid. How they are
  held or streamed isn't specified. Here they are loaded through the
  sense-amplifier port like plaintexts.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_comp_array` | three 16x16 arrays (one below, one to the right) against a reference model: every gate, both modes, neighbour transfers, parity writes, activation |
| `tb_instr_mem` | random write/read, one-cycle latency, hold |
| `tb_driver` | command in cycle t+2, NOP suppression, restore sequence |
| `tb_controller` | two full rounds with random power cuts in every phase; PC sequence with at most one repeat per cut; instruction spacing; restore and encoder restart |
| `tb_nv_buffer` | cut between write and valid, resend, completed bit, clear |
| `tb_tx_unit` | packet order and contents, resend after a cut, completion |
| `tb_rodent_top` | end to end, 2x2 arrays of 16x16 |
| `tb_rodent_full` | the same at the default size, no overrides |
| `tb_svm_kernel` | the SVM dot-product kernel: 14 three-bit inputs (the size of the ADULT benchmark) times 252 support vectors, as a 2116-instruction column-logic program (AND partial products, ripple adders from OR/NAND/AND), with six power cuts during compute; every lane checked against integer arithmetic |

Both end-to-end benches share the harness `rodent_e2e`, with random power cuts
in every phase. It does one full round trip:

1. load a model;
2. receive;
3. encode;
4. run a generated program;
5. transmit.

An independent grid model predicts every transmitted row. The harness counts
each mechanism and fails if one never occurred:

- gates and NOPs;
- column and row neighbour transfers;
- bitmask updates;
- a power cut in every phase;
- one restore per restart in compute;
- encoder restarts;
- a lost received packet and a resent transmitted packet.

It also checks that every instruction commits, with at most one repeat per
cut, and that commits are `INSTR_CYCLES` apart.

At the default size the run executes about 800 instructions and checks 4096
result rows.

The simulator used has two-state logic. Non-volatile contents are therefore
not reset: arrays and instruction memories start random, and the benches
initialise what they read.

Run a test with plain Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/rodent_pkg.sv rtl/*.sv \
    tb/rodent_e2e.sv tb/tb_rodent_top.sv --top-module tb_rodent_top
./obj_dir/Vtb_rodent_top +verilator+rand+reset+2
```

Use `tb/tb_rodent_full.sv` with `--top-module tb_rodent_full` for the
full-size run. It takes about half a minute to build and a few seconds to run.
