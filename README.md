# EMMS quantum emulation accelerator (QEA)

This is a register-transfer model of an FPGA accelerator that emulates a quantum circuit on a state
vector. It uses gate fusion and stores every operator sparsely, in the Efficient-Memory Matrix Storage
(EMMS) form. The top module is `qea_top`. Its defaults are 16 processing elements (PEs), 4096-word
local data memories (LDMs) and a 65536-word T(Gbar) memory. A state of up to 16 qubits stays on chip
for the whole program.

## The idea: never build the fused unitary

A fused group of gates acting on n qubits is a unitary U of size N x N, with N = 2^n. EMMS splits the
qubits into a high part of nbar qubits and a low part of n - nbar qubits. U is then written as
U = T(Gbar) ⊗ T(G):

- T(Gbar) is the Nbar x Nbar tensor product of the high-part gates (Nbar = 2^nbar).
- T(G) is the B x B tensor product of the low-part gates (B = N / Nbar).

Both factors are kept as lists of non-zero entries (COO tuples). The full unitary is never stored.
For each T(Gbar) entry (i, j, g), output block i receives g · T(G) · (input block j):

    psi'[i*B + k] += g * G[k][l] * psi[j*B + l]      for every (k, l, G[k][l]) in T(G)

This needs only nnz(T(Gbar)) + nnz(T(G)) stored words instead of N².

## Data format

Every word in the datapath is a 128-bit COO tuple:

| bits    | field | meaning                                   |
|---------|-------|-------------------------------------------|
| 127:96  | row   | 32-bit unsigned row index                 |
| 95:64   | col   | 32-bit unsigned column index              |
| 63:32   | re    | real part, signed Q2.30                   |
| 31:0    | im    | imaginary part, signed Q2.30              |

A state amplitude alpha_k travels as (k, 0, alpha_k). Products are truncated back to Q2.30. There is
no rounding or saturation.

## Block structure

```
host bus ──► axi_mapper ──► gate_memory ──► pea_controller ◄──► coo_matrix_generator
                │                               │  ▲
                │                               ▼  │ T(Gbar) tuples
                │                         tgbar_memory ◄── PE 0 (last T(Gbar) pass)
                ├─► write_arbiter ──► pea: PE_0 … PE_P-1 ◄─► ldm_xbar
                └─◄ read_arbiter  ◄──┘
```

Each PE (`pe`) holds five parts:

- `pe_control`: the sequencer.
- `complex_alu`: the arithmetic unit.
- `load_store_unit`: stores ALU results.
- Three `ldm` instances:
  - LDM1 holds this PE's share of T(G).
  - LDM2 and LDM3 hold the current state |psi_t> and the next state |psi_t+1>.

A `cur` bit says which of LDM2 and LDM3 holds |psi_t>. The bit flips after every group, so the new
state becomes the next group's input without any copy. While a group's T(G) is being built, the
buffer that does not hold |psi_t> serves as scratch space for intermediate lists.

## The complex ALU

The ALU has three 128-bit operands (a, b, c), a 2-bit matrix size (log2 of the gate size: 1 or 2) and a
mode. It is pipelined with two register stages and accepts one operation per cycle.

- **TP (tensor product).** Computes (a.row << msize) + b.row and (a.col << msize) + b.col. The value
  is a.val · b.val, a complex product that uses four multipliers, one subtractor and one adder.
- **MM (multiply).** Computes (a.row, 0, a.val · b.val · c.val). The second complex product is
  computed in parallel from the same operands, using another four multipliers. Output multiplexers
  pick the TP or MM result.

Each ALU therefore has eight multipliers.

## Distribution of the state over the PEs

Amplitude r lives in PE r mod P, at local address r / P. The interleaving spreads both host transfers
and the reads of each matrix-multiply (MM) step over all banks.

- The `write_arbiter` routes a host tuple by its row.
- The `read_arbiter` selects the owning PE and returns its word one cycle later.

The row k of T(G) is needed by the PE that owns output index i*B + k. Because B is a multiple of P,
that PE is k mod P. So each PE keeps only the T(G) rows k with k mod P == PE_ID. This costs nothing
extra: the last T(G) pass runs with an ownership *filter* in the load/store unit, which drops the rows
the PE does not own.

## One fused group, step by step (`pea_controller`)

The program in the gate memory is a list of groups. Each gate is tagged GBAR (high part) or G (low
part). Each group ends with EXEC, and HALT ends the program. Within a part, the first gate listed is
the most significant factor. For each group the controller works through these steps:

1. **Scan.** Reads the group and counts the GBAR gates (mbar) and G gates (mg). Sums log_b = log2 B
   from the gates' matrix sizes.
2. **Build T(Gbar).** Runs one tensor-product pass per GBAR gate:
   - The first pass starts from the 1 x 1 list {(0,0,1)}.
   - Each pass reads the previous list, pairs every entry with every entry of the gate's COO list,
     and writes the products. It does one pair per cycle.
   - Destinations ping-pong between LDM1 and the scratch buffer. They are chosen backwards from the
     last pass, so the last pass always writes into the T(Gbar) memory. Only PE 0 is connected to
     that memory.
   - PE 0's final count is nnz(T(Gbar)).
3. **Build T(G)** the same way. Its last pass writes into LDM1 with the ownership filter on.
4. **Clear** the next-state buffer: nnz(T(Gbar)) · B / P words per PE, one word per cycle.
5. **Multiply.** Reads T(Gbar) one tuple at a time and broadcasts each tuple as a PE_MM command. Each
   PE then walks its rows of T(G) in LDM1, one tuple per cycle. The controller sends the next T(Gbar)
   tuple as soon as every PE has *issued* its work; it does not wait for the results to drain. After
   the last tuple it waits until all PEs are idle.
6. **Swap.** Flips `cur`.

The controller's counters record cycles, groups, TP passes and broadcast T(Gbar) tuples. The host
can read them, together with the total crossbar stall count.

## The hard part: the multiply step across PEs

For the tuple (k, l, G) of T(G) and the broadcast tuple (i, j, g), a PE needs the input amplitude
psi[j*B + l]. That amplitude usually lives in a different PE. The PEs reach each other through
`ldm_xbar`, a P x P read crossbar on the |psi_t> buffers:

- Each PE can raise one request per cycle, naming a bank and an address.
- Each bank grants its lowest-numbered requester and drives its read port.
- The data returns to the granted PE one cycle later.
- A PE that is not granted holds its T(G) tuple and retries the next cycle. This is a stall.

Fixed priority cannot starve a PE, because every PE's list is finite and the higher-priority PEs move
on. When granted, the PE presents the following to the ALU in MM mode:

- a = (i*B + k, 0, g)
- b = (k, l, G)
- c = the returned amplitude

Several T(G) entries in one row k, and several T(Gbar) tuples with the same row i, add into the same
output amplitude. So the load/store unit does a **read-modify-write accumulate** into the next-state
buffer. The read happens when a result arrives, and the sum is written one cycle later. When two consecutive
results hit the same address, the second takes the first one's sum from a **forwarding register**
instead of the stale memory word. Results arrive at most one per cycle and the write follows the read
by exactly one cycle, so this one-deep forwarding covers every read-after-write hazard.

## Program limits (not checked in hardware)

- Each group has at least one GBAR gate and at least one G gate.
- B = 2^log_b ≥ P, so every PE owns whole T(G) rows and an equal slice of each block.
- N ≤ P · LDM depth (16 qubits at the defaults).
- Every intermediate TP list, and nnz(T(G)) / P, fit in one LDM.
- nnz(T(Gbar)) ≤ T(Gbar) memory depth.
- Two-qubit gates act on adjacent qubits within a part.

## Gates and instructions

An instruction is 128 bits:

| bits   | field                          |
|--------|--------------------------------|
| 127:124 | op: HALT 0, GBAR 1, G 2, EXEC 3 |
| 123:119 | gate code                      |
| 118:64 | reserved                       |
| 63:32  | pa, Q2.30                      |
| 31:0   | pb, Q2.30                      |

The host supplies pa and pb: cos λ and sin λ for P and CP, or cos(θ/2) and sin(θ/2) for RX, RY, RZ,
CRX, CRY and CRZ. The hardware needs no trigonometry.

The COO matrix generator (`coo_matrix_generator`) covers these gates:

- I, P, X, Y, Z, S, SDG, T, TDG, RZ, H, SX, RX, RY
- CRZ, CRX, CX, CY, CZ, CP, CRY, CH

It is combinational and produces up to six entries. The entry count and the matrix size come with
the list.

## Host interface (`axi_mapper`)

The host interface moves one 128-bit word per cycle. Address bits 31:28 select the region:

| region | write | read |
|--------|-------|------|
| 0 control | bit 0 starts the program | bit 0 busy, bit 1 done, bits 31:2 cycles, 63:32 groups, 95:64 TP passes, 127:96 T(Gbar) tuples |
| 1 gate memory | instruction at addr[27:0] | – |
| 2 state | tuple (k, 0, alpha) goes to its owner PE | amplitude of index addr[27:0], one cycle later |

The AXI channel handshakes are not modelled. This block is only the decoding behind them.

## Timing

| operation | rate |
|-----------|------|
| TP pass | one pair per cycle, plus 2 cycles of setup |
| clear | one word per cycle |
| MM, per T(Gbar) tuple | nnz(own T(G) rows) + 1 cycles plus stalls, plus about 2 cycles in the controller |
| host transfers | one tuple per cycle |

The paper's estimate (Eq. 5) charges (Nbar + N/Nbar)/P cycles for the tensor products and N/P for
the multiply. This design takes longer for three reasons:

- **Redundant TP lists.** Every PE computes the complete T(Gbar) and T(G) lists and keeps what it
  needs. The paper divides that work by P but does not say how.
- **The real MM cost.** The multiply costs nnz(T(Gbar)) · nnz(T(G)) / P. That equals N/P only when
  both factors have one non-zero per row.
- **Per-tuple overhead.** There is a few-cycle handshake per T(Gbar) tuple.

Example: one 16-qubit group of H⊗H on the high part and twelve X gates plus a CX on the low part takes
57 590 cycles. Eq. 5 gives about 5 120.

## Differences from the paper

These came from reading the paper again against the RTL:

1. **T(Gbar) and T(G) are built one after the other.** The text says both "simultaneously" and
   "sequentially"; this design builds them in sequence.
2. **The state stays in LDM2/LDM3 between groups.** One passage says the state returns to DDR after
   every group; the cycle model (Eq. 5) assumes it stays on chip. This design keeps it on chip.
   Streaming from DDR for states larger than P · LDM depth (Eq. 7) is **not built**, because the
   paper does not say how the portions are chosen.
3. **The 16-qubit on-chip limit.** The paper says 2 to 18 qubits fit on chip. That holds for 4 PEs ×
   2^16 or 8 PEs × 2^15. The default here, 16 PEs × 2^12, holds 16 qubits, which matches the paper's
   own remark about that version.
4. **Corrected gate table entries.** Table I was followed except in these cells:
   - **P:** the diagonal entry is placed at (0,0).
   - **TDG:** (1,1) is the conjugate of T's entry.
   - **CY:** uses ∓i, not real ±1.
   - **Y:** takes Table I's sign, not Fig. 2's.
5. **Added pieces.** The identity gate, the instruction encoding and the region map are this design's.
6. **Simplified host bus.** A plain one-word-per-cycle bus replaces the AXI bus and the 64-bit PIO
   path. The processing system, DMA, DDR and the software stack are outside the design.
7. **Added crossbar, accumulate and forwarding.** The inter-PE crossbar, the accumulate with
   forwarding, and the ownership filter are this design's answers to questions the paper does not
   address.
8. **Redundant TP work.** The tensor-product work is not split across PEs (see Timing).
9. **ALU pipeline depth.** The ALU has two pipeline stages. The paper says only "pipelined".

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_complex_alu` | TP/MM results and the 2-cycle latency against a reference model |
| `tb_coo_matrix_generator` | every gate at several angles against the textbook matrices |
| `tb_ldm`, `tb_gate_memory`, `tb_tgbar_memory` | random traffic against an array; read latency and hold |
| `tb_write_arbiter`, `tb_read_arbiter`, `tb_axi_mapper` | routing, back-to-back reads, status fields |
| `tb_load_store_unit` | list appends, filter, clear, accumulate with hot addresses (forwarding) |
| `tb_pe_control` | the ALU operand stream and its cycle counts under random crossbar stalls |
| `tb_pe` | one PE of two running a 4-qubit group |
| `tb_pea` | four PEs running a 5-qubit group with crossbar stalls |
| `tb_pea_controller` | the pass schedule, clear counts, MM order and `cur` over a three-group program |
| `tb_qea_top` | a 7-qubit, four-group circuit end to end at the default size, compared with a software state-vector model; counts TP passes with 4x4 gates, filter drops, forwarding hits, ALU mode changes and crossbar stalls, and fails if any is zero |
| `tb_qea_16q` | the default configuration on 16 qubits; all 65 536 amplitudes checked |

To run one testbench with Verilator:

    verilator --binary --timing -y rtl rtl/qea_pkg.sv tb/tb_qea_top.sv --top-module tb_qea_top
    ./obj_dir/Vtb_qea_top
