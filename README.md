# GRAPE-DR: a SIMD array with grouped PEs, buffer memories and a reduction tree

This is synthesizable SystemVerilog for the modified SIMD architecture described by
J. Makino in "Modified SIMD architecture suitable for single-chip implementation"
(GRAPE-DR, *Greatly Reduced Array of Processor Elements with Data Reduction*).

## The idea

Putting a thousand or more floating-point processing elements (PEs) on one chip is easy.
Feeding them is the hard part. A classic SIMD machine gives every PE its own memory and
links neighbouring PEs through a network. On one chip, the memory would need hundreds of
GB/s of external bandwidth. A 2D network would need thousands of pins once the array
spans several chips. GRAPE-DR drops both:

* a PE is only a register file and an arithmetic unit; it has no memory and no links to
  other PEs;
* all PEs execute the same instruction, sent from outside the chip by a host computer,
  which keeps the data and runs everything except the compute-heavy kernel.

With only those two rules, an array works well only when the kernel has at least one
independent item per PE. Two additions make it work for smaller problems:

* the PEs are organised in **groups**, each with a small **buffer memory**. The host can
  write every buffer memory with different data, or broadcast one word to all of them. All
  PEs of a group read the same buffer-memory word, but different groups can read different
  data;
* a **reduction tree** adds up one value from every group. Several groups can then work
  on parts of the same sum, and the tree combines the parts on chip.

The cost of both additions grows with the number of groups, not with the number of PEs.

```
                    cmd (one host command per clock)
                        |
                  [command register]  ---- instruction, addresses, data broadcast
                        |
        +---------------+----------------+----- ... ------+
        v                                v                v
  group 0                          group 1              group NG-1
  [buffer memory]--word-->PE PE .. PE   ...                ...
        (one word to all PEs of the group)
  PE register read --> [group output reg]  ...          [group output reg]
        |                                |                |
        +--------------> reduction tree (log2 NG pipelined adder levels) --> result
```

At the default size there are 32 groups of 32 PEs: 1024 PEs, each with 32 registers of
64 bits, and a 256-word buffer memory per group.

## Programming model: the host command stream

The chip has one command input, `cmd` (type `grape_pkg::cmd_t`), and one result output,
`result_valid`/`result_data`. Every clock the host presents one command. `CMD_NOP` means
no command. The command is registered once and then acts on every group in the next cycle.

| `kind` | fields used | effect |
|---|---|---|
| `CMD_BM_WRITE` | `bcast`, `grp`, `addr`, `data` | write `data` at `addr` in group `grp`'s buffer memory, or in every buffer memory if `bcast` |
| `CMD_PE_WRITE` | `bcast`, `grp`, `pe_idx`, `reg_addr`, `data` | write `data` to register `reg_addr` of PE `pe_idx` in group `grp`, or of every PE in every group if `bcast` |
| `CMD_EXEC` | `instr` | every PE executes `instr`; each group's buffer memory is read at `instr.bm_addr` |
| `CMD_READ` | `pe_idx`, `reg_addr`, `bcast`, `grp`, `red_op` | in every group, read register `reg_addr` of PE `pe_idx`; sum over all groups (`bcast` = 1), or take group `grp` alone (`bcast` = 0); `red_op` picks a double (`RED_FSUM`) or integer (`RED_ISUM`) sum |

Timing:

* Commands run in order, one per clock, with no stalls. An `EXEC` sees the effect of the
  command just before it. This covers a register written by the previous instruction, a
  buffer-memory word or a register written by the host.
* The result of a `CMD_READ` presented before clock edge *k* appears after edge
  *k* + 1 + log2(NG), which is 2 + log2(NG) clocks later (7 at the default size). Reads
  can be issued on consecutive clocks, and their results come back in order on
  consecutive clocks. A read returns the register contents as they are when the read
  reaches the groups, so commands issued after it do not change its result.
* `rst_n` is asynchronous and active low. It clears only the control state: the command
  register, the valid bits and the reduction-tree operation pipeline. Registers and buffer
  memories are not reset. Write them before reading them.

Out-of-range group, PE or register indices are caught by assertions in simulation.

## The PE and its instruction

Each PE (`pe.sv`) has a register file (`register_file.sv`) and an ALU/FPU (`alu_fpu.sv`).
The register file has two operand read ports, a third read port for the PE's output, and
one write port. The write port takes either the instruction's result or a host
`CMD_PE_WRITE`. The instruction (`grape_pkg::instr_t`) holds these fields:

| field | meaning |
|---|---|
| `op` | `OP_NOP`, `OP_MOV` (y = a), `OP_MOVB` (y = b), `OP_FADD`, `OP_FSUB`, `OP_FMUL` (IEEE-754 double), `OP_IADD`, `OP_ISUB`, `OP_AND`, `OP_OR`, `OP_XOR` (64-bit integer) |
| `dst`, `src_a`, `src_b` | register numbers |
| `b_from_bm` | operand B is the group's buffer-memory word instead of register `src_b` |
| `bm_addr` | buffer-memory address read by every group |

Each instruction finishes in one clock; the ALU/FPU is not pipelined. Operand A always
comes from a register. To use a buffer-memory word as operand A, copy it into a register
first with `OP_MOVB`.

Floating-point arithmetic (`fp_add.sv`, `fp_mul.sv`) is IEEE-754 double with round to
nearest, ties to even. Subnormal inputs are read as zero, and results below the normal
range are flushed to a signed zero. Overflow gives infinity. NaN inputs, inf − inf and
inf × 0 give the quiet NaN `0x7FF8000000000000`. For normal operands and results, every
operation gives exactly the same bits as a C `double`.

## Using groups and buffer memories: two data layouts

The architecture is easiest to understand through the two kinds of kernel it targets.
The end-to-end testbench runs both.

**Pairwise forces, f_i = Σ_j g(x_i, x_j).** The host writes the *i*-particles (those
whose forces are wanted) into PE registers. It writes the *j*-particles (the sources)
into the buffer memories. Then it runs the same short program for every buffer-memory
entry. For a force g = m_j (x_j − x_i), which needs no division:

```
f = 0                              (CMD_PE_WRITE with bcast)
for each j stored in the buffer memory at addresses 2j (x_j) and 2j+1 (m_j):
    r1 = x_i - BM[2j]              OP_FSUB, b_from_bm
    r2 = r1 * BM[2j+1]             OP_FMUL, b_from_bm
    f  = f - r2                    OP_FSUB
```

There are two ways to lay out the particles:

* *Broadcast layout* (many i-particles): every PE of every group holds a different
  *i*-particle. The same *j*-particles are broadcast into all buffer memories. Each force
  is read alone with a single-group `CMD_READ`. This is the plain SIMD scheme, with
  NG × NPE *i*-particles per pass.
* *Reduction layout* (few i-particles, or short-range forces): PE *p* holds the same
  *i*-particle in every group. Each group's buffer memory gets a different share of the
  *j*-particles. A `CMD_READ` with `bcast` adds the partial forces of all groups. Only
  NPE *i*-particles are needed to keep the whole array busy.

**Matrix product, C = A B.** PE *p* of group *g* holds the block A[p][gK .. gK+K−1] in
registers 0 .. K−1. A column *b* of B is cut into NG pieces, and piece *g* goes into group
*g*'s buffer memory. Every PE computes its partial dot product:

```
acc = 0
for k in 0 .. K-1:  t = r_k * BM[k];  acc = acc + t
```

A reduced `CMD_READ` of `acc` from PE *p* then returns c[p] = Σ_g partial[g][p]. At the
default size one pass handles a 32-row block of A that is 32 × K columns wide. K can be
up to 30 when two registers are kept for the accumulator and a temporary.

## The reduction tree

`reduction_tree.sv` is a binary tree of adders with one register per node. With NG
inputs it has log2(NG) levels and accepts a new set of inputs every clock. NG need not be
a power of two: missing leaves are +0. Each node adds either as a double or as a 64-bit
integer. The operation travels down the pipeline with its data, so reads of different
kinds can follow each other on consecutive clocks. Groups outside the read's mask
contribute +0. This is how a single group's value passes through unchanged: x + 0 = x.

Floating-point sums are rounded at every node, in tree order: ((g0+g1)+(g2+g3))+…. The
result is deterministic, but it is not the same as adding the groups one after the other.
The testbenches build their expected values in exactly this order.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `grape_dr` | `NG` | 32 | groups |
| `grape_dr`, `pe_group` | `NPE` | 32 | PEs per group |
| `grape_dr`, `pe_group`, `pe`, `register_file` | `NREG` | 32 | registers per PE (at most 256, set by the instruction fields) |
| `grape_dr`, `pe_group`, `buffer_memory` | `BM_DEPTH` | 256 | words per buffer memory (at most 4096) |
| `grape_pkg` | `W` | 64 | word width |

Group and PE indices are 12 bits wide in the command, so `NG` and `NPE` can each be up to
4096.

## What follows the architecture and what is this implementation's own

The architecture itself gives the following, and this RTL follows it:

* PEs that hold only a register file and an arithmetic unit, with no memory and no
  inter-PE network;
* the same instruction broadcast to all PEs from outside the chip;
* groups, each sharing one buffer memory;
* host writes to one buffer memory or to all of them;
* a reduction tree over the groups;
* the use of this structure for pairwise forces and for the matrix product, as above.

The following are this implementation's own choices:

* **Sizes.** Word width: 64 bits. The architecture's bandwidth example, one word per
  clock per PE at 800 GB/s for 100 PEs at 1 GHz, implies 8-byte words. Array size:
  32 × 32. The architecture speaks of "1,000 or more" PEs but gives no group count.
  Registers: 32. Buffer memory: 256 words.
* **The instruction set and the host command format.** The architecture gives neither.
* **A single-cycle ALU/FPU.** The architecture speaks of fully pipelined FPUs. A
  pipelined unit would need a rule for when a result may be used, and the architecture
  does not give one. This design uses a combinational unit instead, so an instruction
  may always use the previous result. A faster implementation would pipeline the FP unit
  and let the host's instruction schedule allow for its latency.
* **The number format.** IEEE-754 double arithmetic, with subnormals flushed to zero.
  There is no divide or square root, so forces such as gravity (1/r²) cannot be computed
  on the array as it stands.
* **The reduction tree's details.** Its pipelining, the integer mode and the group mask
  are this design's.
* **How a group's PEs share their output line.** Here one PE's register is selected,
  then registered.
* **The host computer** is outside the chip. The testbenches play its role.

The following is left out:

* **Multi-chip systems.** The architecture is meant to scale to systems of many chips.
  The chips need no links between them, and the broadcast and reduction become
  hierarchical. Only one chip is given here. Broadcasting commands to several chips and
  adding their results is left to the logic that surrounds the chips.
* **The basic architecture without groups** needs no separate design. It is covered as
  a special case: broadcast register writes and single-group reads give plain SIMD
  behaviour.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`.

* `tb_alu_fpu`: 60,000 random double additions, subtractions and multiplications,
  compared bit for bit with the simulator's `real` arithmetic. Also directed cases for
  ties, cancellation, zeros, infinities, NaN and overflow, and the integer operations.
* `tb_register_file`, `tb_buffer_memory`: random reads and writes compared with a model
  array.
* `tb_pe`: random instruction sequences, including back-to-back dependences and
  buffer-memory operands, compared with a model register file.
* `tb_pe_group`: individual and broadcast register writes, buffer-memory operands, and
  the output line with its one-clock latency.
* `tb_reduction_tree`: back-to-back random input sets at NG = 32 and NG = 5, with mixed
  double and integer sums and random masks. Checks the value and the latency.
* `tb_grape_dr`: the whole array at 4 groups × 4 PEs. It runs the matrix-vector product,
  both force layouts and an integer sum, and checks every result and the read latency.
  It counts each mechanism: individual and broadcast writes, buffer-memory and register
  operands, reduced and single-group reads, double and integer sums, back-to-back reads.
  A mechanism that never happens counts as a failure.
* `tb_grape_dr_full`: the same test at the default size of 1024 PEs. It takes about half
  a minute to build and run.

To run one with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_grape_dr \
    -y rtl -y tb +libext+.sv rtl/grape_pkg.sv tb/tb_grape_dr.sv
./obj_dir/Vtb_grape_dr
```

The design was also parsed and elaborated by the slang front end of Yosys. Full gate-level
synthesis of the 1024-PE top takes a long time, because every PE holds its own
double-precision adder and multiplier.

## Files

`rtl/grape_pkg.sv` holds the shared types: the word, the opcodes, the instruction and the
command. The modules, bottom-up:

* `fp_add`, `fp_mul`: the floating-point adder and multiplier;
* `alu_fpu`, `register_file`, `pe`: the PE;
* `buffer_memory`, `pe_group`: a group;
* `reduction_tree`;
* `grape_dr`: the top.
