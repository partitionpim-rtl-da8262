# Partitioned memristive crossbar: periphery and control in SystemVerilog

A memristive crossbar can compute as well as store. If you apply an input
voltage to some bitlines and an output voltage to another, every row of the
array computes a NOR of its input cells into its output cell in a single cycle.
A plain crossbar does only one such gate per cycle. If you cut each row with
isolation transistors into *partitions*, several gates can run side by side in
the same cycle, one in each group of connected partitions (a *section*).

Partitions can multiply the speed of row-parallel arithmetic. The open
question is the hardware that drives them: the bitline decoders and the
control message. This RTL implements three ways of doing that. They trade the
size of the control message against how freely the partitions can be used:

| model     | what an operation may be                                    | message bits (N=1024, K=32) |
|-----------|-------------------------------------------------------------|-----------------------------|
| unlimited | any indices in every partition, any division into sections  | 3K·log2(N/K) + 3K + (K−1) = 607 |
| standard  | same column indices in every partition, any sections        | 3·log2(N/K) + (2K−1) + 1 = 79   |
| minimal   | same indices, gates repeating with a period at a fixed partition distance | 3·log2(N/K) + 3·log2(K) + log2(K) + 1 = 36 |

The default configuration is a 1024 × 1024 crossbar with 32 partitions of 32
bitlines each, driven by the minimal model.

## Operations: serial, parallel, semi-parallel

Number the partitions 0 (left) to K−1 (right). Transistor `tsel[j]` sits between
partitions j and j+1. In this design `tsel[j] = 1` means the transistor
*conducts*, so partitions j and j+1 belong to the same section. A section holds
at most one gate. Its inputs are all bitlines in the section driven with V_IN,
and its outputs are all bitlines driven with V_OUT.

* **Serial**: every transistor conducts. One gate may use any columns of the row.
* **Parallel**: no transistor conducts. Each partition runs its own gate on its own columns.
* **Semi-parallel**: anything in between. For example, gates span pairs of
  partitions and read in partition p and write into partition p+1.

A NOT is a NOR whose two inputs are the same column.

## Half-gates: decoding per partition

Each partition has one *half-gate decoder* (`half_gate_decoder`). It takes a
3-bit opcode {InA, InB, Out} and three one-hot column selects. It drives V_IN
on the InA column if the InA bit is set and on the InB column if the InB bit is
set, and V_OUT on the Out column if the Out bit is set. A gate whose inputs and
output sit in different partitions is therefore split into two halves: the
input partition gets opcode `110` and the output partition gets `001`. The
section formed by the transistors joins the halves into one gate. The column
selects come from ordinary one-hot decoders (`cmos_decoder`).

What the real periphery then does is an analog step: each bitline multiplexer
picks V_IN, V_OUT or isolation. That step is not modelled. The crossbar model
takes the two select vectors `vin[N]` and `vout[N]` directly.

## The three peripheries

**Unlimited** (`unlimited_periphery`). Every partition has its own three
column indices and its own opcode, and every transistor select is sent
explicitly. Message layout, lowest bits first:
`[InA,InB,Out of partition 0] ... [partition K−1] [opcodes 0..K−1] [tsel]`.
Each partition's decoders are enabled by its opcode bits.

**Standard** (`standard_periphery`). One set of column indices is shared by
all partitions, and each partition has one enable bit. The opcodes are not
sent. The *opcode generator* (`opcode_generator`) works them out from the
transistor selects and one direction bit `dir`:

* An enabled partition whose left neighbour is cut off (`tsel[p−1] = 0`, or p = 0) is
  the left end of its section.
* An enabled partition whose right neighbour is cut off is the right end of its section.
* With `dir = 0` (inputs to the left of outputs), the left end gets the input
  bits and the right end gets the output bit. With `dir = 1` it is the other
  way round.
* A partition that forms a section on its own gets both, so a
  parallel gate inside one partition works.

Per partition this is two 2:1 multiplexers and three AND gates. Layout:
`[InA][InB][Out][en × K][tsel × (K−1)][dir]`.

**Minimal** (`minimal_periphery`). The gates must repeat with a period. The
message gives:

* the shared column indices
* the first and last input partitions `p_start` and `p_end`
* the period T, sent as `t_code = T−1`
* the partition distance `p_dist` from each input partition to its output partition
* `dir`

The *minimal pattern generator* (`minimal_pattern_generator`) expands these
into opcodes and transistor selects:

1. The *range generator* (`range_generator`) builds the input-partition mask.
   A decoder on `t_code` selects one of K constant patterns, which has a one at
   every multiple of T. A shift by `p_start` moves the pattern to its first
   partition, and a right-shifted all-ones mask cuts it off after `p_end`.
2. The output mask is the input mask shifted by `p_dist`: towards higher
   partitions when `dir = 0`, towards lower ones when `dir = 1`. Bits shifted
   past the array edge are dropped.
3. Input partitions get opcode `11x` and output partitions get `xx1`.
4. With `dir = 0`, transistor j isolates when partition j holds an output or
   partition j+1 holds an input. With `dir = 1`, it isolates when partition j
   holds an input or partition j+1 an output. Otherwise it conducts.

   Each gate's span, from its input partition to its output partition, is
   therefore one section. Partitions between gates are either joined to a
   neighbouring gate or idle, and an idle partition drives no bitline.

Layout: `[InA][InB][Out][p_start][p_end][t_code][p_dist][dir]`.

The minimal model cannot express an operation that violates its own rules. An
example is a gate whose output would fall outside the array: `p_dist` then
shifts the output mask past the edge and that gate loses its output. Producing
legal messages is the controller's job.

## Crossbar model

`crossbar` is a behavioural model of the array, not a circuit. It stores
one `ROWS`-bit vector per bitline (column-major), so that a column operation
is a few wide vector operations. When an operation happens:

1. The model ORs, per partition, the cells on the V_IN bitlines.
2. A left-to-right and a right-to-left scan over the conducting transistors
   spreads those ORs across each section.
3. Every V_OUT cell of a section is overwritten with the NOR.

The NOR is ideal: the output cell is not first initialised, and the gate does
not depend on its old value. A section that has outputs but no inputs writes
1s. The model also has a row write port and a combinational row read port, so
that data can be loaded and read back.

## Top level and timing

`partition_pim` holds one crossbar and the periphery that the `MODEL`
parameter selects (`MODEL_MINIMAL` by default). The width of the `msg` port
follows from the model (`msg_bits` in `pim_pkg`). The peripheries are purely
combinational. If `msg_valid` is high at a rising clock edge, the operation is
applied at that edge, so the design runs one operation per clock. The
controller that issues the messages, and so the arithmetic programs such as
multiplication, is outside this design. Its signals are the `msg_valid` and
`msg` ports.

## Departures from the paper and choices made here

* **Meaning of `tsel`.** The text speaks of a transistor being "selected". The
  partition figure shows the conducting transistors joining partitions into
  sections. This design follows the figure: 1 means conducting.
* **Design choices.** The paper leaves these open, so this design fixes them:
  * the order of the fields within each message
  * the encodings `t_code = T−1` and `dir = 0` for "inputs on the left"
  * the one-cycle timing
  * the `msg_valid` strobe
  * the row read and write ports
* **Analog and controller parts are not modelled.** The voltage multiplexers
  on the bitlines and the controller are left out. The first are analog, and
  the paper does not design the second.
* **Two-input gates only.** Only the two-input NOR/NOT case is built. The paper
  notes that the scheme generalises to three-input gates.

## Testbenches

Every module in `rtl/` has a self-checking testbench in `tb/`, and each prints
a `TB_RESULT checks=... failures=...` line.

* `tb_partition_pim` runs 206 operations (6 directed and 200 random) on a
  64-bitline, 8-partition, 16-row instance of each of the three models side by
  side. It checks every row against a reference after every operation, and
  counts the serial, parallel, semi-parallel, both-direction and NOT operations
  it produced.
* `tb_partition_pim_full` runs the top at its default size of 1024 × 1024 with
  32 partitions:
  * it loads random data
  * it runs serial, parallel NOR, parallel NOT, two semi-parallel operations
    and a right-to-left serial gate
  * it compares all 1024 rows after each operation

To simulate one of them with plain Verilator:

    verilator --binary --timing -Mdir obj rtl/pim_pkg.sv rtl/*.sv tb/tb_partition_pim.sv --top-module tb_partition_pim
    ./obj/Vtb_partition_pim

The full-size model takes about half a minute to compile and a second to run.

To resize the design, change `N`, `K` and `ROWS` on `partition_pim`. `N/K`
and `K` should be powers of two, because the indices are log2-wide fields.
