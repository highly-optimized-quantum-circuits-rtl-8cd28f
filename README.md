# A streaming quantum-circuit simulator for gate synthesis

Variational gate synthesis looks for a circuit of parametrised gates whose
unitary V matches a target unitary U. The optimiser needs, many thousands of
times, the cost function (built from the trace of V U^dagger) and its
gradient with respect to every gate parameter. This RTL computes those traces
in hardware. It never stores a gate as a 2^n x 2^n matrix. Instead it streams
U^dagger element by element, column by column, through a long chain of
*Gate blocks*. Each block applies one gate to the stream on the fly, so after
the chain the stream carries G_k ... G_1 U^dagger. A gradient component is the
same product with one gate replaced by its derivative. It is streamed through
the same chain right behind the cost-function matrix, with different kernels
loaded into the blocks.

The chip holds four independent engines (one per SLR, a Super Logic Region of
the FPGA). Each engine has a chain of 108 Gate blocks arranged as 6 groups of
18. It supports registers of up to 9 qubits. A circuit longer than the chain
is applied in several passes. Intermediate matrices are parked in the
on-board DRAM between passes.

## Numbers

Every value is a 32-bit two's-complement fixed-point number with 30 fraction
bits (Q2.30, range [-2, 2)). A complex element is a `cpx_t` pair `{re, im}`,
64 bits in all. Unitary entries have magnitude at most 1, so the format holds
every element of V and every partial sum of a gate.

Each complex product uses three real multiplications (Knuth's 3M form):

    k1 = br(ar + ai)   k2 = ar(bi - br)   k3 = ai(br + bi)
    re = k1 - k3       im = k1 + k2

The products are kept at full width (66 bits). A Gate block adds its two
products and rounds to nearest only once, after the final sum (`round60` in
`qgd_pkg`). There is no saturation: a valid unitary input cannot overflow.

## The Gate block (`gate_block`)

This block is the heart of the design and the part that needs the most care.

A single-qubit gate on target qubit t mixes, within each column of V, the two
elements whose row indices differ only in bit t:

    V'[I] = u00 V[I] + u01 V[I + 2^t]     if bit t of I is 0
    V'[I] = u11 V[I] + u10 V[I - 2^t]     if bit t of I is 1

In a column-major stream the partner element is 2^t slots ahead of or behind
the current one. The block splits the incoming stream into two arms:

* **Direct arm.** `stream_fifo` delays it by a fixed D = 2^(NQ-1) slots
  (256 for NQ = 9). The element leaving the FIFO is the "current" element
  V[I].
* **Partner arm.** `stream_offset` records the last 2^NQ elements. For
  current index I it reads the element written D - 2^t slots back (partner
  ahead, bit t = 0) or D + 2^t slots back (partner behind, bit t = 1). The
  read distance therefore stays within 0 ... 2^NQ.

An `index_counter` runs in step with the direct arm's output. It gives I,
bit t of I and the control bit. `unitary_transform` then selects the kernel
row by bit t and forms the sum of the two products. If the gate is controlled
and the control bit is 0, the element passes unchanged.

The offsets are fixed for the largest register (NQ). A register of n < NQ
qubits uses the same D, which still covers every target t < n. A column never
mixes with its neighbour, because the partner distance is at most 2^(n-1)
and a column is 2^n elements long.

**Latency and rate.** On an unstalled stream an element leaves D + 3 cycles
after it enters: D for the FIFO, one cycle for the offset read, and two for
the multiply/round stages. Throughput is one element per cycle.

**Flow control.** The block advances only when a new element comes in. Two
exceptions let the last elements out:

* At an input column boundary the block may advance with an empty slot
  instead, which flushes the elements still inside.
* Empty slots between columns never corrupt a result. Every partner of a
  column lies within that same column, and an empty slot inside a column is
  never created.

The block also stalls while its output is not taken or while the next
matrix's kernel has not arrived. After reset it is not ready for about D
cycles while the FIFO memory is cleared.

**Kernel hand-over.** A kernel (`kernel_t`) holds:

* the four entries u00, u01, u10, u11;
* the target and control qubits, and a "controlled" flag;
* a derivative flag.

The block takes a kernel from its queue when the first element of a matrix
reaches the transformation stage. It holds that kernel for all 4^n elements,
so consecutive matrices in one stream can carry different gates. A derivative
kernel of a controlled gate outputs 0, not a pass-through, where the control
is 0: the derivative of the identity part is zero.

## Groups, FIFOs and the kernel bus (`gate_group`, `group_fifo`, `gate_chain`)

Inside a group of 18 blocks, each block's valid/ready output connects
directly to the next block's input. The group stalls as one unit. A small
`group_fifo` (16 entries) joins consecutive groups and decouples their
stalls.

Kernels reach the blocks over one bus per chain. The bus carries a tag, 0 to
107, equal to the block's position in the chain. Each block has a 4-entry
kernel queue that accepts only its own tag. The bus is ready when the
addressed queue has room, so a full queue exerts back-pressure on the kernel
generator.

## Kernel generator (`kernel_generator`, `cordic`)

The host uploads each gate as four 32-bit pockets:

| pocket | contents |
|---|---|
| 0 | `[3:0]` target, `[7:4]` control, `[8]` controlled |
| 1 | theta/2 as a binary angle (2^32 = 2 pi) |
| 2 | phi (same encoding) |
| 3 | lambda (same encoding) |

The gate is the general single-qubit rotation

    U3 = [[cos(theta/2),            -e^{i lambda} sin(theta/2)],
          [e^{i phi} sin(theta/2),   e^{i(phi+lambda)} cos(theta/2)]]

A CNOT, for example, is U3(pi, 0, pi) with the controlled flag set. The gate
table holds up to 1024 gates.

For a job of P passes and M matrices, the generator walks through pass,
matrix and chain position g. For each it sends the kernel of gate
p*108 + g to block g. Positions past the last gate get an exact identity.

Matrix 0 of a job is the cost function. Each matrix m >= 1 is a gradient
component. Entry m-1 of the *derivative table* (written by the host) names
its gate and its parameter. That gate's kernel is replaced by its derivative,
using the parameter-shift identities:

| parameter | derivative |
|---|---|
| theta | half-angle + pi/2, every entry halved |
| phi | phi + pi/2, row 0 (independent of phi) set to zero |
| lambda | lambda + pi/2, column 0 set to zero |

One pipelined CORDIC (30 iterations, 34-bit internal width) is shared. Each
gate feeds it four angles on consecutive cycles: theta/2, phi, lambda and
phi+lambda. One kernel is therefore finished every four cycles. A chain
needs 108 kernels (432 cycles) per matrix, and a matrix takes 4^n cycles to
stream. The generator keeps up from n = 5 on. For smaller registers the
kernel supply sets the pace, and the four-entry queues soften the effect.

## Jobs, passes and the on-board buffers (`mem_addr_gen`, `slr_engine`)

A job is given by `job_t`: the qubit count n, the gate count N_G and the
matrix count M (1 to 255). The engine runs P = ceil(N_G / 108) passes. Each
pass streams M matrices of 4^n elements, so a job takes about
4^n * M * P cycles.

Element addresses count complex elements. Each matrix occupies a *region* of
4^n elements:

    region 0                 U^dagger (written by the host, column-major)
    region 1 + b*M + m       bank b (0 or 1), matrix m
    address = region * 4^n + row + col * 2^n

The passes use the regions as follows:

* Pass 0 reads U^dagger once for every matrix.
* Pass r writes bank r mod 2.
* Pass r > 0 reads bank (r-1) mod 2.
* After the job, the cost-function matrix is in bank (P-1) mod 2, matrix 0.

**Read interlock.** Pass r > 0 starts reading matrix m as soon as the reads
of pass r-1 are done. The chain may still be writing that matrix, so
`rd_wait` holds a read until the same matrix of the previous pass has been
written completely. With many matrices per job (long streams) reading never
waits. With few small matrices it waits for the chain to drain. Such jobs
then run slower, but still correctly.

Memory requests are element-sized valid/ready streams. `mrq_*` are read
addresses; read data comes back in order on `mrd_*`. `mwr_*` carry write
address and data. The DDR4 controller that would serve them is not part of
this RTL.

## Trace (`trace_unit`)

In the last pass, `trace_unit` watches the output of the chain. It sums the
diagonal elements (row = column) of every matrix into a 48-bit accumulator
with 30 fraction bits. After the last element of matrix m it raises
`tr_valid` for one cycle, with `tr_mat` = m and the complex trace on
`tr_re` / `tr_im`. The host turns the traces into the cost function and the
gradient.

## Top (`qgd_dfe`) and how to drive it

`qgd_dfe` holds NSLR = 4 independent `slr_engine`s. Every port is an array
indexed by engine, e.g. `gw_data[s]` and `mrq_addr[s]`. One clock and one
synchronous active-high reset serve all of them. Per engine, the host does
the following:

1. Wait about 256 cycles after reset while the FIFOs clear.
2. Pulse `gw_clear`, then send 4 pockets per gate with `gw_valid`/`gw_data`.
3. Write derivative-table entries with `dt_we`, `dt_addr` (= m-1),
   `dt_gate` and `dt_sel` (`D_THETA`, `D_PHI` or `D_LAMBDA`).
4. Store U^dagger in region 0 of the memory.
5. Pulse `job_start` with `job` = {n, N_G, M}.
6. Collect M trace pulses. `done` goes high again when the engine is idle.

## Where this design departs from the paper it is based on

* **Clocking.** One clock everywhere. The original runs the Gate blocks at
  350 MHz and the kernel generator, memory controller and address generator
  at 150, 260 and 250 MHz, with framework-generated crossings. Its groups
  are clocked asynchronously through their FIFOs.
* **Stall network.** Each block computes its own advance signal. The
  original fans a clock enable out through a three-level register tree; how
  that tree's latency is absorbed is not described, so it is not built.
* **Kernel transport.** The original delivers the four kernel entries over
  four parallel stream channels. Here a tagged kernel bus with per-block
  queues does the job.
* **Smallest size.** The original is reported to be unsafe below 5 qubits,
  because short streams cannot fill the chain. With `rd_wait` this design
  runs any n >= 1.
* **Trace.** The trace is a unit after the last block rather than logic
  merged into it.
* **Own choices.** Pocket layout, angle encoding, table sizes (1024 gates,
  255 matrices per job), FIFO and queue depths, the memory layout and the
  CORDIC are choices of this design.
* **Outside this RTL.** The DDR4 controller and DIMMs, the PCIe link and the
  host software. The testbenches model the memory behaviourally
  (`tb/ddr_model.sv`).

## Sizes against the evaluated circuits

The circuits the original work synthesises have 6 to 9 qubits and, as
synthesised, 26 to 205 CNOTs. Assuming each CNOT comes with two U3 gates,
the largest needs about 620 gates. That fits the 1024-entry gate table and
takes 6 passes of the 108-block chain. The matrix count is 1 plus the number
of parameters, which can exceed the 255 a job allows; the host then splits
the gradient over several jobs or engines. Memory use per engine is at most
(1 + 2*255) * 4^9 elements * 8 bytes, about 1 GiB.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. They use these helpers:

* `ref_pkg` holds a floating-point model of the gates and their analytic
  derivatives.
* `ddr_model` is an element-addressed memory with a fixed latency and
  optional random stalls.
* `slr_host` plays the host for one engine. It uploads a random circuit
  (half of the gates controlled), a derivative table and a random U^dagger.
  It then checks every trace and the final cost-function matrix against the
  model, with a tolerance of 1e-5 per element.

| testbench | what it covers |
|---|---|
| `tb_cmul3` | random and extreme operands against the 4-multiplication product in wide integers |
| `tb_index_counter` | index, target/control bits, boundary flags for all n, t |
| `tb_stream_offset`, `tb_stream_fifo` | delays under random stalls |
| `tb_unitary_transform` | all three modes and the rounding |
| `tb_gate_block` | random gates on NQ = 4; latency D+3 and one-per-cycle rate, gaps, back-pressure, flushing |
| `tb_gate_group`, `tb_gate_chain` | small chains against the model, kernel routing by tag |
| `tb_group_fifo` | ordering, full/empty under random traffic |
| `tb_trace_unit` | traces of random streams, last pass only |
| `tb_cordic` | sin/cos over random angles, latency |
| `tb_kernel_generator` | kernels, derivatives, identity padding, 4-cycle interval |
| `tb_mem_addr_gen` | address sequence and read interlock |
| `tb_slr_engine` | two small engines, multi-pass jobs with waits and memory stalls |
| `tb_qgd_dfe` | the top at reduced size; counts every mechanism |
| `tb_qgd_dfe_slr` | the top with one engine at full default size (108 blocks, NQ = 9), 5 qubits, 120 gates in 2 passes, 4 matrices |

`tb_qgd_dfe` and `tb_qgd_dfe_slr` count each mechanism and fail if one
never happened:

* multi-pass jobs;
* identity padding;
* derivatives by theta, phi and lambda;
* controlled gates;
* read waits and memory stalls;
* kernel-bus back-pressure;
* flush slots.

To simulate with Verilator, compile the package first, then the rest of
`rtl/`, the helpers and one testbench:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/qgd_pkg.sv $(ls rtl/*.sv | grep -v qgd_pkg) \
        tb/ref_pkg.sv tb/ddr_model.sv tb/slr_host.sv tb/tb_qgd_dfe.sv \
        --top-module tb_qgd_dfe -o sim
    ./obj_dir/sim

Uninitialised state should be randomised (`+verilator+rand+reset+2`). The
design resets or clears everything it reads.

The largest configuration simulated is one engine at full size
(`tb_qgd_dfe_slr`: NSLR = 1, all other parameters at their defaults). It
builds in about half a minute and runs in seconds. The complete top, four
such engines, elaborates and lints cleanly. Its Verilator C++ build, however,
takes close to twenty minutes, so no simulation of all four engines at once
is included. The engines share nothing but the clock and the reset.
