# Gate kernel for full-state-vector quantum circuit simulation with control-aware iteration scheduling

A state-vector simulator holds all 2^n complex amplitudes of an n-qubit register
and applies the circuit one gate at a time. A single-qubit gate
G = [a b; c d] on target qubit t works through the amplitudes in pairs
(k, k + 2^t), where bit t of k is 0:

    C'[k]       = a*C[k] + b*C[k+2^t]
    C'[k+2^t]   = c*C[k] + d*C[k+2^t]

There are 2^(n-1) such pairs. A control on qubit c limits the update to pairs
whose index k has bit c set, so every control halves the useful work. A
statically scheduled pipeline that walks all 2^(n-1) pairs and drops the
unneeded ones still spends a clock cycle on each of them. This kernel schedules
only the 2^(n-n_c-1) pairs that a gate with n_c controls actually updates.
No slot is wasted: a gate with three controls runs eight times faster than an
uncontrolled one.

The method is the one published in "Optimising Iteration Scheduling for
Full-State Vector Simulation of Quantum Circuits on FPGAs" (Moawad, Brown,
Steijl, Vanderbauwhede). There it was an OpenCL kernel compiled by a
high-level-synthesis flow. This repository gives it as SystemVerilog RTL.

## The index mapping

Three index spaces are involved:

* the **reduced index** r, in 0 .. 2^(n-n_c-1)-1, is what the scheduler counts;
* the **global iteration index** i, in 0 .. 2^(n-1)-1, numbers all pairs of
  the target qubit in order;
* the **amplitude index** k of the pair's first element.

**Global to amplitude.** k is i with a 0 inserted at bit position t. The bits
of i below t stay in place and the rest move up by one (the "ithCleared"
operation). The partner of k is k + 2^t.

**Reduced to global.** Take the controls in strictly ascending order,
c0 < c1 < ... Each control c is first re-indexed relative to the target:

    c_adj = c - 1   if c > t
    c_adj = c       otherwise

This gives the control's bit position in the global index i, which has no bit
for the target. Starting from i = r, each control in turn is applied:

    i <- i + (floor(i / 2^c_adj) + 1) * 2^c_adj

Seen as bits, this inserts a 1 at position c_adj. Ascending order matters:
inserting a bit moves every higher bit up by one, and only the higher controls,
applied later, see those moved positions.

Worked example: 3 qubits, t = 1, controls {0, 2}, so n_c = 2 and there is one
reduced index, r = 0. Control 0 lies below the target, so c_adj = 0 and
i = 0 + (0 + 1) * 1 = 1. Control 2 lies above it, so c_adj = 1 and
i = 1 + (0 + 1) * 2 = 3. Inserting 0 at bit 1 of i = 3 (binary 11) gives
k = 101 binary = 5, and the pair is (5, 7). These are exactly the two amplitudes
with qubits 0 and 2 both set. With control {0} alone, reduced indices {0, 1}
map to global {1, 3}, which are pairs (1,3) and (5,7). With control {2} alone
they map to {2, 3}, which are pairs (4,6) and (5,7).

The mapping costs one adder and one shifter per possible control. The number of
controls a gate may carry, `MAX_CONTROLS`, is therefore fixed when the hardware
is built.

## Datapath

```
 start, args ─► iteration_scheduler ─► iteration_mapper ─► pair_index_gen ─► pair load request
                 r = 0..2^(n-nc-1)-1    one stage/control    k, k+2^t          (state_base + k)
                                                                   │
                                                         address FIFO (LSU_DEPTH)
                                                                   │
 pair load data ─► pair_compute_unit (3 cycles) ─► result FIFO ─► pair store request
```

| module | role |
| --- | --- |
| `gate_kernel` | top level. It latches the gate's arguments, connects the stages and counts the stores to detect completion. |
| `iteration_scheduler` | counts reduced indices 0 .. 2^(n-n_c-1)-1 onto a valid/ready stream. |
| `iteration_mapper` | holds `MAX_CONTROLS` pipeline stages. Stage k applies control k when k < n_c and otherwise passes the index through. |
| `pair_index_gen` | computes the pair's two amplitude indices (combinational). |
| `pair_compute_unit` | holds 16 fp32 multipliers and 12 fp32 adders. It computes the 2x2 complex matrix-vector product, registered after the products, after the first sums and after the final sums. |
| `fp32_mul`, `fp32_add` | are combinational IEEE-754 single-precision units. |
| `sync_fifo` | is the buffer used for both FIFOs. |
| `qsim_pkg` | defines `cfloat_t` (`{im, re}` with the real part in bits [31:0]) and `qidx_t` (6-bit qubit index). |

**Flow control.** A load is issued only while the address FIFO has room. Its
pair addresses are queued when memory accepts the request. Results enter the
result FIFO as they leave the compute unit. A store pops one entry from each
FIFO. At most `LSU_DEPTH` pairs are ever in flight, so the result FIFO can never
overflow. Load data therefore needs no ready signal, and the compute pipeline
never stalls.

The pipeline stops issuing in three cases:

* memory refuses a load (`rd_req_ready` low);
* memory refuses stores for long enough that the buffer fills;
* the mapper pipeline is waiting on either of those.

Within one gate, every pair is distinct, so there are no read-after-write
hazards. Gates are run one after another: the host waits for `done` before it
starts the next gate.

## Interface and timing of `gate_kernel`

| port | dir | meaning |
| --- | --- | --- |
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | launches a gate when `busy` is low; the arguments below are sampled in the same cycle |
| `n_qubits`, `target`, `n_ctrl` | in | n, t, n_c (requires t < n, n_c ≤ `MAX_CONTROLS`, n_c < n) |
| `ctrl[MAX_CONTROLS]` | in | control qubits, strictly ascending, none equal to t; entries from n_c up are ignored |
| `mat[4]` | in | mat0..mat3 = a, b, c, d, as complex fp32 |
| `state_base` | in | word address of amplitude 0 |
| `busy`, `done` | out | `busy` stays high from the cycle after `start` until the last store is accepted; `done` pulses for one cycle then |
| `iter_count` | out | iterations of the last gate, 2^(n-n_c-1) |
| `rd_req_valid/ready`, `rd_addr0/1` | out/in/out | pair load request |
| `rd_rsp_valid`, `rd_data0/1` | in | load data, in request order, always accepted |
| `wr_valid/ready`, `wr_addr0/1`, `wr_data0/1` | out/in/out | pair store |

Addresses count 64-bit amplitude words. When memory never stalls, the kernel
issues one pair per cycle. A gate takes 2^(n-n_c-1) cycles plus a fixed fill
time: 1 cycle for the scheduler, `MAX_CONTROLS` cycles for the mapper, the
memory's read latency, 3 cycles for the compute unit and 1 cycle for the FIFO.
Memory must make an accepted store visible to any later load.

Assertions (simulation only) check several rules:

* controls are ascending;
* the launch arguments are in range;
* load data never arrives unrequested;
* the result FIFO is never full when a result arrives;
* no store is issued outside a gate.

## Parameters

| parameter | default | origin |
| --- | --- | --- |
| `MAX_CONTROLS` | 2 | build reported with "2 maximum controls per gate" |
| `IDX_W` | 32 | 32-bit (`uint`) iteration indices of the original kernel |
| `ADDR_W` | 32 | own choice (word address; 2^32 amplitudes) |
| `LSU_DEPTH` | 64 | own choice; should cover the memory's read latency |

The published evaluation also ran circuits whose gates carry more controls
than the reported build allows. The squaring circuits need 3 controls, and the
streaming circuits need n-1, which is 28 at 29 qubits. To run those, build with
a larger `MAX_CONTROLS`. The cost is one mapper stage, and one cycle of latency,
per extra control. Register size needs no parameter: at 29 qubits the state is
2^29 words (4 GiB), within 32-bit addresses and indices.

## What follows the published design and what is this design's own

Taken from the publication:

* the update equation;
* the pair addressing;
* the adjusted-control and skip-interval formula and its ascending-order condition;
* scheduling exactly 2^(n-n_c-1) iterations;
* single-precision complex amplitudes;
* one compute unit;
* the compile-time limit on controls.

Gate matrices are supplied by the host; H, X, Y, Z and R_m are the intended
gate set.

The original was an OpenCL kernel whose pipeline, memory system and arithmetic
came from the vendor's compiler and board support. The RTL here therefore
supplies its own versions of the following:

* the valid/ready handshakes;
* the per-control pipeline stages;
* the pair-wide load and store ports;
* the FIFO-and-credit decoupling of loads from stores;
* the argument latching and done signal;
* the floating-point units, which round to nearest even, flush subnormals to
  zero and return a canonical NaN.

The host computer, the PCIe link and the DRAM are outside the RTL.

The publication reports 16 DSP blocks for its kernel. That matches the 16
single-precision multipliers here, though nothing more about the compiled
structure is known. Its frequency and resource figures are not targets of this
RTL.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `fp32_mul_tb`, `fp32_add_tb`: 20k–40k random and corner cases against
  double-precision results rounded to single.
* `pair_index_gen_tb`: all targets of a 6-qubit register against a brute-force
  enumeration, plus the 3-qubit t=1 pairs (0,2), (1,3), (4,6), (5,7).
* `iteration_scheduler_tb`: index sequence, `last`, `total`, one per cycle,
  back-pressure.
* `iteration_mapper_tb`: every target and every ascending control set of up to
  3 controls on 3–7-qubit registers, against a brute-force filter of all pairs.
  Includes the worked example above and the latency check.
* `pair_compute_unit_tb`: H, X, Y, Z, R_m and random matrices, against a
  double-precision product. Also checks the 3-cycle latency.
* `gate_kernel_tb`: the whole kernel at default parameters against a behavioural
  DRAM (12-cycle latency, random back-pressure). It applies 68 gates and checks
  the whole state vector against a double-precision reference after each one.
  It also checks iteration and store counts and one pair per cycle, and that
  memory outside the state stays untouched. It counts, and requires, gates with
  0, 1 and 2 controls, controls above and below the target, load stalls, store
  stalls and buffer-full stalls.
* `qft_circuit_tb`: quantum Fourier transform, 3–9 qubits, default build. The
  iteration total must be n·2^(n-1) + n(n-1)/2·2^(n-2). For QFT9 that is 6912
  iterations instead of 11520.
* `streaming_circuit_tb`: the streaming circuit (X on x0, then X on x_k
  controlled by x0..x_k-1), 2–10 qubits, built with 9 controls. Every basis
  input is checked for 2–6 qubits. The iteration total must be 2^n − 1 instead
  of n·2^(n-1). For 10 qubits that is 1023 instead of 5120.

The squaring circuits of the evaluation are not reproduced: their gate lists
come from a construction published elsewhere.

Simulating with Verilator 5 needs the packages first, then the modules and the
testbench, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/qsim_pkg.sv tb/tb_fp_pkg.sv tb/qsim_ref_pkg.sv tb/gmem_model.sv \
  rtl/fp32_mul.sv rtl/fp32_add.sv rtl/pair_compute_unit.sv \
  rtl/iteration_scheduler.sv rtl/iteration_mapper.sv rtl/pair_index_gen.sv \
  rtl/sync_fifo.sv rtl/gate_kernel.sv tb/gate_kernel_tb.sv \
  --top-module gate_kernel_tb -o sim && ./obj_dir/sim
```

The circuit testbenches also need `tb/kernel_env.sv`. The simulations are
two-state and run in seconds to a minute.

## Limits

* The FP units do not support subnormal numbers. Amplitudes below about 1.2e-38
  become zero. This is irrelevant for normalised states of up to about 250
  qubits.
* Controls must arrive sorted, as the formula requires; sorting is left to the
  host. Negative controls (on |0>) are not supported by the kernel, as in the
  original. They are built from X gates around a positive control.
* One gate at a time. Gate fusion and multiple compute units are not
  implemented; the original work names them only as future directions.
