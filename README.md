# HPQEA: an FPGA state-vector quantum emulator with eight paired processing elements

## The idea

A quantum circuit on *n* qubits acts on a state vector of 2^n complex
amplitudes. Every single-qubit gate with a 2x2 matrix `[[a,b],[c,d]]` on
target qubit *t* updates the vector in pairs. Each pair is made of the two
amplitudes whose indices differ only in bit *t*:

    x0' = a*x0 + b*x1          (x0: bit t = 0)
    x1' = c*x0 + d*x1          (x1: bit t = 1)

A CNOT does no arithmetic at all. For every index with the control bit set, it
swaps the two amplitudes that differ in the target bit.

This design keeps the whole state vector in on-chip RAM, spread over eight
processing elements (PEs). Each PE owns one contiguous eighth of the vector,
stored in its own dual-port State Mem. The PEs are grouped as two Processing
Element Arrays (PEAs) of four. On each gate, all eight PEs work on their own
eighth at the same time.

The hard part is that many gate pairs straddle two PEs. The design never copies
data between PEs for this. Both PEs read the *same word address* in the same
cycle, and each uses the other's freshly loaded value as its missing operand.
The partner value arrives over a shared bus. CNOTs are handled by a separate
unit, the CX Swapper. It reads and writes the distributed vector through a
global two-lane access bus, with a schedule that overlaps loads and stores.

The host sees an AXI4 slave with a 256-bit data bus. Through it the host
uploads the initial state and a gate list, starts a run, and reads back the
final state and a cycle count. Bulk copies between the on-chip State Mems and
an external HBM port are also started from the host.

## Numbers

Amplitudes and matrix entries are complex numbers. Their real and imaginary
parts are 32-bit two's-complement fixed point with 2 integer bits and 30
fraction bits (Q2.30), packed `{re[63:32], im[31:0]}`. A product of two parts is
formed at 64 bits and shifted right arithmetically by 30 (truncation). Sums wrap.
No rounding or saturation is applied. Unitary gates keep every amplitude within
magnitude 1, so wrapping only shows up if the host loads out-of-range values.

## State layout and the two pairing modes

For *n* qubits (3 <= n <= 19), global amplitude index `g` is split as

    g = { PEA (1 bit), PE in PEA (2 bits), word (n-3 bits) }

PE number `p = g >> (n-3)` (0..7) therefore holds the words
`p*2^(n-3) .. (p+1)*2^(n-3)-1`, in their natural order. Each State Mem has
2^16 words (`AW = 16`), which is enough for 19 qubits.

Let `lq = n-3` be the number of word bits. A single-qubit gate on target `t`
then runs in one of two modes:

* **Local mode (t < lq).** Both amplitudes of every pair are in the same PE, at
  word addresses `i` and `i + 2^t`. Per step a PE reads both over its two RAM
  ports. Special Unit 0 computes `x0'` and Special Unit 1 computes `x1'`. Both
  results are written back to the same addresses in the next cycle.
* **Shared mode (t >= lq).** Bit *t* is one of the three PE-number bits, so the
  partner of PE `p` is PE `p ^ 2^(t-lq)`. The partner's amplitude is at the
  same word address. Each PE reads two consecutive words, `2k` and `2k+1`, in
  one cycle. Its partner reads exactly the words it needs at the same moment.
  The PE's *role* is bit `t-lq` of its number: 0 means it holds the `x0` side
  and computes row 0 of the matrix, 1 means row 1. Both Special Units of a PE
  apply that row, one per word: `y = m[r][r]*own + m[r][1-r]*partner`.
  - When t = n-1, the partner is in the other PEA (cross-PEA pairs).
  - Otherwise it is in the same PEA (the intra-PEA shared bus).

Because the addresses in both modes are the same in every PE, one step counter
serves all eight PEs. They run in lockstep and never contend for a RAM port. A
gate takes `2^(n-4)` steps of 2 cycles each (read, then write), with a minimum
of one step. That is `2*max(1, 2^(n-4))` cycles, so 65,536 cycles at n = 19.

**Sparse gates** (diagonal matrices such as S or Rz) set the `sparse` flag. The
second multiplier in each Special Unit is then fed 0 and 1, so each result is
`a*x0` or `d*x1`. The timing is the same; the flag only saves switching
activity and the matrix's off-diagonal entries are ignored.

## The CX Swapper schedule

CNOT(control *c*, target *t*) swaps 2^(n-2) pairs. Pair *k* is built by
inserting a 0 at bit positions min(c,t) and max(c,t) of *k*, then setting bit
*c*. That gives address `A`; the partner is `A | 2^t`.

The swapper reaches the State Mems through the global access bus. This bus has
two lanes (lane 0 uses port A and lane 1 uses port B of the addressed PE). Both
lanes are registered once before the RAM, so read data returns two cycles after
the request. The schedule alternates LOAD and STORE cycles after one IDLE cycle:

| cycle | stage | operations |
|---|---|---|
| 0 | IDLE | CP: compute the addresses of pair 0 |
| 1 | LOAD | ER: issue reads of pair 0 |
| 2 | STORE | CP: compute pair 1 |
| 3 | LOAD | ER pair 1; RB: latch the data of pair 0, crossed over |
| 4 | STORE | EW: write pair 0 swapped; CP pair 2 |
| ... | ... | ... |
| last-1 | LOAD | RB of the last pair |
| last | STORE | EW of the last pair |

A CNOT therefore takes exactly `2*(2^(n-2)+1)+1` cycles: 262,147 at n = 19.
(In every STORE cycle from the first one up to the second-to-last, WB also
places the addresses just computed into the write buffer, so EW knows where
the pair goes two cycles later.) The testbench checks this count exactly for several n, c and t.

## Gate sequencing

The Controller runs the gate list in order. Each gate goes through
FETCH → GATE → DISPATCH → EXEC:

1. **FETCH:** read the gate from the Gate Arbiter.
2. **GATE:** the gate is broadcast into every PE's Gate Mem.
3. **DISPATCH:** start the dual PEAs or the CX Swapper.
4. **EXEC:** wait for the unit's done pulse.

The control overhead is 3 cycles per gate:

    single-qubit gate: 3 + 2*max(1, 2^(n-4)) cycles
    CNOT:              3 + 2*(2^(n-2)+1) + 1 cycles

The State Mem ports are owned by one of three masters: the PEs (during a
single-qubit gate), the CX Swapper (during a CNOT), or the State Arbiter
(otherwise, for host access and HBM transfers). An assertion checks that at
most one unit is active.

As an example of scale, a 17-qubit QFT built from H, Rz and CX alone has 585
gates. It takes about 24.1 M cycles, or about 96 ms at 250 MHz.

## BRAM mode and HBM mode

The on-chip State Mems hold 2^19 amplitudes (32 Mbit). When NQUBITS is 20 or
more, the `hbm_mode` status bit is set. In that mode, starting a run does
nothing except set the error bit: **gates are executed only on states that fit
on chip.** The State Arbiter can copy any number of 256-bit beats between the
State Mems and the HBM port, in either direction, at a given HBM beat address.
This lets the host park and restore states, or stage pieces of a larger one.
No scheme for computing on a state larger than the on-chip memory is built.

The HBM port is a simple single-beat interface, not AXI:

* **Request:** `hbm_req_valid/ready`, `we`, a 32-bit beat address, 256-bit
  write data.
* **Read response:** `hbm_rvalid` with `hbm_rdata`.

On the FPGA this port would connect to one port of the HBM controller. The HBM
itself is not part of the RTL. `tb/hbm_model.sv` models it for simulation, with
a 3-cycle read latency.

## Host interface

AXI4 slave with 32-bit addresses and 256-bit data. Bursts are accepted one at a
time, with writes taking priority, and every response is OKAY. Address bits
[29:28] select a region and bits [27:5] the 256-bit beat inside it:

| region | base | content |
|---|---|---|
| 0 | 0x0000_0000 | registers, one per beat (value in the low bits) |
| 1 | 0x1000_0000 | gate list, two beats per gate |
| 2 | 0x2000_0000 | state vector, four amplitudes per beat |

Registers:

| beat | name | meaning |
|---|---|---|
| 0 | CTRL | write bit0 = start run, bit1 = start HBM transfer |
| 1 | NQUBITS | n (reset 3) |
| 2 | NGATES | number of gates in the list |
| 3 | STATUS | bit0 busy, bit1 done, bit2 hbm_mode, bit3 error, bit4 transfer busy |
| 4 | CYCLES | clock cycles of the last run |
| 5 | XFER | bit0 direction (1 = to HBM), [63:32] HBM beat base, [87:64] beat count |

**Gate list.** Gate *g* takes two beats:

* **Beat 2g (header):** `{kind[1:0], sparse, target[4:0], control[4:0]}` in the
  low 13 bits. kind 0 is a single-qubit gate and kind 1 is a CNOT.
* **Beat 2g+1 (matrix):** `{d, c, b, a}`, with `a` in bits [63:0].

Up to 4096 gates can be stored.

**State.** Beat *b* holds amplitudes 4b .. 4b+3, with amplitude 4b+j in bits
[64j+63:64j].

**Ordering rule.** Write NQUBITS *before* uploading or downloading the state.
The mapping from amplitude index to PE depends on n.

A run is: write NQUBITS, upload the state, upload the gates, write NGATES, write
CTRL = 1, poll STATUS until done, read CYCLES, download the state.

## Module hierarchy

```
hpqea_top
├── axi_mapper       AXI4 slave -> internal single-beat bus with region field
├── controller       registers, run sequencer, owner select, mode flag
├── gate_arbiter     gate-list store; broadcasts the current gate
├── state_arbiter    host <-> State Mem beats; State Mem <-> HBM bulk copy
├── cx_swapper       CNOT address generator and overlapped swap schedule
└── dual_pea         two PEAs, cross-PEA wiring, registered 2-lane access bus
    └── pea (x2)     four PEs and the shared bus
        └── pe (x4)  step controller, input selector
            ├── alu          two Special Units sharing op
            │   └── special_unit (x2)  two complex multipliers (cmul) + adder
            └── lsu          port coordinator, State Mem (state_mem), Gate Mem
```

`hpqea_pkg` holds the shared types: `cplx_t`, `gate_t`, `gacc_t` and the bus
request.

## Where this RTL follows the source design and where it departs

The following come from the published description of HPQEA:

* two PEAs of four PEs each;
* PEs made of an ALU with two Special Units and a load/store unit;
* sparse and dense operation selected by `op`;
* in-place update of the state;
* contiguous division of the state into halves and quarters;
* sharing of loaded values between paired PEs;
* the Q2.30 format;
* the CX schedule and its cycle count;
* the 256-bit AXI host bus;
* the 19-qubit limit of on-chip storage and the switch to HBM above it.

The 512 DSPs and 928 BRAMs reported for the dual PEAs are consistent with this
structure. There are 8 PEs x 2 SUs x 2 complex multipliers x 4 real 32x32
products, at about four DSPs each. The State Mems hold 2^19 x 64 bits.

Choices made here because the description does not give them:

* **Layout and pairing.**
  - The bit assignment of the state split.
  - The word-pair addressing in both modes.
  - Lockstep PEs.
  - The 2-cycle step.
* **CX addressing.**
  - The CX pair enumeration.
  - The two-lane access bus and its latency.
* **Interfaces and sizes.**
  - The gate encoding, register map and address map.
  - The gate store depth (4096).
  - The 3-cycle per-gate control overhead.
* **Arithmetic and reset.**
  - Truncation with no saturation.
  - Asynchronous active-low reset.
* **HBM.** The single-beat HBM port. The hardware in the source uses the FPGA's
  HBM through many AXI ports.

Not built:

* Execution of circuits whose state does not fit on chip (20–30 qubits). The
  source says the emulator switches to HBM automatically above 19 qubits, but
  does not say how gates are then applied. Here only the mode flag, the refusal
  and the bulk copy exist.
* The HBM stacks and controller, and the host software.

No synthesis timing has been done. Nothing here shows that the single-cycle
complex multiply-add path meets 250 MHz. A pipelined Special Unit would change
the PE step, but no other interface.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. `tb/tb_ref_pkg.sv` is
an independent reference model that works on plain index arithmetic, not on the
PE layout. It applies 1-qubit gates and CX to a dynamic array with the same
fixed-point arithmetic, so results must match bit for bit.

| testbench | what it covers |
|---|---|
| tb_special_unit, tb_alu | random operands against the reference products, both ops |
| tb_lsu | port coordination, Gate Mem, read latency |
| tb_pe, tb_pea, tb_dual_pea | full gates in local, intra-PEA and cross-PEA modes, at n = 3 and 6; cycle counts |
| tb_cx_swapper | many (n, control, target) against a swap model; exact cycle count |
| tb_gate_arbiter, tb_state_arbiter, tb_axi_mapper, tb_controller | bus protocol, beat packing, HBM transfer, register map, sequencing |
| tb_hpqea_top | whole chip at n = 6 and n = 3 through AXI: random circuits of H/S/Rx/Ry/Rz/CX, HBM round trip, HBM-mode refusal, cycle count per gate |
| tb_hpqea_full | default sizes, n = 19: five gates covering all modes, 2^19 amplitudes checked, 720,917 cycles checked against the formulas |

The top-level testbench counts how often each mechanism happened and fails if
any never happened:

* local, shared-bus and cross-PEA gates;
* dense and sparse gates;
* CNOTs;
* transfers to and from HBM;
* switches between BRAM and HBM mode;
* multi-beat bursts.

Simulate with Verilator 5, from the project root, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/hpqea_pkg.sv tb/tb_ref_pkg.sv tb/tb_hpqea_top.sv --top-module tb_hpqea_top
./obj_dir/Vtb_hpqea_top
```

Replace the testbench name to run another one. The single-module testbenches
need only `rtl/hpqea_pkg.sv`, the module files and, where used,
`tb/tb_ref_pkg.sv`. The full-size run builds 34 Mbit of simulated RAM and
finishes in seconds.
