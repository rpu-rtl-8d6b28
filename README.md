# RPU: a vector processor for ring arithmetic

Lattice cryptography and homomorphic encryption spend most of their time on
arithmetic over polynomial rings: long vectors of 128-bit residues that are
added, subtracted and multiplied modulo a prime, and reordered by number
theoretic transforms (NTTs). The Ring Processing Unit (RPU) is a vector
processor built for exactly that. It runs the B512 instruction set, in which
every vector holds 512 elements of 128 bits and every arithmetic operation is
modular, and it spreads each vector over many identical compute lanes. Data
movement is split off into pipelines of its own so that loading, shuffling
and computing overlap, and a single bit per register (the *busyboard*) keeps
that overlap correct.

This RTL implements the RPU in its main configuration: 128 lanes, a 4 MiB
vector data memory in 128 banks, a 512 KB instruction memory and a 32 KB
scalar data memory. Everything is parameterized; the end-to-end testbench
runs at 8 lanes and the full-size testbench at the defaults.

## Instruction set (B512)

Instructions are 64 bits:

| bits    | field   | use                                             |
|---------|---------|-------------------------------------------------|
| 63:55   | VD1     | second destination of a butterfly (low 6 bits)  |
| 54:49   | VT1     | third source of a butterfly (the twiddle)       |
| 48      | BFLY    | turns a vector-vector compute op into a butterfly |
| 47:44   | opcode  |                                                 |
| 43:24   | address | VDM offset (loads/stores) or SDM address        |
| 23:18   | VD      | destination                                     |
| 17:12   | VS/mode | first source, or addressing mode of a load/store|
| 11:6    | VT/value/RT | second source, mode value, or scalar register |
| 5:0     | RM      | address register (loads/stores) or modulus register (compute) |

Opcodes (`rpu_pkg.sv`): NOP 0, HALT 1, VLOAD 2, VSTORE 3, SLOAD 4, MLOAD 5,
VADD/VSUB/VMUL vector-vector 6-8, vector-scalar 9-B, UNPKLO C, UNPKHI D,
PKLO E, PKHI F. The opcode numbers, NOP and HALT are this design's choice.

* Compute: `VD = VS op VT mod MRF[RM]`, or `VS op SRF[VT]`. The butterfly
  computes `t = VT*VT1`, `VD = VS + t`, `VD1 = VS - t`, all mod q.
* Loads/stores move 512 elements between a register and the VDM. Element e
  goes to word `ARF[RM] + address + f(e)` (wrapping at the VDM size), with
  `V` = the value field: contiguous `f = e`; strided `f = e << V`;
  strided-skip, where groups of 2^V elements are kept and the next 2^V words
  skipped, `f = ((e >> V) << (V+1)) | (e mod 2^V)`; repeated `f = e >> V`
  (each word read 2^V times; V = 9 broadcasts one word).
* SLOAD / MLOAD copy one SDM word into the scalar or modulus register `VT`.
* Shuffles: UNPKLO interleaves the low halves of VS and VT
  (`VD[2i] = VS[i], VD[2i+1] = VT[i]`), UNPKHI the high halves, PKLO gathers
  even elements (`VD[i] = VS[2i], VD[256+i] = VT[2i]`), PKHI odd elements.
  These permutations follow the ISA definition; which element of a pair
  comes first (VS before VT) is this design's choice.

## Lanes and the register file

Element e of every vector lives in lane `e mod NUM_HPLES`, in slot
`e div NUM_HPLES`; with 128 lanes each lane owns 4 slots of each register.
A lane (`hple.sv`) is a slice of the vector register file plus a LAW engine.

The register slice (`vrf_slice.sv`) is 16 single-port memories. Register r
is in memory `r mod 16`, at row `(r div 16) * slots + slot`, so four
registers share each memory and only one of them can be touched per cycle.
Ten ports lead into the slice: compute writes VD and VD1, shuffle write,
load write, three compute reads, two shuffle reads and a store read.
`vrf_port_arbiter.sv` grants them in that fixed priority order whenever two
want the same memory; all lanes see the same grant because the three
pipelines drive all lanes alike. A compiler is expected to place registers so
that conflicts are rare; the hardware only makes them safe. Reads return one
cycle later.

The LAW engine (`law_engine.sv`, multiplier in `mod_mul.sv`) adds,
subtracts, multiplies or performs a butterfly every cycle. Add and subtract
are delayed to the multiplier's latency so every operation leaves after
`MUL_LAT + 1` cycles and results never collide. The multiplier is a
behavioural `a*b mod q`; a real design would place a pipelined modular
multiplier IP there. `MUL_LAT` (default 4) is not given as a single number in
the RPU description, which only shows that performance is insensitive to it.

## The three pipelines

**Compute** (`compute_ctrl.sv`). Takes an instruction from the compute queue
and issues it one slot per cycle: it requests the VS, VT and (butterfly) VT1
reads, and when all are granted the operands are captured and the lanes
fire. A beat whose reads are refused by a higher-priority write waits
(`conflict_stall`). A 128-lane machine finishes a compute instruction in
4 beats. Writes come back `MUL_LAT + 1` cycles after the fire and always have
priority. If a butterfly's VD and VD1 share a memory, VD1 waits one cycle in a
hold register and the next beat leaves a one-cycle gap.

**Load/store** (`ldst_unit.sv`, `vbar.sv`, `vdm.sv`). The VDM is
`NUM_BANKS` banks; word a is in bank `a mod NUM_BANKS`, row
`a div NUM_BANKS`. For each slot every lane computes its address and asks the
vector crossbar (VBAR) for its bank. Per bank the lowest lane wins; reads of
the same word are served to every lane that asked (multicast, so broadcast
and repeated loads are one access), other lanes retry next cycle
(`collision_stall`). A load then writes the slot into the register file, a
store first reads it out. SLOAD and MLOAD are executed here too.

**Shuffle** (`shuffle_unit.sv`, the SBAR). Reads both source registers slot
by slot into a 512-element buffer, then writes the permuted destination slot
by slot. This is the simplest full crossbar; the RPU description gives the function of
the SBAR but not its structure.

## Front-end, queues and the busyboard

`frontend.sv` fetches one instruction per cycle from `instr_mem.sv` after a
`start` pulse with a start PC. `busyboard.sv` keeps one busy bit per vector,
scalar and modulus register. An instruction may be dispatched only if none of
the registers it reads or writes is busy; it then sets them, and its pipeline
clears them when it finishes. This blocks every RAW, WAR and WAW hazard
without forwarding, while independent instructions run out of order across
pipelines. The source describes the vector board; the scalar and modulus
boards are added here because SLOAD/MLOAD run in another pipeline than their
readers. Dispatch also stalls on a full queue (`inst_queue.sv`, depth 8,
assumed). HALT stops fetching; when all pipelines are idle `done` pulses.

## Top level

`rpu_top.sv` wires it all. The host (a RISC-V core and HBM in the RPU description, not
built here) reaches the design through plain ports: IM, SDM and ARF write
ports, a VDM host port (used when the VBAR leaves a bank free), `start`,
`start_pc`, `busy` and `done`. `stall_events` shows, per cycle, a busyboard
stall, a queue-full stall, a compute port conflict, a shuffle port conflict
and a VDM bank collision.

## Testbenches

The memories, LAW engine, VBAR, VRF slice, busyboard and queue have unit
testbenches in `tb/`; the lanes, the three pipeline controllers and the
front-end are checked through the end-to-end test. Every testbench prints
`TB_RESULT checks=N failures=M`. `rpu_tb_pkg.sv` holds an instruction
builder, a test kernel that uses every instruction and addressing mode, and a
reference model of the ISA. `tb_rpu_top.sv` loads the kernel and data,
runs it at 8 lanes and 8 banks, compares every stored word with the model,
checks the number of compute beats (512/lanes per instruction) and fails if
any stall type or the delayed butterfly write never happened.
`tb_rpu_full.sv` runs the same kernel on `rpu_top` with all defaults.

Simulate, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/rpu_pkg.sv rtl/*.sv \
      tb/rpu_tb_pkg.sv tb/tb_rpu_top.sv --top-module tb_rpu_top
    ./obj_dir/Vtb_rpu_top

(list `rpu_pkg.sv` first; the full-size build takes a few minutes and about
1.2 GB).

## Departures and limits

* Memories are behavioural arrays, not SRAM macros.
* The modular multiplier is `%`-based; it is correct but not a real circuit.
  Its initiation interval is fixed at 1.
* VRF memory conflicts are resolved by fixed priority in hardware instead of
  being left entirely to the compiler.
* The exact addressing-mode formulas, opcode numbers, queue depth,
  multiplier latency and the host interface are this design's choices.
* The RISC-V control core and the HBM are not part of the RTL.
