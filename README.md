# A composable 4x4 CGRA: chaining operations across PEs within one clock cycle

Loops whose iterations depend on each other (a running sum, a CRC shift
register, a linked-list walk) cannot be pipelined faster than the
loop-carried dependence chain allows. On a conventional coarse-grained
reconfigurable array (CGRA), every operation takes a full clock cycle and its
result is registered. A recurrence of three operations therefore costs at
least three cycles per iteration, even when each operation uses only a
fraction of the clock period. Simple operations such as AND, MOVC or a router
hop need far less time than the slowest one (a load or a multiply), so most of
each cycle is wasted.

This array lets the compiler recover that slack. Each ALU input, ALU output
and router output has a register and a multiplexer that can bypass it. With
these bypasses, a chain of dependent operations on different PEs, possibly
several router hops apart, can run combinationally within one clock cycle,
and only the chain's final result is registered. Such a chain works like one
larger processing element. It is called a *virtual PE* (VPE). VPEs are formed
at compile time only. The hardware just obeys per-cycle configuration words,
so there is no runtime arbitration and no stalls. Performance is fixed once
the schedule is fixed.

The RTL describes one 4x4 cluster:

- 16 PEs joined in a nearest-neighbour mesh;
- a left column of four memory-capable PEs, each with a load-store unit on its
  own port of a shared 4-port data memory;
- a small sequencer that steps every PE through a modulo schedule of II
  (initiation interval) time slots;
- a host port for loading configuration words and data.

## Structure

```
compose_cgra                       top: mesh, memory, sequencer, host ports
 ├─ compose_ctrl                   slot counter (cycle mod II), run/done
 ├─ compose_data_mem               4-port word array, byte enables
 └─ compose_pe  x16                (column 0 with MEM_PE=1)
     ├─ compose_config_mem         one configuration word per time slot
     ├─ compose_router             crossbar + 4 registered/bypassable outputs
     ├─ compose_compute            operand regs + bypass muxes, ALU, result reg
     │   └─ compose_alu            combinational integer ALU
     └─ compose_lsu                (MEM PEs only) load/store to its memory port
compose_pkg                        widths, enums, configuration word, memory request
```

## The configuration word

In every cycle each PE reads the word for the current slot from its own
configuration memory (32 slots deep). The word is a packed struct
(`compose_pkg::cfg_t`, 75 bits). Fields, from most to least significant:

| field     | bits | meaning |
|-----------|------|---------|
| `op`      | 5    | ALU/memory operation (`op_e`) |
| `cnst`    | 32   | constant for MOVC |
| `opa`     | 5    | operand A: crossbar source (3), bypass (1), write enable (1) |
| `opb`     | 5    | operand B: same layout |
| `pred`    | 5    | predicate input: same layout; bit 0 of the value is used |
| `pred_en` | 1    | squash the operation when the predicate is 0 |
| `res_byp` | 1    | RES mux: 1 = live ALU output, 0 = result register |
| `res_we`  | 1    | write the ALU output into the result register |
| `out[3:0]`| 4x5  | mesh outputs W,S,E,N (index 3..0): source, bypass, write enable |

Each operand, predicate and mesh output has the same three settings, in
`port_cfg_t`:

- `sel` picks one of N, E, S, W, RES (the PE's own result) or ZERO.
- `byp` = 1 passes the crossbar value straight through in this cycle. This
  makes the link combinational.
- `byp` = 0 presents the register instead, which holds a value latched in an
  earlier cycle.
- `we` = 1 latches the crossbar value at the end of the cycle.

Bypass and write are independent. A value can be used live and stored at the
same time, which is how a VPE hands its final result to the next iteration.

An all-zero word is a NOP with every bypass off. The configuration memories
reset to zero, and while reset is asserted they present that word whatever
they hold. An unprogrammed PE therefore drives only registers, which hold 0.
Power-up contents cannot close a combinational loop before the reset has
taken effect.

## Operations

Operations: NOP, MOVC, SEXT (sign-extend 16 bits), SELECT (`P ? A : B`),
CMERGE (`P ? A : previous result`), BR (`A != 0`), AND, OR, XOR, CEQ, CGT,
CLT (signed compares, 1/0 results), LS, RS, ARS (shift by `B[4:0]`), ADD, SUB
and MUL (low 32 bits). MEM PEs also have LOAD, STORE, LOADB (zero-extended)
and STOREB. These take a byte address in A and the store data in B.

Predication: when `pred_en` is set and the predicate bit is 0, the PE makes no
state change:

- the result register is not written;
- a memory operation is not issued.

The live ALU output still appears at the RES multiplexer. Operand and router
registers still follow their own write enables, because routing is not
predicated.

## Forming a virtual PE

A VPE is simply a configuration:

1. The first PE of the chain bypasses its input registers as needed and sets
   `res_byp`, so its ALU output enters its crossbar in the same cycle.
2. Every PE on the path sets `byp` on the mesh output that continues the
   route. It needs no operation of its own, so it can route for a VPE while
   its ALU does something else.
3. The consuming PE bypasses the operand register on that input.
4. Only the last PE sets `res_we` (or a router `we`) to register the result.

Nothing limits the chain length or the hop count in the logic. The compiler
must keep the chain's total delay below the clock period. The delays it
budgets with, per operation at 12 nm, are as follows. These are reference
figures and are not modelled in the RTL.

| op | ps | op | ps | op | ps |
|----|----|----|----|----|----|
| LOAD | 807 | CEQ | 410 | OR | 326 |
| MUL | 494 | RS | 404 | CMERGE | 325 |
| SUB | 488 | LS | 395 | BR | 322 |
| CLT | 487 | SELECT | 330 | AND | 310 |
| CGT | 431 | XOR | 329 | MOVC/NOP | 290 |
| ADD | 425 | ARS | 411 | router hop | 117 |

Each bypassing router re-drives the signal, so the delay of a hop does not
grow with the number of hops.

### Combinational loops

Links run in both directions, and every router can forward any input to any
output. The netlist therefore has structural combinational cycles: east out
of one PE, west into its neighbour, forwarded back west. A legal
configuration never closes one. That is the compiler's job, as is the
timing. Lint tools report these cycles as circular logic. They are expected
and are part of single-cycle multi-hop routing.

## Time slots and the sequencer

`compose_ctrl` holds II and a cycle counter. After `start` (accepted only
while idle, with `n_cycles` > 0) it behaves as follows:

- `run` stays high for exactly `n_cycles` cycles;
- `slot` counts 0, 1, …, II−1, 0, …;
- `done` pulses for one cycle afterwards.

II is clamped to 1..32. All PEs read their configuration word for `slot`, so
the whole array follows one static modulo schedule. Registers change only
while `run` is high, so values survive between runs.

## Memory PEs and load latency

The four PEs in column 0 contain a `compose_lsu`. The LSU of row r drives port
r of `compose_data_mem`, so the four LSUs never compete for a port. The memory
has these properties:

- it is word-organised with byte enables;
- the read is synchronous;
- a read and a write to the same word in one cycle return the old word;
- when several ports write the same byte, the highest port wins.

A load is issued in slot t. The word returns one clock later and is written
into the PE's result register at the end of t+1. The result is therefore
usable from cycle t+2: a memory operation occupies two cycles. A chain may
end in a load's address or store data, and may start from a loaded value
once it sits in the result register. Load data itself never passes
combinationally.

While the array is idle, the host shares port 0 (`host_req`/`host_rdata`) to
preload inputs and read results.

## A worked example

The end-to-end testbench runs this loop:

```
acc = ACC0
for j in 0..N-1:
    v = in[j]
    if (v & 1) acc = (acc ^ v) + K
    out[j] = acc
```

The recurrence on `acc` is XOR followed by ADD. It is mapped twice.

**Composed, II = 1.** PE(1,1) computes `acc ^ v` and sends it out north
without registering it. The value passes through PE(0,1) and PE(0,2) by
router bypass and reaches PE(1,2) from the north, four hops in all. PE(1,2)
adds K and writes the result register, which holds the new `acc`. In the same
cycle:

- PE(2,1) computes `v & 1`;
- this bit reaches PE(1,2)'s predication mux, so an even `v` leaves `acc`
  unchanged;
- MEM PE(1,0) loads `v`;
- MEM PE(2,0) stores `acc`;
- PE(0,0) and PE(3,0) count the addresses.

Each loop stage is skewed so that the two-cycle load latency is covered. One
iteration completes per cycle. A run of N iterations takes N+3 cycles.

**Conventional, II = 2.** This is the same mapping, except that the XOR result
is registered at a cycle boundary, as a CGRA without chaining must do. The
recurrence now spans two cycles, and N iterations take 2N+4 cycles.

Both runs write N results that the testbench checks against the same loop
computed in plain SystemVerilog. With N = 200, the test saw every mechanism
of the fabric:

- 2025 chained operands;
- 2430 combinational router forwards;
- 608 unregistered ALU results;
- 195 predicated squashes;
- 405 loads and 405 stores.

## A second example: bitwise CRC-32

`tb_compose_crc32` runs the reflected CRC-32 (polynomial `0xEDB88320`) one
bit per step:

```
crc = 0xFFFFFFFF
for each byte b:
    crc ^= b
    repeat 8:
        crc = (crc & 1) ? (crc >> 1) ^ POLY : crc >> 1
```

Each bit step is a recurrence of three operations, and here it runs as a
single virtual PE in one cycle:

1. PE(1,2) holds `crc` in its result register and sends it west.
2. PE(1,1) shifts it right by one and does not register the result.
3. The shifted value goes east to PE(1,2), and north to PE(0,1), which XORs
   in POLY. The XOR result hops through PE(0,2) back down to PE(1,2).
4. PE(1,2) executes SELECT. Its predicate input is bit 0 of its own registered
   `crc`, and it registers the new value.

A byte takes 11 slots:

| slot | work |
|------|------|
| 0 | LOADB |
| 1 | store of the running crc |
| 2 | XOR of the byte into `crc` |
| 3–10 | eight bit steps |

With every operation registered, each bit step would take three cycles, and
a byte about 27. The test uses a 40-byte message that starts with
`"123456789"`. It reproduces that string's standard check value
`0xCBF43926`, and it checks every intermediate crc against a software
model.

## A third example: pointer chasing

`tb_compose_llist` sums the values of a 64-node linked list whose nodes lie
in memory in random order. The loop-carried pointer `p = p->next` goes
through a load. It therefore cannot close in less than the load's two cycles,
and the mapping runs at II = 2.

In slot 0:

- MEM PE(1,0) loads `p->next`, using its own result register (the previous
  load) as the address.
- The same pointer passes through MEM PE(2,0)'s router to PE(2,1), which adds
  4 without registering the sum.
- That sum returns as the address of the value load PE(2,0) issues in the
  same cycle. This is an address computation chained into a load.
- PE(3,1) accumulates the value loaded one iteration earlier.

In slot 1, MEM PE(3,0) stores the running sum.

## A fourth example: multiply-accumulate

`tb_compose_gemm` computes elements of a matrix product, `acc += a[k] * b[k]`,
at II = 1:

- MEM PE(1,0) streams `a[k]`.
- MEM PE(2,0) streams `b[k]` up through PE(2,1).
- PE(1,1) multiplies without registering the product.
- PE(1,2) adds the product to its accumulator in the same cycle.

A short second schedule then stores the accumulator. The multiply-add pair
is the chain. Each element takes K + 2 cycles: the loads lead the MAC by two.

## Host interface of `compose_cgra`

| port | dir | width | use |
|------|-----|-------|-----|
| `cfg_we`, `cfg_pe`, `cfg_slot`, `cfg_data` | in | 1, 4, 5, 75 | write one configuration word; `cfg_pe` = row*4 + col |
| `start`, `ii`, `n_cycles` | in | 1, 6, 32 | start a run of `n_cycles` cycles with initiation interval `ii` |
| `busy`, `done`, `cycle` | out | 1, 1, 32 | running, end-of-run pulse, cycles executed |
| `host_req`, `host_rdata` | in/out | 70, 32 | data-memory access through port 0 while idle |

Configuration words and host memory accesses belong between runs. While
the array runs, a host memory request is dropped. Two assertions in
`compose_cgra` flag either kind of access during a run.

Parameters: `ROWS_P` and `COLS_P` (4 and 4), `CFG_DEPTH` (32), `MEM_WORDS`
(4096 words = 16 KiB) and `CNT_W` (32). `ROWS_P`/`COLS_P` = 8 gives an 8x8
array with eight memory ports. This variant compiles, but the testbenches do
not exercise it.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints a line
`TB_RESULT checks=… failures=…` and stops itself. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_compose_cgra \
    rtl/compose_pkg.sv rtl/compose_alu.sv rtl/compose_router.sv \
    rtl/compose_compute.sv rtl/compose_config_mem.sv rtl/compose_lsu.sv \
    rtl/compose_data_mem.sv rtl/compose_ctrl.sv rtl/compose_pe.sv \
    rtl/compose_cgra.sv tb/tb_compose_cgra.sv
./obj_dir/Vtb_compose_cgra
```

`tb_compose_cgra`, `tb_compose_crc32`, `tb_compose_llist` and
`tb_compose_gemm` use the top at its default parameters and take a few
seconds each. The other testbenches need only the package and their own module,
plus the modules that module instantiates.

## Where this RTL departs from, or adds to, the description it follows

- **Data width and encodings.** The width is 32 bits. The opcode numbers, the
  configuration word layout, the semantics of SELECT/CMERGE/BR/SEXT, the signed
  compares and the shift amount are all this design's choices.
- **Register file.** Each ALU input, mesh output and ALU result has a single
  register. A multi-entry local register file is not built.
- **Write enables.** Each register has its own write enable in the word, so
  that intermediate values are not stored unless needed.
- **Sizes.** The configuration depth (32 slots) and the memory size (4096
  words) are not given and were chosen.
- **Memory organisation.** The data memory is one array with four ports, not
  a set of banks. With dedicated ports, no arbitration is needed.
- **Operations not built.** OLOAD and any floating-point (FP16) datapath are
  not built.
- **Compiler.** The compiler (DFG extraction, slack-aware mapping, VPE
  formation) is software and not part of this RTL. The configurations in
  the testbenches were made by hand.
- **One cluster.** The RTL is a single 4x4 cluster. How several clusters
  would be joined is not described, so no level above the cluster is built.
- **Timing.** Nothing in the RTL checks that a chain fits in a clock period.
  That is the compiler's job.
