# Plaid: a motif-based CGRA in SystemVerilog

A coarse-grained reconfigurable array (CGRA) normally gives every ALU its own
powerful router and configures both on every cycle. Most of that routing
capacity is idle most of the time, and the configuration bits that steer it
cost a large share of the power. Plaid takes a different approach. Dataflow
graphs are full of small, recurring three-node patterns, called *motifs*:

| motif    | edges (n1..n3)                     |
|----------|------------------------------------|
| fan-out  | n1 -> n2, n1 -> n3                 |
| fan-in   | n1 -> n2, n3 -> n2                 |
| unicast  | n1 -> n2 -> n3 (a chain)           |

Plaid therefore groups three ALUs around one small *local router* that
carries a motif's internal edges. It connects these groups through a mesh of
*global routers*, which carry only the edges between motifs. One group,
together with a load/store unit and a configuration memory, is a **Plaid
Collective Unit (PCU)**. The default array here has 2 x 2 PCUs, so it has
16 function units (12 ALUs and 4 load/store units). That is the same
compute as a conventional 4 x 4 CGRA.

This repository holds synthesizable RTL for the array. The RTL covers the
PCU and its parts, the mesh, the scratchpad banks and a run controller. It
also holds self-checking testbenches, including several kernels mapped by
hand that run end to end. The compiler (motif detection and hierarchical
mapping) is software and is not part of this RTL. Configurations are written
by hand in the testbenches.

## Array

```
            edge_n_*[0]          edge_n_*[1]
               |                     |
 edge_w_* -- [PCU 0] --- E/W --- [PCU 1] -- edge_e_*     row 0
               |  \bank 0            |  \bank 1
              N/S                   N/S
               |                     |
 edge_w_* -- [PCU 2] --- E/W --- [PCU 3] -- edge_e_*     row 1
               |  \bank 2            |  \bank 3
            edge_s_*[0]          edge_s_*[1]
```

* PCU k sits at row `k / COLS` and column `k % COLS`.
* The mesh links are 16 bits wide, one per direction.
* Every link ends in a register at the receiving PCU, so one hop takes one
  cycle.
* Links at the array boundary are top-level ports.
* Each PCU's load/store unit owns one 2048 x 16-bit (4 KB) scratchpad bank.
* The host reaches the banks and the configuration memories only while the
  fabric is idle.

`plaid_top` takes `ROWS`, `COLS`, `NCFG` (configuration entries) and
`SPM_DEPTH` as parameters. The defaults (2, 2, 16, 2048) are the design
point described for Plaid. `PCU_MOTIF` (default 0) selects the hard-wired
machine-learning variant described below.

## Inside a PCU

```
            ALU0      ALU1      ALU2        (results registered; bypass
              \_______ | _______/            ALU0->ALU1, ALU1->ALU2)
                 LOCAL ROUTER 8x8  <- constant
                   |2 up   ^4 down (each optionally registered)
   N,S,E,W in -> [reg] GLOBAL ROUTER 7x9 -> N,S,E,W out
                          |  ^
                         ALSU  <-> data memory bank
```

### Motif compute unit (`plaid_motif_unit`, `plaid_alu`)

* There are three 16-bit ALUs, each with a 4-bit opcode and an 8-bit
  sign-extended constant.
* Each result is written into a register at the clock edge. A node that
  consumes the result therefore runs one cycle later or after that. This
  matches schedules such as "n1 at cycle c, n2 and n3 at c+1".
* An opcode of 0 (NOP) keeps the result register unchanged. A value can
  therefore wait in an ALU until a consumer reads it.
* **Bypass paths.** Bypass bit `i` feeds operand A of ALU i+1 directly from
  ALU i's result register. A chain mapped from left to right then leaves the
  local router free for other edges.

ALU opcodes (`plaid_pkg::alu_op_e`):

| op | name | result           | op | name | result                  |
|----|------|------------------|----|------|-------------------------|
| 0  | NOP  | (hold)           | 8  | OR   | a \| b                  |
| 1  | ADD  | a + b            | 9  | XOR  | a ^ b                   |
| 2  | SUB  | a - b            | 10 | NAND | ~(a & b)                |
| 3  | MUL  | low 16 of a*b    | 11 | NOR  | ~(a \| b)               |
| 4  | SHL  | a << b[3:0]      | 12 | XNOR | ~(a ^ b)                |
| 5  | SRL  | a >> b[3:0]      | 13 | EQ   | a == b                  |
| 6  | SRA  | a >>> b[3:0]     | 14 | LT   | signed a < b            |
| 7  | AND  | a & b            | 15 | PASS | a                       |

### Local router (`plaid_local_router`)

The local router is a combinational 8 x 8 crossbar with one 3-bit select per
output.

| select | input                   | output | destination            |
|--------|-------------------------|--------|------------------------|
| 0-2    | ALU0..ALU2 result       | 0, 1   | ALU0 operand A, B      |
| 3-6    | global-to-local path 0-3| 2, 3   | ALU1 operand A, B      |
| 7      | constant                | 4, 5   | ALU2 operand A, B      |
|        |                         | 6, 7   | local-to-global 0, 1   |

The constant is the destination ALU's own 8-bit constant, sign-extended. On
the two outputs towards the global router it reads zero.

### Global router (`plaid_global_router`)

The global router is a 7 x 9 router with one 3-bit select per output.

| select | input                    | output | destination                 |
|--------|--------------------------|--------|-----------------------------|
| 0-3    | N, S, E, W input register| 0-3    | N, S, E, W link             |
| 4, 5   | local-to-global 0, 1     | 4-7    | global-to-local path 0-3    |
| 6      | ALSU result              | 8      | ALSU operand                |
| 7      | zero                     |        |                             |

The two kinds of register in the global router work as follows:

* **Input registers.** Each N/S/E/W input register loads every cycle. When
  its `dir_hold` bit is set in the current configuration, it keeps its
  value instead. A value that arrives once can then be read in later
  contexts while the link carries other traffic.
* **Global-to-local paths.** Each of the four paths has a register that
  always captures the selected value. The `g2l_reg` bit chooses whether the
  local router sees the registered copy (one cycle older) or the direct
  one. This is the temporal buffering between the two routers.

**Why no combinational loop can be configured.** A value might go from the
local router to the global router and straight back. If this were a wire,
configuration could close a loop. The direct global-to-local paths therefore
cannot select inputs 4 and 5, and read zero if asked to. The registered path
can select them. Every mesh link also ends in a register. With these two
rules, no configuration creates a combinational path from a register-free
output back to itself. The tools also report no loop for the whole array.

### Arithmetic-Load-Store Unit (`plaid_alsu`)

The ALSU executes the graph's memory nodes on its own bank. It also runs
helper nodes: simple arithmetic with the constant, compares, and a
predicated select. It has one routed operand `opnd`, the 8-bit
sign-extended constant `imm`, an address register `areg`, and a result
register.

| op | name | effect                                               |
|----|------|------------------------------------------------------|
| 0  | NOP  | hold                                                 |
| 1-8| ADD SUB MUL AND OR XOR SHL SRL | result = opnd (op) imm     |
| 9  | LD   | result = bank[opnd + imm], visible the next cycle    |
| 10 | SETA | areg = opnd                                          |
| 11 | ST   | bank[areg + imm] = opnd                              |
| 12 | PSEL | result = (areg != 0) ? opnd : result                 |
| 13 | EQ   | result = (opnd == areg)                              |
| 14 | LT   | result = signed opnd < areg                          |
| 15 | PASS | result = opnd                                        |

Only one value reaches the ALSU from the router. A store therefore takes
two instructions: SETA in one context, then ST in another. Load data keep
the ALSU result until the next ALSU operation.

### Hard-wired motifs (the machine-learning variant)

A PCU can be built with one motif wired in place of the local router. The
global router and everything outside the PCU stay fully configurable. This
saves the crossbar, and the mapper has to put a matching motif on that PCU.
The local router's `MOTIF` parameter picks the wiring.
`plaid_top.PCU_MOTIF` sets it per PCU, 2 bits each:

| MOTIF | A0 | B0 | A1 | B1 | A2 | B2 | L2G0 | L2G1 |
|-------|----|----|----|----|----|----|------|------|
| 0 router  | sel | sel | sel | sel | sel | sel | sel | sel |
| 1 fan-in  | g2l0 | g2l1 | g2l2 | g2l3 | ALU0 | ALU1 | ALU2 | ALU0 |
| 2 unicast | g2l0 | g2l1 | ALU0 | g2l2 | ALU1 | g2l3 | ALU2 | ALU1 |
| 3 fan-out | g2l0 | g2l1 | ALU0 | g2l2 | ALU0 | g2l3 | ALU1 | ALU2 |

An operand wired to a global path takes the ALU's constant when its
select is 7. Other select values are ignored. `PCU_MOTIF = 8'b11_10_01_01`
gives the published machine-learning mix: PCUs 0 and 1 fan-in, PCU 2
unicast, PCU 3 fan-out. `tb/tb_plaid_ml.sv` streams two inputs through all
four PCUs of that build at II = 1 and checks every output word.

## The configuration entry

Each PCU has a 16 x 120-bit configuration memory (`plaid_config_mem`). In
every cycle, entry `ctx` drives the whole PCU. Packed layout
(`plaid_pkg::pcu_cfg_t`, MSB first):

| bits     | field      | meaning                                            |
|----------|------------|----------------------------------------------------|
| 119:109  | reserved   |                                                    |
| 108:105  | dir_hold   | N,S,E,W input register holds (bit = `dir_e`)       |
| 104:101  | g2l_reg    | global-to-local path k reads its register          |
| 100:99   | bypass     | bit0 ALU0->ALU1 A, bit1 ALU1->ALU2 A               |
| 98:87    | alsu       | op[3:0], imm[7:0]                                  |
| 86:60    | gsel[8:0]  | 3-bit source for each global router output         |
| 59:36    | lsel[7:0]  | 3-bit source for each local router output          |
| 35:0     | alu[2:0]   | op[3:0], imm[7:0] per ALU                          |

The routers take 51 of the 120 bits. An all-zero ALU or ALSU field is a NOP.
Set unused selects to 7 (zero) so the outputs are quiet. The exception is
a hard-wired PCU, where local select 7 puts the constant on an operand; use
0 there for the wired path.

## Running a kernel

`plaid_ctrl` runs a statically scheduled, modulo-scheduled kernel. The
cycle count of such a kernel is known at compile time: it is II times the
number of iterations, plus the pipeline depth.

1. Write the configuration entries: `cfg_we`, `cfg_pcu`, `cfg_addr`,
   `cfg_data`, one entry per cycle.
2. Write the input data into the banks through `host_mem_*`. A read returns
   data on `host_mem_rdata` one cycle after the request.
3. Pulse `start` with `ii` (1..16) and `run_cycles`.
   * The controller spends one cycle clearing every datapath register: ALU
     and ALSU results, `areg`, and the link and path registers.
   * It then runs for exactly `run_cycles` cycles, with the context index
     stepping 0, 1, ..., II-1, 0, ...
   * `busy` covers the clear cycle and the run. `done` rises at the end and
     stays high until the next start.
4. Read the results back.

While the fabric is idle, every PCU executes NOP and holds its link
registers. The state left by one run is therefore still there when the host
inspects it.

### Latencies to schedule against

| path                                                            | cycles |
|-----------------------------------------------------------------|--------|
| ALU/ALSU result -> consumer in the same PCU, via either router   | 1      |
| ALU i -> ALU i+1 via bypass                                     | 1      |
| LD issued -> data usable                                        | 1      |
| result -> neighbour PCU over a link                             | 2 (1 hop + result register) |
| registered global-to-local path                                  | +1     |

A value leaving over a link is taken from a register in the sending PCU (a
result, or an input register). It is then captured in the receiver's input
register at the next edge.

### Worked example (`tb/tb_plaid_top.sv`)

The kernel is `y[k] = (x[k] * b) ^ (x[k] << 2)`, with II = 2, on PCUs 0
and 1:

```
PCU0 ctx1: ALU0 = ALU0 + 1 (counter) ; ALSU LD x[counter] ; counter -> E
PCU0 ctx0: ALU1 = x * b (x from ALSU, b from held N register)
           ALU2 = x << 2
PCU0 ctx1: ALU2 = ALU1 (bypass) ^ ALU2            -> fan-in motif
PCU0 ctx0: y -> E
PCU1 ctx0: ALSU SETA (address from W) ; ALU0 = PASS registered W copy
PCU1 ctx1: ALSU ST bank1[areg-1] = y ; ALU0 -> E edge port (echo)
```

The test runs 200 iterations at the default size. It checks every stored
word and every echoed word. It checks the cycle count (2N + 6 run cycles
plus 1 clear cycle) and one store every II cycles. It also counts how often
each mechanism was used: modulo wrap, local routing, bypass, inter-PCU hop,
registered path, input hold, load, store and edge output.

### Fully-connected layer (`tb/tb_plaid_fc.sv`)

This test runs `out[j] = sum_i W[j][i] * x[i]` (8 outputs by 64 inputs)
with II = 1, one multiply-accumulate per cycle:

* PCU 0 loads x and counts.
* PCU 1 loads the weight row, with the address arriving over the link.
* PCU 0 multiplies, then accumulates in ALU2 through the bypass path.
* PCU 2 stores the sum.

The two load streams arrive one hop apart. A registered global-to-local
path realigns them. Each neuron takes K + 6 run cycles.

### Matrix multiplication (`tb/tb_plaid_gemm.sv`)

This test runs `C = A * B` with 8 x 8 matrices on the same datapath as the
fc layer. The difference is that B is read down a column. PCU 1 runs its
own counter, which adds the row length (8) every cycle. The column index
enters through the load constant (`j - 8`), so a new column needs only one
rewritten configuration entry. Both counters start together after the
clear. Each element of C takes K + 6 run cycles.

### ReLU and max pooling (`tb/tb_plaid_maxpool.sv`)

This test runs `out[j] = max(0, x[jP .. jP+P-1])` over 8 windows of 20
signed samples. It is the array-level test of the ALSU's predicated select:

* PCU 1 counts and loads one sample per iteration.
* PCU 0 keeps the running maximum m in its ALSU result register.
* Its ALU0 computes p = (m < x). The ALSU takes p with SETA, then does
  PSEL, so m becomes x when p is set and stays m otherwise.
* PCU 2 stores m.

The loop from m through the compare, SETA and PSEL back to m takes three
cycles, so II = 3. Clearing the registers at the start of a run sets m to
0, which gives the ReLU. The bench reads the ALSU's predicate at each
select. It checks that the number of taken selects equals the number of
updates in the reference model.

### 1-D Jacobi stencil (`tb/tb_plaid_jacobi.sv`)

This is the integer form of the evaluated `jacobi` kernel, in one
dimension and without the 1/3 scale: `B[i] = A[i-1] + A[i] + A[i+1]`.
It runs at II = 2 and loads each element of A only once:

* PCU 0 counts and loads `A[k]`.
* A registered global-to-local path keeps `A[k-1]`, and ALU2 keeps
  `A[k-1] + A[k-2]`.
* ALU1 adds the new element to the sum in ALU2, while ALU2 forms the next
  pair sum. The loaded value feeds both ALUs.
* One E link carries the store address in ctx0 and the sum in ctx1.
* PCU 1 stores through SETA and ST.

The bench checks all N - 2 outputs. It also checks where the two partial
sums from the first iterations land, which pins down the pipeline timing.

## How much of this is the published design

Taken from the published design:

* the PCU structure: three 16-bit ALUs, a local router, a global router, an
  ALSU and a configuration memory;
* the router sizes (8 x 8 and 7 x 9);
* N/S/E/W links 16 bits wide;
* 15 ALU operations with a 4-bit opcode and an 8-bit constant;
* 120-bit configuration entries, 16 per PCU;
* bypass paths between neighbouring ALUs;
* optional registers between the two routers;
* a hardware rule against configurable loops;
* a 2 x 2 array with four 4 KB banks;
* configuration read modulo II;
* the machine-learning variant: two fan-in, one unicast and one fan-out
  PCU with the local router replaced by fixed wiring.

Choices made here, where the description gives no detail:

* the exact ALU and ALSU operation lists and encodings;
* the split of router ports between sources and sinks. This is read from
  the block diagram's arrows, not from printed numbers.
* the constant entering through the local router;
* the load/hold reading of the link input multiplexers, which makes every
  hop one cycle;
* the loop rule itself: no direct local -> global -> local path;
* an ALSU with one routed operand and an address register, so stores take
  SETA + ST;
* one bank per PCU;
* the field layout of the 120-bit word;
* a flip-flop configuration memory with asynchronous read;
* the host-side start/run_cycles/done handshake and clear-at-start;
* host access to the banks only while idle;
* the wiring inside each hard-wired motif, and which PCU gets which motif.

Not included:

* The compiler.
* The host processor.
* A smaller configuration memory for hard-wired PCUs. Their unused
  select bits are still stored in the 120-bit word and then ignored.
* How banks attach in larger arrays. `ROWS`/`COLS` can be raised, and
  every PCU then gets its own bank. That pairing is only argued for the
  2 x 2 array, where every PCU is on the array edge. The published text
  gives ALSUs only to PCUs along the edges next to the data memory. A
  3 x 3 array built from this RTL therefore differs: its centre PCU also
  has an ALSU and a bank. `tb/tb_plaid_3x3.sv`
  builds the 3 x 3 size, which was also evaluated. It sends a loaded stream
  through all nine PCUs and checks host access to all nine banks.

Capacity against the evaluated kernels: the largest evaluated graph
(`jacobi` unrolled 4 times) has 54 nodes, 24 of them not compute nodes. A
conservative count puts all of those on the four ALSUs. The resource-bound
II is then max(ceil(54/16), ceil(24/4)) = 6, within the 16 configuration
entries, and every evaluated graph fits by the same count. Whether a given
graph also routes at that II depends on the mapper. Three of the evaluated
kernels run here in hand-mapped form: fc, gemm and a 1-D jacobi. Their
graphs are simpler than the published ones, and the sizes are the
testbenches' own.

## Files and simulation

`rtl/` holds one module per file:

| file | contents |
|------|----------|
| `plaid_pkg.sv` | types and constants |
| `plaid_alu.sv` | ALU |
| `plaid_motif_unit.sv` | motif compute unit |
| `plaid_local_router.sv` | local router |
| `plaid_global_router.sv` | global router |
| `plaid_alsu.sv` | load/store unit |
| `plaid_config_mem.sv` | configuration memory |
| `plaid_pcu.sv` | PCU |
| `plaid_spm_bank.sv` | scratchpad bank |
| `plaid_ctrl.sv` | run controller |
| `plaid_top.sv` | the array |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`) plus
`tb_plaid_fc.sv`, `tb_plaid_gemm.sv`, `tb_plaid_maxpool.sv`, `tb_plaid_jacobi.sv`, `tb_plaid_ml.sv`
and `tb_plaid_3x3.sv`.
Each prints `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/plaid_pkg.sv tb/tb_plaid_top.sv --top-module tb_plaid_top -o sim
./obj_dir/sim
```

Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/plaid_pkg.sv rtl/plaid_top.sv`.
All testbenches, including the full-size array test, finish in seconds.
