# A REDEFINE tile array for Kalman filtering

A Kalman filter update spends almost all of its time in three dense
linear-algebra kernels: matrix multiply (dgemm), QR factorisation (dgeqrf) and
LU factorisation (dgetrf). The Modified Faddeeva Algorithm (MFA) expresses a
whole filter step as a sequence of these kernels over one block matrix. This
design speeds up those kernels on REDEFINE, a coarse-grained reconfigurable
array. REDEFINE is a mesh of tiles joined by a packet-switched network. Each
tile has a processing element (PE), and the PE's arithmetic unit can be rewired
per instruction.

That arithmetic unit is the **reconfigurable data path (RDP)**. It has four
double-precision multipliers and three adder/subtractors. An instruction
connects them into one of several small dataflow graphs ("macro operations"):
a 4-term dot product for GEMM, the inner update of a Householder QR step, or
the 2×2 cross-product update of LU elimination. The RDP starts one such
operation per cycle, so it can do up to seven flops per cycle. A scalar
multiply/add unit does one or two.

This RTL implements the array in its largest evaluated form: **4 × 4 tiles**.
Each tile has a compute PE, a 256 KiB memory PE and a router.

```
            y=0      y=1  ...                         host link (one per row)
   x=0 ┌──────┐   ┌──────┐   ┌──────┐   ┌──────┐
       │ tile │───│ tile │───│ tile │───│ tile │─── host_in/out[0]
       └──┬───┘   └──┬───┘   └──┬───┘   └──┬───┘
          │          │          │          │           (rows 1..3 alike)
```

Tile contents:

```
              N E S W links
                   │
              ┌────┴────┐
              │ router  │  5 ports, XY routing, 2-deep input FIFOs
              └────┬────┘
                   │ local port
              ┌────┴────┐
              │ arbiter │  steers packets by type, merges outputs
              └──┬───┬──┘
     ┌───────────┘   └───────────────┐
 ┌───┴──────────────────────┐   ┌────┴─────────────────────┐
 │ compute PE               │   │ memory PE, 32768 × 64 bit│
 │  local  load/store  ─────┼───┤  words 0..16383  private │
 │  global load/store  ─────┼───┤  words 16384.. global    │
 │  FP sequencer            │   └──────────────────────────┘
 │   regfile 256×64         │
 │   RDP  FDIV  FSQRT       │
 └──────────────────────────┘
```

## The reconfigurable data path

The node graphs follow the RDP configurations of the original design: four
multipliers, three adders and a QR graph that feeds back through one
multiplier and one adder. X operands are registers `ra..ra+3` and Y operands
are `rb..rb+3`. `s0..s2` are per-adder subtract bits taken from the
instruction.

| config | result | multipliers | adders |
|---|---|---|---|
| DOT4  | (x0·y0 s0 x1·y1) s2 (x2·y2 s1 x3·y3) | 4 | 3 |
| GEMM3 | x0·y0 s2 (x1·y1 s1 x2·y2) | 3 | 2 |
| GEMM2 | x0·y0 + x1·y1 | 2 | 1 |
| QR    | y3 − x3·(x0·y0 + (x1·y1 + x2·y2)) | 3 + 1 | 2 + 1 |
| LU    | x0·y0 − x1·y1 | 2 | 1 |
| FADD / FMUL | x0 s0 y0 / x0·y0 | – | – |

QR needs a multiplier and an adder a second time, after the three-term sum
is known. The RDP reuses M3 and A0 for that step.

The hard part is that a freely reconfigurable network of the same seven nodes
has a structural combinational loop: A0 can feed M3 and M3 can feed A0. Even if
no single configuration closes the loop, synthesis and lint see one. The RDP
avoids this by giving each node a fixed pipeline level:

```
 level 1: M0 M1 M2 M3      level 2: A0 A1      level 3: A2
 level 4: M3 (QR only)     level 5: A0 (QR only)
```

Each node picks its inputs using the configuration of the operation that is at
its own level in that cycle. So M3 at level 1 serves a DOT4 entering the pipe,
and at level 4 it serves a QR four cycles older. Every configuration takes the
same 5 cycles and one operation can enter per cycle. The restriction is that
two configurations must not be in flight at once, because both could need
M3/A0 in the same cycle. The sequencer lets a new configuration enter only
after the pipeline is empty, and assertions in `rdp` check this. A run of
operations with the same configuration streams at full rate. This is the
reason MFA kernels are scheduled as long runs of one macro operation.

## The floating-point sequencer

The sequencer issues in order, one instruction per cycle, from its own
instruction memory. A scoreboard holds one pending bit per register.

An instruction stalls for one of three reasons. Each reason has its own event
output:

* **raw:** a source or destination register still waits for a result.
* **reconf:** the instruction needs a different RDP configuration than the
  operations still in the pipe.
* **unit:** FDIV or FSQRT is busy. These also wait for the RDP to drain, so
  write-back never has two results in one cycle.

`HALT` takes effect only after every issued operation has written back, so a
halted sequencer never has a result in flight.

FDIV and FSQRT are iterative units that produce one bit per cycle. They take
58 cycles for normal operands and 2 cycles for zero, infinity and NaN.

All units use IEEE-754 binary64 with round-to-nearest-even. Subnormal inputs
are read as zero and subnormal results flush to zero. The one NaN produced is
`7FF8_0000_0000_0000`.

Because the pipeline can stall, the same kernel code can overlap independent
work, such as QR of one block while another block is multiplied. That is how
the paper's software schedule gets its speed-up. Here the sequencer simply
stalls; it does not reorder instructions.

## Three instruction streams and the barrier

A PE runs three programs at once:

| stream | instruction | does |
|---|---|---|
| FP sequencer | 32 bit `{op, sgn[2:0], -, rd, ra, rb}` | computes on registers |
| local load/store | 32 bit `{op, reg, -, addr[14:0]}` | LD/ST between tile memory and registers |
| global load/store | 48 bit `{op, ty, tx, -, laddr[14:0], goff[13:0]}` | GET/PUT between local memory and any tile's global half |

Each stream has `SYNC` and `HALT`.

A stream at `SYNC` waits until each of the other two is also at `SYNC` or has
halted, and has finished its own outstanding work:

* the FP sequencer's pipeline is empty;
* the local engine has no load in flight;
* the global engine has no GET/PUT waiting for its response.

Then all waiting streams pass together. One typical program pattern is:

1. Load block k+1.
2. SYNC.
3. Compute on block k while the global engine sends results of block k−1 to
   a neighbour.
4. SYNC.

The local engine stalls a store for one cycle if that register's load has not
landed yet.

## Memory

Each tile's memory PE holds 32768 words of 64 bits (256 KiB):

* **Lower half:** private to the tile's PE.
* **Upper half:** global. Other tiles reach it with GET/PUT packets, and a
  GET/PUT offset is always placed in this half.

The memory has four access paths:

* the local load/store port;
* the global engine's read port, for PUT data;
* the global engine's write port, for GET responses;
* the network port.

Each path is a separate port of the array. If several writes land in the same
cycle, the network wins, then the global port, then local stores.

## Network and packets

Each packet is one flit of 115 bits:

```
{type[2:0], dst_x, dst_y, src_x, src_y (4 bits each), sel[1:0],
 addr[14:0], tag[14:0], data[63:0]}
```

| type | from → to | meaning |
|---|---|---|
| GET_REQ / GET_RSP | PE → remote memory → PE | read a global word; `tag` carries the local address for the response |
| PUT_REQ / PUT_ACK | PE → remote memory → PE | write a global word |
| CFG_WR | host → memory or PE | `sel` picks the memory or one of the three instruction memories |
| CFG_RD | host → memory | read any word; the answer is a GET_RSP |
| START | host → PE | restart all three streams at address 0 |
| DONE | PE → sender of START | all three streams have halted |

Routers have five ports and a 2-deep FIFO per input. They route X first, then
Y. Each output picks round-robin among the inputs that want it. A grant is held
while the output is stalled, so a link's flit stays stable until it is taken.
Links use valid/ready.

The mesh has no wrap-around. The host is outside the design. It reaches row r
through the east link of tile (r, COLS−1), and its coordinates are
x = COLS, y = r. The tile arbiter sends these packets to the memory PE:
GET_REQ, PUT_REQ, CFG_RD, and CFG_WR aimed at memory. It sends all other
packets to the compute PE. It merges the two units' outgoing packets
round-robin.

## Where this departs from the original design

The paper gives the block structure and the sizes used here:

* a 4 × 4 array;
* 256 registers of 64 bits per PE;
* 256 KiB per tile, split into a private half and a global half;
* an RDP of 4 multipliers and 3 adders;
* the PE split into a load/store unit and a floating-point sequencer with
  RDP, FDIV and FSQRT.

It does not describe the following, so each is a choice of this RTL:

* the instruction sets and the SYNC barrier;
* the packet format, the router and the arbiter;
* the RDP pipeline depth and the operand order of each configuration;
* the divider and square-root algorithms;
* subnormal and NaN handling.

It also omits these, on purpose:

* **Other custom function units (CFU2..CFUn).** These are drawn only as
  placeholders and are not built.
* **The host / simulation environment.** This lives in the testbenches.
* **The smaller 2 × 2 and 3 × 3 configurations.** They are the same RTL with
  `ROWS`/`COLS` changed. In those configurations the last column serves only
  as memory; the RTL leaves that to the program.
* **The blocked MFA schedule.** No MFA program is shipped. The testbenches
  run the individual macro operations and a small elimination per tile.
* **Off-chip storage for the evaluated sizes.** These are Kalman filter
  matrices of 1000 × 1000 to 10000 × 10000. The 4 MiB of tile memory cannot
  hold even the smallest, so running them would need such storage.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Floating-point
results are compared bit for bit with the simulator's own IEEE double
arithmetic (`$bitstoreal`, `$sqrt`).

* `tb_fp64_mul`, `tb_fp64_addsub`, `tb_fp64_div`, `tb_fp64_sqrt`: thousands
  of random and special operands each. The div and sqrt tests also check the
  58-cycle latency.
* `tb_rdp`: every configuration with random sign bits, streaming at one
  operation per cycle, and the 5-cycle latency.
* `tb_fp_sequencer`, `tb_ls_local`, `tb_ls_global`: the three engines with
  programs that force each stall.
* `tb_memory_pe`, `tb_noc_router`, `tb_tile_arbiter`: random traffic with
  random back-pressure against reference models.
* `tb_pe`: a PE plus its memory. It runs a program of GEMM, QR, FDIV and
  FSQRT, PUTs and GETs to a modelled remote tile, and checks DONE.
* `tb_tile`: one tile driven through its links, including packets that pass
  through it.
* `tb_redefine_top`: the full 4 × 4 array at default parameters. It has four
  phases:
  1. The host loads data and programs into all 16 tiles.
  2. Each tile does a small elimination and runs every RDP configuration.
  3. Each tile PUTs its results to its east neighbour and GETs a word from
     its south-east neighbour.
  4. The host reads everything back.

  It counts issues, each stall kind, barrier waits, arbiter conflicts, link
  back-pressure and DONE packets. If any of these never happens, it fails.

To run a test with Verilator 5, put the package first:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/kf_pkg.sv $(ls rtl/*.sv | grep -v kf_pkg) \
    tb/tb_host_pkg.sv tb/tb_redefine_top.sv --top-module tb_redefine_top
./obj_dir/Vtb_redefine_top
```

Smaller tests work the same way with their own `tb/tb_<module>.sv`.
`tb_host_pkg` holds the packet and instruction encoders that the PE, tile and
array tests share.

## Trust and limits

* Arithmetic is exact to IEEE round-to-nearest-even for normal numbers. It
  flushes subnormals to zero, so results that are tiny but nonzero differ from
  a full IEEE unit.
* The register file has no reset. Programs must load every register they read.
* The sequencer test checks a read-after-write hazard at every X and every Y
  operand position of DOT4. The other configurations are checked only through
  the programs that use them.
* Speed was not a goal. The 53 × 53 multipliers and the wide adders are
  single-cycle combinational logic, with one register per RDP level.
