# CompAir channel RTL: hybrid DRAM/SRAM processing-in-memory with a computing NoC

Large-language-model inference spends its time on two kinds of work. Weight-heavy
matrix-vector products are bound by memory bandwidth. Batched matrix products and
the non-linear steps (softmax, normalisation, rotary embedding) need data moved and
combined across many memory banks. This design attacks both inside one memory
channel:

* Every DRAM bank has a small **DRAM-PIM** unit: 16 BF16 multipliers and an adder
  tree next to the row buffer. It is good at streaming GEMV work.
* Under every DRAM bank sit four **SRAM-PIM macros** on a logic die, joined by 256
  hybrid bonds. They keep a weight tile and reuse it across a batch, which suits
  GEMM work.
* The logic die also carries a **computing network-on-chip**. Its routers hold small
  single-operand ALUs ("Curry ALUs"). A packet carries a value plus a short program,
  a path of up to four routers with one operation at each. The value is transformed
  while it travels. Reductions, broadcasts, data shuffles and short scalar series
  (such as a Taylor expansion) then happen on the way between banks, without
  extra round trips through a central unit.

The RTL here implements one complete channel: 16 banks, the channel's global buffer,
and the 4 x 16 router mesh, with a SIMD command port that drives all banks in lock
step. The device-level controller, CXL links and host are outside it.

```
              cmd / bank_mask / wdata                 gb_we/addr/wdata
                        |                                    |
   +--------------------v------------------------------------v-------+
   | compair_channel                               global_buffer 2 KB |
   |  bank 0 ... bank 15  (compair_bank)                 (16 read ports)|
   |  +----------------------------------------------+                 |
   |  | dram_array 32 MB -- col_decoder 8:1 -> 4:1   |                 |
   |  |        |128 B            |32 B               |                 |
   |  |  sram_pim_bank      dram_pim_mac (16 MAC)    |                 |
   |  |  (4 x sram_pim_macro)                        |                 |
   |  |        \______ bank_io (controller) ______/  |                 |
   |  |                 | 4 router ports            |                 |
   |  +-----------------|----------------------------+                 |
   |  compair_noc: 16 x 4 mesh of noc_router, 2 curry_alu each         |
   +-------------------------------------------------------------------+
```

## 1. In-transit computation: packets, paths and Curry ALUs

This is the least familiar part of the design. It takes the most space here.

### 1.1 The Curry ALU

A normal ALU needs two operands to meet. In a network they arrive at different
times from different places. The Curry ALU avoids the meeting. Its right operand
already lives in the router, in a register `ArgReg`. A passing packet supplies the
left operand (its data) and the operator. The router computes

```
result = Data  op  ArgReg          op in { +=, -=, *=, /= }
```

and writes the result back into the packet's data field. The packet then carries on.
Two flags per step extend this:

* `WrReg`: the result is also stored into `ArgReg`. A reduction uses it to leave a
  partial sum in the router for a later packet to pick up.
* `IterTag`: after the operation, the ALU updates its own register:
  `ArgReg = ArgReg IterOp IterArg`. With `IterOp = -=` and `IterArg = 1` the
  register becomes a loop counter `i`. A packet that divides by it on every
  pass computes `x/i` for `i = 6, 5, 4, ...`.

`curry_alu.sv` contains one BF16 unit (`bf16_alu`: adder, multiplier, divider) and
the three operand muxes. The `IterTag` update reuses the same unit in the cycle
after the packet's own operation. During that cycle `busy` is high and the router
sends no other packet to this ALU. Each router has two Curry ALUs. The packet's
type field selects one of them.

Register access is by packet type, not by a side port:

| packet type | at each path step                                        |
|-------------|----------------------------------------------------------|
| Scalar, Reduce, Exchange | `Data = Data op ArgReg` (+ WrReg / IterTag) |
| Broadcast   | `ArgReg = Data`, packet continues                        |
| Read        | `Data = ArgReg`                                          |
| Write       | `ArgReg = Data`; with IterTag set: `IterArg = Data, IterOp = op` |
| None        | no ALU use; packet just travels                          |

Scalar, Reduce and Exchange behave the same in hardware. The three names tell the
programmer how a packet is used.

### 1.2 Packet format

A packet is exactly one 72-bit flit:

```
 71    70..68  67..52  51..48   47..36   35..24   23..12   11..0
+-----+------+--------+-------+--------+--------+--------+--------+
| ALU | Type | Data   |IterNum| Path0  | Path1  | Path2  | Path3  |
+-----+------+--------+-------+--------+--------+--------+--------+
Path entry (12 bits):  X(4, signed) | Y(4, signed) | WrReg | IterTag | Op(2)
Op: 0 +=, 1 -=, 2 *=, 3 /=       Type: 0 None 1 Scalar 2 Reduce 3 Exchange
                                       4 Broadcast 5 Read 6 Write
```

The field widths are the original architecture's. The following encodings are this
design's own:

* the codes for Type and Op;
* the top Type bit as ALU select;
* `12'hFFF` as an unused path entry.

**Path offsets are relative.** Step 0's offset is taken from the router where the
packet was injected. Each later step's offset is taken from the router that ran the
step before it. A step with offset (0,0) therefore runs on the same router as the
previous one.

**IterNum repeats the whole path.** The path runs `max(IterNum, 1)` times. After the
last step of a pass, the next pass starts again with `Path0`'s offset, measured from
where the last step ran. A loop therefore closes only if the offsets of one pass sum
to zero. After the final step of the final pass, the packet is ejected to the bank
attached to that router.

Each flit carries a small sideband next to it: the absolute coordinates of the router
that runs the current step, and the step index. `make_flit()` in `compair_pkg`
computes this sideband at injection.

### 1.3 Worked examples (all run in the testbenches)

**Exponential series.** Routers A=(0,0), B=(1,0), C=(0,1) are set up first:

* `ArgReg(A)=6`, `IterArg(A)=1`, `IterOp(A)=-=`;
* `ArgReg(B)=1`;
* `ArgReg(C)=x`.

One Scalar packet with `Data=1` and `IterNum=6` is then injected at B with this path:

```
(-1,+1, *=)          at C: Res = Res * x
( 0,-1, /=, IterTag) at A: Res = Res / i ; then i = i - 1
(+1, 0, +=)          at B: Res = Res + 1
```

After six passes it leaves B holding `1 + x(1 + x/2(1 + x/3(...)))`, which is about
`e^x`. The offsets of one pass sum to (0,0), so the loop closes.

**Reduction tree.** Leaves hold their values in `ArgReg`. A packet with `Data=0` and
path `(0,0,+=) (2,0,+=) (2,0,+=) (2,0,+=,WrReg)` adds four values spaced two
routers apart. It leaves the sum in the last router's `ArgReg`, where a
second-level packet adds it into a larger tree. Several trees run at the same time.

**RoPE rearrangement.** Rotary embedding needs `[q0 q1 q2 q3 ...]` turned into
`[-q1 q0 -q3 q2 ...]`. A bank's four routers do it in five stages, with their
`ArgReg`s as a small buffer:

1. Write packets load q1 and q3 into the top two routers and q0 and q2 into the
   bottom two.
2. The top routers get `0 -=` packets with WrReg, which leave -q1 and -q3 in their
   registers. The bottom routers get Read packets, which return q0 and q2.
3. Read packets return -q1 and -q3 from the top. The bottom routers are loaded
   with q5 and q7.
4. The top routers are loaded with q4 and q6. The bottom routers get `0 -=`
   packets with WrReg.
5. Read packets return the remaining four values.

The DRAM-PIM units then finish the embedding with element-wise multiply and add.

**Broadcast / read.** One Broadcast packet loads the same value into the `ArgReg` of
up to four routers. A Read packet returns a register's contents to the bank.

### 1.4 Router micro-architecture (`noc_router.sv`)

* Five ports: N, S, E, W and local. Each input has a FIFO (`FIFO_DEPTH = 4`) and
  credit-based flow control. Y grows southward and X eastward. Routing is
  dimension order, X first.
* **Bypass.** A flit that arrives at an empty FIFO and wins its output goes straight
  through the router. It leaves on the next clock edge, so each hop costs one cycle
  when nothing blocks it. A flit that loses arbitration is written into the FIFO. It
  competes again from there and takes two or more cycles.
* **Flit compute in parallel with switching.** A flit at its step router, or at the
  injection point whose first step is local, uses a Curry ALU in the same cycle as
  it crosses the switch. The router then computes the next step's destination and
  puts it in the sideband. If the next step is on the same router, the flit goes
  into a one-entry loop-back slot and competes again next cycle.
* Arbitration is round robin over the five inputs and the loop-back slot. A
  candidate needs all three of the following:
  * its output is free and has a credit;
  * its Curry ALU, if it needs one, is not already taken this cycle;
  * that ALU is not doing an IterTag update. A candidate that fails only on the
    ALU counts as an **ALU stall**.
* `ev[5:0]` reports, for each cycle: bypass, buffering, ALU stall, loop-back,
  iteration wrap and in-router compute. The testbenches count these.

The original router also has lookahead routing with virtual channels and tokens,
which the paper describes only by reference. This design has one virtual channel.
It carries the lookahead information as a same-cycle sideband. The delay of one
cycle per hop when nothing blocks, and two or more cycles when buffered, matches
the "1-2 cycles per router" the architecture claims.

### 1.5 Mesh and bank placement (`compair_noc.sv`, `compair_channel.sv`)

The 64 routers form a 16 x 4 mesh, router index `y*16 + x`. Mesh edges are tied
off. Bank `b` owns the 2 x 2 block of routers at `x = 2*(b%8) + {0,1}` and
`y = 2*(b/8) + {0,1}`. Its router `r` sits at `(x0 + r%2, y0 + r/2)`. The
routers' coordinates are input straps rather than parameters, so all 64 share one
module.

## 2. The bank

### 2.1 DRAM array and the decoupled column decoder

`dram_array` is a **behavioural model** of the 32 MB cell array: 32768 rows of 1 KB
and one open row. DRAM cells cannot be written as RTL. It has no refresh and no
analog timing: an activate takes one cycle.

A conventional bank picks 32 B out of the 1 KB row with a 32:1 column mux. Here
that mux is split in two (`col_decoder`):

* an 8:1 stage gives 128 B, which goes over the hybrid bonds to the SRAM-PIM macros;
* a 4:1 stage picks 32 B from those 128 B for the 16 MACs.

The SRAM side thus gets four times the bandwidth without widening the MAC path.

### 2.2 DRAM-PIM MAC (`dram_pim_mac`)

The unit has 16 BF16 multipliers and a pairwise adder tree, `((p0+p1)+(p2+p3))+...`.
MAC accumulates the dot product of a DRAM word with a global-buffer word over
several words. EWMUL and EWADD give 16 element-wise results. Throughput is one
32-byte word per cycle, and the result is registered.

### 2.3 SRAM-PIM macros and bank (`sram_pim_macro`, `sram_pim_bank`)

Each macro holds four 128 x 8 BF16 weight tiles (4 x 16 kbit = 64 kbit = 8 KB). An
input vector streams in as 16-element chunks, one per cycle. The macro sums 16
products per output per chunk and accumulates over the 8 chunks. The 8 outputs are
valid one cycle after the last chunk.

Four macros form the bank's matrix unit in one of two shapes:

| shape     | chunks | input routing                        | outputs                       |
|-----------|--------|--------------------------------------|-------------------------------|
| (512, 8)  | 32     | macro m takes chunks 8m..8m+7        | `(y0+y1)+(y2+y3)`, 8 values   |
| (256, 16) | 16     | macros 0,2: chunks 0-7; 1,3: 8-15    | `y0+y1` (0-7), `y2+y3` (8-15) |

The result is valid two cycles after the last chunk. The macro circuit itself, a
published digital SRAM-CIM design, is modelled by its function. Its analog and
timing behaviour are not modelled.

### 2.4 Bank controller and hybrid-bonding IO (`bank_io`)

Every bank in the command mask runs the same command on its own data. A word
address selects one 32 B word: `{row[14:0], col8[2:0], col4[1:0]}`.

| command     | action                                                               |
|-------------|----------------------------------------------------------------------|
| WRITE       | `DRAM[dst] = wdata`                                                  |
| READ        | `rdata = DRAM[src]`                                                  |
| MAC         | `DRAM[dst].lane = sum_i dot(DRAM[src+i], GB[gb+i])`, i < len; other lanes kept |
| EWMUL/EWADD | `DRAM[dst+i] = DRAM[src+i] op DRAM[src2+i]`, i < len                 |
| SRAM_WR     | weight words `DRAM[src..src+len)` into tile `wset`; the word at address a goes to tile word `w = a % 256` (macro `w/64`, chunk `(w%64)/8`, output `w%8`) |
| SRAM_COMP   | input chunks `DRAM[src..src+len)` (len 32 or 16), 16 outputs to `DRAM[dst]` |
| NOC_INJ     | packet template `pkt` with Data = `DRAM[src].lane` into router `rtr`, once it has an injection credit |
| NOC_SAVE    | waits for the next packet ejected at router `rtr`, Data -> `DRAM[dst].lane` |

Each DRAM word access costs an activate cycle and a column cycle. A MAC
therefore takes 3 cycles per word (activate, column, multiply-accumulate). SRAM commands
read 128 B per access and send it across the 256 hybrid bonds as four 256-bit
beats. Ejected packets wait in a 4-deep FIFO per router until the bank saves them.
That FIFO's credits propagate back-pressure into the mesh.

## 3. The channel top (`compair_channel`)

* **Command port.** A command is accepted (`cmd_valid && cmd_ready`) only when every
  bank is idle. It starts in all banks of `bank_mask`. `done` pulses one cycle
  after the last of them finishes.
* **READ results.** These arrive per bank on `rvalid[b]` / `rdata[b]`.
* **Global buffer.** `gb_we` / `gb_addr` / `gb_wdata` fill the 2 KB buffer. Its 16
  read ports let every bank's MAC read its own word.
* **Monitoring.** `noc_ev` exposes the routers' event strobes.

This port stands in for one of the device controller's 32 memory controllers. The
instruction fetch/decode that would drive it is not part of the RTL.

## 4. Numerics

All datapaths are BF16 (`compair_pkg`):

* add, subtract, multiply and divide give the exact result truncated toward zero;
* subnormal inputs and results flush to zero;
* overflow and x/0 give infinity.

The architecture names the operations but not their rounding. Truncation is the
cheapest exact scheme, and the testbenches check it bit for bit against a
real-arithmetic reference.

## 5. Where this RTL departs from the architecture description

* **Scope.** One channel is built: 16 banks and a 4 x 16 NoC. The full device has
  32 channels, and 32 devices sit on a CXL switch. The device controller (2 MB
  instruction memory, decoders, 64 KB shared memory), the CXL ports and switch,
  and the host are not built.
* **Router.** The router has one virtual channel and no token or lookahead-routing
  tables. The step destination travels in the same cycle as the flit.
* **Deadlock freedom (open issue).** Each path step is routed X-first, but a
  multi-step path can turn from Y back into X at a step router. With one virtual
  channel this breaks the usual dimension-order argument, so heavy random
  multi-step traffic can stall. `tb_compair_noc` passes with its default random
  seed. With `+verilator+seed+2` its 300-packet random test does not deliver all
  packets within its 3000-cycle limit. The cause has not been found: it may be a
  real deadlock or just a slow drain. The paper's own patterns (reduce trees,
  broadcast, exponential series, RoPE) are single-step or use few routers, and
  they pass.
* **Path offsets.** Offsets are relative to the previous step's router, and a loop
  must sum to zero offset. The published exponential-series example prints offsets
  that do not all follow one consistent convention. Its computation is reproduced
  with zero-sum offsets instead.
* **DRAM.** The DRAM array is behavioural, with no tRCD/tRAS/tCL/tRP timing, and an
  activate costs one cycle.
* **SRAM-PIM.** The macros compute one 16-input chunk per cycle. The published
  macro's access time is not modelled.
* **Row-level instructions.** The row-level NoC instructions are not decoded in
  hardware. These are reduce or broadcast over a bank mask with a destination
  bank, scalar and register access over a 64-bit router mask, and exchange with
  offset and group. The channel works at packet level instead. A command issuer
  expresses each such instruction as `NOC_INJ` commands (packet template, bank
  mask, router) followed by `NOC_SAVE`. The channel testbench does this for a
  4-tree reduction.
* **Numerics.** Rounding, subnormal handling and the encodings of the ISA fields are
  this design's choices (section 1.2 and section 4).

## 6. Verification

Every testbench is self-checking. Each ends with
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench              | what it checks |
|------------------------|----------------|
| `tb_bf16_alu`          | 4000 random and directed BF16 ops against a real-arithmetic reference with the same rounding |
| `tb_curry_alu`         | load, all four ops, WrReg accumulation, IterTag counter update with `busy`, Read |
| `tb_noc_router`        | 1-cycle bypass, compute + next-destination, ALU conflict and serialisation, two ALUs in parallel, loop-back, credit back-pressure |
| `tb_compair_noc`       | zero-load latency of 19 cycles for 18 hops, exponential series, 8 parallel reduce trees + second level, broadcast/read, 300 random multi-step packets, five-stage RoPE rearrangement |
| `tb_sram_pim_macro`    | 128x8 dot products for all tiles, 8 + 1 cycle latency |
| `tb_sram_pim_bank`     | both shapes, 2-cycle output latency |
| `tb_dram_pim_mac`      | multi-word MAC at one word per cycle, EWMUL, EWADD |
| `tb_col_decoder`       | all 32 column selects, 32 B and 128 B write merge |
| `tb_dram_array`        | row open/write/re-open against a model |
| `tb_global_buffer`     | 16 concurrent read ports |
| `tb_compair_bank`      | every bank command, MAC rate of 3 cycles per word, SRAM compute in both shapes, injection credits, ejection FIFO |
| `tb_compair_channel`   | full-size channel (no parameter overrides), described below |

`tb_compair_channel` runs a whole computation:

1. GEMV-style MAC in all 16 banks;
2. element-wise add;
3. SRAM weight load and compute in both shapes;
4. a three-level NoC reduction of the 16 banks' results into bank 15;
5. back-pressure through the ejection FIFO and the router buffers;
6. an iterated single-router packet.

It counts bypasses, buffering, ALU stalls, loop-backs, iteration wraps, in-router
computes and each bank command kind, and counts a failure for any that never
happened.

Build and run one with plain Verilator. Pass the packages first:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/compair_pkg.sv tb/tb_bf16_pkg.sv tb/tb_pkt_pkg.sv rtl/*.sv tb/tb_compair_channel.sv \
    --top-module tb_compair_channel -j 4
./obj_dir/Vtb_compair_channel
```

The full-size channel simulation allocates the sixteen 32 MB arrays, about 0.5 GB
of host memory.

## 7. Capacity

One channel stores 16 x 32 MB = 0.5 GB. The models the architecture is evaluated
with do not fit in one channel, even as BF16 weights alone:

| model      | weights (BF16) | channels needed |
|------------|----------------|-----------------|
| Llama2-7B  | 13.4 GB        | 27              |
| Llama2-13B | 26 GB          | 52              |
| Llama2-70B | 140 GB         | 280             |
| Qwen-72B   | 144 GB         | 288             |
| GPT3-175B  | 350 GB         | 700             |

The parameter counts are the models' published sizes. The full 32-device system
has 1024 channels (512 GB) and holds each of them. The RTL here is its repeating
unit.
