# DAnA-style in-database training accelerator

This design trains a machine-learning model, such as linear or logistic regression or an SVM,
directly on database pages. The pages are the same bytes a relational database keeps in its
buffer pool. The host does not first export, parse or convert the data. It streams raw pages to
the accelerator. Hardware next to the page buffers, the **striders**, walks each page's layout
and pulls out the tuples. An array of small fixed-point processors, the **execution engine**,
then runs the model's update rule on the tuples. Several update rules run in parallel, one per
**thread**. After each round, a **merge tree** combines their results (for example, it sums the
gradients) and every thread applies the same model update.

```
 host stream ─► byte aligner ─► router FSM ─┬─► strider program / registers
 (pages + cfg)                              ├─► page buffer 0 ─► strider 0 ─► thread 0 ─┐
                                            ├─► page buffer 1 ─► strider 1 ─► thread 1 ─┤
                                            │        ...                      ...       ├─► merge tree ─┐
                                            └─► execution-engine config                              │
                        round / epoch controller ◄───────────────────────────────────────────────────┘
                        (merged vector written back to every thread, post-merge step, convergence test)
```

The top module is `dana_top` (`rtl/dana_top.sv`). Shared types and constants are in
`rtl/dana_pkg.sv`. The default sizes are:
- 4 threads, each fed by its own page buffer and strider
- 2 analytic clusters per thread, 8 analytic units per cluster, so 16 lanes per thread
- 32 KB pages
- 2048-word unit data memories and 256-entry program memories

## Number format

Every feature and model value is a signed 32-bit Q16.16 fixed-point number (type `word_t`).
- Multiplication keeps bits 47..16 of the 64-bit product (`q_mul`).
- Division is signed restoring division of `a<<16` by `b`.
- The square root is exact for the integer `x*2^16`.
- Sigmoid and Gaussian are piecewise approximations, good to about 0.01.

The host writes the tuples into the pages already in Q16.16.

## Host stream and configuration packets

Everything enters through one valid/ready stream of 8-byte beats, `s_*`. A packet is marked by
`s_first` and `s_last`. `s_off` gives the byte offset of the first useful byte in the first beat,
so a page does not need to start on an 8-byte boundary in host memory. `s_is_cfg` marks a
configuration packet. Any other packet is one database page of `PAGE_BYTES` bytes.

A configuration packet is a header beat (`cfg_hdr_t`) followed by `count` payload beats. The
payload beats are written to consecutive addresses starting at `addr`. The header fields are:
`dest[2:0]`, `ac[7:0]`, `au[7:0]`, `addr[15:0]` and `count[15:0]`. The destinations are:

| dest | target |
|---|---|
| 0 `CD_STRIDER_IMEM` | strider program (the same program for all striders) |
| 1 `CD_STRIDER_REG` | 0: program length, 1: `ins` constant byte, 2: threads in use |
| 2 `CD_AC_IMEM` | cluster program of cluster `ac`, in every thread |
| 3 `CD_AU_IMEM` | micro-program of unit `au` of cluster `ac`, in every thread |
| 4 `CD_AU_DMEM` | data memory of unit `au` of cluster `ac`, in every thread (initial model) |
| 5 `CD_CTRL_REG` | execution-engine control registers (below) |

The controller's registers are:

| addr | register | meaning |
|---|---|---|
| 0 | SEG_UPDATE | cluster PC of the update-rule code |
| 1 | SEG_POST | cluster PC of the post-merge code (for example `w -= lr*g`) |
| 2, 3, 4 | MERGE_SRC, MERGE_DST, MERGE_LEN | the merge reads rows SRC.. and writes rows DST.., LEN rows |
| 5 | MERGE_OP | 0 add, 1 multiply, 2 max, 3 min |
| 6 | TUPLES | tuples per epoch |
| 7 | EPOCHS | maximum number of epochs |
| 8, 9 | CONV_ADDR, CONV_EN | the convergence word, in unit 0 of cluster 0 of thread 0 |
| 10 | IN_BASE | data-memory row of tuple word 0 |
| 11 | START | writing here starts training |
| 12 | THREADS | threads in use |

## Access engine (`access_engine`)

### Byte aligner (`byte_aligner`)
The byte aligner removes the `s_off` bytes in front of each packet. It then re-packs the stream
into whole 8-byte words, the read width of the page buffers. It keeps one beat of history, so it
accepts a beat every cycle. A packet's last output word is flagged.

### Router FSM (`access_router`)
The router reads the header of a configuration packet and sends each payload beat to its
destination. Strider destinations stay inside the access engine. Every other destination goes
out on `cfg_*` to the execution engine.

A page packet goes to the next free page buffer in round-robin order, among the `THREADS`
buffers in use. When the page is fully written, the router starts that buffer's strider. A
buffer becomes free again when its strider reports `page_done`. While no buffer is free, the
stream is held back and `page_stall` is high. `src_idle[i]` tells the execution engine that
buffer i holds no page.

### Page buffer (`page_buffer`)
A page buffer is a two-port RAM of `PAGE_BYTES/8` words of 8 bytes.
- Port A is written by the router.
- Port B is read and written by the strider. It has byte enables for `writeB`.
- Reads take one cycle.

### Strider (`strider`)
A strider is a small processor that runs a page-walking program. Each instruction is 22 bits:
`op[21:18]`, `f1[17:12]`, `f2[11:6]`, `f3[5:0]`. An operand field with bit 5 set names a
register (bits 3..0). With bit 5 clear, the field is a 5-bit immediate.

The strider has 16 registers of 32 bits:
- r0 page size
- r1 tuple size
- r2 tuples per page
- r3 number of threads
- r4 tuple offset
- r15 result of `extrBi`
- the others are free

The *tuple stage* is an 8-bank byte buffer. It holds the bytes last read from the page, and it
can be read as a 64-bit window starting at any byte address.

| op | instruction | effect |
|---|---|---|
| 0 | `readB a, n, rd` | copy n bytes from page address a into the stage; rd gets the first 4 bytes |
| 1 | `extrB off, n, rd` | rd = n bytes (1..4, little-endian) from stage offset `off` |
| 2 | `writeB off, n, a` | write n stage bytes from `off` back into the page at a, one byte per cycle |
| 3 | `extrBi s, o, n` | r15 = n bits of the stage, starting at bit o of byte s |
| 4 | `cln off, n` | send stage bytes `off .. off+n-1` to the thread as 32-bit words; the last word is flagged |
| 5 | `ins off, n` | fill n stage bytes from `off` with the `ins` constant byte, one byte per cycle |
| 6/7/8 | `ad/sub/mul rd, x, k` | rd = (rd op x) + k, k a 6-bit immediate |
| 9 | `bentr` | mark the start of the loop |
| 10 | `bexit c, x, y` | leave the loop if the condition c (0 EQ, 1 GE, 2 LT, 3 NE) holds for x, y; else jump back to `bentr` |

`readB` streams the page at one 8-byte word per cycle. It writes each aligned window into the
stage banks, so an unaligned tuple costs no more than an aligned one. `cln` sends one word per
cycle and waits while the thread is not ready. The program ends when the PC reaches the
configured program length; the strider then frees its page buffer.

The hardware fixes no page layout. The testbenches use a PostgreSQL-like layout:
- bytes 0..3: page size
- bytes 4..5: start of free space
- bytes 6..7: end of free space, which is where the tuples begin
- bytes 8..9: start of the special space
- line pointers from byte 16, each 4 bytes: offset (2 bytes) and length (2 bytes)
- each tuple: an 8-byte header, then its values as 4-byte words

The 14-instruction walk program they use is:

```
readB 6,2 -> r5      readB 8,2 -> r6      readB 16,4 -> r7     extrB 2,2 -> r1   (tuple length)
r4 = r5              r9 = r1 - 8          bentr
readB r4,r1 -> r8    cln 8,r9             ad r4,r1            bexit GE r4,r6
```

## Execution engine (`exec_engine`)

### Analytic unit (`analytic_unit`, `au_alu`, `bus_fifo`)
An analytic unit holds:
- a data memory (`DMEM_DEPTH` words)
- a micro-program memory
- an ALU: + − × ÷ > < sigmoid gaussian sqrt, plus move
- a bus FIFO
- a neighbour output register

At each cluster PC, the unit reads its own micro-instruction (`au_inst_t`). That instruction
names two sources. Each source is a memory address, the bus FIFO (pop), or the left or right
neighbour's register. It also names where the result goes, in any combination:
- back to memory
- its own neighbour register
- the intra-cluster bus, to one of the 8 units
- for unit 0, the inter-cluster bus, to another cluster

An operation takes 3 cycles from issue to done. A unit whose bus FIFO is empty when it needs it
stalls, and `stall` counts those cycles.

### Analytic cluster (`analytic_cluster`)
A cluster has 8 units that share one program counter. This is selective SIMD. A cluster
instruction (`ac_inst_t`) has:
- `op`, the ALU operation
- `mask`, which units execute it
- `halt`, which ends the segment

The cluster moves to the next instruction when every unit in the mask is done. Units are
chained left and right: unit 0 reads 0 as its left neighbour and unit 7 reads 0 as its right
neighbour. The intra-cluster bus carries at most one word per cycle, which is delivered to one
unit's FIFO. The neighbour chain gives reductions without bus traffic: for example, a dot product is a
chain of multiply-adds across the units, then a bus hop per cluster.

### Thread (`exec_thread`)
A thread is NAC clusters joined by an inter-cluster bus, with one sender per cycle. The bus
delivers into the bus FIFO of unit 0 of the target cluster one cycle later. A thread also has a
tuple loader: tuple word k goes to lane `k mod 16` at row `IN_BASE + k div 16`, where lane =
cluster×8 + unit. This spreads a vector over all units, so element-wise work runs in parallel.

The loader accepts words only while the thread is idle and holds no unused tuple.
`tuple_ready` stays high from the tuple's last word until a run of the update rule consumes it.

### Merge tree (`merge_tree`)
The merge tree combines one 16-lane vector from each thread, lane by lane, with add, multiply,
max or min. It uses log2(NT) registered levels, so it accepts one vector per cycle. A thread
that did not take part in the round enters as the operation's identity (0, 1.0, the minimum
value or the maximum value), so a partial round merges correctly.

### Rounds and epochs
The controller repeats rounds:
1. **Start.** A round starts when every thread in use holds a tuple, when all tuples left in the
   epoch are held, or when some threads hold one and every other thread's page buffer is empty.
   The threads holding a tuple take part (`part`).
2. **Update.** The taking-part threads run the update segment (SEG_UPDATE) on their tuple.
3. **Merge.** For each of MERGE_LEN rows, the controller reads the row from all lanes of all
   threads, passes it through the tree, and writes the result to MERGE_DST in *every* thread in
   use. All threads therefore keep identical models.
4. **Post.** All threads in use run the post segment (SEG_POST), for example the model update.

After TUPLES tuples, an epoch ends. Training stops after EPOCHS epochs, or earlier when
CONV_EN is set and the convergence word is non-zero at the end of an epoch. The program itself
computes that word, for example `g0² < tol`. The host streams the pages again for each epoch.
When `running` is low, `mr_re`/`mr_addr` read one row of thread 0 (16 words) back on `mr_data`,
one cycle later.

## Departures from the source design and open points

- **Number format.** Data are 32-bit Q16.16 fixed point, where the original converts tuples to
  floating point.
- **Merge frequency.** The original text says both that the merge and the convergence test run
  once per epoch, and that the merge coefficient is a batch size. Here the merge runs once per
  round of up to NT tuples, which treats the batch size as the thread count. The convergence
  test runs once per epoch. There is no local accumulation of several tuples per thread before a
  merge.
- **Strider ISA.** The original names 11 instructions in its table while its text says 10. All 11
  are built. The field encoding, register numbers and condition codes are this design's own.
- **Host link.** The host link is a plain valid/ready stream instead of AXI. The database host
  (buffer pool, user functions, compiler) is not part of the RTL; the testbench plays its role.
- **Sizes.** The sizes are fixed defaults. The original generator sizes threads, clusters and
  page buffers per FPGA and per workload. Each thread keeps a full copy of the model, so the model
  plus gradient plus tuple must fit in 16 lanes × 2048 words. Low-rank matrix factorisation models
  of the evaluated size (about 10⁵ to 7·10⁵ words) do not fit, and the units have no gather
  addressing for them. Linear, logistic and SVM models up to 8000 features fit: 3 × 501 rows
  of the 2048 available.
- **Own choices.** Round and partial-round control, the register map, the configuration packet,
  and loading tuples only into idle threads are all this design's own choices.

## Simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>`. For example:

```
verilator --binary -j 0 -Wno-fatal -y rtl rtl/dana_pkg.sv tb/tb_dana_top.sv --top-module tb_dana_top
./obj_dir/Vtb_dana_top
```

`tb_dana_top` runs the full-size design at its default parameters:
- It streams 6 pages (1058 tuples with 15 features and a label, in a PostgreSQL-like layout) and
  the full configuration.
- It trains linear regression for 2 epochs and compares every model word with a bit-exact model
  that follows the same round membership.
- It then runs again with a tolerance that ends training by convergence after 1 of 3 epochs.
- It checks that stalls, partial rounds, merges, unaligned pages, page-buffer stalls and
  tuple-stream back-pressure all happened.

The exec_thread and exec_engine blocks are checked through this testbench; they have no
testbench of their own.

| testbench | checks |
|---|---|
| tb_byte_aligner | 1812 |
| tb_page_buffer | 2120 |
| tb_bus_fifo | 13641 |
| tb_au_alu | 44000 |
| tb_merge_tree | 3631 |
| tb_analytic_unit | 2865 |
| tb_analytic_cluster | 30 |
| tb_strider | 1244 (12 pages plus an ins/extrBi/writeB/arithmetic test) |
| tb_access_router | 2001 |
| tb_access_engine | 883 |
| tb_dana_top | 3224 (about 120k cycles, a few seconds) |

All of them pass with 0 failures.
