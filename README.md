# Medusa: transposing DRAM lines instead of switching them

A DNN accelerator on an FPGA typically has one wide DRAM controller port
(512 bits per cycle on a DDR3 board, 1024 bits on faster ones) and dozens of
narrow ports (16 bits each) feeding its dot-product units. The usual way to
connect them is a wide demultiplexer or crossbar, plus a shallow FIFO and a
width converter per port. That logic grows as (line width) x (number of
ports). It eats LUTs and flip-flops, and past about 32 ports it makes timing
hard to meet.

Medusa does the same job with a different idea. Take N narrow ports of
W_ACC bits and a DRAM line of W_LINE = N x W_ACC bits. A line is N words,
so N lines of N words form a square matrix. Moving words from "one line per
port" to "one word per port per cycle" is then a matrix transpose. A
transpose can be done with N memory banks, one rotating barrel shifter and a
staggered ("diagonal") addressing scheme. Each of the three pieces is cheap:

* the banks are deep and narrow, so they fit block RAMs;
* the shifter has N·W_ACC·log2 N one-bit 2:1 multiplexers;
* the addressing is a handful of counters.

Every port still gets exactly 1/N of the DRAM bandwidth, and any port can
start at any time. The price is a constant latency of about N cycles per
line.

This repository holds synthesizable SystemVerilog for both directions:

* the **read network** splits DRAM read lines across N accelerator read ports;
* the **write network** gathers N accelerator write streams into DRAM write lines.

Both come with self-checking testbenches. The defaults are the main
configuration: 32 ports of 16 bits, a 512-bit line, and a 32-line burst
buffer per port.

## Where it sits

```
 DRAM controller ──(line, port tag)──▶ read network ──▶ N x acc_rdata ──▶ accelerator
        ▲                                   │ rd_lines_free                (layer processor)
        │                                   ▼
        │                           request arbiter (external)
        │                                   ▲ wr_lines_avail / wreq
 DRAM controller ◀─(line, port tag)── write network ◀── N x acc_wdata ◀──
```

The DRAM controller, the arbiter that decides which port's burst to fetch
or store next, and the accelerator are outside this RTL. They connect
through plain ports of `medusa_top`. The arbiter has one duty that the
interconnect relies on:

* it asks for read data only for a port that has room for it (`rd_lines_free`);
* it issues a write request only for a port that has complete lines (`wr_lines_avail`).

Read lines come back in request order, tagged with their port.

## The transposition schedule (read direction)

This is the part that needs the most care. All indices are taken mod N.

**Input buffer.** The input buffer has N banks. A line for port x is
written whole, in one cycle:

* word j of the line goes into bank j;
* the address is x's region (`x*MAX_BURST`) plus a slot from x's write pointer.

So bank j holds word j of every buffered line of every port.

**Phase counter.** A free-running counter c counts 0, 1, ..., N−1 and wraps,
one step per clock. In cycle c:

* bank b is read on behalf of port (b − c);
* the word read is word b of that port's line.

Equivalently, port x reads word (x + c) from bank (x + c). Each bank has
exactly one owner in every cycle, so ports never conflict. A port that has
a line waiting and a free output half-buffer simply starts in the next
cycle, whatever c is. It stays on for N cycles and then has read every
word of its line once.

For N = 4, with every port reading, the banks serve (port, word):

| cycle c | bank 0 | bank 1 | bank 2 | bank 3 |
|---|---|---|---|---|
| 0 | (0,0) | (1,1) | (2,2) | (3,3) |
| 1 | (3,0) | (0,1) | (1,2) | (2,3) |
| 2 | (2,0) | (3,1) | (0,2) | (1,3) |
| 3 | (1,0) | (2,1) | (3,2) | (0,3) |

**Rotation.** The N words read in cycle c are rotated left by c: output
lane k takes input lane (k + c). Lane k then carries a word of port k,
namely word (k + c). In cycle 1 above, the lanes carry (0,1), (1,2), (2,3),
(3,0).

**Output buffer.** Bank k of the output buffer belongs to port k and stores
that word at address (k + c). After N cycles it holds port k's whole line in
word order. The accelerator then streams the line out one word per cycle.

A port that starts at phase c0 simply sees its words in the order c0, c0+1,
..., which is why no port has to wait for a "frame" boundary. The command
signals are delayed so that they meet the data:

* the rotation amount is delayed one cycle, to match the block-RAM read register;
* the output writes and the "line complete" pulse are delayed
  LAT = 1 + (rotation latency) cycles.

`read_ib_read_ctrl` holds the whole schedule in a few counters per port.

## The rotation unit

`rotation_unit` is a log2 N level barrel shifter on whole W_ACC-bit words.
Level l rotates by 2^l words when bit l of the amount is set. With
`ROT_PIPE=0` it is combinational. With `ROT_PIPE=1` a register follows
every level; the amount travels along with the data, so the unit accepts
one rotation per cycle with log2 N cycles of latency. The combinational form
is the default. The pipelined form is there for wide configurations where
five or six mux levels do not fit in one cycle.

## Buffers and pointers

| buffer | banks | depth per bank | read | role |
|---|---|---|---|---|
| read input buffer | N | N·MAX_BURST words | registered (block RAM) | one region of MAX_BURST lines per port |
| read output buffer | N (one per port) | 2N words | asynchronous (LUT RAM) | double buffer: one half is filled while the other is drained |
| write input buffer | N (one per port) | 2N words | asynchronous | double buffer filled by the accelerator |
| write output buffer | N | N·MAX_BURST words | registered | one region of MAX_BURST lines per port |

At the defaults, each deep buffer is 32 banks of 1024 x 16 bits. That is one
18-Kbit block RAM per bank, 32 per direction.

Each region is a circular queue with:

* a tail pointer, advanced by the side that fills it;
* a head pointer, advanced by the side that drains it.

Pointers are log2(MAX_BURST)+1 bits wide, so full and empty can be told
apart. The free and filled counts derived from them are what the arbiter
sees.

A half of a double buffer becomes readable only when its line is complete,
and is refilled only after it has been emptied completely.

## The write direction

The write network is the read network run backwards, with the deep buffer
on the DRAM side:

1. Port k writes its words into its own input bank, half by half. A
   complete half raises `line_ready[k]`.
2. When port k has a complete half and its region in the deep output buffer
   has a free slot, the port transposes for N cycles. In cycle c it reads
   word (k + c) of its half.
3. The lanes are rotated left by (N − c), that is right by c, so each word
   lands in the lane equal to its word index.
4. Output bank j writes the slot at port (j − c)'s write pointer.
5. After N cycles the half is released and the line is complete across all
   banks.
6. The tail pointer advances once the last write has passed the rotation
   pipeline.
7. `write_ob_read_ctrl` reports complete lines per port. On a request
   (`wreq_valid`, `wreq_port`) it reads one whole line from all banks at the
   same address and presents it with its port tag one cycle later.

This schedule is the exact inverse of the read schedule. It is derived here;
the write direction is only sketched in the source description.

## Interfaces and timing

All handshakes are valid/ready, and a transfer happens in a cycle where both
are high. Reset is synchronous and active low (`rst_n`). Only control state
is reset; memory contents are not.

| `medusa_top` port | dir | width | meaning |
|---|---|---|---|
| `dram_rvalid`, `dram_rready`, `dram_rport`, `dram_rdata` | in/out/in/in | 1, 1, log2 N, W_LINE | read line from DRAM and its port |
| `rd_lines_free` | out | N x (log2 MAX_BURST + 1) | free line slots per read port |
| `acc_rvalid`, `acc_rready`, `acc_rdata` | out/in/out | N, N, N x W_ACC | accelerator read streams |
| `acc_wvalid`, `acc_wready`, `acc_wdata` | in/out/in | N, N, N x W_ACC | accelerator write streams |
| `wr_lines_avail` | out | N x (log2 MAX_BURST + 1) | complete lines per write port |
| `wreq_valid`, `wreq_ready`, `wreq_port` | in/out/in | 1, 1, log2 N | write line request |
| `dram_wvalid`, `dram_wport`, `dram_wdata` | out | 1, log2 N, W_LINE | write line to DRAM |
| `rd_busy`, `wr_busy` | out | N | ports transposing this cycle |

Two things can cause a stall:

* `dram_rready` falls only if the tagged port's region is full. An arbiter
  that follows `rd_lines_free` never sees that.
* `acc_wready[k]` falls only while both of port k's input halves hold lines
  not yet transposed.

Assertions in the RTL check the handshake rules:

* a refused read line must be held unchanged;
* a write request must name a port that has a line;
* a commit or release must target a full half.

## Latency and bandwidth

These numbers are measured by the testbenches. LAT = 1 + rotation latency,
and R = rotation latency.

* **Read latency.** A line accepted at a clock edge gives its first word to
  the accelerator N + LAT + 1 cycles later, at every phase: 34 cycles at the
  defaults.
* **Write latency.** The last word of a line written at an edge makes the
  line available to the arbiter N + R + 1 cycles later: 33 at the defaults.
  The line itself leaves one cycle after it is requested.
* **Aggregate bandwidth.** One line per cycle in and out in both directions,
  with all ports busy. The testbenches push 512 lines in 512 cycles through
  the full-size design.
* **Per-port rate.** A port transposes one line per N cycles, which is its
  1/N share of the line bandwidth. On the read side the output double buffer
  caps a port at slightly less over long runs (next section).

## Departures from the source description, and limits

* **Latency.** The added latency is described as N cycles. Here it is
  N + LAT + 1 from line acceptance to the first accelerator word. The extra
  cycles are:
  * the block-RAM read register;
  * the rotation register stages, if any;
  * one cycle for the completed half to become visible.
* **Single-port rate with double buffering.** A read port's output half is
  refilled only after it has been fully drained, and a line becomes readable
  only once it is fully transposed. A single port that streams without a
  pause therefore gets 2N words (two lines) per 2N + LAT cycles:
  * 64/65 of its share at the defaults (from the formula);
  * 16/17 at N = 8 (measured);
  * 80% at N = 8 with the pipelined rotation unit (measured).

  The deep input buffer absorbs the shortfall. A burst of up to MAX_BURST
  lines per port therefore still arrives at the full line rate (512 lines
  in 512 cycles at the defaults). Only when every port is fed its full share
  for longer than that does the whole network fall to 2N/(2N+LAT) of the
  line rate, or below. The regions then fill, and a line refused for a full region
  also blocks the DRAM interface behind it. With N = 8, the pipelined
  rotation unit and 4-line regions, round-robin traffic then reaches only
  221 of 320 lines. So
  `ROT_PIPE=1` costs throughput as well as latency. A third half-buffer
  per port should close the gap. It is not added, because the source design
  shows two halves.
* **Port tags and handshakes.** The source names no signals. The port tag on
  DRAM lines, the valid/ready handshakes, the free/available counters and
  the reset style are this design's own choices.
* **Write-direction schedule.** As noted above, it is derived rather than
  taken from the source description.
* **Parts not included:**
  * the DRAM controller;
  * the request arbiter;
  * the DNN layer processor;
  * the host interface.

  They are outside the interconnect. Their signals are ports of `medusa_top`.
* **Non-power-of-two port counts.** Build the next power of two and tie the
  unused ports off (`acc_rready`/`acc_wvalid` low, never request them). Synthesis
  removes their logic.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `N_PORTS` | 32 | narrow ports per direction; must be a power of two |
| `W_ACC` | 16 | bits per narrow port |
| `MAX_BURST` | 32 | lines buffered per port in the deep buffer; a power of two |
| `ROT_PIPE` | 0 | 1 = register after every rotation level |

W_LINE = N_PORTS x W_ACC. The ranges used in a typical scaling study map as
follows:

| DRAM interface | N_PORTS to build | ports used |
|---|---|---|
| 128-bit | 8 | 8 |
| 256-bit | 16 | 12 to 16 |
| 512-bit | 32 | 20 to 32 |
| 1024-bit | 64 | 36 to 44 |

## Module map

| file | what it is |
|---|---|
| `rtl/medusa_pkg.sv` | default sizes, rotation latency function |
| `rtl/medusa_top.sv` | read and write networks side by side |
| `rtl/medusa_read_network.sv` | read direction: the three read modules below, a rotation unit and a bank array |
| `rtl/read_ib_write_ctrl.sv` | accepts tagged DRAM lines, per-port tail pointers |
| `rtl/read_ib_read_ctrl.sv` | phase counter, diagonal reads, head pointers, output addressing |
| `rtl/read_output_buffer.sv` | per-port double buffer and accelerator read stream |
| `rtl/medusa_write_network.sv` | write direction: the three write modules below, a rotation unit and a bank array |
| `rtl/write_input_buffer.sv` | per-port double buffer fed by the accelerator |
| `rtl/write_ob_write_ctrl.sv` | inverse schedule, per-port write pointers |
| `rtl/write_ob_read_ctrl.sv` | complete-line counts, request handling, DRAM write lines |
| `rtl/rotation_unit.sv` | barrel shifter, optional per-level pipeline |
| `rtl/bank_array.sv` | N independent block-RAM banks (both deep buffers) |
| `rtl/delay_line.sv` | aligns commands with data through RAM and shifter latency |

## Simulating

Any testbench builds with plain Verilator 5. List the package first:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_medusa_top \
    rtl/medusa_pkg.sv $(ls rtl/*.sv | grep -v medusa_pkg) tb/tb_medusa_top.sv -o sim
./obj_dir/sim
```

For the scaling test, add `tb/scaling_run.sv`. Every testbench prints
`TB_RESULT checks=<n> failures=<m>` at the end and has a watchdog.

To change the size, override the parameters on `medusa_top`. Keep N_PORTS
and MAX_BURST powers of two.

## Testbenches

Each testbench compares the design against a reference model written
independently in the testbench:

* **`tb_rotation_unit`** checks random amounts and data, at N=32
  combinational and at N=8 pipelined, including the pipeline latency.
* **`tb_bank_array`** checks per-bank independent addressing, the registered
  read, and that a read during a write of the same address returns the old
  word.
* **`tb_read_ib_write_ctrl`** checks region addressing, full-region refusal
  with the line held, pointer wrap and the free counts.
* **`tb_read_ib_read_ctrl`** models the buffers and the shifter around the
  scheduler. It checks:
  * that each bank has one owner;
  * that every line is delivered intact;
  * N busy cycles per line;
  * that a port can start at any phase.
* **`tb_read_output_buffer`** and **`tb_write_input_buffer`** check
  double-buffer handover and back-pressure against a queue model.
* **`tb_write_ob_write_ctrl`** checks the inverse schedule, the region
  bound, and that the controller waits only on a full region.
* **`tb_write_ob_read_ctrl`** checks line counts, requests and the DRAM
  write lines.
* **`tb_medusa_read_network`** and **`tb_medusa_write_network`** run at
  N=8. They:
  * measure latency;
  * check full bandwidth (320 lines in 320 cycles);
  * run random traffic with random accelerator stalls against per-port
    queues.

  The read test also streams one port alone and checks the 2N per
  2N + LAT rate.
* **`tb_medusa_top`** runs at the default size (32 x 16 bits, 512-bit line,
  32-line bursts). It:
  * measures read latency (34) and write latency (33) at two phases;
  * checks 512 lines in 512 cycles each way;
  * runs random traffic in both directions at once.

  It counts these mechanisms and fails if any never occurs:
  * a read region filling up;
  * a read output buffer full;
  * a port starting while others are mid-line;
  * a write input buffer full;
  * a write region full;
  * the same mid-line start on the write side.
* **`tb_medusa_scaling`** runs four instances side by side, with random
  traffic through both directions of each:
  * 8 ports (128-bit);
  * 12 of 16 ports (256-bit);
  * 20 of 32 ports (512-bit);
  * 44 of 64 ports (1024-bit, unused ports tied off).
