# A synchronization processor for latency-insensitive wrappers

In a latency-insensitive system, every IP block ("pearl") sits inside a
wrapper ("shell") that makes it indifferent to how long its input and output
channels take. The wrapper watches the channels and gives the IP a clock edge
only when the IP can really make progress. In the classic form, the IP
advances only when *all* its inputs hold data and *all* its outputs have room.
That is too strict for most real IPs, which touch only a few of their ports at
any given cycle. A Mealy FSM can check just the right ports at each cycle, but
for long schedules, such as a decoder running thousands of cycles per block,
the FSM becomes large and slow.

This design replaces that FSM with a tiny **synchronization processor** (SP).
The IP's communication schedule is written as a short program of
*operations*. Each operation says which ports must be ready, and for how many
cycles the IP may then run freely. The SP steps through the program in a loop.
Its size depends only on the number of ports. The schedule's length sets only
the size of the memory that holds the program.

The RTL is written in SystemVerilog (IEEE 1800-2017). Verilator lints it
cleanly, and it synthesizes.

## Structure

```
                       +--------------------+
                       |    sp_op_memory    |
                       +--------------------+
                     op_word |        ^ op_addr
                             v        |
   in_not_empty     +--------------------+    out_not_full
   +--------------->|   sync_processor   |<----------------+
   |  +-------------|                    |--------------+  |
   |  |  in_pop     +--------------------+   out_push   |  |
   |  v                       | enable                  v  |
 +---------------+     sp_clock_gate <- clk      +---------------+
 | lis_port_fifo |            | ip_clk           | lis_port_fifo |
 |   input i     |            v                  |   output j    |
 |               |-- ip_data_in -->[ IP ]-- ip_data_out -->      |
 +---------------+                               +---------------+
   ^ in_valid/in_ready/in_data        out_valid/out_ready/out_data v
```

| File | Role |
|---|---|
| `rtl/sp_pkg.sv` | controller state type `sp_state_t` |
| `rtl/sync_processor.sv` | the synchronization processor |
| `rtl/sp_op_memory.sv` | operations memory: asynchronous read, write port for loading |
| `rtl/lis_port_fifo.sv` | port FIFO, used for both input and output ports |
| `rtl/sp_clock_gate.sv` | latch-based clock gate that produces the IP clock |
| `rtl/sp_shell.sv` | top level: the complete wrapper, with the IP outside it |

The IP itself is not part of the RTL, because the wrapper works with any
synchronous IP. `sp_shell` brings the IP's signals out as ports: `ip_clk`,
`ip_enable`, `ip_data_in` and `ip_data_out`.

## The operation word

```
 OP_W-1                                                 0
 +----------------------+-----------------------+--------+
 | input mask [N_IN]    | output mask [N_OUT]   | run    |
 +----------------------+-----------------------+--------+
                                                  RUN_W bits
```

* **Input mask**: bit *i* set means input port *i* must be non-empty, and one
  word is popped from it.
* **Output mask**: bit *j* set means output port *j* must have room, and the
  IP's `ip_data_out[j]` is pushed into it.
* **Run**: how many IP clock cycles run from this synchronization point to the
  next one. The synchronizing cycle counts as one of them. `run = 0` behaves
  like `run = 1`.

Ports left out of both masks are neither tested nor touched. If an input
already holds data but its mask bit is clear, that data stays where it is
until a later operation asks for it.

## How the synchronization processor runs a program

The controller has three states.

* **`SP_RESET`**: held while `rst` is high. It clears the read counter. One
  cycle after `rst` falls, the SP moves to `SP_READ`.
* **`SP_READ`**: the operation word at `op_addr` is tested against the port
  flags. The operation *fires* when every masked input is non-empty and every
  masked output is not full. In the firing cycle, and with no extra cycle of
  latency:
  * `enable` is high, so the IP gets a clock edge at the end of the cycle;
  * `in_pop` equals the input mask and `out_push` equals the output mask;
  * the read counter advances, wrapping from `DEPTH-1` to 0;
  * if `run > 1`, the SP moves to `SP_RUN` with `run-1` cycles left to count.

  If the test fails, `stall` is high and nothing happens: no enable, no pop,
  no push.
* **`SP_RUN`**: `enable` is high and no port is looked at. After the counted
  cycles, the SP returns to `SP_READ`.

An operation therefore takes exactly `max(run,1)` cycles when its ports are
ready. Operations with `run = 1` can fire in consecutive cycles, so the IP is
never stopped when its channels keep up. A pass through the whole program
takes `sum(max(run,1))` cycles. The testbenches check both facts.

**Timing contract with the IP.** In a firing cycle the IP is clocked at the
closing edge. At that edge:

* the IP must capture `ip_data_in[i]` for each masked input *i*. This is the
  head of that input's FIFO, which is popped at the same edge;
* `ip_data_out[j]` for each masked output *j* must already be valid during the
  cycle, because it is written into the output FIFO at that edge.

The IP sees nothing of the handshakes. It just has to follow the same
schedule as the program. This is what makes the system latency insensitive:
whatever the channel delays, the IP sees the same sequence of clock edges and
data. The testbenches check exactly this. They compare the output streams
with a reference that runs the schedule with no timing at all.

## The IP clock

`sp_clock_gate` produces `ip_clk` from `clk` and `enable`. A latch that is
transparent while `clk` is low holds the enable, and its output is ANDed with
`clk`. `enable` is a combinational function of the port flags, and it can
settle late in the cycle. The latch makes sure a change during the high phase
can neither cut a pulse short nor create one. Lint and synthesis tools report
this latch on purpose. `ip_enable` is also an output of the wrapper, so an IP
built with a clock-enable input can use it instead of the gated clock.

## Ports and channels

Each input and output port is a `lis_port_fifo` (default 2 words). On the
channel side, every port uses a valid/ready pair. `valid` means "word
present", which is the inverse of the LIS *void* signal. `ready` means "not
stopped", which is the inverse of *stop*. On the wrapper side:

* an input port gives the SP its "not empty" flag and takes "pop";
* an output port gives the SP its "not full" flag and takes "push".

A FIFO can be written and read in the same cycle. Its `wr_ready` depends only
on the fill level, so a full FIFO does not take a new word in the cycle it is
read.

## The operations memory and loading a program

`sp_op_memory` is an array with an **asynchronous read**. `op_word` follows
`op_addr` in the same cycle, and the SP relies on this. The memory's only link
to the SP is these two buses. On an ASIC the memory would be a ROM. Here it is
the FPGA-style RAM form, with a synchronous write port (`prog_we`,
`prog_addr`, `prog_data` on `sp_shell`). Load the program while `rst` is high.
The read counter wraps at the memory size, so `DEPTH` *is* the length of the
program.

## Parameters of `sp_shell`

| Parameter | Default | Meaning |
|---|---|---|
| `N_IN`, `N_OUT` | 3, 2 | number of input and output ports |
| `DATA_W` | 8 | channel word width |
| `FIFO_DEPTH` | 2 | words per port FIFO |
| `RUN_W` | 8 | width of the run field (runs up to 255) |
| `DEPTH` | 4 | program length = memory depth |
| `ADDR_W`, `OP_W` | derived | `clog2(DEPTH)`, `N_IN+N_OUT+RUN_W` |

The defaults match the smaller of two published cases: a Viterbi decoder
wrapper with 5 ports, 4 synchronization points and run counts up to 198. The
other case is a Reed-Solomon decoder wrapper with 4 ports and 2957
synchronization points of one cycle each. It needs `DEPTH = 2957`. It is
simulated with `N_IN = N_OUT = 2` in `tb/tb_sp_shell_rs.sv`. After synthesis,
the default wrapper without its memory comes to about 140 word-level cells
and 32 flip-flops. The SP alone is under 50 cells and 12 flip-flops. Its
logic grows with the number of ports. Only two things grow with the schedule:
the read counter, by `clog2(DEPTH)` bits, and the run counter, by `RUN_W`
bits. The schedule itself lives in the memory. The published area and speed
figures are FPGA slice counts and clock rates measured against FSM wrappers.
This RTL does not reproduce them.

## Where this RTL makes its own choices

These points are not fixed by the published description of the method.

* The split of the port count into inputs and outputs (3/2 for the Viterbi
  case, 2/2 for Reed-Solomon).
* The data width, the FIFO depth and the valid/ready form of the channel
  control signals.
* The exact cycle timing: test, pop, push and the first IP cycle all happen
  in one cycle; `run` counts that cycle; `run = 0` is treated as 1.
* The synchronous active-high reset, and the single cycle spent in
  `SP_RESET` after it.
* The write port used to load the program, and the latch-based form of the
  clock gate.
* The field order of the operation word. It is the input mask, then the
  output mask, then the run count, with the input mask in the most
  significant bits.

Left out: the relay stations and the rest of the latency-insensitive
interconnect between wrappers, and the IP itself.

## Testbenches

Every testbench checks itself. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_sync_processor` | Random programs and random port flags, compared every cycle against a reference model of the SP (enable, pop, push, stall, address). Also checks that a program pass with all ports ready takes `sum(max(run,1))` cycles. |
| `tb_lis_port_fifo` | Random traffic against a queue model; reaching full; a read and a write in the same cycle. |
| `tb_sp_op_memory` | Load, random asynchronous read-back, and an overwrite that touches one word only. |
| `tb_sp_clock_gate` | One full pulse for each enabled cycle; no glitch when `en` toggles in the high phase; low in every low phase. |
| `tb_sp_shell` | The whole wrapper at its defaults, with a behavioural IP (`tb_pearl_model`) on the gated clock. It runs a 4-operation program (runs 1+146+3+48 = 198) for 40 passes, under changing random channel timing. Every output word is compared with a timing-free reference. Passes with all channels ready must take exactly 198 cycles. It also counts, and requires at least once, each of these: stall on an empty input, stall on a full output, free run, back-to-back operations, counter wrap, an unmasked input left alone, input back-pressure, and a held output. |
| `tb_sp_shell_rs` | The same test for a 2957-operation, run-1 program (the Reed-Solomon case). All-ready passes must take exactly 2957 cycles. |

`tb_pearl_model` is the behavioural IP. It follows the program on its own
clock and folds every consumed input into an accumulator. During free-run
cycles it scrambles the accumulator. Any lost or extra clock edge, and any
word taken from the wrong port or at the wrong time, therefore shows up in
the output data.

To run a testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
    -y rtl -y tb +libext+.sv --top-module tb_sp_shell \
    rtl/sp_pkg.sv tb/tb_sp_shell.sv
./obj_dir/Vtb_sp_shell
```

Use the same command with another `--top-module` for the other testbenches.
Every run finishes in under a second.
