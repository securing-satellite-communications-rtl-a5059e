# A hardware keystream generator for chaotic real-time video encryption

Video from a small satellite payload has to be encrypted in real time, on hardware
with little computing power and a tight power budget. The scheme implemented here
keeps the cipher very simple. A keystream is built once per video from two cheap
64-bit one-dimensional chaotic maps. Every frame is then encrypted with a single
XOR against that keystream. The expensive part is making the keystream. This RTL
moves that part into programmable logic: the core iterates one chaotic map per
clock cycle and writes the resulting byte sequence into system memory over AXI.

The RTL covers the sequence generator that the scheme places in an FPGA, i.e. the
chaotic-map datapath and the AXI core around it. The rest of the encryption runs
as software on the host CPU and is described below only so that the core's output
makes sense: XORing the two sequences, repeating the result over the R, G and B
channels, XORing it with each frame, and writing the encrypted file.

## 1. The two chaotic maps

The state is one 64-bit word `y`. There are two elementary steps:

| step     | formula                                               | hardware |
|----------|-------------------------------------------------------|----------|
| multiply | `y' = (y[63:32] + 1) * (y[31:0] + 1) + 1  (mod 2^64)` | select accumulator, then multiply accumulator |
| rotate   | `y' = (y << s) | (y >> (64 - s))`, `s = y[5:0]`       | shifter (a left rotation by `s`) |

A map alternates between the two steps. The index `k` of the value being computed
decides which step runs:

| map | computes `y_k` from `y_{k-1}` with |
|-----|------------------------------------|
| map (2), `MAP_EQ2` | rotate if `k` is odd, multiply if `k` is even |
| map (3), `MAP_EQ3` | multiply if `k` is odd, rotate if `k` is even |

The multiply step replaces the division and remainder by 2^32 with plain bit
selection. Its two operands can reach 2^32, so they are 33 bits wide. The product
can reach 2^64, so only its low 64 bits are kept, as unsigned 64-bit software
arithmetic does. When `s = 0` the rotate step leaves `y` unchanged.

Published reference values pin down this arithmetic. Started from the Unix
timestamp `y_0 = 0x67c94eb3`, map (2) produces
`7598000000033e4a, 00017d65438b3e4c, 17d65438b3e4c000, 10c029a7b4c5143a, e84300a69ed31450`
as `y_1 .. y_5`. The published ten-row tables of both maps are not fully
consecutive: map (2)'s row 5 to row 6, and map (3)'s rows 4 to 5 and 8 to 9,
match neither step. Every consecutive run in them is reproduced bit for bit
(`tb/chaos_ref_pkg.sv` holds the values).

## 2. From map states to sequence bytes

One sequence for an `m x n` frame has `m*n` bytes. Its generation loop runs as
follows:

```
y = t                               // the timestamp is y_0
for i in 0 .. m*n/8 - 1:
    emit the 8 bytes of y, byte h = y[8h+7 : 8h], h = 0..7
    y = step_{i+1}(y)               // the map's step for index k = i+1
```

So `m*n/8` iterations give `m*n` bytes, and each 64-bit state is used in full.
The core stores word `i` at `array + 8*i` on a little-endian 64-bit bus, which
places sequence byte `8i+h` at address `array + 8i + h`.

The host runs the core twice, once per map, and XORs the two arrays. That gives
the keystream `c`. Encryption then XORs every frame's R, G and B planes with `c`
(the same `c` for all three planes and all frames). The host writes `m`, `n`,
the frame rate and `t` in the file header, so the receiver can regenerate `c`.

Two properties follow from doing exactly this, and a user should know them:

* `y_0 = t` is itself the first word of each sequence. If both runs use the same
  `t`, as the scheme's encryption procedure does, the first 8 keystream bytes are
  `t XOR t = 0`. The first 8 bytes of every frame plane are then sent in clear.
  The core takes `t` per run, so two different 64-bit seeds can be used instead.
  The scheme's key-space argument (2^64 x 2^64) assumes two independent seeds.
* When `m*n` is not a multiple of 8, the length is rounded down to whole words.
  All common video sizes are multiples of 8.

## 3. One iteration in hardware (`chaos_map`)

```
              +-----------------+  y_b1   +--------------------+ hi+1,lo+1 +----------------------+
 y_{k-1} ---->| branch_selector |-------->| select_accumulator |---------->| multiply_accumulator |--+
   ^          |  (k parity,     |  y_b2   +--------------------+           +----------------------+  |  merge
   |          |   map select)   |-------->|      shifter       |------------------------------------->+--mux--> y_k
   |          +-----------------+         +--------------------+                                         |
   +------------------------------ state register (y, k), status register (it_done) <----------------------+
```

* `branch_selector` computes the branch from the parity of the new index and the
  map. It forwards `y_{k-1}` only to the chosen branch and gives the other one zero,
  so the idle branch does not toggle.
* `select_accumulator` outputs `y[63:32]+1` and `y[31:0]+1`, 33 bits each.
  `multiply_accumulator` outputs `(a*b + 1) mod 2^64`.
* `shifter` is a 64-bit barrel rotator driven by `y[5:0]`.
* The state register writes `y_k` back as the next `y_{k-1}`. The status
  register pulses `it_done` in the cycle after each iteration.

Everything between the state register and the merge multiplexer is
combinational, so one iteration takes one clock. The critical path is a
33 x 33 multiplier plus an adder, which maps onto DSP blocks. If the clock target
needs it, that path is the place to add pipeline registers. The generator would
then emit one word every few cycles instead of one per cycle.

`load` (with `y_init`, `k_init`) has priority over `step`. The index can be
loaded so that a sequence can be resumed anywhere, which the published-vector test
uses.

## 4. The core (`generate_chaos_sequence`)

```
 s_axi_control --> ctrl_axilite --start--> chaos_seq_gen --word_stream_if--> gmem_writer --> m_axi_gmem
   (AXI4-Lite)          ^                  (chaos_map inside)                  (AXI4 write)        |
   interrupt <----------+-------------------------------- done <----------------------------------+
```

Ports: `ap_clk`, `ap_rst_n` (active low, asynchronous), the AXI4-Lite slave
`s_axi_control_*` (6-bit address, 32-bit data), the write half of an AXI4
master `m_axi_gmem_*` (32-bit address, 64-bit data) and `interrupt`.

### Programming

| offset | register | use |
|--------|----------|-----|
| 0x00 | control | bit0 start (write 1, clears itself when the job starts), bit1 done (cleared by reading), bit2 idle, bit3 ready (= done) |
| 0x04 | GIE | bit0 global interrupt enable |
| 0x08 | IER | bit0 done, bit1 ready interrupt enable |
| 0x0C | ISR | interrupt status, write 1 to toggle (acknowledge) |
| 0x10 | m | frame height |
| 0x18 | n | frame width |
| 0x20 / 0x24 | t | seed `y_0`, low / high 32 bits |
| 0x28 | array | byte address of the output, 8-byte aligned |
| 0x30 | map | bit0: 0 = map (2), 1 = map (3) |

Write the arguments, then write 1 to the control word. Wait for `interrupt`, or
poll the done bit, then acknowledge through ISR. A start written while a job is
running is held, and that job starts as soon as the current one ends. Registers
with 32-bit arguments honour the byte strobes. Unmapped offsets read as zero.

### Data movement and timing

`chaos_seq_gen` emits one 64-bit word per cycle whenever the writer can take it.
Accepting a word steps the map, so back-pressure simply freezes the map.
`gmem_writer` issues incrementing bursts of up to `MAX_BURST = 16` beats. It cuts a
burst short at a 4 KB boundary and waits for each write response before it issues
the next burst. With a memory that never stalls, a job of `W` words takes
`18 * W/16 + 1` cycles from start to done. Each burst costs 16 data cycles, one
address cycle and one response cycle.

| frame | bytes per sequence | cycles per sequence | two sequences at 100 MHz |
|-------|--------------------|---------------------|--------------------------|
| 640 x 360   | 230,400   | 32,401    | 0.65 ms |
| 1280 x 720  | 921,600   | 129,601   | 2.6 ms  |
| 1920 x 1080 | 2,073,600 | 291,601   | 5.8 ms  |
| 3840 x 2160 | 8,294,400 | 1,166,401 | 23 ms   |

These cycle counts are measured in simulation. The 100 MHz clock is the one the
scheme's FPGA block design feeds to the core. The keystream is made once per
video, so the core's share of the encryption time is negligible. A write response
other than OKAY sets the writer's `resp_err` flag. The top leaves that flag
unconnected, and the job still completes.

## 5. Files

`rtl/`:

| file | content |
|------|---------|
| `chaos_pkg.sv` | map and branch enums, register offsets, AXI response codes |
| `branch_selector.sv`, `select_accumulator.sv`, `multiply_accumulator.sv`, `shifter.sv` | the four units of one iteration |
| `chaos_map.sv` | one iteration per step, with the state register and the status register |
| `chaos_seq_gen.sv` | the generation loop (m*n/8 words from y_0 = t) |
| `word_stream_if.sv` | valid/ready/last stream, with a hold-until-taken assertion |
| `gmem_writer.sv` | AXI4 burst write master, with AXI handshake assertions |
| `ctrl_axilite.sv` | AXI4-Lite registers, start/done handshake, interrupt |
| `generate_chaos_sequence.sv` | the top |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus these
helpers:

* `chaos_ref_pkg.sv` is the reference model. It is written like the 64-bit
  software version: 64-bit integer multiply, and a rotation done bit by bit. It
  also holds the published vectors.
* `axi_mem_model.sv` is a behavioural memory. It stalls at random, can inject an
  error response, reports every stored beat instead of keeping it, and counts
  AXI rule violations (4 KB crossings, wrong `wlast`, and so on).
* `tb_full_size.sv` runs the core at its default parameters on every frame size
  listed above, from 640 x 360 up to 3840 x 2160, and checks all 2.2 million
  words.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a cycle
watchdog. The top-level test makes each mechanism happen and counts it:
16-beat and short bursts, a 4 KB cut, address and data stalls, back-pressure into
the generator, both maps, the interrupt, done cleared by reading, an empty job
and a queued start.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/chaos_pkg.sv tb/tb_full_size.sv --top-module tb_full_size
./obj_dir/Vtb_full_size
```

Replace `tb_full_size` with any other testbench name. The whole full-size run
takes a few seconds.

## 6. What is the scheme's and what is this design's

From the scheme itself:

* both map equations, and the rule for which step falls on which index;
* the 64-bit state and the split into high and low halves;
* the rotation by the low six bits;
* the four-unit datapath, the feedback register and the `it_done` status;
* the generation loop, including `y_0 = t` as the first word and the byte order;
* the core's port names (`ap_clk`, `ap_rst_n`, `s_axi_control`, `m_axi_gmem`,
  `interrupt`) and its 100 MHz clock.

This design's own choices, where the scheme says nothing:

* one iteration per clock (no pipelining), and the zeroing of the idle branch;
* the explicit index load;
* the register map, which follows the common HLS control-port layout, and the
  map-select register, added so that one core can serve both maps;
* the stream handshake, the 16-beat bursts with one burst in flight, and the
  write-only memory port;
* reset to zero, and rounding `m*n/8` down.

Known departures and open points:

* The scheme produced its core with a high-level-synthesis flow from C++. This
  RTL is written by hand from the equations and the loop, so its cycle timing
  and resource use are not those of the original core.
* The published ten-value tables are not a single consecutive run, and the
  map (3) column does not start from the same seed as map (2). Only the
  consecutive parts, and map (2) from its seed, are checked.
* The keystream XOR, the repetition over colour planes, the frame XOR and the
  file I/O are host software in the scheme. They are not in this RTL.
