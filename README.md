# A key-check block for a secure camera node, in SystemVerilog

A smart camera at the network edge should start streaming only for a user who
holds the right key. If the reference key sits in the processor's file system
or RAM, anyone who can inspect that memory can read it. This design keeps it in
the FPGA fabric. The 256-bit reference key exists only as constants in the
logic of a small block, `validate_key`. The processor can write a candidate
key into the block and ask whether it matches. It gets back a single bit and
can never read the reference key. Driver software on the processor uses that
bit to decide whether to open the camera and publish its frames.

The RTL here is the fabric side of such a node on a Zynq UltraScale+ MPSoC. It
follows the published design by Murray-Hill, Fontes, Machado and Ihianle,
"Secure Video Streaming Using Dedicated Hardware". Their block was produced by
high-level synthesis from C, and their figures and text give its register
offsets, port names, key, latency and test vectors. The internals below are a
hand-written equivalent that meets those published numbers. It is not the
authors' code.

```
            processor (outside this RTL)
   pl_clk0  pl_resetn0   M_AXI_HPM0_FPD (AXI4-Lite here)
      |         |              |
      |   +-----v---------+    |
      +-->| proc_sys_reset|    |
      |   | rst_ps8_0_100M|    |
      |   +--+---------+--+    |
      |      |ic_aresetn|periph_aresetn
      |   +--v---------|------v-----------+      +-------------------------------+
      +-->| axil_interconnect  S00 -> M00 |----->| validate_key  (validateKey_0)  |
      |   | axi_interconnect_0            |      |  vk_axil_slave -> vk_key_ram  |
      |   +-------------------------------+      |        |            |          |
      +----------------------------------------->|        +--> vk_key_compare    |--> interrupt
                                                 +-------------------------------+
```

## What software sees

With the default window base of `0xA000_0000`:

| offset | name | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | R/W | bit 0 `ap_start`: write 1 to start. It reads 1 until the core takes it. Bit 1 `ap_done`: set when a comparison ends, cleared by reading CTRL. Bit 2 `ap_idle`. Bit 3 `ap_ready`: set with done, cleared by reading CTRL. |
| 0x004 | GIE | R/W | bit 0: global interrupt enable |
| 0x008 | IER | R/W | bit 0: interrupt on done; bit 1: interrupt on ready |
| 0x00C | ISR | R/W | bits 0/1: done/ready status; writing 1 to a bit toggles it |
| 0x080–0x09C | KEY | W | the candidate key, eight 32-bit words; reads return 0 |
| 0x100 | DATA_OUT | R | bit 0: 1 if the last candidate matched |

The published design fixes the offsets 0x000, 0x080 and 0x100, and says that
the key is loaded 32 bits at a time and that the result is one bit. The bits
inside CTRL, and the GIE/IER/ISR registers behind the block's `interrupt`
pin, follow the usual layout of synthesised C cores. They are assumptions.

One authentication:

1. Write the eight key words to 0x080, 0x084, … 0x09C.
2. Write 1 to CTRL.
3. Wait for the interrupt, or poll CTRL until bit 1 is set.
4. Read DATA_OUT.
5. If the interrupt was used, write 1 to ISR to clear it.

A second write of 1 to CTRL while a comparison is running is held in CTRL.
The next comparison starts as soon as the core is idle. It uses whatever the
key memory holds at that moment.

### Byte order of the key

The reference key is written as 64 hex digits, with byte 0 leftmost:

```
7336763979244226452948404d635166546a576e5a7234753777217a25432a46
```

That is the ASCII string `s6v9y$B&E)H@McQfTjWnZr4u7w!z%C*F`. Byte *j* of the
key lives at byte address 0x080 + *j*. Inside each 32-bit word the bytes are
little-endian, which is how an ARM core stores a `char[32]` buffer. So the
word for 0x080 is `0x39763673`. The `SECRET_KEY` parameter uses the same
left-to-right order: byte *j* is `SECRET_KEY[255-8j -: 8]`. The published
material prints the key and says it is loaded four bytes at a time, but it
does not give the order within a word. The order above is this design's
choice.

## The comparison core and its 34 cycles

`vk_key_compare` is the part that matters for security, and its timing is the
one number the published design pins down. The original C function loops over
the 32 key bytes. Without pipelining that took 64 cycles, two per byte. With
the loop pipelined at one byte per cycle it took 34. The timing report gives
34 cycles as both minimum and maximum, with a 10 ns target clock (100 MHz).

The core here is built to that shape:

* **Issue stage.** In state `RUN`, the core puts out the word address
  `idx>>2` for byte `idx` on each cycle, for `idx` = 0 … 31.
* **Memory.** `vk_key_ram` returns the word one cycle later (registered read).
* **Compare stage.** The core picks byte `idx%4` out of that word and
  compares it with the matching byte of `SECRET_KEY`. It then ANDs the
  result into `match`.
* **Drain and output.** After the last byte, the core waits one cycle for
  the pipeline to empty. It then registers `result`, pulses `ap_done` and
  `ap_ready`, and returns to idle.

Count the edges from the one that samples `ap_start` (edge 0):

```
edge   0      1      2     ...    32      33      34
state  IDLE>RUN      RUN          >DRAIN  DRAIN   >IDLE
read   -      b0     b1    ...    b31     -       -
cmp    -      -      b0    ...    b30     b31     -
out                                               result, ap_done, ap_ready
```

That is 32 iterations, plus 1 cycle of read latency, plus 1 output register:
34 cycles. The loop never exits early. Every key takes exactly 34 cycles
whether it differs in the first byte or the last, so timing reveals nothing
about how much of a guess was right. The reference key appears only as
constants inside a byte multiplexer. Nothing stores it, and no path leads from
it to the bus except the one-bit `result`.

Seen from the bus, the latency grows by a few cycles. The register interface
takes one cycle to pass the start bit on, and one more to set the status bit
that drives `interrupt`. The interconnect adds one cycle on the way in. So
from the processor's write of CTRL being accepted to `interrupt` rising is
1 + 1 + 34 + 1 = 37 cycles, which is 370 ns at 100 MHz.

## The block design around it

`secure_stream_pl` wires the parts as the published IP-integrator diagram
shows. The instance names are kept from that diagram.

* **`proc_sys_reset` (`rst_ps8_0_100M`).** It takes the processor's
  `pl_resetn0` and asserts every reset output at once, asynchronously. It
  releases them synchronously, in order, after a two-flop synchroniser. The
  interconnect reset comes first, 18 cycles after `pl_resetn0` rises. The
  peripheral reset comes 34 cycles after it, and `mb_reset` 50 cycles after.
  With `HOLD_CYCLES` = 16 these are 2 + 16, 2 + 32 and 2 + 48. The port names
  are the vendor block's. The order and hold time are modelled on that block
  and are this design's choice.
* **`axil_interconnect` (`axi_interconnect_0`).** It joins one master to one
  slave. It forwards accesses inside
  `[BASE_ADDR, BASE_ADDR + WINDOW_BYTES)`, by default
  `0xA000_0000` + 64 KiB. It answers any other address itself with DECERR.
  Each direction holds one transaction at a time, registered out and back.
* **`validate_key` (`validateKey_0`).** The key-check block described
  above. It is made of `vk_axil_slave`, `vk_key_ram` and `vk_key_compare`.

Nothing accepts a bus request while it is in reset. A request made during
the reset sequence therefore waits until the block leaves reset, and is never
lost.

The AXI bundle is carried as two packed structs from `vk_pkg`. `axil_req_t`
holds the master-to-slave signals and `axil_rsp_t` the slave-to-master
signals. The design uses 32-bit address and data throughout.

## How far this follows the published design

Taken from the published design:

* the 256-bit key;
* the default key value;
* the three register offsets;
* loading the key 32 bits at a time;
* the one-bit result;
* a byte loop that is pipelined and takes 34 cycles;
* the port names `ap_clk`, `ap_rst_n`, `s_axi_M_AXI0` and `interrupt`;
* the three fabric blocks and their instance names;
* the 100 MHz clock.

This design's own choices:

* everything inside the blocks;
* the CTRL bit layout;
* the interrupt registers;
* the write-only key window;
* the key byte order;
* the address window and DECERR;
* the reset sequence.

Departures and gaps to be aware of:

* **Symmetric key, not RSA.** In places the published text speaks of
  decrypting a message with a private key, or of an RSA key. Its description
  of the block itself compares a stored symmetric key with the input key, and
  it lists a public/private key scheme as future work. This RTL does the
  comparison. There is no public-key arithmetic.
* **Processor port.** The real `M_AXI_HPM0_FPD` is a full AXI4 port, 128 bits
  wide. Here it is taken as 32-bit AXI4-Lite. The protocol and width
  conversion that the vendor interconnect performs is not built.
* **One clock, one reset in the interconnect.** The vendor block has
  separate `ACLK`/`S00_ACLK`/`M00_ACLK` inputs and matching resets. All of
  them run from `pl_clk0` here.
* **Key memory persists.** Key words are not cleared after a comparison, as
  in a synthesised C core with a memory-mapped array. Software should write
  all eight words for every attempt. A short key must be zero-padded by the
  driver.
* **Size.** The synthesised original reported 1157 LUTs, 1215 flip-flops,
  98 LUTRAM and one block RAM. This version is far smaller. `validate_key`
  comes to about 130 word-level cells, 31 flip-flop bits and a 256-bit
  memory. The whole fabric top comes to about 270 cells and 140 flip-flop
  bits. Most of the original's area is synthesis overhead, and its number is
  no target. Timing (2.88 ns estimated for the original) has not been
  measured for this version.
* **Outside the RTL.** Three parts are left out: the processor itself, the
  encrypted and authenticated bitstream that hides the key, and the camera
  and MQTT software. They are not fabric logic.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_vk_key_ram` | 400 random strobed writes and reads against a reference array; read hold when `re` is low |
| `tb_vk_key_compare` | reference vectors, every byte corrupted in turn, random keys; exact 34-cycle latency; one-cycle `ap_done` with `ap_ready`; back-to-back starts |
| `tb_vk_axil_slave` | key writes and strobes, write-only key window, CTRL start/done/clear-on-read, DATA_OUT, GIE/IER/ISR and interrupt, unmapped addresses; with and without bus back-pressure |
| `tb_validate_key` | full block over AXI: reference vectors, corrupted and random keys, 36 cycles from CTRL write to interrupt; a second instance with a different `SECRET_KEY` |
| `tb_axil_interconnect` | random in-window traffic through a slave with random stalls; DECERR at both window edges and far outside, never forwarded; slave SLVERR passed through |
| `tb_proc_sys_reset` | each of the four reset sources; release edge by edge (18/34/50); complementary outputs; restart mid-sequence |
| `tb_secure_stream_pl` | whole design, default parameters (see below) |

`tb_secure_stream_pl` runs two workloads:

* the seven reference unit tests: the correct key, three invalid keys, two
  incomplete keys and the empty key;
* an authentication campaign of 32 attempts in random order: 10 correct,
  5 invalid, 7 incomplete, 4 empty and 6 wrong keys. It must give exactly
  10 successful and 22 unsuccessful authentications, the published outcome.

It also counts, and fails if it never sees, each of these mechanisms:

* an access issued during the reset sequence;
* completion by interrupt;
* completion by polling;
* a start queued behind a running comparison;
* a DECERR response;
* a read of the key window.

For every interrupt-driven attempt it checks the 37-cycle start-to-interrupt
time. The whole run takes a fraction of a second.

The testbenches share `tb/tb_vk_pkg.sv`, which holds the reference key
vectors and the key-to-word mapping. They also share `tb/tb_axil_master.sv`,
an AXI4-Lite master with optional random delays that checks that responses
stay valid until taken.

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv rtl/vk_pkg.sv tb/tb_vk_pkg.sv \
  tb/tb_secure_stream_pl.sv --top-module tb_secure_stream_pl -o sim
./obj_dir/sim
```

To run another test, change the testbench file and `--top-module`.
`tb_vk_key_ram`, `tb_proc_sys_reset` and `tb_axil_interconnect` do not need
`tb/tb_vk_pkg.sv`, but listing it does no harm. Every module in `rtl/` also
passes `verilator --lint-only -Wall` with warnings only. The warnings are
unused package constants, the unused AXI protection bits (`awprot`,
`arprot`), the unused reset outputs, and the port name
`interrupt`, which clashes with a C++ word and is kept because it is the
published port name.

## Changing it

* **Another key.** Override `SECRET_KEY` on `secure_stream_pl` (or on
  `validate_key`). Write it in the same left-to-right byte order.
* **Another address window.** Change `BASE_ADDR` and `WINDOW_BYTES`.
* **A different reset stretch.** Change `HOLD_CYCLES`.
* **Another key length.** `vk_key_compare` is parameterised on `KEY_BYTES`,
  which must be a multiple of 4 and a power of two. The register map in
  `vk_pkg` fixes 256 bits, so a different length means editing the package
  too. The latency is always `KEY_BYTES + 2`.

## Files

* `rtl/vk_pkg.sv`: shared types, register map and default key.
* `rtl/vk_key_compare.sv`: the comparison core.
* `rtl/vk_key_ram.sv`: the candidate-key memory.
* `rtl/vk_axil_slave.sv`: the register interface.
* `rtl/validate_key.sv`: the key-check block.
* `rtl/axil_interconnect.sv`: the one-to-one interconnect.
* `rtl/proc_sys_reset.sv`: the reset sequencer.
* `rtl/secure_stream_pl.sv`: the fabric top.
* `tb/`: the testbenches and their two helpers.
