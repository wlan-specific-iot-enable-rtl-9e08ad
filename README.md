# An IoT-addressable 64K-word RAM with a registered read port

This design is a small on-chip memory meant to sit on an FPGA as an
"internet of things" device. It pairs a plain dual-port RAM with a 128-bit
IPv6 address input, which names the device on a network. The interest of
the original work lies outside the logic: it estimates the chip's power
when the RAM is clocked at the five WLAN carrier frequencies (0.9, 2.4,
3.6, 5 and 5.9 GHz) and its pins use the LVCMOS12, 15, 18 or 25 I/O
standards. The logic itself is deliberately tiny, and this RTL reproduces
it exactly as the synthesised netlist shows it: one read-address register
and one memory array.

## Interface

| port    | dir | width | meaning |
|---------|-----|-------|---------|
| `clk`   | in  | 1     | clock; everything acts on the rising edge |
| `we`    | in  | 1     | write enable |
| `waddr` | in  | 16    | write address |
| `din`   | in  | 32    | write data (only bits 16:0 are kept, see below) |
| `re`    | in  | 1     | read enable: loads the read-address register |
| `raddr` | in  | 16    | read address |
| `dout`  | out | 32    | read data; bits 31:17 are always 0 |
| `IPv6`  | in  | 128   | device address; not connected to any logic |

There is no reset. The memory contents and the read-address register are
undefined until they are first written or loaded.

## Structure

```
            +-----------+  raddr_q  +--------------------------+
 raddr ---->| D       Q |---------->| addrb                    |
 re ------->| CE        |           |            dp_ram        |  dob[16:0]
 clk --+--->| >  raddr_reg (16 FF)  |   65,536 x 17 bits       |------+--> dout[16:0]
       |    +-----------+           |                          |      |
       +----------------------------| clka                     |      0 --> dout[31:17]
 we --------------------------------| wea                      |
 waddr -----------------------------| addra                    |
 din[16:0] -------------------------| dia                      |
                                    +--------------------------+
 IPv6[127:0] -- (no connection)
```

* `raddr_reg` is a 16-bit register with a clock enable and no reset (an
  FDE-style flip-flop bank). Its enable is `re`.
* `dp_ram` is a simple dual-port array: port A writes on the clock, port B
  reads combinationally from the registered address. Together with
  `raddr_reg` this is the standard pattern that FPGA tools map onto block
  RAM with a synchronous read.
* The top, `RandomAccessMemory`, wires the two together and zero-extends the
  17-bit read word to the 32-bit `dout`.

## Read and write timing

A write happens at the rising edge where `we = 1`: `din[16:0]` is stored at
`waddr`.

A read is launched at the rising edge where `re = 1`. That edge captures
`raddr`, and from it on `dout` shows the addressed word. The read latency is
one edge. `raddr` may change freely while `re = 0`: the register keeps the
last launched address, so `dout` stays put. A read and a write may happen at
the same edge. If a write hits the word that the register currently
addresses, `dout` changes to the new word at that edge, because the read is
a live view of the array. This includes a read launched at the same edge as
a write to the same address, which returns the new word.

```
clk    _/‾\_/‾\_/‾\_/‾\_/‾\_
re     ‾‾‾\___________/‾‾‾‾‾     (sampled 1 at edge 1, 0 at edges 2-4)
raddr  =A==X==B==X==C==X==D=
dout   ???|  M[A]  ...  |M[D]    M[A] from edge 1 until the next re edge
```

## The stored width: 17 of 32 bits

This is the design's least obvious feature. The ports are 32 bits wide, but
the published netlist shows only 17 data pins on the memory (`diA(16:0)`,
`doB(16:0)`) and a ground cell driving the rest of `dout`. The published
buffer count agrees: 51 input buffers are exactly `din[16:0]` (17) + `raddr`
(16) + `waddr` (16) + `re` + `we`. The 32 output buffers cover all of
`dout`. The RTL follows that netlist. `STORE_W = 17` is a parameter of the
top, and setting it to 32 gives a full-width memory with no other change.

## The IPv6 input

The device is said to be controllable over the internet through its 128-bit
IPv6 address. However, no logic for this is given: in the netlist the IPv6
pin connects to nothing, and it gets no input buffer. This RTL does the same.
`IPv6` is a port and nothing more. The lint warnings about an unused `IPv6`
and unused `din[31:17]` are expected. Packet handling, address matching and
the WLAN link itself are outside this design.

## Parameters

All defaults are the published sizes. They are set in `rtl/iot_ram_pkg.sv`
and repeated as parameters of `RandomAccessMemory`.

| parameter | default | meaning |
|-----------|---------|---------|
| `ADDR_W`  | 16  | read/write address width; depth is `2**ADDR_W` = 65,536 words |
| `DATA_W`  | 32  | width of `din` and `dout` |
| `STORE_W` | 17  | bits kept per word (`1 <= STORE_W <= DATA_W`) |
| `IPV6_W`  | 128 | width of `IPv6` |

At the defaults the array holds 65,536 x 17 = 1,114,112 bits. A mid-size
Virtex-6 part such as the xc6vlx75t has about 5.6 Mbit of block RAM, so the
array fits with room to spare, even at 32 bits per word.

## What the power study adds, and what is not in the RTL

The I/O standard and the clock frequency are implementation settings.
Neither changes this RTL. In the reported estimates, clock, signal and
block-RAM power scale with frequency and do not depend on the I/O standard.
I/O power, by contrast, drops by about 65% going from LVCMOS25 to LVCMOS12
at every frequency (for example 0.457 W to 0.160 W at 2.4 GHz). Leakage
barely moves. Some reported summaries quote 85-88% at 2.4 GHz. Those figures
come from a comparison table that lists 1.383 W for LVCMOS25 at 2.4 GHz,
which is the leakage figure of the detailed table rather than its I/O
figure (0.457 W). The detailed table gives the same ~65% as the other
frequencies. The GHz clock rates are inputs to the power estimate. They are
not timing results: no timing report was given, and FPGA block RAM runs well
below 1 GHz.

The I/O pad buffers (51 inputs and 32 outputs with a selectable LVCMOS
standard), the global clock buffer and the radio are vendor or analog parts.
They have no RTL here.

## Files

| file | contents |
|------|----------|
| `rtl/iot_ram_pkg.sv` | widths and shared types |
| `rtl/raddr_reg.sv` | read-address register with clock enable |
| `rtl/dp_ram.sv` | simple dual-port memory array |
| `rtl/RandomAccessMemory.sv` | top level |
| `tb/tb_raddr_reg.sv` | random enable/data test of the register |
| `tb/tb_dp_ram.sv` | fills and reads back all 64K words, then random traffic with same-address cases |
| `tb/tb_RandomAccessMemory.sv` | end-to-end test at the default size |

## Simulating

Each testbench checks itself against a reference model and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/iot_ram_pkg.sv tb/tb_RandomAccessMemory.sv --top-module tb_RandomAccessMemory
./obj_dir/Vtb_RandomAccessMemory
```

Replace the testbench name to run the others. The end-to-end test runs at
the default size in well under a second, with no parameter overrides. It
first writes all 65,536 words. It then reads each one back, checking that
`dout` does not change before the launching edge and is correct right after
it, and that `dout[31:17]` is zero. Last, it runs 50,000 cycles of random
mixed traffic against a model, with `IPv6` randomised every cycle. It counts
writes, reads, held reads, simultaneous read and write, writes into the word
being read and idle cycles, and fails if any of them never occurred. Each
testbench fails on a deliberately broken copy of its module: a register that
ignores its enable, a memory that drops an address bit, and a top that skips
the read register.

## Departures and open points

* Memory depth is taken from the 16-bit addresses. The depth was not stated
  explicitly.
* Read-during-write behaviour, the lack of a reset and the uninitialised
  contents all follow from the netlist structure. None of them was specified.
* The 17-bit stored word follows the netlist, not the 32-bit port
  description. See above.
