# A 16-word by 2-bit synchronous static RAM

This design is a very small on-chip memory for an embedded system: sixteen
2-bit words, written synchronously and read asynchronously. A write happens
only on an edge of a write clock. The processor can therefore schedule its
writes against its own clock. Reads need no clock at all: the output always
shows the word at the current address. The memory has the pin-out and
behaviour of the classic FPGA distributed-RAM primitive RAM16X2S. It is
placed in a device-level top with ten pins.

## Behaviour

| WE | WCLK            | D1:D0 | O1:O0                         |
|----|-----------------|-------|-------------------------------|
| 0  | anything        | –     | word at A3:A0, unchanged      |
| 1  | steady 0 or 1   | –     | word at A3:A0, unchanged      |
| 1  | rising edge     | data  | data is stored; O1:O0 = data  |
| 1  | falling edge    | –     | word at A3:A0, unchanged      |

The table is for the default polarity. Three points are easy to miss:

* **Writes are edge-triggered, reads are not.** The array is written in an
  `always_ff` on the write clock. The outputs are a plain combinational
  lookup `mem[addr]`. A read therefore has zero cycles of latency. An address
  change shows up on O1:O0 in the same simulation time step.
* **Write-through.** The output is a lookup of the array. Right after a
  write edge, the addressed word is the new data, so O1:O0 equals the data
  just written. There is no separate bypass path.
* **Address and data are sampled at the edge.** They must be stable before
  the active WCLK edge. Changing D or A while the clock is steady does
  nothing to the contents.

There is no reset. Like the memory it stands for, the array keeps its
contents. At start-up it holds the values given by the INIT parameters.

## Parameters

| Parameter          | Default    | Meaning |
|--------------------|------------|---------|
| `INIT_00`          | `16'h0000` | initial value of bit 0 (the O0 output) of every word |
| `INIT_01`          | `16'h0000` | initial value of bit 1 (the O1 output) of every word |
| `IS_WCLK_INVERTED` | `1'b0`     | 0: writes on the rising WCLK edge; 1: on the falling edge |

The INIT vectors are split by output bit, not by word. Bit *i* of `INIT_00`
is bit 0 of the word at address *i*. Bit *i* of `INIT_01` is bit 1 of the
same word. The per-output split follows the original description. The
choice that bit *i* belongs to address *i* is this design's own.

`IS_WCLK_INVERTED` models an inverter on the clock net that is absorbed into
the RAM. With it set, the table above holds with "rising" and "falling"
swapped. The sizes (4 address bits, 2 data bits, 16 words) are fixed by the
pin-out and live as constants in `sram_pkg`.

## Device pins

The top `sramq` has ten single-bit pins. They are wired to the RAM as
follows:

| Pin    | Dir | RAM pin |
|--------|-----|---------|
| `a1`   | in  | `A0` (least significant address bit) |
| `a2`   | in  | `A1` |
| `a3`   | in  | `A2` |
| `a4`   | in  | `A3` |
| `d1`   | in  | `D0` |
| `d2`   | in  | `D1` |
| `we`   | in  | `WE` |
| `wclk` | in  | `WCLK` |
| `o1`   | out | `O0` |
| `o2`   | out | `O1` |

The pins are numbered from 1 and the RAM pins from 0, so the pin names are
off by one from the bit numbers. On an FPGA each pin passes through a vendor
pad cell: an input buffer, a global clock buffer for `wclk`, and output
buffers for `o1` and `o2`. Those cells are electrically important
(LVCMOS18 at 1.8 V, 12 mA slow outputs in the reference implementation). They
do nothing logically, so the RTL wires the pins straight to the RAM. Put your
own pad cells around `sramq` when you target a device.

## What is not in the RTL

* **The storage cell.** On silicon each bit is a cross-coupled inverter pair
  with access transistors on a word line and a bit-line pair. Here the cell
  is one bit of the array `mem`. Word-line decoding, bit-line precharge and
  sensing are left to whatever the array is mapped to.
* **Timing.** The original work reports access times in the 2–4 ns range on an
  FPGA. It also compares synchronous SRAM with DRAM, asynchronous SRAM and
  CPU registers. The RTL has no delays and no setup/hold checks. Its read is
  combinational, and the access time depends on the technology it is
  synthesised to.
* **The processor / memory controller** that drives the pins. The
  testbenches play that role.

## Files

* `rtl/sram_pkg.sv`: sizes, the `addr_t`/`word_t` types and the INIT lookup
  function.
* `rtl/ram16x2s.sv`: the memory.
* `rtl/sramq.sv`: the device top.
* `tb/tb_ram16x2s.sv`: unit test of the memory. Two copies run under one
  stimulus, one rising-edge and one falling-edge, each with non-zero INIT
  vectors. The test checks initial contents and that WE low blocks writes.
  It checks that the inactive edge does not write, write-through and
  zero-latency reads. It then checks 4000 random pin changes against a
  reference array.
* `tb/tb_sramq.sv`: end-to-end test of the top at its default parameters.
  It first replays the reference waveform: write `11` at address 1 (`a1`=1)
  and see `o2 o1` = `11`. It then moves to address 14 with the clock and WE
  low and reads `00`. Next it writes and reads back all 16 words, then makes
  5000 random pin changes. It counts writes, rising edges blocked by WE low,
  falling edges with WE high, write-throughs and address-only reads. The test
  fails if any of those never happened.

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. A watchdog stops it with a failure if it hangs.

## Simulating

```
verilator --binary --timing --assert rtl/sram_pkg.sv rtl/ram16x2s.sv \
          rtl/sramq.sv tb/tb_sramq.sv --top-module tb_sramq -o sim
./obj_dir/sim
```

For the unit test, use `rtl/sram_pkg.sv rtl/ram16x2s.sv tb/tb_ram16x2s.sv`
with `--top-module tb_ram16x2s`. Both runs finish in well under a second. The
files are plain IEEE 1800-2017 and also elaborate in yosys with the slang
front end. The memory synthesises to a 32-bit memory cell with a write port
and an asynchronous read port, which maps to distributed RAM on FPGAs.

## Departures and choices

* In the reference waveform the write clock starts high at time 0, and the
  outputs go to `11` right after that. The waveform counts the start-up
  transition as a write edge. The testbench drives an explicit 0-to-1 edge
  instead.
* The INIT bit order, the all-zero default contents and the name and
  encoding of the clock-polarity parameter are choices of this design. The
  original gives the function but not those details.
* Pad buffers, the transistor-level cell and all timing figures are not
  modelled (see above).
