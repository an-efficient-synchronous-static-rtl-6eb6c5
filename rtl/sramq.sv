// sramq: chip top of the 16-word by 2-bit synchronous static memory.
//
// The device has ten pins: four address pins a1..a4, two data-in pins d1, d2,
// a write clock wclk, a write enable we, and two data-out pins o1, o2. They
// are wired to the RAM as the paper's schematic shows: a1..a4 drive address
// bits A0..A3 (a1 is the least significant), d1/d2 drive D0/D1, and o1/o2 are
// O0/O1. Behaviour and timing are those of ram16x2s: a write on the active
// wclk edge while we is high, and a combinational read of the addressed word.
//
// In the paper's FPGA implementation every pin passes through a vendor pad
// buffer (input buffers on the inputs, a global clock buffer on wclk, output
// buffers on o1/o2). Those cells have no logic function, so here the pins
// connect straight to the RAM. The parameters are passed through to the RAM.
module sramq
  import sram_pkg::*;
#(
  parameter logic [DEPTH-1:0] INIT_00          = '0,
  parameter logic [DEPTH-1:0] INIT_01          = '0,
  parameter bit               IS_WCLK_INVERTED = 1'b0
) (
  input  logic a1,
  input  logic a2,
  input  logic a3,
  input  logic a4,
  input  logic d1,
  input  logic d2,
  input  logic wclk,
  input  logic we,
  output logic o1,
  output logic o2
);

  ram16x2s #(
    .INIT_00          (INIT_00),
    .INIT_01          (INIT_01),
    .IS_WCLK_INVERTED (IS_WCLK_INVERTED)
  ) u_ram (
    .WCLK (wclk),
    .WE   (we),
    .A0   (a1),
    .A1   (a2),
    .A2   (a3),
    .A3   (a4),
    .D0   (d1),
    .D1   (d2),
    .O0   (o1),
    .O1   (o2)
  );

endmodule
