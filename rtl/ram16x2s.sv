// ram16x2s: 16-word by 2-bit static RAM with synchronous write and
// asynchronous read.
//
// Function (follows the paper's logic table):
//   * WE low: the write clock is ignored and the contents are unchanged.
//   * WE high: each active edge of WCLK stores D1:D0 into the word chosen by
//     A3:A0. Address and data must be stable before that edge.
//   * The opposite WCLK edge never writes.
//   * O1:O0 always shows the word chosen by A3:A0. There is no read clock, so
//     the outputs follow the address combinationally and show newly written
//     data right after the write edge (write-through).
//
// Interface: single-bit pins WCLK, WE, A0..A3, D0, D1 in and O0, O1 out, named
// as on the RAM16X2S symbol. Timing: a write takes effect on the active WCLK
// edge; a read has zero clock cycles of latency.
//
// Parameters:
//   INIT_00, INIT_01   initial contents, one 16-bit vector per output bit:
//                      INIT_00 feeds O0, INIT_01 feeds O1 (as in the paper).
//                      Bit i of each vector belongs to address i; that bit
//                      order and the all-zero default are this design's choice.
//   IS_WCLK_INVERTED   0 (the paper's default): WCLK is active on its rising
//                      edge. 1: active on its falling edge. The paper says an
//                      inverter on WCLK is absorbed into the block; this
//                      parameter is how this design expresses that.
//
// There is no reset: like the memory it models, the array keeps its data and
// starts from the INIT vectors.
module ram16x2s
  import sram_pkg::*;
#(
  parameter logic [DEPTH-1:0] INIT_00          = '0,
  parameter logic [DEPTH-1:0] INIT_01          = '0,
  parameter bit               IS_WCLK_INVERTED = 1'b0
) (
  input  logic WCLK,
  input  logic WE,
  input  logic A0,
  input  logic A1,
  input  logic A2,
  input  logic A3,
  input  logic D0,
  input  logic D1,
  output logic O0,
  output logic O1
);

  // The write clock after the optional absorbed inverter.
  logic  wclk_int;
  addr_t addr;
  word_t din;
  word_t dout;
  word_t mem [DEPTH];

  assign wclk_int = WCLK ^ IS_WCLK_INVERTED;
  assign addr     = {A3, A2, A1, A0};
  assign din      = {D1, D0};

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) begin
      mem[i] = init_word(INIT_00, INIT_01, addr_t'(i));
    end
  end

  // Synchronous write on the active edge only when WE is high.
  always_ff @(posedge wclk_int) begin
    if (WE) begin
      mem[addr] <= din;
    end
  end

  // Asynchronous read of the addressed word.
  assign dout = mem[addr];
  assign O0   = dout[0];
  assign O1   = dout[1];

endmodule
