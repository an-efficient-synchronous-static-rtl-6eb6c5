// sram_pkg: sizes and types shared by the 16-word by 2-bit synchronous RAM
// and the chip top that wraps it.
//
// The RAM stores sixteen 2-bit words selected by a 4-bit address. These
// three numbers are the design's defining sizes and are fixed by the RAM's
// pin-out (A3:A0, D1:D0, O1:O0); they are not meant to be changed.
package sram_pkg;

  // Address width: four address pins A3..A0.
  localparam int unsigned ADDR_W = 4;
  // Word width: two data pins D1..D0 in, O1..O0 out.
  localparam int unsigned DATA_W = 2;
  // Number of words.
  localparam int unsigned DEPTH  = 1 << ADDR_W;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] word_t;

  // Contents of one word as given by the two per-bit initialisation
  // vectors: bit i of init_b0 is bit 0 of word i, bit i of init_b1 is bit 1.
  function automatic word_t init_word(logic [DEPTH-1:0] init_b0,
                                      logic [DEPTH-1:0] init_b1,
                                      addr_t            a);
    return {init_b1[a], init_b0[a]};
  endfunction

endpackage
