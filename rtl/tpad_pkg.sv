// tpad_pkg: types, constants and helper functions shared by the TPAD
// (Trojan Prevention And Detection) blocks.
//
// The TPAD checkers never emit a single pass/fail bit. Every checker produces
// an r-bit word that equals r chosen bits of a free-running programmable LFSR
// when nothing is wrong, and any other value when an attack is seen. The
// helpers below build those words. fold_or() squeezes a wide difference vector
// (for example two data words XORed together) into r bits so that any
// non-zero difference makes at least one of the r bits non-zero; it is this
// design's own way of feeding equality checks of wide words into an r-bit
// checker and does not come from the paper.
package tpad_pkg;

  // LFSR bit positions that carry the r-bit error code, fixed at design time.
  // The first three are the positions of the paper's r = 3 example (Fig. 8b);
  // the rest are this design's choice. All must be below the LFSR length.
  localparam int unsigned LFSR_SEL [16] = '{3, 8, 9, 17, 26, 35, 44, 57,
                                            1, 12, 21, 30, 39, 48, 52, 61};

  // Pick the r design-time LFSR bits out of an LFSR state of up to 64 bits.
  function automatic logic [15:0] lfsr_pick(input logic [63:0] q, input int unsigned r);
    logic [15:0] res;
    res = '0;
    for (int unsigned i = 0; i < 16; i++) begin
      if (i < r) res[i] = q[LFSR_SEL[i]];
    end
    return res;
  endfunction

  // Operation seen by the trusted RAM (Table I: read, write or idle).
  typedef enum logic [1:0] {
    RAM_IDLE  = 2'b00,
    RAM_READ  = 2'b01,
    RAM_WRITE = 2'b10
  } ram_op_e;

  // OR-fold a 64-bit difference vector into R bits: bit i of the result is the
  // OR of difference bits i, i+R, i+2R, ... Callers zero-extend narrower words.
  function automatic logic [63:0] fold_or(input logic [63:0] diff, input int unsigned r);
    logic [63:0] res;
    res = '0;
    for (int unsigned j = 0; j < 64; j++) begin
      res[j % r] = res[j % r] | diff[j];
    end
    return res;
  endfunction

endpackage
