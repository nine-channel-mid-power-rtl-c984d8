`timescale 1ns/1fs
// pulse_gen_pkg: constants and types shared by the pattern generator.
//
// The generator drives N bipolar outputs. Each output is built outside the
// FPGA from two unipolar "intermediate" channels, one for its positive and
// one for its negative pulses, so the pattern memory is 2N bits wide. The
// nine outputs, the 640 MHz memory clock (8 x an 80 MHz external clock) and
// the 28000-word memory depth follow the paper. Which intermediate bit feeds
// which polarity of which output is this design's own choice: bit 2k is the
// positive and bit 2k+1 the negative input of output k.
package pulse_gen_pkg;

  // Number of bipolar outputs and of intermediate channels.
  localparam int unsigned N_OUT = 9;
  localparam int unsigned N_INT = 2 * N_OUT;

  // Pattern memory depth in words: 350 us at 80 MHz.
  localparam int unsigned DEPTH = 28000;

  // Memory clock = MULT x external clock (640 MHz from 80 MHz).
  localparam int unsigned MULT = 8;

  // Phase-shift resolution of the PLL: 1/PHASE_DIV of the memory clock period.
  localparam int unsigned PHASE_DIV = 8;
  localparam int unsigned PR_W = 7;

  // Intermediate channel carrying the positive / negative pulses of output k.
  function automatic int unsigned pos_bit(input int unsigned k);
    return 2 * k;
  endfunction

  function automatic int unsigned neg_bit(input int unsigned k);
    return 2 * k + 1;
  endfunction

  // Level of bipolar output k after the 180 degree combiner, as a sign:
  // +1 positive pulse, -1 negative pulse, 0 none (or both, which cancel).
  function automatic int signed bipolar_level(input logic [N_INT-1:0] word,
                                              input int unsigned k);
    return int'(word[pos_bit(k)]) - int'(word[neg_bit(k)]);
  endfunction

endpackage
