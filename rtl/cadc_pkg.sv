// Shared constants of the companding VCO-ADC datapath.
// The widths are those printed on the datapath block diagram: 6-bit sampled
// Gray code, 13-bit extended oscillator count, 9-bit CIC output, 11-bit offset
// filter input, 32-bit filter accumulator and 23-bit channel word entering the
// noise shaper. The noise-shaper state width and coefficient format are this
// design's own choice.
`timescale 1ns / 1ps
package cadc_pkg;
  localparam int unsigned N_PHASES = 16;   // oscillator phases
  localparam int unsigned GRAY_W   = 6;    // Gray code incl. 1-bit extension
  localparam int unsigned CNT_W    = 13;   // extended counter
  localparam int unsigned CIC_W    = 9;    // CIC output after 13->9 truncation
  localparam int unsigned CIC_SHIFT = 4;   // 13 -> 9 truncation
  localparam int unsigned HPF_IN_W = 11;   // offset filter input
  localparam int unsigned HPF_ACC_W = 32;  // offset filter accumulator
  localparam int unsigned CH_W     = 23;   // channel word into the noise shaper
  localparam int unsigned FB_W     = 25;   // noise-shaper feedback magnitude
  localparam int unsigned TO_W     = 18;   // channel-select timeout counter
  localparam int unsigned IDAC_W   = 5;    // delay-line IDAC code

  typedef enum logic {SEL_HSNR = 1'b0, SEL_HDR = 1'b1} sel_ch_e;

  // Reflected Gray code to binary.
  function automatic logic [GRAY_W-1:0] gray2bin(input logic [GRAY_W-1:0] g);
    logic [GRAY_W-1:0] b;
    b[GRAY_W-1] = g[GRAY_W-1];
    for (int i = GRAY_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction
endpackage
