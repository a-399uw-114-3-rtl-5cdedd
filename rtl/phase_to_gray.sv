// Phase-to-Gray encoder with 1-bit Gray extensor, start-up detector and f_ss
// sampling flip-flops, for a 16-phase differential ring oscillator.
//
// How it works. Over one oscillation the 16 phases pass through 32 states.
// An XOR network (11 two-input XORs) turns the phases into the 5-bit
// reflected Gray code of that state: gr0 = XOR of the even phases,
// gr1 = phi1^phi5^phi9^phi13, gr2 = phi3^phi11, gr3 = phi7, and phi15 is the
// fifth bit. Instead of using phi15 directly, a 2-flip-flop Johnson counter
// clocked by phi15 (gr4 loads ~gr5 on its rising edge, gr5 loads gr4 on its
// falling edge) produces two bits whose XOR equals phi15 and which change
// once per half oscillation. {gr5,gr4,gr3..gr0} is then the 6-bit reflected
// Gray code of the ring state modulo 64, i.e. two full oscillations can pass
// between samples without ambiguity. gr4/gr5 are held at 0 until a start-up
// detector (gr[3:0] == 0 seen once) sets rr.
//
// Interface/timing: phi are asynchronous oscillator phases; gs is registered
// on every rising edge of clk_ss (the f_ss pulse train). rst_n clears rr.
//
// The XOR inputs, the two extensor flip-flops fed by phi15, the AND-gate
// start-up detector and the six f_ss sampling flip-flops follow the encoder
// schematic. The clock edges of the extensor, and the start-up pattern, are
// this design's choices. Multiple clocks (phi15, clk_ss, start-up pulse) are
// intrinsic to this asynchronous readout.
`timescale 1ns / 1ps
module phase_to_gray
  import cadc_pkg::*;
(
  input  logic [N_PHASES-1:0] phi,
  input  logic                clk_ss,
  input  logic                rst_n,
  output logic [GRAY_W-1:0]   gs,
  output logic                rr
);
  logic [3:0] gr_lo;
  logic       gr4, gr5;
  logic       start_det;

  always_comb begin
    gr_lo[0] = ^{phi[0], phi[2], phi[4], phi[6], phi[8], phi[10], phi[12], phi[14]};
    gr_lo[1] = ^{phi[1], phi[5], phi[9], phi[13]};
    gr_lo[2] = phi[3] ^ phi[11];
    gr_lo[3] = phi[7];
  end

  // Start-up: rr rises on the first occurrence of gr[3:0] == 0 after reset.
  assign start_det = (gr_lo == 4'b0000);
  always_ff @(posedge start_det or negedge rst_n)
    if (!rst_n) rr <= 1'b0;
    else        rr <= 1'b1;

  // Gray extensor: Johnson counter clocked by both edges of phi15.
  always_ff @(posedge phi[15] or negedge rr)
    if (!rr) gr4 <= 1'b0;
    else     gr4 <= ~gr5;

  always_ff @(negedge phi[15] or negedge rr)
    if (!rr) gr5 <= 1'b0;
    else     gr5 <= gr4;

  // Sampling flip-flops on f_ss.
  always_ff @(posedge clk_ss)
    gs <= {gr5, gr4, gr_lo};
endmodule
