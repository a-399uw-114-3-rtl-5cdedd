// Synchronous counter extension.
// Turns the 6-bit sampled Gray code of the ring-oscillator state into a
// 13-bit binary counter that wraps around. Each f_ss cycle the Gray code is
// decoded to binary and the number of ring states advanced since the last
// sample, (bin - cnt[5:0]) mod 64, is added to the counter. The result is a
// free-running count of oscillator transitions, i.e. the integral of the
// oscillator frequency, which is what the CIC filter after it expects.
//
// Interface/timing: gs is sampled on clk_ss, cnt is registered on clk_ss
// (one cycle after gs). Valid while fewer than 64 ring states pass between
// consecutive f_ss edges. The 6 -> 13 bit widths follow the paper; the
// increment-by-difference structure is this design's choice.
`timescale 1ns / 1ps
module sync_counter_ext
  import cadc_pkg::*;
#(
  parameter int unsigned IN_W  = GRAY_W,
  parameter int unsigned OUT_W = CNT_W
) (
  input  logic             clk_ss,
  input  logic             rst_n,
  input  logic [IN_W-1:0]  gs,
  output logic [OUT_W-1:0] cnt
);
  logic [IN_W-1:0] bin;
  logic [IN_W-1:0] delta;

  gray_to_bin #(.W(IN_W)) u_g2b (.g(gs), .b(bin));

  assign delta = bin - cnt[IN_W-1:0];   // modulo 2^IN_W

  always_ff @(posedge clk_ss or negedge rst_n)
    if (!rst_n) cnt <= '0;
    else        cnt <= cnt + OUT_W'(delta);
endmodule
