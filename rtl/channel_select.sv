// Channel selection logic of the companding ADC.
// The HDR channel output (before offset filtering) is the amplitude sensor.
// |x| > th_high resets an 18-bit timeout counter, which immediately forces
// the HDR (low-gain, high-range) channel; |x| < th_low lets the counter run;
// in between it holds (hysteresis). When the counter reaches prog_timeout
// (end of count) the input has been quiet long enough and the HSNR
// (high-gain, low-noise) channel is selected. sel_ch = 1 selects HDR.
//
// Interface/timing: all on rising clk_s. A sample above th_high at hdr_out
// gives sel_ch = 1 one cycle later. After the input drops below th_low,
// sel_ch falls prog_timeout + 2 cycles later. Comparator/counter/flip-flop
// structure follows the paper; thresholds and timeout are programmable
// inputs; registering only sel_ch (unregistered comparators) and the EoC
// polarity are this design's choices.
`timescale 1ns / 1ps
module channel_select
  import cadc_pkg::*;
#(
  parameter int unsigned IN_W  = CIC_W,
  parameter int unsigned TCNT_W = TO_W
) (
  input  logic                   clk_s,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] hdr_out,
  input  logic        [IN_W-1:0] th_high,
  input  logic        [IN_W-1:0] th_low,
  input  logic        [TCNT_W-1:0] prog_timeout,
  output sel_ch_e                sel_ch
);
  logic [IN_W-1:0]  mag;
  logic             above, below;
  logic [TCNT_W-1:0] cnt;
  logic             eoc;

  // |x| in IN_W bits (the most negative value maps to 2^(IN_W-1)).
  assign mag   = hdr_out[IN_W-1] ? IN_W'(-hdr_out) : IN_W'(hdr_out);
  assign above = mag > th_high;
  assign below = mag < th_low;
  assign eoc   = (cnt >= prog_timeout);

  // Timeout counter: R = above, EN = below, stops at end of count.
  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n)               cnt <= '0;
    else if (above)           cnt <= '0;
    else if (below && !eoc)   cnt <= cnt + 1'b1;

  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n) sel_ch <= SEL_HDR;
    else        sel_ch <= (eoc && !above) ? SEL_HSNR : SEL_HDR;
endmodule
