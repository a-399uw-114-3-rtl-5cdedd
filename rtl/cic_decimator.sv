// Second-order CIC decimator of the multi-rate VCO-ADC.
// The oscillator counter already integrates the oscillator frequency once,
// so only one more integrator runs at f_ss: acc <= acc + din (13 bits,
// wrapping). At every rising edge of f_s the accumulator is sampled with its
// 4 LSBs dropped (13 -> 9 bits; the truncation error is shaped by the two
// differences that follow) and passed through two first differences at f_s,
// all modulo 2^9. The decimation ratio M is the number of f_ss edges per f_s
// period (8 with the 8-tap delay line). Output gain is M^2/16 relative to the
// count increment per f_ss cycle.
//
// Interface/timing: din on clk_ss; dout registered on clk_s, three f_s
// registers after the sampling edge (sample, diff 1, diff 2). The structure
// and widths follow the paper's datapath; register placement is this
// design's choice.
`timescale 1ns / 1ps
module cic_decimator
  import cadc_pkg::*;
#(
  parameter int unsigned IN_W  = CNT_W,
  parameter int unsigned OUT_W = CIC_W,
  parameter int unsigned SHIFT = CIC_SHIFT
) (
  input  logic                    clk_ss,
  input  logic                    clk_s,
  input  logic                    rst_n,
  input  logic        [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout
);
  logic [IN_W-1:0]  acc;
  logic [OUT_W-1:0] smp, smp_d, d1, d1_d;

  // Integrator at f_ss.
  always_ff @(posedge clk_ss or negedge rst_n)
    if (!rst_n) acc <= '0;
    else        acc <= acc + din;

  // Down-sampling, truncation and two first differences at f_s.
  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n) begin
      smp <= '0; smp_d <= '0; d1 <= '0; d1_d <= '0; dout <= '0;
    end else begin
      smp   <= acc[IN_W-1 -: OUT_W];
      smp_d <= smp;
      d1    <= smp - smp_d;
      d1_d  <= d1;
      dout  <= $signed(d1 - d1_d);
    end

  if (IN_W != OUT_W + SHIFT) begin : g_bad_width
    $error("cic_decimator: IN_W must equal OUT_W + SHIFT");
  end
endmodule
