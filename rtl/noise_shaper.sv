// 5th-order single-bit digital noise shaper with feedback-based gain trim.
// Re-encodes the selected 23-bit channel word into the 1-bit PDM stream at
// f_s. Loop: e = x - v, five cascaded delaying integrators I1..I5
// (I1 += e, Ik += I(k-1)), loop-filter output w = sum(c_k * I_k) (CIFF),
// y = (w >= 0), v = y ? +G : -G. The coefficients c_k (Q20) realise
// NTF(z) = (1 - z^-1)^5 / A(z) with A(z) from a 5th-order Butterworth
// high-pass scaled to a peak |NTF| of 1.5; the loop is stable for inputs up
// to about 0.6 G (the offset filters deliver at most 0.5 * 2^23).
//
// Gain compensation: the feedback magnitude G is the full-scale value of the
// output. It is taken from g_hdr (nominally 2^23) when the HDR channel is
// selected and from g_hsnr (2^23 * G_HDR/G_HSNR) when the HSNR channel is,
// so a residual analog gain mismatch between the channels is cancelled
// without a multiplier in the signal path.
//
// Interface/timing: din, sel_ch, g_hdr, g_hsnr sampled on rising clk_s; pdm
// is registered (1 = +full scale). Order, 1-bit output, the two selectable
// feedback levels and the no-multiplier gain trim follow the paper. The loop
// topology, coefficients and state widths are this design's own, since the
// paper does not give them.
`timescale 1ns / 1ps
module noise_shaper
  import cadc_pkg::*;
#(
  parameter int unsigned IN_W    = CH_W,
  parameter int unsigned G_W     = FB_W,
  parameter int unsigned STATE_W = 40
) (
  input  logic                   clk_s,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] din,
  input  sel_ch_e                sel_ch,
  input  logic        [G_W-1:0]  g_hdr,
  input  logic        [G_W-1:0]  g_hsnr,
  output logic                   pdm
);
  localparam int unsigned ORDER = 5;
  localparam int unsigned PROD_W = STATE_W + 22;
  // c = 0.807718, 0.316663, 0.074074, 0.0102388, 0.000665376 (x 2^20).
  localparam logic signed [21:0] C [ORDER] = '{22'sd846954, 22'sd332045, 22'sd77672,
                                               22'sd10736, 22'sd698};

  logic signed [STATE_W-1:0] integ [ORDER];
  logic signed [PROD_W-1:0]  w;
  logic                      y;
  logic signed [STATE_W-1:0] v, e;
  logic        [G_W-1:0]     g;

  always_comb begin
    w = '0;
    for (int k = 0; k < ORDER; k++) w += PROD_W'(integ[k]) * PROD_W'(C[k]);
  end

  assign y = ~w[PROD_W-1];                // w >= 0
  assign g = (sel_ch == SEL_HDR) ? g_hdr : g_hsnr;
  assign v = y ? STATE_W'(signed'({1'b0, g})) : -STATE_W'(signed'({1'b0, g}));
  assign e = STATE_W'(din) - v;

  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n) begin
      for (int k = 0; k < ORDER; k++) integ[k] <= '0;
      pdm <= 1'b0;
    end else begin
      integ[0] <= integ[0] + e;
      for (int k = 1; k < ORDER; k++) integ[k] <= integ[k] + integ[k-1];
      pdm <= y;
    end
endmodule
