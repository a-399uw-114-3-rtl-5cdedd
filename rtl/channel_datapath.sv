// Digital datapath of one VCO-ADC channel (HDR or HSNR).
// The two pseudo-differential oscillators (p and n branches) each feed a
// phase-to-Gray encoder and a synchronous counter extension, giving two
// 13-bit wrapping counts. Their difference p - n (modulo 2^13) removes the
// common rest frequency and is filtered and decimated by the second-order
// CIC down to f_s. Both channels use identical instances of this module.
//
// Interface/timing: phi_p/phi_n asynchronous phases, clk_ss the f_ss pulse
// train, clk_s the f_s master clock. dout is a signed 9-bit word at f_s.
// Block order and widths follow the paper; the p - n sign is this design's
// choice.
`timescale 1ns / 1ps
module channel_datapath
  import cadc_pkg::*;
(
  input  logic [N_PHASES-1:0]     phi_p,
  input  logic [N_PHASES-1:0]     phi_n,
  input  logic                    clk_ss,
  input  logic                    clk_s,
  input  logic                    rst_n,
  output logic signed [CIC_W-1:0] dout,
  output logic                    rr_p,
  output logic                    rr_n
);
  logic [GRAY_W-1:0] gs_p, gs_n;
  logic [CNT_W-1:0]  cnt_p, cnt_n, diff;

  phase_to_gray u_enc_p (.phi(phi_p), .clk_ss, .rst_n, .gs(gs_p), .rr(rr_p));
  phase_to_gray u_enc_n (.phi(phi_n), .clk_ss, .rst_n, .gs(gs_n), .rr(rr_n));

  sync_counter_ext u_ext_p (.clk_ss, .rst_n, .gs(gs_p), .cnt(cnt_p));
  sync_counter_ext u_ext_n (.clk_ss, .rst_n, .gs(gs_n), .cnt(cnt_n));

  assign diff = cnt_p - cnt_n;

  cic_decimator u_cic (.clk_ss, .clk_s, .rst_n, .din(diff), .dout);
endmodule
