// Companding VCO-ADC readout for a MEMS microphone (top level).
//
// Two complete VCO-ADC channels digitise the same microphone signal: the
// HSNR channel with 4x the analog gain (low noise, saturates early) and the
// HDR channel (high range, 4x coarser). Each channel is a pair of
// GM-driven 16-phase ring oscillators (p and n branch), whose phases are
// read by phase-to-Gray encoders, extended to 13-bit counters and filtered
// by a 2nd-order CIC that decimates from f_ss = 8 f_s to f_s. f_ss is made
// from the external clock f_s by a delay line with an XOR tree (no PLL);
// a dead-zone DLL keeps the line's total delay near T/2.
// The HDR word is multiplied by 4 (<<2) and the HSNR word sign-extended, so
// both carry the same signal scale; an offset high-pass filter per channel
// removes their offsets. A channel selector watching the HDR word switches
// to HDR as soon as the signal exceeds th_high and back to HSNR after it has
// stayed below th_low for prog_timeout f_s cycles. The selected word is
// re-encoded into a 1-bit PDM stream by a 5th-order noise shaper whose
// feedback level (g_hdr or g_hsnr) trims the residual gain mismatch between
// the channels.
//
// Ports: clk_fs is the microphone clock (3.072 MHz nominal). The branch
// voltages vp_*/vn_* are the outputs of the analog input network (bias
// resistors, HDR capacitive attenuator), which is not modelled. pvt_scale
// scales all delay-line delays. The programming-interface registers
// (thresholds, timeout, gain-trim levels, DLL control, channel enables)
// are plain inputs. pdm_out is the PDM output at f_s; the multi-bit channel
// words, the select bit, f_ss and the encoders' start-up flags are brought
// out for test.
//
// The oscillators and the delay line are behavioural models; the rest is
// synthesizable RTL. Single-channel operation (en_hdr or en_hsnr low) forces
// the selector to the enabled channel; that forcing is this design's choice.
// The individual delay-line taps are left unconnected: only their XOR
// (f_ss) and the last and extra taps (phase detector) are used.
`timescale 1ns / 1ps
module companding_adc
  import cadc_pkg::*;
(
  input  logic                    clk_fs,
  input  logic                    rst_n,
  // analog branch voltages (volts, relative to the common-mode bias)
  input  real                     vp_hsnr,
  input  real                     vn_hsnr,
  input  real                     vp_hdr,
  input  real                     vn_hdr,
  input  real                     pvt_scale,
  // configuration registers
  input  logic                    en_hsnr,
  input  logic                    en_hdr,
  input  logic                    dll_en,
  input  logic                    dll_load,
  input  logic [IDAC_W-1:0]       dll_fb_init,
  input  logic [CIC_W-1:0]        th_high,
  input  logic [CIC_W-1:0]        th_low,
  input  logic [TO_W-1:0]         prog_timeout,
  input  logic [FB_W-1:0]         g_hdr,
  input  logic [FB_W-1:0]         g_hsnr,
  // outputs
  output logic                    pdm_out,
  output logic                    sel_hdr,
  output logic [IDAC_W-1:0]       dll_fb,
  output logic signed [CIC_W-1:0] hdr_out,
  output logic signed [CIC_W-1:0] hsnr_out,
  output logic signed [CH_W-1:0]  ch_word,
  output logic                    clk_ss,
  output logic                    enc_ready
);
  // ---------------- clock multiplier and DLL ----------------
  logic       ph_last, ph_extra, th_d, th_u;

  ccdl_model u_ccdl (
    .fs(clk_fs), .fb(dll_fb), .pvt_scale,
    .taps(), .fss(clk_ss), .ph_last, .ph_extra
  );

  dll_phase_detector u_pd (
    .clk_s(clk_fs), .rst_n, .ph_last, .ph_extra, .th_d, .th_u
  );

  dll_control #(.W(IDAC_W)) u_dllctl (
    .clk_s(clk_fs), .rst_n, .en(dll_en), .load(dll_load),
    .fb_init(dll_fb_init), .th_d, .th_u, .fb(dll_fb)
  );

  // ---------------- oscillators (behavioural) ----------------
  logic [N_PHASES-1:0] phi_hsnr_p, phi_hsnr_n, phi_hdr_p, phi_hdr_n;

  gm_dffro_model #(.KVCO_HZ_PER_V(2.4e8), .INIT_STATE(0))  u_ro_hsnr_p (.vin(vp_hsnr), .en(en_hsnr), .phi(phi_hsnr_p));
  gm_dffro_model #(.KVCO_HZ_PER_V(2.4e8), .INIT_STATE(7))  u_ro_hsnr_n (.vin(vn_hsnr), .en(en_hsnr), .phi(phi_hsnr_n));
  gm_dffro_model #(.KVCO_HZ_PER_V(6.0e7), .INIT_STATE(13)) u_ro_hdr_p  (.vin(vp_hdr),  .en(en_hdr),  .phi(phi_hdr_p));
  gm_dffro_model #(.KVCO_HZ_PER_V(6.0e7), .INIT_STATE(21)) u_ro_hdr_n  (.vin(vn_hdr),  .en(en_hdr),  .phi(phi_hdr_n));

  // ---------------- channel datapaths ----------------
  logic rr_hsnr_p, rr_hsnr_n, rr_hdr_p, rr_hdr_n;

  channel_datapath u_ch_hsnr (
    .phi_p(phi_hsnr_p), .phi_n(phi_hsnr_n), .clk_ss, .clk_s(clk_fs), .rst_n,
    .dout(hsnr_out), .rr_p(rr_hsnr_p), .rr_n(rr_hsnr_n)
  );
  channel_datapath u_ch_hdr (
    .phi_p(phi_hdr_p), .phi_n(phi_hdr_n), .clk_ss, .clk_s(clk_fs), .rst_n,
    .dout(hdr_out), .rr_p(rr_hdr_p), .rr_n(rr_hdr_n)
  );

  assign enc_ready = rr_hsnr_p & rr_hsnr_n & rr_hdr_p & rr_hdr_n;

  // ---------------- scaling and offset filters ----------------
  logic signed [HPF_IN_W-1:0] hsnr_ext, hdr_x4;
  logic signed [CH_W-1:0]     hsnr_f, hdr_f;

  assign hsnr_ext = HPF_IN_W'(hsnr_out);           // 2-bit sign extension
  assign hdr_x4   = HPF_IN_W'(hdr_out) <<< 2;      // x4 gain equalisation

  offset_hpf u_hpf_hsnr (.clk_s(clk_fs), .rst_n, .din(hsnr_ext), .dout(hsnr_f));
  offset_hpf u_hpf_hdr  (.clk_s(clk_fs), .rst_n, .din(hdr_x4),   .dout(hdr_f));

  // ---------------- channel selection and combination ----------------
  sel_ch_e sel_auto, sel_ch;

  channel_select u_sel (
    .clk_s(clk_fs), .rst_n, .hdr_out, .th_high, .th_low, .prog_timeout,
    .sel_ch(sel_auto)
  );

  always_comb begin
    if (!en_hsnr)     sel_ch = SEL_HDR;
    else if (!en_hdr) sel_ch = SEL_HSNR;
    else              sel_ch = sel_auto;
  end

  assign ch_word = (sel_ch == SEL_HDR) ? hdr_f : hsnr_f;
  assign sel_hdr = (sel_ch == SEL_HDR);

  noise_shaper u_ns (
    .clk_s(clk_fs), .rst_n, .din(ch_word), .sel_ch, .g_hdr, .g_hsnr,
    .pdm(pdm_out)
  );
endmodule
