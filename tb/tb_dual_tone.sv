// Repeated channel-switching test of the whole converter at default
// parameters: a 2 Hz subsonic tone at -20 dBFS plus a 1 kHz tone at -40 dBFS,
// with the switching point near -30 dBFS, over one full 2 Hz period (0.5 s,
// about 1.5 million f_s cycles). The subsonic tone crosses the threshold
// four times per period, so the selector hands over to HDR near each peak
// and returns to HSNR after the timeout near each zero crossing.
//
// Full scale (0 dBFS) is taken as the differential amplitude at which the
// HDR oscillators reach their frequency limits in the oscillator models,
// 0.2 V. -30 dBFS is then |hdr_out| = 2, inside the +/-3 LSB out-of-band
// quantisation noise of the f_s-rate HDR word, so the thresholds are set
// just above that noise: th_high = 4, th_low = 3 (about -24 dBFS). A 1 kHz tone at -20 dBFS is applied
// first to measure both channel gains; the HSNR feedback level is then
// programmed to 2^23 * (HSNR gain / 4 x HDR gain), as a one-time on-chip
// calibration would.
//
// Checked: HDR is selected around both peaks of the subsonic tone and HSNR
// around both zero crossings; at least two handovers each way; and the 1-bit
// output, averaged over 10 ms windows (which null the 1 kHz tone and make the
// noise shaper's residual state negligible), follows an independent reference (the input through an ideal first-order high-pass of
// pole 1 - 2^-16, times the measured HDR gain) within 10 % of the filtered
// subsonic amplitude, including the windows that contain a handover.
`timescale 1ns / 1ps
module tb_dual_tone;
  import cadc_pkg::*;
  localparam real T_NS  = 1.0e9 / 3.072e6;
  localparam real PI    = 3.14159265358979;
  localparam real X_FS  = 0.2;
  localparam real A_SUB = X_FS * 0.1;      // -20 dBFS
  localparam real A_TON = X_FS * 0.01;     // -40 dBFS
  localparam int  WIN   = 30720;           // 10 ms

  logic clk_fs = 0, rst_n = 1;
  real vp_hsnr, vn_hsnr, vp_hdr, vn_hdr, pvt;
  logic en_hsnr, en_hdr, dll_en, dll_load;
  logic [4:0] dll_fb_init, dll_fb;
  logic [8:0] th_high, th_low;
  logic [17:0] prog_timeout;
  logic [24:0] g_hdr, g_hsnr;
  logic pdm_out, sel_hdr, clk_ss, enc_ready;
  logic signed [8:0] hdr_out, hsnr_out;
  logic signed [22:0] ch_word;

  companding_adc dut (
    .clk_fs, .rst_n, .vp_hsnr, .vn_hsnr, .vp_hdr, .vn_hdr, .pvt_scale(pvt),
    .en_hsnr, .en_hdr, .dll_en, .dll_load, .dll_fb_init,
    .th_high, .th_low, .prog_timeout, .g_hdr, .g_hsnr,
    .pdm_out, .sel_hdr, .dll_fb, .hdr_out, .hsnr_out, .ch_word, .clk_ss, .enc_ready
  );

  always #(T_NS / 2.0) clk_fs = ~clk_fs;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // input: mode 0 = silent, 1 = calibration tone, 2 = dual tone
  int  mode = 0;
  longint n = 0;            // sample index within the current mode
  real x = 0.0;
  always @(posedge clk_fs) begin
    real t;
    t = real'(n) * T_NS * 1.0e-9;
    case (mode)
      1:       x = 10.0 * A_TON * $sin(2.0 * PI * 1.0e3 * t);
      2:       x = A_SUB * $sin(2.0 * PI * 2.0 * t) + A_TON * $sin(2.0 * PI * 1.0e3 * t);
      default: x = 0.0;
    endcase
    n++;
    vp_hsnr = x / 2.0; vn_hsnr = -x / 2.0;
    vp_hdr  = x / 2.0; vn_hdr  = -x / 2.0;
  end

  // reference: ideal high-pass of the input, in units of the 1-bit mean
  real g_meas = 312.5;
  real hp = 0.0, x_prev = 0.0;
  real acc_ref = 0.0, acc_pdm = 0.0, err_max = 0.0, amp_ref = 0.0;
  int  wcnt = 0, n_win = 0, n_win_bad = 0, n_win_sw = 0;
  int  n_to_hdr = 0, n_to_hsnr = 0;
  bit  sel_d = 1, sw_in_win = 0, ref_on = 0;
  always @(negedge clk_fs) if (ref_on) begin
    real u;
    u = 4.0 * g_meas * x * 4096.0 / 8388608.0;
    hp = (1.0 - 1.0 / 65536.0) * hp + (u - x_prev);
    x_prev = u;
    acc_ref += hp;
    acc_pdm += pdm_out ? 1.0 : -1.0;
    if (sel_hdr != sel_d) begin
      sw_in_win = 1;
      if (sel_hdr) n_to_hdr++; else n_to_hsnr++;
    end
    sel_d = sel_hdr;
    if (++wcnt == WIN) begin
      real e, a;
      e = (acc_pdm - acc_ref) / real'(WIN);
      a = acc_ref / real'(WIN);
      if (e < 0) e = -e;
      if (a < 0) a = -a;
      if (a > amp_ref) amp_ref = a;
      if (e > err_max) err_max = e;
      n_win++;
      if (e > 0.1 * 0.0031) begin
        n_win_bad++;
        if (n_win_bad <= 5) $display("window %0d error %g (ref %g)", n_win, e, acc_ref / real'(WIN));
      end
      if (sw_in_win) n_win_sw++;
      wcnt = 0; acc_ref = 0.0; acc_pdm = 0.0; sw_in_win = 0;
    end
  end

  // fraction of cycles with HDR selected between two times (seconds)
  task automatic sel_fraction(input real t0, input real t1, output real f);
    longint c0, c1, s;
    c0 = longint'(t0 / (T_NS * 1.0e-9));
    c1 = longint'(t1 / (T_NS * 1.0e-9));
    while (n < c0) @(negedge clk_fs);
    s = 0;
    while (n < c1) begin @(negedge clk_fs); s += longint'(sel_hdr); end
    f = real'(s) / real'(c1 - c0);
  endtask

  initial begin
    real sxy, syy, sxh, sxx, r, f;
    pvt = 1.0;
    en_hsnr = 1; en_hdr = 1; dll_en = 1; dll_load = 0; dll_fb_init = 5'd0;
    th_high = 9'd4; th_low = 9'd3; prog_timeout = 18'd20000;
    g_hdr = 25'(1 << 23); g_hsnr = 25'(1 << 23);
    #1 rst_n = 0;
    #1000 rst_n = 1;
    repeat (300) @(posedge clk_fs);

    // one-time gain calibration on a 1 kHz tone at -20 dBFS (2 periods)
    n = 0; mode = 1;
    repeat (8) @(negedge clk_fs);
    sxy = 0; syy = 0; sxh = 0; sxx = 0;
    for (int i = 0; i < 6144; i++) begin
      @(negedge clk_fs);
      sxy += real'(hsnr_out) * real'(hdr_out);
      syy += real'(hsnr_out) * real'(hsnr_out);
      sxh += x * real'(hdr_out);
      sxx += x * x;
    end
    mode = 0;
    r = syy / sxy;                  // HSNR / HDR gain
    g_meas = sxh / sxx;             // HDR counts per volt
    g_hsnr = 25'(longint'(8388608.0 * r / 4.0));
    $display("calibration: HSNR/HDR %g, HDR gain %g /V, g_hsnr %0d", r, g_meas, g_hsnr);
    check(r > 3.8 && r < 4.2, "channel gain ratio near 4");
    repeat (3000) @(posedge clk_fs);

    // dual tone, one 2 Hz period
    @(posedge clk_fs);
    n = 0; mode = 2; ref_on = 1; hp = 0.0; x_prev = 0.0; wcnt = 0;
    sel_fraction(0.115, 0.135, f);
    $display("HDR fraction around the first peak: %g", f);
    check(f > 0.99, "HDR selected around the positive peak");
    sel_fraction(0.247, 0.257, f);
    $display("HDR fraction around the zero crossing: %g", f);
    check(f < 0.1, "HSNR selected around the zero crossing");
    sel_fraction(0.365, 0.385, f);
    $display("HDR fraction around the second peak: %g", f);
    check(f > 0.99, "HDR selected around the negative peak");
    sel_fraction(0.496, 0.5, f);
    $display("HDR fraction at the end of the period: %g", f);
    check(f < 0.1, "HSNR selected at the end of the period");

    $display("handovers: to HDR %0d, to HSNR %0d; windows %0d (%0d with a handover), bad %0d",
             n_to_hdr, n_to_hsnr, n_win, n_win_sw, n_win_bad);
    $display("1-bit output error max %g, filtered subsonic amplitude %g", err_max, amp_ref);
    check(n_to_hdr >= 2 && n_to_hsnr >= 2, "repeated channel switching happened");
    check(n_win_sw >= 4, "windows with a handover were compared");
    check(n_win_bad == 0, "1-bit output follows the reference in every window");
    check(amp_ref > 0.002, "reference amplitude as expected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #600000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
