// End-to-end testbench of the companding ADC, all parameters at their
// defaults. f_s = 3.072 MHz, the delay line starts from IDAC code 0 and must
// lock; a differential tone (4 kHz) is applied to both channels with the
// HSNR branches seeing the full signal and the HDR branches the same
// voltage (the 4x gain difference sits in the oscillator models).
// Programmed: th_high = 12, th_low = 8, timeout 1500 cycles,
// g_hdr = 2^23, g_hsnr = 1.02 * 2^23.
//
// Checked: DLL acquisition, dead-zone hold, re-tracking after a slow PVT drift,
// open-loop hold and code load; encoder start-up; HSNR/HDR gain ratio of 4
// in the linear range; HDR x4 and HSNR x1 scaling into the 23-bit word
// (single-channel modes); HSNR saturation on a loud tone; automatic handover to
// HDR within 5 cycles of the HDR word exceeding th_high and return to HSNR
// after the timeout; single-channel modes; offset removal by the high-pass
// filters; and that the 1-bit output tracks the selected channel with the
// selected feedback level (the running sum of word minus feedback, which is
// the first integrator of the noise shaper, stays bounded). Each mechanism
// is counted and a mechanism never seen counts as a failure.
`timescale 1ns / 1ps
module tb_companding_adc;
  import cadc_pkg::*;
  localparam real T_NS = 1.0e9 / 3.072e6;
  localparam real F_SIG = 4.0e3;

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
  int n_dll_lock = 0, n_deadzone = 0, n_retrack = 0, n_openloop = 0, n_load = 0;
  int n_to_hdr = 0, n_to_hsnr = 0, n_hsnr_sat = 0, n_single_hdr = 0, n_single_hsnr = 0;
  int n_gain_trim = 0, n_offset = 0, n_start = 0, n_ratio = 0;
  longint cyc = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  // ---------------- stimulus: differential tone + offsets ----------------
  real amp = 0.0, off_hsnr = 0.0;
  always @(posedge clk_fs) begin
    real x;
    cyc++;
    x = amp * $sin(2.0 * 3.14159265358979 * F_SIG * real'(cyc) * T_NS * 1.0e-9);
    vp_hsnr = x / 2.0 + off_hsnr;
    vn_hsnr = -x / 2.0;
    vp_hdr  = x / 2.0;
    vn_hdr  = -x / 2.0;
  end

  // ---------------- noise-shaper tracking monitor ----------------
  // Running sum of (selected word - output feedback level); bounded iff the
  // 1-bit stream reproduces the word with the right full-scale level.
  longint ns_err = 0, ns_err_max = 0;
  bit ns_mon = 0;
  always @(negedge clk_fs) if (ns_mon) begin
    longint g;
    g = sel_hdr ? longint'(g_hdr) : longint'(g_hsnr);
    ns_err += longint'(ch_word) - (pdm_out ? g : -g);
    if (ns_err > ns_err_max) ns_err_max = ns_err;
    if (-ns_err > ns_err_max) ns_err_max = -ns_err;
    if (!sel_hdr && g_hsnr != g_hdr) n_gain_trim++;
  end

  // ---------------- channel switch monitor ----------------
  bit sel_d = 1;
  int pend = -1;      // cycles since |hdr_out| first exceeded th_high while HSNR was selected
  always @(negedge clk_fs) begin
    int mag;
    mag = (hdr_out < 0) ? -int'(hdr_out) : int'(hdr_out);
    if (en_hsnr && en_hdr) begin
      if (sel_hdr && !sel_d) begin
        n_to_hdr++;
        check(pend >= 0 && pend <= 5, $sformatf("handover latency %0d", pend));
      end
      if (!sel_hdr && sel_d) n_to_hsnr++;
    end
    if (!sel_hdr && mag > int'(th_high) && pend < 0) pend = 0;
    else if (pend >= 0) pend++;
    if (sel_hdr) pend = -1;
    sel_d = sel_hdr;
    if (hsnr_out >= 9'sd58 || hsnr_out <= -9'sd58) n_hsnr_sat++;
  end

  initial begin
    #250000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait until the DLL code has not moved for n cycles (max maxc)
  task automatic wait_dll_stable(input int n, input int maxc, output bit ok);
    int still, c;
    logic [4:0] last;
    still = 0; c = 0; last = dll_fb; ok = 0;
    while (c < maxc) begin
      @(posedge clk_fs); c++;
      if (dll_fb == last) still++; else begin still = 0; last = dll_fb; end
      if (still >= n) begin ok = 1; break; end
    end
  endtask

  // least-squares gain from a channel's CIC word to the selected 23-bit word,
  // with the 2-cycle latency of the high-pass filter
  task automatic word_gain(input bit use_hdr, input int n, output real r);
    real sxy, sxx, x;
    logic signed [8:0] h1, h2;
    sxy = 0; sxx = 0; h1 = 0; h2 = 0;
    for (int i = 0; i < n + 2; i++) begin
      @(negedge clk_fs);
      if (i >= 2) begin
        x = real'(h2);
        sxy += real'(ch_word) * x;
        sxx += x * x;
      end
      h2 = h1;
      h1 = use_hdr ? hdr_out : hsnr_out;
    end
    r = (sxx > 0) ? sxy / sxx : 0.0;
  endtask

  // least-squares ratio hsnr/hdr over n samples
  task automatic gain_ratio(input int n, output real r);
    real sxy, sxx;
    sxy = 0; sxx = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk_fs);
      sxy += real'(hsnr_out) * real'(hdr_out);
      sxx += real'(hdr_out) * real'(hdr_out);
    end
    r = (sxx > 0) ? sxy / sxx : 0.0;
  endtask

  initial begin
    bit ok;
    real r;
    int code1, code2, sel_sum;
    longint w_sum;
    pvt = 1.0; amp = 0.0;
    en_hsnr = 1; en_hdr = 1; dll_en = 1; dll_load = 0; dll_fb_init = 5'd20;
    th_high = 9'd12; th_low = 9'd8; prog_timeout = 18'd1500;
    g_hdr = 25'(1 << 23); g_hsnr = 25'(int'(1.02 * real'(1 << 23)));
    vp_hsnr = 0; vn_hsnr = 0; vp_hdr = 0; vn_hdr = 0;
    #1 rst_n = 0;
    #(3 * T_NS) rst_n = 1;

    // ---- DLL acquisition from code 0 ----
    wait_dll_stable(64, 400, ok);
    check(ok, "DLL locks");
    if (ok) n_dll_lock++;
    code1 = int'(dll_fb);
    // dead zone: the line is at most T/2 long and the extra tap lies beyond T/2
    begin
      real d;
      d = 8.0 * 814.0 / (real'(dll_fb) + 24.0);
      check(d <= T_NS / 2.0 && d * (8.25 / 8.0) > T_NS / 2.0,
            $sformatf("locked delay %g ns brackets T/2 (dead zone)", d));
      if (d <= T_NS / 2.0 && d * (8.25 / 8.0) > T_NS / 2.0) n_deadzone++;
    end
    $display("DLL locked at code %0d", code1);

    // ---- encoders started ----
    repeat (20) @(posedge clk_fs);
    check(enc_ready, "encoders released from start-up");
    if (enc_ready) n_start++;

    // ---- small tone: HSNR linear, ratio 4, switch to HSNR ----
    ns_mon = 1;
    amp = 0.02;
    repeat (2000) @(posedge clk_fs);
    check(!sel_hdr, "quiet input selects HSNR after timeout");
    gain_ratio(1536, r);
    $display("HSNR/HDR gain ratio %g", r);
    check(r > 3.6 && r < 4.4, $sformatf("gain ratio %g ~ 4", r));
    if (r > 3.6 && r < 4.4) n_ratio++;

    // ---- loud tone: handover to HDR, HSNR saturates ----
    amp = 0.12;
    repeat (1536) @(posedge clk_fs);
    sel_sum = 0;
    for (int i = 0; i < 768; i++) begin @(negedge clk_fs); sel_sum += sel_hdr; end
    check(sel_sum == 768, $sformatf("loud tone keeps HDR selected (%0d/768)", sel_sum));

    // ---- back to small: return to HSNR ----
    amp = 0.02;
    repeat (2500) @(posedge clk_fs);
    check(!sel_hdr, "returns to HSNR after the loud passage");

    // ---- single-channel modes ----
    // the selected word carries HDR x4 and HSNR x1, times the 2^12 HPF gain
    en_hsnr = 0; repeat (50) @(negedge clk_fs);
    check(sel_hdr, "HDR-only mode selects HDR");
    if (sel_hdr) n_single_hdr++;
    word_gain(1, 1536, r);
    $display("HDR word gain %g", r);
    check(r > 0.95 * 16384.0 && r < 1.05 * 16384.0, $sformatf("HDR word gain %g ~ 4*2^12", r));
    en_hsnr = 1; en_hdr = 0; repeat (50) @(negedge clk_fs);
    check(!sel_hdr, "HSNR-only mode selects HSNR");
    if (!sel_hdr) n_single_hsnr++;
    word_gain(0, 1536, r);
    $display("HSNR word gain %g", r);
    check(r > 0.95 * 4096.0 && r < 1.05 * 4096.0, $sformatf("HSNR word gain %g ~ 2^12", r));
    en_hdr = 1;
    ns_mon = 0;
    repeat (200) @(negedge clk_fs);
    ns_err = 0; ns_mon = 1;

    // ---- PVT drift: delays 20% shorter over 2000 cycles, DLL re-tracks ----
    for (int i = 0; i < 200; i++) begin
      pvt = pvt - 0.001;
      repeat (10) @(posedge clk_fs);
    end
    wait_dll_stable(64, 600, ok);
    code2 = int'(dll_fb);
    check(ok && code2 < code1, $sformatf("DLL re-tracks after PVT drift (%0d -> %0d)", code1, code2));
    if (ok && code2 < code1) n_retrack++;
    $display("DLL re-locked at code %0d", code2);

    // ---- open loop: code held while PVT drifts further ----
    dll_en = 0;
    for (int i = 0; i < 40; i++) begin
      pvt = pvt - 0.001;
      repeat (10) @(posedge clk_fs);
    end
    check(int'(dll_fb) == code2, "open-loop DLL holds its code");
    if (int'(dll_fb) == code2) n_openloop++;
    dll_load = 1; @(posedge clk_fs); #1 dll_load = 0;
    check(dll_fb == 5'd20, "code load");
    if (dll_fb == 5'd20) n_load++;
    dll_en = 1;
    wait_dll_stable(64, 600, ok);
    check(ok && int'(dll_fb) < code2, $sformatf("re-locks after a code load (%0d)", dll_fb));

    // ---- offset removal: 2 mV offset on one HSNR branch ----
    amp = 0.0; off_hsnr = 0.002;
    repeat (3000) @(posedge clk_fs);
    w_sum = 0;
    for (int i = 0; i < 768; i++) begin @(negedge clk_fs); w_sum += longint'(ch_word); end
    $display("offset after 3k cycles: %0d", w_sum / 768);
    begin
      longint first;
      first = w_sum / 768;
      repeat (140000) @(posedge clk_fs);
      w_sum = 0;
      for (int i = 0; i < 768; i++) begin @(negedge clk_fs); w_sum += longint'(ch_word); end
      $display("offset after 143k cycles: %0d", w_sum / 768);
      check(first > 4096 && w_sum / 768 < first / 4, "HPF removes the channel offset");
      if (first > 4096 && w_sum / 768 < first / 4) n_offset++;
    end

    // ---- noise-shaper tracking over the whole run ----
    $display("noise-shaper running error max %0d", ns_err_max);
    check(ns_err_max < (longint'(1) << 27), "1-bit output tracks selected channel and feedback level");

    // ---- mechanism coverage ----
    $display("coverage: lock=%0d deadzone=%0d retrack=%0d openloop=%0d load=%0d start=%0d ratio=%0d",
             n_dll_lock, n_deadzone, n_retrack, n_openloop, n_load, n_start, n_ratio);
    $display("coverage: to_hdr=%0d to_hsnr=%0d hsnr_sat=%0d single_hdr=%0d single_hsnr=%0d gain_trim=%0d offset=%0d",
             n_to_hdr, n_to_hsnr, n_hsnr_sat, n_single_hdr, n_single_hsnr, n_gain_trim, n_offset);
    check(n_dll_lock > 0, "coverage: DLL lock");
    check(n_deadzone > 0, "coverage: dead zone");
    check(n_retrack > 0, "coverage: PVT re-track");
    check(n_openloop > 0, "coverage: open loop");
    check(n_load > 0, "coverage: code load");
    check(n_start > 0, "coverage: encoder start-up");
    check(n_to_hdr > 0, "coverage: handover to HDR");
    check(n_to_hsnr > 1, "coverage: return to HSNR");
    check(n_hsnr_sat > 0, "coverage: HSNR saturation");
    check(n_single_hdr > 0 && n_single_hsnr > 0, "coverage: single-channel modes");
    check(n_gain_trim > 0, "coverage: gain trim level used");
    check(n_offset > 0, "coverage: offset removal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
