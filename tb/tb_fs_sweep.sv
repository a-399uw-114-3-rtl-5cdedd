// Sampling-clock robustness test of the whole converter at default
// parameters. The delay line is calibrated once at f_s = 3.072 MHz, then the
// IDAC code is held (DLL open loop) while the input clock is swept over
// 1.87, 2.4, 3.072 and 3.57 MHz, and finally run at 3.072 MHz with random
// edge jitter.
//
// A DC differential input of 30 mV is applied. Because the oscillator
// counts are accumulated over one f_s period, both channel words scale with
// 1/f_s: the testbench checks mean(hdr_out) * f_s and mean(hsnr_out) * f_s
// against the calibration point (3 %), that each f_s period holds exactly
// 8 rising edges of f_ss (the multirate CIC needs M = 8 per period), and that
// the held code does not move. With jitter (Gaussian edge jitter, sigma = 1 %
// of T, clipped at 3 sigma) the means must stay within 3 % and no single
// word may leave +/-50 % of its mean (no edge crossing).
//
// The jitter level is this testbench's choice: with the delay line locked at
// T/2 the last rising f_ss edge of a half-period falls 7T/16 after the f_s
// edge that launched it, leaving about 7 % of T of margin per half-period.
`timescale 1ns / 1ps
module tb_fs_sweep;
  import cadc_pkg::*;
  localparam real F_NOM = 3.072e6;
  localparam real X_DC  = 0.03;

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

  // clock with programmable frequency and edge jitter
  real f_clk = F_NOM;
  real jit_sigma = 0.0;     // fraction of T
  real j_prev = 0.0;
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(0, 1000000)) / 1.0e6;
    s -= 6.0;
    if (s > 3.0) s = 3.0;
    if (s < -3.0) s = -3.0;
    return s;
  endfunction
  initial forever begin
    real t, j;
    t = 1.0e9 / f_clk;
    j = jit_sigma * t * gauss();
    #(t / 2.0 + j - j_prev) clk_fs = ~clk_fs;
    j_prev = j;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // rising f_ss edges per f_s period
  int ss_cnt = 0, ss_min = 99, ss_max = 0;
  bit ss_mon = 0;
  always @(posedge clk_ss) ss_cnt++;
  always @(posedge clk_fs) begin
    if (ss_mon) begin
      if (ss_cnt < ss_min) ss_min = ss_cnt;
      if (ss_cnt > ss_max) ss_max = ss_cnt;
    end
    ss_cnt = 0;
  end

  task automatic measure(input int n, output real m_hdr, output real m_hsnr,
                         output int dev_max_pct);
    longint s1, s2;
    int d;
    s1 = 0; s2 = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk_fs);
      s1 += longint'(hdr_out); s2 += longint'(hsnr_out);
    end
    m_hdr = real'(s1) / real'(n);
    m_hsnr = real'(s2) / real'(n);
    dev_max_pct = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk_fs);
      d = int'(100.0 * (real'(hsnr_out) - m_hsnr) / m_hsnr);
      if (d < 0) d = -d;
      if (d > dev_max_pct) dev_max_pct = d;
    end
  endtask

  initial begin
    real ref_hdr, ref_hsnr, m1, m2;
    real fl [4];
    int dev, code;
    fl = '{1.87e6, 2.4e6, 3.072e6, 3.57e6};
    pvt = 1.0;
    en_hsnr = 1; en_hdr = 1; dll_en = 1; dll_load = 0; dll_fb_init = 5'd0;
    th_high = 9'd200; th_low = 9'd100; prog_timeout = 18'd1000;
    g_hdr = 25'(1 << 23); g_hsnr = 25'(1 << 23);
    vp_hsnr = X_DC / 2.0; vn_hsnr = -X_DC / 2.0; vp_hdr = X_DC / 2.0; vn_hdr = -X_DC / 2.0;
    #1 rst_n = 0;
    #1000 rst_n = 1;

    // calibrate once, then hold the code
    repeat (300) @(posedge clk_fs);
    dll_en = 0;
    code = int'(dll_fb);
    $display("delay line calibrated at code %0d", code);
    repeat (50) @(posedge clk_fs);
    measure(1024, ref_hdr, ref_hsnr, dev);
    $display("3.072 MHz reference: hdr %g hsnr %g", ref_hdr, ref_hsnr);
    check(ref_hsnr > 30.0 && ref_hdr > 7.0, "reference words are non-trivial");

    foreach (fl[i]) begin
      f_clk = fl[i];
      repeat (100) @(posedge clk_fs);
      ss_min = 99; ss_max = 0; ss_mon = 1;
      measure(1024, m1, m2, dev);
      ss_mon = 0;
      $display("f_s %g MHz: hdr %g hsnr %g (scaled %g %g), f_ss edges/period %0d..%0d",
               fl[i] / 1.0e6, m1, m2, m1 * fl[i] / F_NOM / ref_hdr, m2 * fl[i] / F_NOM / ref_hsnr,
               ss_min, ss_max);
      check(m2 * fl[i] / F_NOM > 0.97 * ref_hsnr && m2 * fl[i] / F_NOM < 1.03 * ref_hsnr,
            $sformatf("HSNR word scales with 1/f_s at %g MHz", fl[i] / 1.0e6));
      check(m1 * fl[i] / F_NOM > 0.97 * ref_hdr && m1 * fl[i] / F_NOM < 1.03 * ref_hdr,
            $sformatf("HDR word scales with 1/f_s at %g MHz", fl[i] / 1.0e6));
      check(ss_min == 8 && ss_max == 8, $sformatf("8 f_ss edges per f_s period at %g MHz", fl[i] / 1.0e6));
      check(int'(dll_fb) == code, "open-loop code held");
    end

    // jitter at 3.072 MHz
    f_clk = F_NOM;
    jit_sigma = 0.01;
    repeat (100) @(posedge clk_fs);
    ss_min = 99; ss_max = 0; ss_mon = 1;
    measure(2048, m1, m2, dev);
    ss_mon = 0;
    $display("jitter 1%%: hdr %g hsnr %g, max deviation %0d%%, f_ss edges/period %0d..%0d",
             m1, m2, dev, ss_min, ss_max);
    check(m2 > 0.97 * ref_hsnr && m2 < 1.03 * ref_hsnr, "HSNR mean unchanged under jitter");
    check(m1 > 0.97 * ref_hdr && m1 < 1.03 * ref_hdr, "HDR mean unchanged under jitter");
    check(dev < 50, "no word glitch under jitter");
    check(ss_min == 8 && ss_max == 8, "8 f_ss edges per f_s period under jitter");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
