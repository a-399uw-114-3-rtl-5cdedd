// Audio-band tone sweep of the whole converter at default parameters:
// tones at 20 Hz, 1 kHz, 10 kHz and 20 kHz, -20 dBFS (0.02 V differential),
// applied to both channels at once with only the HDR channel selected.
//
// For every tone the testbench measures, by correlating with sine and
// cosine over a whole number of periods:
//   - the amplitude of both 9-bit channel words; the HSNR/HDR ratio must
//     equal its 1 kHz value within 0.1 dB at every frequency (the two
//     channels share one signal transfer function, so a channel switch adds
//     no spectral colouring);
//   - the amplitude of the selected 23-bit word relative to 4 * 2^12 times
//     the HDR word; it must match the offset filter's response
//     |1 - z^-1| / |1 - (1 - 2^-16) z^-1| within 0.1 dB (about -0.6 dB at
//     20 Hz, flat above).
// 0 dBFS is the HDR clipping amplitude of the oscillator models (0.2 V).
`timescale 1ns / 1ps
module tb_tone_sweep;
  import cadc_pkg::*;
  localparam real FS   = 3.072e6;
  localparam real T_NS = 1.0e9 / FS;
  localparam real PI   = 3.14159265358979;
  localparam real AMP  = 0.02;

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

  real f_tone = 1.0e3;
  longint n = 0;
  always @(posedge clk_fs) begin
    real x;
    x = AMP * $sin(2.0 * PI * f_tone * real'(n) / FS);
    n++;
    vp_hsnr = x / 2.0; vn_hsnr = -x / 2.0;
    vp_hdr  = x / 2.0; vn_hdr  = -x / 2.0;
  end

  // amplitudes of hdr_out, hsnr_out and ch_word at f_tone over ns samples
  task automatic tone_amp(input int ns, output real a_hdr, output real a_hsnr, output real a_w);
    real c[3], s[3], ph;
    foreach (c[i]) begin c[i] = 0.0; s[i] = 0.0; end
    for (int i = 0; i < ns; i++) begin
      @(negedge clk_fs);
      ph = 2.0 * PI * f_tone * real'(i) / FS;
      c[0] += real'(hdr_out) * $cos(ph);  s[0] += real'(hdr_out) * $sin(ph);
      c[1] += real'(hsnr_out) * $cos(ph); s[1] += real'(hsnr_out) * $sin(ph);
      c[2] += real'(ch_word) * $cos(ph);  s[2] += real'(ch_word) * $sin(ph);
    end
    a_hdr  = 2.0 * $sqrt(c[0] * c[0] + s[0] * s[0]) / real'(ns);
    a_hsnr = 2.0 * $sqrt(c[1] * c[1] + s[1] * s[1]) / real'(ns);
    a_w    = 2.0 * $sqrt(c[2] * c[2] + s[2] * s[2]) / real'(ns);
  endtask

  function automatic real db(input real r);
    return 20.0 * $log10(r);
  endfunction

  // offset-filter magnitude at f
  function automatic real hpf_mag(input real f);
    real w, a, nr, ni, dr, di;
    w = 2.0 * PI * f / FS;
    a = 1.0 - 1.0 / 65536.0;
    nr = 1.0 - $cos(w);     ni = $sin(w);
    dr = 1.0 - a * $cos(w); di = a * $sin(w);
    return $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
  endfunction

  initial begin
    real ft [4];
    int  settle [4], meas [4];
    real a1, a2, aw, r_ref, r, h;
    ft     = '{1.0e3, 20.0, 10.0e3, 20.0e3};
    settle = '{20000, 370000, 20000, 20000};
    meas   = '{30720, 153600, 30720, 30720};    // whole periods
    pvt = 1.0;
    en_hsnr = 1; en_hdr = 1; dll_en = 1; dll_load = 0; dll_fb_init = 5'd0;
    // th_low = 0: the timeout never runs, so HDR stays selected
    th_high = 9'd200; th_low = 9'd0; prog_timeout = 18'd1000;
    g_hdr = 25'(1 << 23); g_hsnr = 25'(1 << 23);
    #1 rst_n = 0;
    #1000 rst_n = 1;
    repeat (300) @(posedge clk_fs);
    check(sel_hdr, "HDR selected");

    r_ref = 0.0;
    foreach (ft[i]) begin
      @(posedge clk_fs);
      f_tone = ft[i]; n = 0;
      repeat (settle[i]) @(posedge clk_fs);
      while (n % longint'(meas[i]) != 0) @(posedge clk_fs);
      tone_amp(meas[i], a1, a2, aw);
      r = a2 / a1;
      if (i == 0) r_ref = r;
      h = aw / (4.0 * 4096.0 * a1);
      $display("%g Hz: hdr %g hsnr %g ratio %g (%.3f dB vs 1 kHz); word/HDR %.3f dB, filter %.3f dB",
               ft[i], a1, a2, r, db(r / r_ref), db(h), db(hpf_mag(ft[i])));
      check(a1 > 5.0 && a1 < 7.5, $sformatf("HDR amplitude at %g Hz", ft[i]));
      check(db(r / r_ref) < 0.1 && db(r / r_ref) > -0.1, $sformatf("channel STFs match at %g Hz", ft[i]));
      check(db(h) - db(hpf_mag(ft[i])) < 0.1 && db(h) - db(hpf_mag(ft[i])) > -0.1,
            $sformatf("offset-filter response at %g Hz", ft[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
