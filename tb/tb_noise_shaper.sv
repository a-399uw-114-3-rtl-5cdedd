// Testbench for noise_shaper. Output density is measured with a 4096-sample
// average of +/-G. Checks: for DC inputs between -0.5 and +0.5 of 2^23 the
// average equals the input within 0.2% of full scale (HDR feedback 2^23);
// with the HSNR channel selected and g_hsnr = 1.05 * 2^23 the average equals
// input * 1.05 relative to 2^23 (the gain trim); a 0.5-FS sine at 3 kHz keeps
// the loop stable (a 64-sample moving average of the output tracks the sine
// within 0.05 FS after a sinc^2 filter would; here a 32-tap box filter).
`timescale 1ns / 1ps
module tb_noise_shaper;
  import cadc_pkg::*;
  localparam int FS = 1 << 23;
  logic clk_s = 0, rst_n = 1;
  logic signed [22:0] din;
  sel_ch_e sel_ch;
  logic [24:0] g_hdr, g_hsnr;
  logic pdm;
  int checks = 0, failures = 0;

  noise_shaper dut (.clk_s, .rst_n, .din, .sel_ch, .g_hdr, .g_hsnr, .pdm);
  always #5 clk_s = ~clk_s;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic dc(input real x, input sel_ch_e s, input real g);
    real sum, m, expv;
    din = 23'(int'(x * FS)); sel_ch = s;
    repeat (2000) @(negedge clk_s);
    sum = 0;
    for (int i = 0; i < 4096; i++) begin @(negedge clk_s); sum += pdm ? 1.0 : -1.0; end
    m = sum / 4096.0 * g;         // in units of 2^23
    expv = x;
    checks++;
    if (m > expv + 0.002 || m < expv - 0.002) begin failures++; $display("FAIL dc x=%g g=%g mean=%g", x, g, m); end
  endtask

  initial begin
    real ph, err, maxerr, hist[$];
    g_hdr = 25'(FS); g_hsnr = 25'(int'(1.05 * FS));
    din = 0; sel_ch = SEL_HDR;
    #1 rst_n = 0; #20 rst_n = 1;
    dc(0.0, SEL_HDR, 1.0); dc(0.3, SEL_HDR, 1.0); dc(-0.45, SEL_HDR, 1.0); dc(0.499, SEL_HDR, 1.0);
    dc(0.1234, SEL_HDR, 1.0);
    dc(0.3, SEL_HSNR, 1.05); dc(-0.2, SEL_HSNR, 1.05);
    // sine, 3 kHz at f_s = 3.072 MHz -> 1024 samples per period
    sel_ch = SEL_HDR; maxerr = 0;
    for (int i = 0; i < 8192; i++) begin
      @(negedge clk_s);
      din = 23'(int'(0.5 * FS * $sin(2.0 * 3.14159265 * i / 1024.0)));
      hist.push_back(pdm ? 1.0 : -1.0);
      if (hist.size() > 128) void'(hist.pop_front());
      if (i > 2048) begin
        real a = 0;
        foreach (hist[k]) a += hist[k];
        a /= 128.0;
        // box filter delay ~64 samples plus loop delay
        err = a - 0.5 * $sin(2.0 * 3.14159265 * (i - 64.5) / 1024.0);
        if (err < 0) err = -err;
        if (err > maxerr) maxerr = err;
      end
    end
    checks++;
    if (maxerr > 0.08) begin failures++; $display("FAIL sine tracking error %g", maxerr); end
    $display("sine max error %g", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
