// Testbench for channel_select (timeout shortened to 200 cycles; thresholds
// th_high = 40, th_low = 20). Checks: reset selects HDR; a quiet input
// switches to HSNR exactly prog_timeout + 2 cycles after the counter starts;
// a sample with |x| > th_high (positive or negative) selects HDR within
// 5 f_s cycles (handover latency); inputs between th_low and th_high hold the
// counter (no switch back while there); a single loud burst restarts the
// full timeout.
`timescale 1ns / 1ps
module tb_channel_select;
  import cadc_pkg::*;
  logic clk_s = 0, rst_n = 1;
  logic signed [8:0] hdr_out;
  logic [8:0] th_high, th_low;
  logic [17:0] prog_timeout;
  sel_ch_e sel_ch;
  int checks = 0, failures = 0;

  channel_select dut (.clk_s, .rst_n, .hdr_out, .th_high, .th_low, .prog_timeout, .sel_ch);
  always #5 clk_s = ~clk_s;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // cycles (at negedge) until sel_ch becomes v
  task automatic wait_sel(input sel_ch_e v, input int maxc, output int n);
    n = 0;
    while (sel_ch != v && n < maxc) begin @(negedge clk_s); n++; end
  endtask

  initial begin
    int n;
    th_high = 40; th_low = 20; prog_timeout = 200; hdr_out = 0;
    #1 rst_n = 0; #20 rst_n = 1;
    @(negedge clk_s);
    check(sel_ch == SEL_HDR, "reset selects HDR");
    wait_sel(SEL_HSNR, 1000, n);
    check(n >= 199 && n <= 203, $sformatf("quiet timeout %0d cycles", n));
    // loud positive sample
    hdr_out = 9'sd60; @(negedge clk_s); hdr_out = 0;
    check(sel_ch == SEL_HDR, "handover on +60 within 1 cycle");
    wait_sel(SEL_HSNR, 1000, n);
    check(n >= 198 && n <= 203, $sformatf("timeout after burst %0d", n));
    // loud negative sample, latency measured
    hdr_out = -9'sd45; n = 0;
    wait_sel(SEL_HDR, 10, n);
    check(n <= 5, $sformatf("handover latency %0d <= 5", n));
    // mid-range values: counter holds, stays HDR
    for (int i = 0; i < 600; i++) begin
      hdr_out = 9'(25 + int'($urandom % 15)) * ((i % 2) ? 1 : -1);
      @(negedge clk_s);
      if (sel_ch != SEL_HDR) begin check(0, "switched while in hysteresis band"); break; end
    end
    check(sel_ch == SEL_HDR, "held HDR in band");
    // th_high boundary: equal is not above
    hdr_out = 0; wait_sel(SEL_HSNR, 1000, n);
    hdr_out = 9'sd40; repeat (3) @(negedge clk_s);
    check(sel_ch == SEL_HSNR, "|x| == th_high does not switch");
    hdr_out = 9'sd41; @(negedge clk_s);
    check(sel_ch == SEL_HDR, "|x| = th_high+1 switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
