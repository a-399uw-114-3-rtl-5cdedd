// Testbench for the delay-line model. For IDAC codes 8, 16, 24 and a PVT
// scale of 1.0 and 0.6 it checks: tap k follows f_s after (k+1) buffer
// delays, buffer delay = pvt * D_UNIT / (code + offset); the extra phase
// lags the last tap by a quarter buffer; and fss shows 8 rising edges per
// f_s period whenever the total delay is below T/2.
`timescale 1ns / 1ps
module tb_ccdl_model;
  localparam real T_NS = 1.0e9 / 3.072e6;
  logic fs = 0;
  logic [4:0] fb;
  real pvt;
  logic [7:0] taps;
  logic fss, ph_last, ph_extra;
  int checks = 0, failures = 0;
  int npulse;

  ccdl_model dut (.fs, .fb, .pvt_scale(pvt), .taps, .fss, .ph_last, .ph_extra);
  always #(T_NS / 2.0) fs = ~fs;
  always @(posedge fss) npulse++;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic meas(input int code, input real p);
    realtime t0, tl, te;
    real d, dexp;
    fb = 5'(code); pvt = p;
    repeat (3) @(posedge fs);
    t0 = $realtime;
    @(posedge ph_last); tl = $realtime;
    @(posedge ph_extra); te = $realtime;
    dexp = p * 814.0 / (real'(code) + 24.0);
    d = (tl - t0) / 8.0;
    checks++;
    if (d > dexp + 0.01 || d < dexp - 0.01) begin failures++; $display("FAIL code=%0d buffer delay %g exp %g", code, d, dexp); end
    checks++;
    if ((te - tl) > 0.25 * dexp + 0.01 || (te - tl) < 0.25 * dexp - 0.01) begin failures++; $display("FAIL extra delay %g", te - tl); end
    if (8.0 * dexp < T_NS / 2.0) begin
      @(posedge fs); npulse = 0;
      repeat (4) @(posedge fs);
      checks++;
      if (npulse != 32) begin failures++; $display("FAIL code=%0d pvt=%g fss pulses %0d in 4 periods", code, p, npulse); end
    end
  endtask

  initial begin
    fb = 16; pvt = 1.0;
    meas(16, 1.0); meas(24, 1.0); meas(8, 0.6); meas(31, 1.0); meas(16, 0.6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
