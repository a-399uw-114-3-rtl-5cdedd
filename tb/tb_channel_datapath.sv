// Testbench for channel_datapath. Two ideal 16-phase rings (p and n
// branches) are stepped by time-driven processes at frequencies fp and fn;
// f_s = 3.072 MHz and f_ss = 8 f_s (uniform). The channel output must settle
// to 4 * 32 * (fp - fn) / f_ss, i.e. the state-count difference per f_ss
// cycle times the CIC gain of 4, averaged over 32 output samples, and
// produce one word per f_s period.
`timescale 1ns / 1ps
module tb_channel_datapath;
  localparam real T_NS = 1.0e9 / 3.072e6;
  logic [15:0] phi_p, phi_n;
  logic clk_ss = 0, clk_s = 0, rst_n = 1;
  logic signed [8:0] dout;
  logic rr_p, rr_n;
  int checks = 0, failures = 0;
  real fp, fn;

  channel_datapath dut (.phi_p, .phi_n, .clk_ss, .clk_s, .rst_n, .dout, .rr_p, .rr_n);

  function automatic logic [15:0] phases(input int st);
    logic [15:0] p;
    for (int k = 0; k < 16; k++) p[k] = (((st - k - 1 + 64) % 32) < 16);
    return p;
  endfunction

  initial begin : ring_p
    int s = 0;
    phi_p = phases(0);
    forever begin #(1.0e9 / (32.0 * fp)); s++; phi_p = phases(s); end
  end
  initial begin : ring_n
    int s = 5;
    phi_n = phases(5);
    forever begin #(1.0e9 / (32.0 * fn)); s++; phi_n = phases(s); end
  end
  initial forever begin
    clk_s = 1;
    for (int k = 0; k < 8; k++) begin
      if (k == 4) clk_s = 0;
      #(T_NS / 16.0) clk_ss = 1;
      #(T_NS / 16.0) clk_ss = 0;
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real a, input real b);
    real expv, sum;
    fp = a; fn = b;
    repeat (12) @(posedge clk_s);
    sum = 0;
    for (int i = 0; i < 32; i++) begin
      @(posedge clk_s); #1;
      sum += real'(dout);
    end
    expv = 4.0 * 32.0 * (fp - fn) / (8.0 * 3.072e6);
    checks++;
    if (sum / 32.0 > expv + 0.3 || sum / 32.0 < expv - 0.3) begin
      failures++; $display("FAIL fp=%g fn=%g mean=%g expected=%g", fp, fn, sum / 32.0, expv);
    end else $display("ok fp=%g fn=%g mean=%g expected=%g", fp, fn, sum / 32.0, expv);
  endtask

  initial begin
    fp = 6.0e6; fn = 6.0e6;
    #1 rst_n = 0;
    #100 rst_n = 1;
    repeat (20) @(posedge clk_s);
    checks++;
    if (!(rr_p && rr_n)) begin failures++; $display("FAIL encoders not started"); end
    run(6.0e6, 6.0e6);
    run(9.0e6, 3.0e6);
    run(2.0e6, 10.0e6);
    run(11.9e6, 0.2e6);
    run(6.5e6, 5.2e6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
