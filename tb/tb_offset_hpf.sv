// Testbench for offset_hpf. A reference of the difference equation
//   acc += ((x - x_prev) << 21) - (acc >>> 16),  y = acc >>> 9
// is computed in 64-bit integers in the testbench and compared sample by
// sample with the 23-bit output for a random input with a large DC offset.
// Also checks: the pass-band gain is 2^12 right after a step, and a DC
// input decays to below 1% after 5 time constants (5 * 2^16 samples), i.e.
// the offset is removed.
`timescale 1ns / 1ps
module tb_offset_hpf;
  logic clk_s = 0, rst_n = 1;
  logic signed [10:0] din;
  logic signed [22:0] dout;
  int checks = 0, failures = 0;
  longint acc, xd, dx;

  offset_hpf dut (.clk_s, .rst_n, .din, .dout);
  always #5 clk_s = ~clk_s;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int peak;
    din = 0;
    #1 rst_n = 0; #10 rst_n = 1;
    acc = 0; xd = 0; dx = 0;
    // random signal around an offset of 300, exact comparison
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk_s);
      checks++;
      if (longint'(dout) != (acc >>> 9)) begin
        failures++; if (failures < 10) $display("FAIL i=%0d dout=%0d ref=%0d", i, dout, acc >>> 9);
      end
      din = 11'(300 + int'($urandom % 401) - 200);
      // reference, same register timing as the filter: dx then acc
      acc = acc + (dx <<< 21) - (acc >>> 16);
      acc = longint'(32'(acc)); acc = (acc >= 64'sh80000000) ? acc - 64'sh100000000 : acc;
      dx = longint'(din) - xd; xd = longint'(din);
    end
    // step response: gain 2^12, then decay
    din = 0; repeat (400000) @(negedge clk_s);
    din = 11'sd500; repeat (3) @(negedge clk_s);
    peak = int'(dout);
    checks++;
    if (peak < 500 * 4096 - 4096 || peak > 500 * 4096) begin failures++; $display("FAIL step peak %0d", peak); end
    repeat (5 * 65536) @(negedge clk_s);
    checks++;
    if (int'(dout) > peak / 100 || int'(dout) < -peak / 100) begin failures++; $display("FAIL residual %0d", dout); end
    $display("step peak %0d residual %0d", peak, dout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
