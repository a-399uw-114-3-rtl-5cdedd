// Testbench for cic_decimator. Eight f_ss pulses per f_s period (uniform,
// then non-uniform with all pulses bunched early). din is a wrapping 13-bit
// counter that advances by r per f_ss cycle (r may be negative). The
// decimated output must settle to 4*r (gain M^2/16 = 4) within +/-1 LSB per
// sample, average to 4*r over 32 samples, and produce one new word per f_s.
`timescale 1ns / 1ps
module tb_cic_decimator;
  logic clk_ss = 0, clk_s = 0, rst_n = 1;
  logic [12:0] din;
  logic signed [8:0] dout;
  int checks = 0, failures = 0;
  int r;
  bit bunched;

  cic_decimator dut (.clk_ss, .clk_s, .rst_n, .din, .dout);

  // f_s period 320 ns; 8 f_ss pulses per period
  initial begin
    forever begin
      clk_s = 1;
      fork
        begin #160 clk_s = 0; end
        begin
          for (int k = 0; k < 8; k++) begin
            #(bunched ? 12 : 20) clk_ss = 1;
            #(bunched ? 6 : 20)  clk_ss = 0;
          end
        end
      join
      #(bunched ? 320 - 144 : 0);
    end
  end

  always @(posedge clk_ss) din <= din + 13'(r);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int rr, input bit b);
    int sum, n_new;
    logic signed [8:0] last;
    r = rr; bunched = b;
    repeat (8) @(posedge clk_s);
    sum = 0;
    for (int i = 0; i < 32; i++) begin
      @(posedge clk_s); #1;
      checks++;
      if (int'(dout) > 4 * r + 1 || int'(dout) < 4 * r - 1) begin
        failures++; $display("FAIL r=%0d dout=%0d", r, dout);
      end
      sum += int'(dout);
    end
    checks++;
    if (sum > 32 * 4 * r + 2 || sum < 32 * 4 * r - 2) begin
      failures++; $display("FAIL r=%0d mean %0d/32", r, sum);
    end
    last = dout;
  endtask

  initial begin
    din = 0; r = 0; bunched = 0;
    #1 rst_n = 0;
    #50 rst_n = 1;
    run(7, 0); run(15, 0); run(-9, 0); run(0, 0); run(13, 1); run(-15, 1); run(3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
