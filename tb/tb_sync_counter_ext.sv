// Testbench for sync_counter_ext. A reference count advances by a random
// 0..60 states per f_ss cycle; its 6-bit Gray code drives gs. The extended
// 13-bit counter must equal the reference count modulo 8192 one cycle
// later, including across many wrap-arounds.
`timescale 1ns / 1ps
module tb_sync_counter_ext;
  logic clk_ss = 0, rst_n = 1;
  logic [5:0] gs;
  logic [12:0] cnt;
  int checks = 0, failures = 0;
  longint unsigned total;

  sync_counter_ext dut (.clk_ss, .rst_n, .gs, .cnt);
  always #5 clk_ss = ~clk_ss;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    total = 0; gs = 0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk_ss);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk_ss);
      // previous sample has been absorbed at the last posedge
      checks++;
      if (cnt !== 13'(total)) begin failures++; $display("FAIL i=%0d cnt=%0d exp=%0d", i, cnt, 13'(total)); end
      total += (i < 1500) ? ($urandom % 61) : ($urandom % 8);
      gs = 6'(total) ^ (6'(total) >> 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
