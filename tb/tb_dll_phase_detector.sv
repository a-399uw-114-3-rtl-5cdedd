// Testbench for dll_phase_detector: random levels on ph_last/ph_extra are
// applied just before each falling edge of clk_s and must appear on
// th_d/th_u after that edge and not change on the rising edge.
`timescale 1ns / 1ps
module tb_dll_phase_detector;
  logic clk_s = 0, rst_n = 1, ph_last, ph_extra, th_d, th_u;
  int checks = 0, failures = 0;
  dll_phase_detector dut (.clk_s, .rst_n, .ph_last, .ph_extra, .th_d, .th_u);
  always #50 clk_s = ~clk_s;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic a, b;
    ph_last = 0; ph_extra = 0;
    #1 rst_n = 0; #10 rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      @(posedge clk_s); #10;
      a = 1'($urandom); b = 1'($urandom);
      ph_last = a; ph_extra = b;
      @(negedge clk_s); #1;
      ph_last = ~a; ph_extra = ~b;      // change after the edge
      checks++;
      if (th_d !== a || th_u !== b) begin failures++; $display("FAIL got %b%b exp %b%b", th_d, th_u, a, b); end
      @(posedge clk_s); #1;
      checks++;
      if (th_d !== a || th_u !== b) begin failures++; $display("FAIL changed on rising edge"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
