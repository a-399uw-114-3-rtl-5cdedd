// Testbench for dll_control: checks the three-state update table
// (th_d=0: +1, th_d=1/th_u=0: hold, th_d=1/th_u=1: -1), saturation at
// 0 and 31, the hold when en = 0 and the load of fb_init, against a
// reference counter kept in the testbench.
`timescale 1ns / 1ps
module tb_dll_control;
  logic clk_s = 0, rst_n = 1, en, load, th_d, th_u;
  logic [4:0] fb_init, fb;
  int checks = 0, failures = 0, ref_fb;
  dll_control #(.W(5)) dut (.clk_s, .rst_n, .en, .load, .fb_init, .th_d, .th_u, .fb);
  always #50 clk_s = ~clk_s;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 1; load = 0; th_d = 1; th_u = 0; fb_init = 0;
    #1 rst_n = 0; #10 rst_n = 1;
    ref_fb = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk_s);
      checks++;
      if (int'(fb) != ref_fb) begin failures++; $display("FAIL i=%0d fb=%0d ref=%0d", i, fb, ref_fb); end
      en = ($urandom % 8) != 0; load = ($urandom % 50) == 0; fb_init = 5'($urandom);
      // biased so that both rails are reached
      case ((i / 300) % 2)
        0: begin th_d = ($urandom % 4) == 0; th_u = 1'($urandom); end
        default: begin th_d = ($urandom % 4) != 0; th_u = ($urandom % 4) != 0; end
      endcase
      if (load) ref_fb = int'(fb_init);
      else if (en) begin
        if (!th_d) ref_fb = (ref_fb < 31) ? ref_fb + 1 : 31;
        else if (th_u) ref_fb = (ref_fb > 0) ? ref_fb - 1 : 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
