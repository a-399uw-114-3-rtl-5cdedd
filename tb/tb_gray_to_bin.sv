// Testbench for gray_to_bin: all 64 codes of the 6-bit Gray code are
// generated from a binary counter (g = b ^ (b >> 1)) and the decoder must
// return the counter value.
`timescale 1ns / 1ps
module tb_gray_to_bin;
  logic [5:0] g, b;
  int checks = 0, failures = 0;
  gray_to_bin #(.W(6)) dut (.g, .b);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      g = 6'(i) ^ (6'(i) >> 1);
      #1;
      checks++;
      if (b !== 6'(i)) begin
        failures++;
        $display("FAIL gray %b -> %0d, expected %0d", g, b, i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
