// Testbench for phase_to_gray. The 16 phases of an ideal ring are stepped
// state by state (phase k high when (s-k-1) mod 32 < 16) and f_ss samples
// are taken after each step. Checks: the extensor stays cleared before the
// start-up detector fires; after the first falling edge of phi15 following
// start-up, gs equals the 6-bit reflected Gray code of the number of states
// advanced modulo 64; the low 4 bits always equal the 5-bit Gray code's low
// bits.
`timescale 1ns / 1ps
module tb_phase_to_gray;
  logic [15:0] phi;
  logic clk_ss = 0, rst_n = 1;
  logic [5:0] gs;
  logic rr;
  int checks = 0, failures = 0;
  int s;            // absolute ring state count
  int ref0;         // state count at which the extensor becomes consistent

  phase_to_gray dut (.phi, .clk_ss, .rst_n, .gs, .rr);

  function automatic logic [15:0] phases(input int st);
    logic [15:0] p;
    for (int k = 0; k < 16; k++) p[k] = (((st - k - 1 + 64) % 32) < 16);
    return p;
  endfunction
  function automatic logic [5:0] gray6(input int v);
    logic [5:0] b = 6'(v);
    return b ^ (b >> 1);
  endfunction

  task automatic sample();
    #2 clk_ss = 1; #2 clk_ss = 0; #1;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s = 3; phi = phases(s);
    #1 rst_n = 0;
    #4 rst_n = 1;
    // before reaching the start-up pattern
    for (int i = 0; i < 10; i++) begin
      s++; phi = phases(s); sample();
      checks++;
      if (rr !== 1'b0 || gs[5:4] !== 2'b00) begin failures++; $display("FAIL pre-start rr=%b gs=%b", rr, gs); end
    end
    ref0 = -1;
    for (int i = 0; i < 400; i++) begin
      s++; phi = phases(s); sample();
      if (rr && ref0 < 0 && (s % 32) == 0) ref0 = s;
      // low bits: 5-bit Gray code of s mod 32
      checks++;
      if (gs[3:0] !== 4'((s % 32) ^ ((s % 32) >> 1))) begin failures++; $display("FAIL low bits s=%0d gs=%b", s, gs); end
      if (ref0 >= 0) begin
        checks++;
        if (gs !== gray6(s - ref0)) begin
          failures++; $display("FAIL s=%0d gs=%b expected %b", s, gs, gray6(s - ref0));
        end
      end
    end
    checks++;
    if (ref0 < 0) begin failures++; $display("FAIL start-up never released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
