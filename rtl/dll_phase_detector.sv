// Dead-zone phase detector of the delay-line clock multiplier.
// Two flip-flops sample the last delay-line tap (th_d) and the same tap after
// a small extra delay (th_u). With the taps spaced T/16, the line is in lock
// when its total delay is T/2, i.e. when the rising edge of f_s reaches the
// last tap together with the falling edge of f_s. Sampling on that falling
// edge gives three cases: th_d=0 (line too slow), th_d=1/th_u=0 (edge between
// the two sampled phases: dead zone) and th_d=1/th_u=1 (line too fast).
//
// Interface/timing: ph_last/ph_extra asynchronous, outputs registered on the
// falling edge of clk_s. The two flip-flops and the extra delay follow the
// paper's schematic; the falling sampling edge is this design's choice,
// derived from the T/16 tap spacing.
`timescale 1ns / 1ps
module dll_phase_detector (
  input  logic clk_s,
  input  logic rst_n,
  input  logic ph_last,
  input  logic ph_extra,
  output logic th_d,
  output logic th_u
);
  always_ff @(negedge clk_s or negedge rst_n)
    if (!rst_n) begin
      th_d <= 1'b0;
      th_u <= 1'b0;
    end else begin
      th_d <= ph_last;
      th_u <= ph_extra;
    end
endmodule
