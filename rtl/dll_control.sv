// Feedback control logic of the delay-line DLL: a saturating up/down counter
// that sets the delay-line IDAC code fb.
//   th_d = 0            -> fb + 1 (more current, shorter delay)
//   th_d = 1, th_u = 0  -> hold   (dead zone)
//   th_d = 1, th_u = 1  -> fb - 1 (less current, longer delay)
// The dead zone keeps the code still once locked, avoiding the f_s/2 limit
// cycle (and output spur) a bang-bang loop would show with a coarse IDAC.
// en = 0 freezes the code (open-loop operation after a one-time calibration);
// load writes fb_init (a programming-interface register).
//
// Interface/timing: registered on the rising edge of clk_s; th_d/th_u come
// from the phase detector half a cycle earlier. The update table follows the
// paper; saturation, reset code and the load port are this design's choices.
`timescale 1ns / 1ps
module dll_control #(
  parameter int unsigned W          = 5,
  parameter logic [W-1:0] RESET_CODE = '0
) (
  input  logic         clk_s,
  input  logic         rst_n,
  input  logic         en,
  input  logic         load,
  input  logic [W-1:0] fb_init,
  input  logic         th_d,
  input  logic         th_u,
  output logic [W-1:0] fb
);
  always_ff @(posedge clk_s or negedge rst_n)
    if (!rst_n)                     fb <= RESET_CODE;
    else if (load)                  fb <= fb_init;
    else if (en) begin
      if (!th_d) begin
        if (fb != '1) fb <= fb + 1'b1;
      end else if (th_u) begin
        if (fb != '0) fb <= fb - 1'b1;
      end
    end
endmodule
