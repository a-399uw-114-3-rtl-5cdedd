// Behavioural model (not synthesizable) of the current-controlled delay line
// (CCDL) clock multiplier: 8 buffers, each two current-starved inverters,
// whose starving current is set by a 5-bit IDAC; an XOR tree over the 8
// buffer outputs; and an extra delay after the last buffer for the
// dead-zone phase detector.
// Each edge of f_s travels down the line, and every tap it reaches toggles
// the XOR output, so one f_s period gives 16 toggles = 8 f_ss pulses. With
// taps spaced T/16 (total delay T/2) the pulses are uniform; otherwise they
// are non-uniform but still repeat every f_s period, which the multi-rate
// ADC tolerates.
// Buffer delay = pvt_scale * D_UNIT_NS / (fb + CODE_OFFSET) ns (more code,
// more current, shorter delay); the extra delay is EXTRA_FRAC of a buffer
// (half an inverter). The IDAC law and constants are this model's choice;
// with them the lock code at f_s = 3.072 MHz and pvt_scale = 1 is 17.
// The delays are computed at run time, so lint cannot prove them non-zero.
//
// Interface/timing: fs is the master clock, fb the IDAC code (sampled 1 ps
// after each edge of fs), taps/fss/ph_last/ph_extra are delayed copies. Time
// unit 1 ns.
`timescale 1ns / 1ps
module ccdl_model #(
  parameter int  N_BUF       = 8,
  parameter int  IDAC_W      = 5,
  parameter real D_UNIT_NS   = 814.0,
  parameter real CODE_OFFSET = 24.0,
  parameter real EXTRA_FRAC  = 0.25
) (
  input  logic              fs,
  input  logic [IDAC_W-1:0] fb,
  input  real               pvt_scale,
  output logic [N_BUF-1:0]  taps,
  output logic              fss,
  output logic              ph_last,
  output logic              ph_extra
);
  real d_buf;

  initial begin
    taps     = '0;
    ph_extra = 1'b0;
  end

  // Launch every f_s edge down the line (transport delay: edges of
  // consecutive half-periods never cancel each other).
  // The IDAC code is read 1 ps after the f_s edge, so a code written on that
  // edge already sets the speed of the edge being launched.
  always @(fs) begin
    automatic logic lvl = fs;
    #(0.001);
    d_buf = pvt_scale * D_UNIT_NS / (real'(fb) + CODE_OFFSET);
    for (int k = 0; k < N_BUF; k++) begin
      fork
        automatic logic [$clog2(N_BUF)-1:0] kk = $clog2(N_BUF)'(k);
        automatic real dly = d_buf * real'(k + 1) - 0.001;
        begin
          #(dly) taps[kk] = lvl;
        end
      join_none
    end
    fork
      automatic real dly = d_buf * (real'(N_BUF) + EXTRA_FRAC) - 0.001;
      begin
        #(dly) ph_extra = lvl;
      end
    join_none
  end

  assign ph_last = taps[N_BUF-1];
  assign fss     = ^taps;
endmodule
