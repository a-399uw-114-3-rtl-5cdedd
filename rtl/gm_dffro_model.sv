// Behavioural model (not synthesizable) of one oscillator branch: the
// source-degenerated GM, the 16-phase differential feed-forward ring
// oscillator (DFF-RO) it drives, and the level shifters after it.
// The GM converts the branch voltage into a current and the oscillator
// turns the current into frequency, modelled together as an ideal
// voltage-to-frequency law f = F0_HZ + KVCO_HZ_PER_V * vin, clipped to
// [0, FMAX_HZ] (the HSNR GM is current-limited to 2 i_bias; the HDR branch
// stops when its current reaches zero). One oscillation passes through 32
// ring states s = 0..31; phase k is high for states with (s-k-1) mod 32 < 16,
// the ordering for which the encoder's XOR network yields a Gray code.
// Noise, flicker and the real transfer-curve nonlinearity are not modelled.
//
// Interface/timing: vin is re-read at every ring-state step (every
// 1/(32 f) seconds); en = 0 stops the ring. Time unit 1 ns.
`timescale 1ns / 1ps
module gm_dffro_model #(
  parameter real F0_HZ         = 6.0e6,
  parameter real KVCO_HZ_PER_V = 6.0e7,
  parameter real FMAX_HZ       = 12.0e6,
  parameter int  INIT_STATE    = 0
) (
  input  real         vin,
  input  logic        en,
  output logic [15:0] phi
);
  int  state;
  real f, step_ns;

  function automatic logic [15:0] phases(input int s);
    logic [15:0] p;
    for (int k = 0; k < 16; k++) p[k] = (((s - k - 1 + 64) % 32) < 16);
    return p;
  endfunction

  initial begin
    state = INIT_STATE % 32;
    phi   = phases(state);
    forever begin
      f = F0_HZ + KVCO_HZ_PER_V * vin;
      if (f > FMAX_HZ) f = FMAX_HZ;
      if (!en || f < 1.0e3) begin
        #10;                       // stopped: poll again later
      end else begin
        step_ns = 1.0e9 / (32.0 * f);
        #(step_ns);
        state = (state + 1) % 32;
        phi   = phases(state);
      end
    end
  end
endmodule
