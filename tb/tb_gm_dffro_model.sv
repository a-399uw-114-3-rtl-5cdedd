// Testbench for the oscillator model: the frequency is measured from the
// period of phi15 for several input voltages and compared with
// F0 + KVCO * vin, clipped to [0, FMAX]; all 16 phases must change once
// per half period each, in order (one phase change per ring state).
`timescale 1ns / 1ps
module tb_gm_dffro_model;
  real vin;
  logic en;
  logic [15:0] phi;
  int checks = 0, failures = 0;

  gm_dffro_model #(.F0_HZ(6.0e6), .KVCO_HZ_PER_V(6.0e7), .FMAX_HZ(12.0e6)) dut (.vin, .en, .phi);

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nchg;
  logic [15:0] last;
  always @(phi) begin
    if ($countones(phi ^ last) != 1) nchg = -100000;
    else nchg++;
    last = phi;
  end

  task automatic meas(input real v);
    realtime t0, t1;
    real f, fexp;
    vin = v;
    @(posedge phi[15]);
    @(posedge phi[15]); t0 = $realtime; nchg = 0;
    repeat (10) @(posedge phi[15]);
    t1 = $realtime;
    f = 10.0 / ((t1 - t0) * 1.0e-9);
    fexp = 6.0e6 + 6.0e7 * v;
    if (fexp > 12.0e6) fexp = 12.0e6;
    checks++;
    if (f > fexp * 1.002 || f < fexp * 0.998) begin failures++; $display("FAIL v=%g f=%g exp=%g", v, f, fexp); end
    checks++;
    if (nchg != 320) begin failures++; $display("FAIL v=%g phase changes %0d", v, nchg); end
  endtask

  initial begin
    en = 1; vin = 0; last = phi;
    #1 last = phi;
    meas(0.0); meas(0.05); meas(-0.05); meas(-0.09); meas(0.2);
    // stopped branch
    vin = -0.2; #2000;
    begin
      logic [15:0] p0;
      p0 = phi;
      #5000;
      checks++;
      if (phi !== p0) begin failures++; $display("FAIL ring not stopped at f<=0"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
