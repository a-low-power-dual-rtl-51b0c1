// osc_lf: behavioural model (not synthesizable logic) of the always-on
// gate-leakage low-frequency oscillator.
//
// The real circuit is two identical self-timed stages connected back to back
// (each resets the other), with gate-leakage transistors setting the time
// constant. It produces a four-phase clock CKA..CKD, and an XOR of two of
// the phases gives LCLK at twice the CKA frequency. This model produces four
// square waves a quarter period apart and LCLK = CKA xor CKB, at the paper's
// operating point: LCLK 20.15 Hz (CKA 10.07 Hz) at VDI = 0.85 V. The model's
// phase ordering and 50 % duty cycle are simplifications; the frequency is a
// parameter so that testbenches can run it faster.
// Timescale: delays are in ns.
`timescale 1ns/1ps
module osc_lf #(
  parameter real LCLK_HZ = 20.15
) (
  output logic cka,
  output logic ckb,
  output logic ckc,
  output logic ckd,
  output logic lclk
);
  // one quarter of the CKA period = half a LCLK period
  localparam real QUARTER_NS = 1.0e9 / (2.0 * LCLK_HZ);

  logic [1:0] phase = 2'd0;   // quarter of the CKA period

  always begin
    #(QUARTER_NS);
    phase = phase + 2'd1;
  end

  assign cka = (phase == 2'd0) || (phase == 2'd1);
  assign ckb = (phase == 2'd1) || (phase == 2'd2);
  assign ckc = !cka;
  assign ckd = !ckb;
  assign lclk = cka ^ ckb;
endmodule
