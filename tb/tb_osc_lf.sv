// tb_osc_lf: measures LCLK and CKA periods of the oscillator model at its
// default 20.15 Hz and checks the quadrature of CKA and CKB.
`timescale 1ns/1ps
module tb_osc_lf;
  logic cka, ckb, ckc, ckd, lclk;
  int checks = 0, failures = 0;
  realtime t0, t1, ta0, ta1;

  osc_lf dut (.*);

  initial begin
    #(2.0e9);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge lclk); t0 = $realtime;
    @(posedge lclk); t1 = $realtime;
    checks++;
    if ((t1 - t0) < 49.0e6 || (t1 - t0) > 50.3e6) begin failures++; $display("FAIL LCLK period %f", t1 - t0); end
    @(posedge cka); ta0 = $realtime;
    @(posedge cka); ta1 = $realtime;
    checks++;
    if ((ta1 - ta0) < 98.0e6 || (ta1 - ta0) > 100.6e6) begin failures++; $display("FAIL CKA period %f", ta1 - ta0); end
    @(posedge cka); #1;
    checks++;
    if (ckb !== 1'b0 || ckd !== 1'b1 || ckc !== 1'b0) begin failures++; $display("FAIL phases"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
