// tb_osc_hf: checks the 660 kHz period of the HCLK model and that the clock
// stops while disabled and starts again when enabled.
`timescale 1ns/1ps
module tb_osc_hf;
  logic en = 0, hclk;
  int checks = 0, failures = 0, edges;
  realtime t0, t1;

  osc_hf dut (.*);

  initial begin
    #(1.0e6);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    edges = 0;
    fork begin #20000; end begin forever begin @(posedge hclk); edges++; end end join_any
    disable fork;
    checks++; if (edges != 0) begin failures++; $display("FAIL runs while disabled"); end
    en = 1;
    @(posedge hclk); t0 = $realtime;
    @(posedge hclk); t1 = $realtime;
    checks++;
    if ((t1 - t0) < 1510.0 || (t1 - t0) > 1520.0) begin failures++; $display("FAIL period %f", t1 - t0); end
    en = 0; #5000;
    edges = 0;
    fork begin #20000; end begin forever begin @(posedge hclk); edges++; end end join_any
    disable fork;
    checks++; if (edges != 0) begin failures++; $display("FAIL runs after disable"); end
    en = 1;
    fork begin #20000; end begin forever begin @(posedge hclk); edges++; end end join_any
    disable fork;
    checks++; if (edges < 10) begin failures++; $display("FAIL no restart %0d", edges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
