// osc_hf: behavioural model (not synthesizable logic) of the ring oscillator
// that clocks the authentication unit with HCLK, about 660 kHz in the paper.
// It runs only while `en` is high (the unit is awake), stops low, and
// restarts within a half period of `en` rising. The frequency is a parameter.
// Timescale: delays are in ns.
`timescale 1ns/1ps
module osc_hf #(
  parameter real HCLK_HZ = 660.0e3
) (
  input  logic en,
  output logic hclk
);
  localparam real HALF_NS = 1.0e9 / (2.0 * HCLK_HZ);

  logic run = 1'b0;

  // HCLK toggles every half period while enabled and is held low otherwise
  always begin
    #(HALF_NS);
    run = en && !run;
  end

  assign hclk = run;
endmodule
