// touch_detector: behavioural model (not synthesizable logic) of the clocked
// resistive touch comparator.
//
// The real circuit is a regenerative latch whose two pull-down paths run
// through an off-chip fixed resistor (2 kOhm) and the off-chip force
// sensitive resistor (FSR). While CLK is high the latch resolves towards the
// side with the lower resistance; an SR latch holds TOUCH and its complement
// between evaluations. Pressing the FSR lowers its resistance below the
// threshold and sets TOUCH. The model compares the FSR resistance, given in
// ohms on `r_fsr_ohm`, against R_REF_OHM on every rising CLK edge (LCLK in
// this design). It draws no static current in silicon, which a model cannot
// show.
module touch_detector #(
  parameter int unsigned R_REF_OHM = 2000
) (
  input  logic        clk,
  input  logic [31:0] r_fsr_ohm,
  output logic        touch,
  output logic        touch_b
);
  logic touch_q = 1'b0;

  always @(posedge clk) touch_q <= (r_fsr_ohm < R_REF_OHM);

  assign touch   = touch_q;
  assign touch_b = ~touch_q;
endmodule
