// tb_touch_detector: sweeps the FSR resistance through the 2 kOhm threshold
// and checks that TOUCH follows on the next clock edge and TOUCH_B is its
// complement.
module tb_touch_detector;
  logic clk = 0, touch, touch_b;
  logic [31:0] r_fsr_ohm = 32'd100000;
  int checks = 0, failures = 0;

  touch_detector dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vals [] = '{100000, 8000, 2001, 2000, 1999, 500, 125, 1999, 2000, 9000};
    @(negedge clk);
    foreach (vals[i]) begin
      r_fsr_ohm = vals[i];
      @(negedge clk);
      checks++;
      if (touch !== (vals[i] < 2000) || touch_b !== !touch) begin
        failures++; $display("FAIL R=%0d touch=%b", vals[i], touch);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
