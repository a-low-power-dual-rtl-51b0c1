// tb_imd_security_chip: end-to-end test of the chip with LCLK sped up to
// 2 kHz (HCLK and SPI at the paper's 660 kHz and 125 kbps). Five sessions:
// both factors pass, a wrong tap code, the second factor skipped, a tampered
// command record and a final passing session; before them a 3-tap attempt
// that must not wake the chip. Each mechanism is counted and must occur.
`timescale 1ns/1ps
module tb_imd_security_chip;
  localparam real LCLK_HZ_TB = 2000.0;
  `include "imd_tb_body.svh"

  imd_security_chip #(.LCLK_HZ(LCLK_HZ_TB)) dut (.*);

  initial begin
    #(4000.0 * 1.0e9 / LCLK_HZ_TB);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial run_sessions(0);
endmodule
