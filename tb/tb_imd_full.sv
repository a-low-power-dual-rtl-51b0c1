// tb_imd_full: one complete dual-factor session at the chip's default
// parameters: LCLK 20.15 Hz, HCLK 660 kHz, SPI 125 kbps, wake-up with 4
// taps, command record, tap code (3,1,4), result record, acknowledgement,
// Auth_OK. About 10 s of chip time.
`timescale 1ns/1ps
module tb_imd_full;
  localparam real LCLK_HZ_TB = 20.15;
  `include "imd_tb_body.svh"

  imd_security_chip dut (.*);

  initial begin
    #(60.0e9);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial run_sessions(1);
endmodule
