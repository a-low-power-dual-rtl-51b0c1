// tb_aes128_enc: checks AES-128 against published test vectors (FIPS-197
// appendix C.1 and the first block of the GCM specification's test case 2)
// and checks the 10-cycle latency from start to done.
module tb_aes128_enc;
  logic clk = 0, rst_n = 0, start = 0;
  logic [127:0] key, din, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  aes128_enc dut (.clk, .rst_n, .start, .key, .din, .busy, .done, .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp);
    int cyc = 0;
    @(negedge clk); key = k; din = p; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (dout !== exp) begin failures++; $display("FAIL aes %h -> %h exp %h", p, dout, exp); end
    checks++;
    if (cyc != 10) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    key = '0; din = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    // E(0^128, 0^96 || 0x00000002): GCM test case 2 keystream = ct xor pt
    run(128'h0, 128'h00000000000000000000000000000002, 128'h0388dace60b6a392f328c2b971b2fe78);
    // E(0,0) = H of GCM test case 1
    run(128'h0, 128'h0, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
