// tb_sha256_core: checks the SHA2-256 digests of "abc" (one block) and of
// the two-block FIPS 180-2 message "abcdbcdecdef...nopq", and the 65-cycle
// compression latency.
module tb_sha256_core;
  logic clk = 0, rst_n = 0, init = 0, start = 0;
  logic [511:0] block;
  logic busy, done;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.clk, .rst_n, .init, .start, .block, .busy, .done, .digest);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compress(input logic [511:0] blk);
    int cyc = 0;
    @(negedge clk); block = blk; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 65) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    logic [447:0] msg2;
    block = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    compress({24'h616263, 8'h80, 416'h0, 64'd24});
    checks++;
    if (digest !== 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad) begin
      failures++; $display("FAIL abc %h", digest);
    end
    msg2 = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    compress({msg2, 8'h80, 56'h0});
    compress({448'h0, 64'd448});
    checks++;
    if (digest !== 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1) begin
      failures++; $display("FAIL msg2 %h", digest);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
