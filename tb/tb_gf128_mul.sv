// tb_gf128_mul: checks GHASH products against a bit-by-bit reference written
// from the GCM specification, against the GHASH value of GCM test case 2,
// and checks the 16-cycle latency of the default 8-bit digit.
module tb_gf128_mul;
  logic clk = 0, rst_n = 0, start = 0;
  logic [127:0] x, y, z;
  logic busy, done;
  int checks = 0, failures = 0;

  gf128_mul dut (.clk, .rst_n, .start, .x, .y, .busy, .done, .z);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] ref_mul(input logic [127:0] a, input logic [127:0] b);
    logic [127:0] zz = '0, vv = b;
    for (int i = 0; i < 128; i++) begin
      if (a[127-i]) zz ^= vv;
      vv = vv[0] ? ((vv >> 1) ^ {8'hE1, 120'h0}) : (vv >> 1);
    end
    return zz;
  endfunction

  task automatic mul(input logic [127:0] a, input logic [127:0] b, output logic [127:0] r);
    int cyc = 0;
    @(negedge clk); x = a; y = b; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    r = z;
    checks++;
    if (cyc != 16) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    logic [127:0] r, h, c, t;
    x = '0; y = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // GCM test case 2: H, C, len block; GHASH = f38cbb1b...
    h = 128'h66e94bd4ef8a2c3b884cfa59ca342b2e;
    c = 128'h0388dace60b6a392f328c2b971b2fe78;
    mul(c, h, t);
    mul(t ^ {64'd0, 64'd128}, h, r);
    checks++;
    if (r !== 128'hf38cbb1ad69223dcc3457ae5b6b0f885) begin failures++; $display("FAIL ghash %h", r); end
    // one is 0x80..0 in GCM bit order
    mul({1'b1, 127'h0}, c, r);
    checks++; if (r !== c) begin failures++; $display("FAIL identity"); end
    for (int n = 0; n < 40; n++) begin
      logic [127:0] a, b;
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      mul(a, b, r);
      checks++;
      if (r !== ref_mul(a, b)) begin failures++; $display("FAIL %h*%h", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
