// tb_second_factor_auth: HCLK runs 8x faster than LCLK. Checks the code
// (3,1,4) tapped correctly (pass), a wrong middle digit (fail at that group),
// too few groups (timeout fail), an invalid code length, and random codes.
module tb_second_factor_auth;
  import imd_pkg::*;
  localparam int GAP = 5, TMO = 200;
  logic clk = 0, lclk = 0, rst_n = 0, touch = 0, start = 0;
  logic [3:0] code_len = 0;
  logic [MAX_DIGITS-1:0][DIGIT_W-1:0] code = '0;
  logic busy, done, pass;
  logic [3:0] taps_in_group;
  int checks = 0, failures = 0;
  bit got_done; bit got_pass;

  second_factor_auth #(.GAP_TICKS(GAP), .TIMEOUT_TICKS(TMO)) dut (.*);
  always #5 clk = ~clk;
  always #40 lclk = ~lclk;
  always @(posedge clk) if (done) begin got_done = 1; got_pass = pass; end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic group(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge lclk); #1 touch = 1;
      repeat (2) @(posedge lclk); #1 touch = 0;
      repeat (2) @(posedge lclk);
    end
    repeat (GAP + 4) @(posedge lclk);
  endtask

  task automatic begin_code(input int len, input logic [MAX_DIGITS-1:0][DIGIT_W-1:0] c);
    got_done = 0;
    @(negedge clk); code_len = 4'(len); code = c; start = 1;
    @(negedge clk); start = 0;
  endtask

  task automatic wait_done();
    int t = 0;
    while (!got_done && t < 40 * TMO) begin @(posedge lclk); t++; end
  endtask

  initial begin
    logic [MAX_DIGITS-1:0][DIGIT_W-1:0] c;
    repeat (3) @(negedge clk); rst_n = 1;
    c = '0; c[0] = 3; c[1] = 1; c[2] = 4;
    begin_code(3, c); group(3); group(1); group(4); wait_done();
    check(got_done && got_pass, "(3,1,4) passes");
    begin_code(3, c); group(3); group(2);
    check(got_done && !got_pass, "wrong second digit fails at once");
    wait_done();
    begin_code(3, c); group(3); group(1); wait_done();
    check(got_done && !got_pass, "missing group times out");
    begin_code(0, c); repeat (3) @(posedge clk);
    check(got_done && !got_pass, "zero-length code rejected");
    for (int n = 0; n < 4; n++) begin
      int len = $urandom_range(1, 4);
      bit bad = (n == 2);
      c = '0;
      for (int k = 0; k < len; k++) c[k] = 4'($urandom_range(1, 5));
      begin_code(len, c);
      for (int k = 0; k < len; k++) group((bad && k == len - 1) ? int'(c[k]) + 1 : int'(c[k]));
      wait_done();
      check(got_done && got_pass == !bad, $sformatf("random code %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
