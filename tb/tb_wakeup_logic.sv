// tb_wakeup_logic: taps patterns into the wake-up logic on LCLK. Three taps,
// five taps and four slow taps (one group each, gap exceeded) must not wake
// it; four taps must, after the group gap; sleep_req must clear wakeup and
// block taps while it is high.
module tb_wakeup_logic;
  localparam int GAP = 6;
  logic lclk = 0, rst_n = 0, touch = 0, sleep_req = 0, wakeup;
  int checks = 0, failures = 0;

  wakeup_logic #(.WAKE_TAPS(4), .GAP_TICKS(GAP)) dut (.*);
  always #5 lclk = ~lclk;

  initial begin
    repeat (20000) @(posedge lclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // n taps, each high for `on` ticks and low for `off` ticks
  task automatic taps(input int n, input int on, input int off);
    for (int i = 0; i < n; i++) begin
      @(negedge lclk); touch = 1;
      repeat (on) @(negedge lclk);
      touch = 0;
      repeat (off - 1) @(negedge lclk);
    end
  endtask

  task automatic settle(); repeat (3 * GAP) @(negedge lclk); endtask

  initial begin
    int t;
    repeat (3) @(negedge lclk); rst_n = 1;
    taps(3, 2, 3); settle(); check(!wakeup, "3 taps do not wake");
    taps(5, 2, 3); settle(); check(!wakeup, "5 taps do not wake");
    taps(4, 2, GAP + 2); settle(); check(!wakeup, "spread taps do not wake");
    taps(4, 2, 3);
    t = 0;
    while (!wakeup && t < 100) begin @(negedge lclk); t++; end
    check(wakeup, "4 taps wake");
    check(t >= GAP - 3 && t <= GAP + 2, $sformatf("wake delay %0d", t));
    taps(4, 2, 3); settle(); check(wakeup, "stays awake");
    @(negedge lclk); sleep_req = 1;
    repeat (3) @(negedge lclk);
    check(!wakeup, "sleep_req clears wakeup");
    taps(4, 2, 3); settle(); check(!wakeup, "taps ignored during sleep_req");
    sleep_req = 0; repeat (3) @(negedge lclk);
    taps(4, 3, 2); settle(); check(wakeup, "wakes again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
