// wakeup_logic: always-on wake-up controller in the LCLK (about 20 Hz) domain.
//
// The user wakes the implant with a pre-defined tap pattern (4 taps in the
// paper). This block counts taps of the touch-detector output with
// tap_counter and raises `wakeup` when a group of exactly WAKE_TAPS taps has
// ended; a longer or shorter group is ignored, so stray pressure does not
// wake the authentication unit. `wakeup` then stays high (it also enables
// the 660 kHz oscillator) until the authentication control FSM raises
// `sleep_req`; while `sleep_req` is high, wakeup is low and taps are
// ignored. `sleep_req` comes from the HCLK domain and is synchronised here.
// The paper gives the 4-tap pattern and the LCLK clocking; the exact-count
// rule, the gap length and the sleep handshake are this design's choices.
// Timing: wakeup rises GAP_TICKS+2 LCLK edges after the 4th tap is released.
module wakeup_logic #(
  parameter int unsigned WAKE_TAPS = 4,
  parameter int unsigned GAP_TICKS = 16
) (
  input  logic lclk,
  input  logic rst_n,
  input  logic touch,       // touch-detector output, changes on LCLK
  input  logic sleep_req,   // from the HCLK domain
  output logic wakeup
);
  logic [1:0] sleep_sync_q;
  logic       tap, group_end;
  logic [3:0] group_taps;

  always_ff @(posedge lclk or negedge rst_n) begin
    if (!rst_n) sleep_sync_q <= '0;
    else        sleep_sync_q <= {sleep_sync_q[0], sleep_req};
  end

  tap_counter #(.GAP_TICKS(GAP_TICKS)) u_taps (
    .clk(lclk), .rst_n, .clear(sleep_sync_q[1] || wakeup), .tick(1'b1), .touch,
    .tap, .group_end, .group_taps);

  always_ff @(posedge lclk or negedge rst_n) begin
    if (!rst_n)                                               wakeup <= 1'b0;
    else if (sleep_sync_q[1])                                 wakeup <= 1'b0;
    else if (group_end && group_taps == 4'(WAKE_TAPS))        wakeup <= 1'b1;
  end
endmodule
