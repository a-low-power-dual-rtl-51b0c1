// second_factor_auth: touch-based second-factor verification.
//
// The server sends the implant (inside the encrypted command record) and the
// user (by text message) the same one-time tap code, e.g. (3,1,4). After
// `start`, this unit counts the user's taps in groups and checks that group
// k has exactly code[k] taps, for code_len groups. It is the "simple
// pattern-matching logic" of the paper; how groups are delimited (a low gap
// of GAP_TICKS LCLK ticks, see tap_counter) and the time limit are this
// design's choices.
//
// Clocking: runs on HCLK; `lclk` and `touch` come from the always-on domain
// and are synchronised by two flip-flops each; every LCLK rising edge is one
// tick. Interface: pulse `start` with code_len (1..MAX_DIGITS) and code
// (digit k in code[k]); `done` pulses with `pass` once the last group ends,
// at the first group that does not match, or after TIMEOUT_TICKS ticks.
module second_factor_auth
  import imd_pkg::*;
#(
  parameter int unsigned GAP_TICKS     = 16,   // about 0.8 s at 20.15 Hz
  parameter int unsigned TIMEOUT_TICKS = 1200  // about 60 s at 20.15 Hz
) (
  input  logic clk,
  input  logic rst_n,
  input  logic lclk,
  input  logic touch,
  input  logic start,
  input  logic [3:0] code_len,
  input  logic [MAX_DIGITS-1:0][DIGIT_W-1:0] code,
  output logic busy,
  output logic done,
  output logic pass,
  output logic [3:0] taps_in_group   // live count, for observation
);
  logic [2:0] lclk_sync_q;
  logic [1:0] touch_sync_q;
  logic       tick, tap, group_end;
  logic [3:0] group_taps, digit_q;
  logic [$clog2(TIMEOUT_TICKS+1)-1:0] time_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin lclk_sync_q <= '0; touch_sync_q <= '0; end
    else begin
      lclk_sync_q  <= {lclk_sync_q[1:0], lclk};
      touch_sync_q <= {touch_sync_q[0], touch};
    end
  end
  assign tick = lclk_sync_q[1] && !lclk_sync_q[2];

  tap_counter #(.GAP_TICKS(GAP_TICKS)) u_taps (
    .clk, .rst_n, .clear(!busy), .tick, .touch(touch_sync_q[1]),
    .tap, .group_end, .group_taps);
  assign taps_in_group = group_taps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; pass <= 1'b0; digit_q <= '0; time_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (code_len == 4'd0 || code_len > 4'(MAX_DIGITS)) begin
            done <= 1'b1; pass <= 1'b0;
          end else begin
            busy <= 1'b1; digit_q <= '0; time_q <= '0;
          end
        end
      end else if (group_end) begin
        if (group_taps != code[digit_q[2:0]]) begin
          busy <= 1'b0; done <= 1'b1; pass <= 1'b0;
        end else if (digit_q == code_len - 4'd1) begin
          busy <= 1'b0; done <= 1'b1; pass <= 1'b1;
        end else begin
          digit_q <= digit_q + 4'd1;
        end
      end else if (tick) begin
        if (time_q == ($bits(time_q))'(TIMEOUT_TICKS - 1)) begin
          busy <= 1'b0; done <= 1'b1; pass <= 1'b0;
        end else begin
          time_q <= time_q + 1'b1;
        end
      end
    end
  end
endmodule
