// tap_counter: groups taps of the touch signal, one step per LCLK tick.
//
// A tap is a rising edge of `touch` seen on a tick. A group of taps ends once
// `touch` has been low for GAP_TICKS ticks after the last tap; `group_end`
// then pulses for one clock with `group_taps` (saturating at 15). Used both
// by the wake-up logic (clocked by LCLK, `tick` tied high) and by the
// second-factor unit (clocked by HCLK, `tick` on every LCLK rising edge).
// The paper does not say how tap groups are separated; the low-time gap rule
// and its length are this design's choices.
module tap_counter #(
  parameter int unsigned GAP_TICKS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       tick,
  input  logic       touch,
  output logic       tap,         // a tap was seen on this tick
  output logic       group_end,
  output logic [3:0] group_taps
);
  logic       prev_q, in_group_q;
  logic [3:0] cnt_q;
  logic [$clog2(GAP_TICKS+1)-1:0] idle_q;

  assign tap        = tick && touch && !prev_q;
  assign group_taps = cnt_q;

  logic [3:0] cnt_base;
  assign cnt_base = group_end ? 4'd0 : cnt_q;   // a new group starts after group_end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q <= 1'b0; in_group_q <= 1'b0; cnt_q <= '0; idle_q <= '0; group_end <= 1'b0;
    end else begin
      group_end <= 1'b0;
      if (clear) begin
        prev_q <= touch; in_group_q <= 1'b0; cnt_q <= '0; idle_q <= '0;
      end else begin
        if (group_end) cnt_q <= '0;
        if (tick) begin
          prev_q <= touch;
          if (tap) begin
            in_group_q <= 1'b1;
            idle_q     <= '0;
            cnt_q      <= (cnt_base == 4'd15) ? 4'd15 : cnt_base + 4'd1;
          end else if (in_group_q && !touch) begin
            if (idle_q == ($bits(idle_q))'(GAP_TICKS - 1)) begin
              group_end  <= 1'b1;
              in_group_q <= 1'b0;
              idle_q     <= '0;
            end else begin
              idle_q <= idle_q + 1'b1;
            end
          end else begin
            idle_q <= '0;
          end
        end
      end
    end
  end
endmodule
