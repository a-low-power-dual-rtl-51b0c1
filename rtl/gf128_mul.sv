// gf128_mul: GHASH multiplier, Z = X * Y in GF(2^128) with the GCM
// polynomial x^128 + x^7 + x^2 + x + 1 and GCM's reflected bit order
// (bit 127 of the vector is the coefficient of x^0).
//
// The paper names AES-128-GCM but not how GHASH is built. This design uses
// the textbook shift-and-add algorithm of the GCM specification, processing
// DIGIT bits of X per clock cycle, so a product takes 128/DIGIT cycles.
//
// Interface: pulse `start` with x and y valid while `busy` is low; `done`
// pulses with `z` valid 128/DIGIT edges after the edge that sampled `start`.
module gf128_mul #(
  parameter int unsigned DIGIT = 8   // bits of X per cycle, divides 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] x,
  input  logic [127:0] y,
  output logic         busy,
  output logic         done,
  output logic [127:0] z
);
  localparam int unsigned STEPS = 128 / DIGIT;
  localparam logic [127:0] R = {8'hE1, 120'h0};

  logic [127:0] x_q, v_q, z_q;
  logic [$clog2(STEPS+1)-1:0] cnt_q;
  logic [127:0] v_n, z_n;

  always_comb begin
    v_n = v_q;
    z_n = z_q;
    for (int i = 0; i < DIGIT; i++) begin
      if (x_q[127-i]) z_n = z_n ^ v_n;
      v_n = v_n[0] ? ((v_n >> 1) ^ R) : (v_n >> 1);
    end
  end

  assign busy = (cnt_q != '0);
  assign z    = z_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; v_q <= '0; z_q <= '0; cnt_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        x_q   <= x;
        v_q   <= y;
        z_q   <= '0;
        cnt_q <= ($clog2(STEPS+1))'(STEPS);
      end else if (busy) begin
        x_q   <= x_q << DIGIT;
        v_q   <= v_n;
        z_q   <= z_n;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) done <= 1'b1;
      end
    end
  end
endmodule
