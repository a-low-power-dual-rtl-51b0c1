// sha256_core: SHA2-256 compression function, one full round per cycle.
//
// As in the paper, the round function is a complete hardware datapath. The
// message schedule is a 16-word sliding window, so a 512-bit block is
// consumed in 64 rounds plus one cycle to add the result into the hash value.
// Padding is not done here: the caller supplies whole padded blocks.
//
// Interface: pulse `init` to load the initial hash value H(0). Pulse `start`
// with `block` (word 0 in bits [511:480]) while `busy` is low; `done` pulses
// 65 edges after the edge that sampled `start`, and `digest` (H0 in bits
// [255:224]) then holds the chained hash value.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         start,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [255:0] H_INIT = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  function automatic logic [31:0] k_of(input logic [5:0] i);
    logic [31:0] k [64] = '{
      32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
      32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
      32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
      32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
      32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
      32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
      32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
      32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    return k[i];
  endfunction

  function automatic logic [31:0] rotr(input logic [31:0] v, input int n);
    return (v >> n) | (v << (32 - n));
  endfunction

  logic [255:0] h_q;           // chained hash value
  logic [31:0]  a, b, c, d, e, f, g, h;
  logic [31:0]  w_q [16];
  logic [6:0]   round_q;       // 0 idle, 1..64 rounds, 65 final add
  logic [31:0]  t1, t2, w_new;

  assign busy   = (round_q != 7'd0);
  assign digest = h_q;

  always_comb begin
    t1 = h + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g))
           + k_of(6'(round_q - 7'd1)) + w_q[0];
    t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
    w_new = (rotr(w_q[14], 17) ^ rotr(w_q[14], 19) ^ (w_q[14] >> 10)) + w_q[9]
          + (rotr(w_q[1], 7) ^ rotr(w_q[1], 18) ^ (w_q[1] >> 3)) + w_q[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q <= H_INIT;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
      round_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (init && !busy) begin
        h_q <= H_INIT;
      end else if (start && !busy) begin
        {a, b, c, d, e, f, g, h} <= h_q;
        for (int i = 0; i < 16; i++) w_q[i] <= block[511-32*i -: 32];
        round_q <= 7'd1;
      end else if (round_q == 7'd65) begin
        h_q <= {h_q[255:224] + a, h_q[223:192] + b, h_q[191:160] + c, h_q[159:128] + d,
                h_q[127:96]  + e, h_q[95:64]   + f, h_q[63:32]    + g, h_q[31:0]    + h};
        round_q <= '0;
        done <= 1'b1;
      end else if (busy) begin
        {a, b, c, d, e, f, g, h} <= {t1 + t2, a, b, c, d + t1, e, f, g};
        for (int i = 0; i < 15; i++) w_q[i] <= w_q[i+1];
        w_q[15] <= w_new;
        round_q <= round_q + 7'd1;
      end
    end
  end
endmodule
