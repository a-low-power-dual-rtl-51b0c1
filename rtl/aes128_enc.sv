// aes128_enc: AES-128 block encryption, one full round per clock cycle.
//
// The paper implements the AES round function as a full 128-bit datapath in
// hardware; GCM only needs the forward cipher, so no decryption datapath is
// built. The round key is expanded on the fly next to the state, so no key
// schedule storage is needed. The S-box is computed (multiplicative inverse
// in GF(2^8) as x^254, then the FIPS-197 affine map) rather than tabulated.
//
// Interface: pulse `start` with `key` and `din` valid while `busy` is low.
// Timing: the clock edge that samples `start` latches din^key; rounds 1..10
// take one edge each, so `done` pulses and `dout` is valid 10 edges after the
// one that sampled `start`; dout stays valid until the next start. Port
// widths, the handshake and the latency are this design's choices.
module aes128_enc (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p = 8'h00; aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ aa;
      aa = aa[7] ? ((aa << 1) ^ 8'h1B) : (aa << 1);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox(input logic [7:0] x);
    logic [7:0] sq, inv, b;
    // x^254 = x^2 * x^4 * ... * x^128
    sq  = gmul(x, x);
    inv = sq;
    for (int i = 0; i < 6; i++) begin
      sq  = gmul(sq, sq);
      inv = gmul(inv, sq);
    end
    for (int i = 0; i < 8; i++)
      b[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return b ^ 8'h63;
  endfunction

  function automatic logic [7:0] xt(input logic [7:0] a);
    return a[7] ? ((a << 1) ^ 8'h1B) : (a << 1);
  endfunction

  // Byte n of a 128-bit word, n = 0 is the first (most significant) byte.
  function automatic logic [7:0] byte_of(input logic [127:0] w, input int n);
    return w[127-8*n -: 8];
  endfunction

  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sbox(w3[23:16]) ^ rcon, sbox(w3[15:8]), sbox(w3[7:0]), sbox(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  function automatic logic [127:0] round_fn(input logic [127:0] s, input logic [127:0] rk,
                                             input logic last);
    logic [7:0] sb [16];
    logic [7:0] sr [16];
    logic [127:0] r;
    for (int n = 0; n < 16; n++) sb[n] = sbox(byte_of(s, n));
    // ShiftRows: byte n sits at row n%4, column n/4
    for (int c = 0; c < 4; c++)
      for (int rw = 0; rw < 4; rw++)
        sr[4*c+rw] = sb[4*((c+rw)%4)+rw];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = sr[4*c]; a1 = sr[4*c+1]; a2 = sr[4*c+2]; a3 = sr[4*c+3];
      if (last) begin
        r[127-32*c -: 32] = {a0, a1, a2, a3};
      end else begin
        r[127-32*c -: 32] = {xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3,
                             a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3,
                             a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3,
                             xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3)};
      end
    end
    return r ^ rk;
  endfunction

  logic [127:0] state_q, rkey_q;
  logic [7:0]   rcon_q;
  logic [3:0]   round_q;
  logic [127:0] rk_next;

  assign rk_next = next_key(rkey_q, rcon_q);
  assign busy    = (round_q != 4'd0);
  assign dout    = state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      rkey_q  <= '0;
      rcon_q  <= 8'h01;
      round_q <= 4'd0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        state_q <= din ^ key;
        rkey_q  <= key;
        rcon_q  <= 8'h01;
        round_q <= 4'd1;
      end else if (busy) begin
        state_q <= round_fn(state_q, rk_next, round_q == 4'd10);
        rkey_q  <= rk_next;
        rcon_q  <= xt(rcon_q);
        if (round_q == 4'd10) begin
          round_q <= 4'd0;
          done    <= 1'b1;
        end else begin
          round_q <= round_q + 4'd1;
        end
      end
    end
  end

endmodule
