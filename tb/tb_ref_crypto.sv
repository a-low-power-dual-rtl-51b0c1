// tb_ref_crypto: reference AES-128 and AES-128-GCM functions for the
// testbenches, written independently of the RTL: the S-box is generated with
// the log/antilog walk over the generator 3 instead of the x^254 inversion
// the RTL uses, and GHASH follows the specification bit by bit.
package tb_ref_crypto;

  function automatic logic [7:0] ref_sbox(input logic [7:0] x);
    logic [7:0] p = 8'h01, q = 8'h01, t;
    logic [7:0] tbl [256];
    tbl[0] = 8'h63;
    do begin
      p = p ^ (p << 1) ^ (p[7] ? 8'h1B : 8'h00);          // p *= 3
      q = q ^ (q << 1); q = q ^ (q << 2); q = q ^ (q << 4); // q /= 3
      if (q[7]) q = q ^ 8'h09;
      t = q ^ {q[6:0], q[7]} ^ {q[5:0], q[7:6]} ^ {q[4:0], q[7:5]} ^ {q[3:0], q[7:4]};
      tbl[p] = t ^ 8'h63;
    end while (p != 8'h01);
    return tbl[x];
  endfunction

  function automatic logic [7:0] ref_xt(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1B : 8'h00);
  endfunction

  function automatic logic [127:0] ref_aes(input logic [127:0] key, input logic [127:0] pt);
    logic [7:0] s [4][4];   // [row][col]
    logic [7:0] k [4][4];
    logic [7:0] t [4][4];
    logic [7:0] rcon = 8'h01;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) begin
        s[r][c] = pt[127 - 8*(4*c+r) -: 8] ^ key[127 - 8*(4*c+r) -: 8];
        k[r][c] = key[127 - 8*(4*c+r) -: 8];
      end
    for (int rnd = 1; rnd <= 10; rnd++) begin
      // key schedule
      logic [7:0] tmp [4];
      for (int r = 0; r < 4; r++) tmp[r] = ref_sbox(k[(r+1)%4][3]);
      tmp[0] ^= rcon;
      rcon = ref_xt(rcon);
      for (int r = 0; r < 4; r++) k[r][0] ^= tmp[r];
      for (int c = 1; c < 4; c++) for (int r = 0; r < 4; r++) k[r][c] ^= k[r][c-1];
      // SubBytes + ShiftRows
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) t[r][c] = ref_sbox(s[r][(c+r)%4]);
      // MixColumns
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++)
          if (rnd != 10)
            s[r][c] = ref_xt(t[r][c]) ^ ref_xt(t[(r+1)%4][c]) ^ t[(r+1)%4][c] ^ t[(r+2)%4][c] ^ t[(r+3)%4][c];
          else
            s[r][c] = t[r][c];
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) s[r][c] ^= k[r][c];
    end
    ref_aes = '0;
    for (int c = 0; c < 4; c++) for (int r = 0; r < 4; r++) ref_aes[127 - 8*(4*c+r) -: 8] = s[r][c];
  endfunction

  function automatic logic [127:0] ref_gfmul(input logic [127:0] a, input logic [127:0] b);
    logic [127:0] z = '0, v = b;
    for (int i = 0; i < 128; i++) begin
      if (a[127-i]) z ^= v;
      v = v[0] ? ((v >> 1) ^ {8'hE1, 120'h0}) : (v >> 1);
    end
    return z;
  endfunction

  // One-block AES-128-GCM with a 96-bit IV and at most one block of AAD.
  // Returns {ciphertext, tag}.
  function automatic logic [255:0] ref_gcm(input logic [127:0] key, input logic [95:0] iv,
                                           input logic [127:0] aad, input int aad_bytes,
                                           input logic [127:0] pt);
    logic [127:0] h, j0, g, ct, tag;
    h  = ref_aes(key, '0);
    j0 = {iv, 32'd1};
    ct = pt ^ ref_aes(key, {iv, 32'd2});
    g  = '0;
    if (aad_bytes > 0) g = ref_gfmul(g ^ aad, h);
    g = ref_gfmul(g ^ ct, h);
    g = ref_gfmul(g ^ {64'(8 * aad_bytes), 64'd128}, h);
    tag = g ^ ref_aes(key, j0);
    return {ct, tag};
  endfunction

  // A protected DTLS 1.2 record carrying one 16-byte plaintext block.
  function automatic logic [423:0] ref_record(input logic [127:0] key, input logic [31:0] salt,
                                              input logic [63:0] seq, input logic [127:0] pt);
    logic [255:0] ct_tag;
    ct_tag = ref_gcm(key, {salt, seq}, {seq, 8'd23, 16'hFEFD, 16'd16, 24'h0}, 13, pt);
    return {8'd23, 16'hFEFD, seq, 16'd40, seq, ct_tag};
  endfunction

endpackage
