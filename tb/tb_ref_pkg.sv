// tb_ref_pkg: reference models used by the testbenches, written independently of the
// RTL. The AES S-box is generated with the multiplicative-generator walk (p *= 3,
// q /= 3) rather than by inversion, AES-128 expands the whole key schedule up front
// and works on a 4x4 byte state, and the half-gate Garbler/Evaluator follow the
// textbook equations:
//   Garbler:   T_G = H(A0,2i) ^ H(A1,2i) ^ pb*R,  W_G = H(A0,2i) ^ pa*T_G,
//              T_E = H(B0,2i+1) ^ H(B1,2i+1) ^ A0, W_E = H(B0,2i+1) ^ pb*(T_E ^ A0),
//              C0 = W_G ^ W_E   (pa, pb = LSB of A0, B0)
//   Evaluator: C = H(A,2i) ^ sa*T_G ^ H(B,2i+1) ^ sb*(T_E ^ A)   (sa, sb = LSB of A, B)
// with H(X, k) = AES-128 of X under key k.
package tb_ref_pkg;

  typedef logic [7:0] byte_t;

  function automatic byte_t rotl8(byte_t x, int s);
    return byte_t'((x << s) | (x >> (8 - s)));
  endfunction

  function automatic void make_sbox(output byte_t sb [256]);
    byte_t p, q, x;
    p = 8'h01;
    q = 8'h01;
    do begin
      // p = p * 3
      p = p ^ byte_t'(p << 1) ^ ((p[7]) ? 8'h1b : 8'h00);
      // q = q / 3
      q = q ^ byte_t'(q << 1);
      q = q ^ byte_t'(q << 2);
      q = q ^ byte_t'(q << 4);
      if (q[7]) q = q ^ 8'h09;
      x = q ^ rotl8(q, 1) ^ rotl8(q, 2) ^ rotl8(q, 3) ^ rotl8(q, 4);
      sb[p] = x ^ 8'h63;
    end while (p != 8'h01);
    sb[0] = 8'h63;
  endfunction

  function automatic byte_t mul2(byte_t b);
    return byte_t'(b << 1) ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [127:0] aes128(logic [127:0] key, logic [127:0] pt);
    byte_t sb [256];
    byte_t st [4][4];   // [row][col]
    byte_t t  [4][4];
    logic [31:0] w [44];
    logic [31:0] tmp;
    byte_t rc;
    logic [127:0] o;
    make_sbox(sb);
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    rc = 8'h01;
    for (int i = 4; i < 44; i++) begin
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = {sb[tmp[23:16]], sb[tmp[15:8]], sb[tmp[7:0]], sb[tmp[31:24]]};
        tmp[31:24] = tmp[31:24] ^ rc;
        rc = mul2(rc);
      end
      w[i] = w[i-4] ^ tmp;
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        st[r][c] = pt[127-8*(4*c+r) -: 8] ^ w[c][31-8*r -: 8];
    for (int round = 1; round <= 10; round++) begin
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++)
          t[r][c] = sb[st[r][(c+r)%4]];
      for (int c = 0; c < 4; c++) begin
        if (round != 10) begin
          st[0][c] = mul2(t[0][c]) ^ mul2(t[1][c]) ^ t[1][c] ^ t[2][c] ^ t[3][c];
          st[1][c] = t[0][c] ^ mul2(t[1][c]) ^ mul2(t[2][c]) ^ t[2][c] ^ t[3][c];
          st[2][c] = t[0][c] ^ t[1][c] ^ mul2(t[2][c]) ^ mul2(t[3][c]) ^ t[3][c];
          st[3][c] = mul2(t[0][c]) ^ t[0][c] ^ t[1][c] ^ t[2][c] ^ mul2(t[3][c]);
        end else begin
          for (int r = 0; r < 4; r++) st[r][c] = t[r][c];
        end
        for (int r = 0; r < 4; r++) st[r][c] = st[r][c] ^ w[4*round+c][31-8*r -: 8];
      end
    end
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(4*c+r) -: 8] = st[r][c];
    return o;
  endfunction

  function automatic logic [127:0] hash(logic [127:0] x, logic [31:0] gate, bit second);
    return aes128({95'd0, gate, second}, x);
  endfunction

  // Garble one AND gate: returns {T_E, T_G} and the output 0-label.
  function automatic void garble_and(input logic [127:0] a0, input logic [127:0] b0,
                                     input logic [127:0] r, input logic [31:0] gate,
                                     output logic [255:0] tbl, output logic [127:0] c0);
    logic [127:0] ha0, ha1, hb0, hb1, tg, te, wg, we;
    ha0 = hash(a0, gate, 0);
    ha1 = hash(a0 ^ r, gate, 0);
    hb0 = hash(b0, gate, 1);
    hb1 = hash(b0 ^ r, gate, 1);
    tg  = ha0 ^ ha1 ^ (b0[0] ? r : 128'd0);
    wg  = ha0 ^ (a0[0] ? tg : 128'd0);
    te  = hb0 ^ hb1 ^ a0;
    we  = hb0 ^ (b0[0] ? (te ^ a0) : 128'd0);
    tbl = {te, tg};
    c0  = wg ^ we;
  endfunction

  function automatic logic [127:0] eval_and(logic [127:0] a, logic [127:0] b,
                                            logic [255:0] tbl, logic [31:0] gate);
    logic [127:0] wg, we;
    wg = hash(a, gate, 0) ^ (a[0] ? tbl[127:0] : 128'd0);
    we = hash(b, gate, 1) ^ (b[0] ? (tbl[255:128] ^ a) : 128'd0);
    return wg ^ we;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
