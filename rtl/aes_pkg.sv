// aes_pkg: AES (FIPS-197) byte-level functions shared by the encryptor and
// the decryptor. The S-box is not a pasted table: it is generated at
// elaboration from its definition, the multiplicative inverse in GF(2^8)
// modulo x^8+x^4+x^3+x+1 followed by the affine map
// b' = b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
// The inverse S-box is the inverse permutation of the S-box.
// AES itself is the published standard (FIPS-197) that the paper names.
// Generating the tables from their definitions, instead of storing them,
// is this design's choice.
package aes_pkg;

  typedef logic [255:0][7:0] sbox_t;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] b, input int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic sbox_t gen_sbox();
    sbox_t s;
    logic [7:0] inv, p;
    for (int i = 0; i < 256; i++) begin
      // a^254 is the inverse of a (0 maps to 0)
      inv = 8'h01;
      p   = 8'(i);
      for (int e = 0; e < 8; e++) begin
        if (e != 0) inv = gmul(inv, p);
        p = gmul(p, p);
      end
      if (i == 0) inv = 8'h00;
      s[i] = inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
    end
    return s;
  endfunction

  function automatic sbox_t gen_inv_sbox();
    sbox_t s, r;
    s = gen_sbox();
    for (int i = 0; i < 256; i++) r[s[i]] = 8'(i);
    return r;
  endfunction

  localparam sbox_t SBOX     = gen_sbox();
  localparam sbox_t INV_SBOX = gen_inv_sbox();

  // The state is kept as 16 bytes, byte 0 = most significant byte of the
  // 128-bit block, column-major as in FIPS-197 (byte r + 4c is row r, column c).
  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = SBOX[s[8*i +: 8]];
    return o;
  endfunction

  function automatic logic [127:0] inv_sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = INV_SBOX[s[8*i +: 8]];
    return o;
  endfunction

  function automatic logic [7:0] get_b(input logic [127:0] s, input int r, input int c);
    return s[127 - 8*(r + 4*c) -: 8];
  endfunction

  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*c) -: 8] = get_b(s, r, (c + r) % 4);
    return o;
  endfunction

  function automatic logic [127:0] inv_shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*((c + r) % 4)) -: 8] = get_b(s, r, c);
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_b(s, 0, c); a1 = get_b(s, 1, c); a2 = get_b(s, 2, c); a3 = get_b(s, 3, c);
      o[127 - 8*(0 + 4*c) -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127 - 8*(1 + 4*c) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127 - 8*(2 + 4*c) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127 - 8*(3 + 4*c) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  function automatic logic [127:0] inv_mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = get_b(s, 0, c); a1 = get_b(s, 1, c); a2 = get_b(s, 2, c); a3 = get_b(s, 3, c);
      o[127 - 8*(0 + 4*c) -: 8] = gmul(a0, 8'h0e) ^ gmul(a1, 8'h0b) ^ gmul(a2, 8'h0d) ^ gmul(a3, 8'h09);
      o[127 - 8*(1 + 4*c) -: 8] = gmul(a0, 8'h09) ^ gmul(a1, 8'h0e) ^ gmul(a2, 8'h0b) ^ gmul(a3, 8'h0d);
      o[127 - 8*(2 + 4*c) -: 8] = gmul(a0, 8'h0d) ^ gmul(a1, 8'h09) ^ gmul(a2, 8'h0e) ^ gmul(a3, 8'h0b);
      o[127 - 8*(3 + 4*c) -: 8] = gmul(a0, 8'h0b) ^ gmul(a1, 8'h0d) ^ gmul(a2, 8'h09) ^ gmul(a3, 8'h0e);
    end
    return o;
  endfunction

  // One step of the key schedule: round key r-1 -> round key r (rcon = Rcon[r]).
  function automatic logic [127:0] next_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {SBOX[w3[23:16]], SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]} ^ {rcon, 24'h0};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Inverse step: round key r -> round key r-1 (rcon = Rcon[r]).
  function automatic logic [127:0] prev_key(input logic [127:0] k, input logic [7:0] rcon);
    logic [31:0] w0, w1, w2, w3, p0, p1, p2, p3, t;
    {w0, w1, w2, w3} = k;
    p3 = w3 ^ w2;
    p2 = w2 ^ w1;
    p1 = w1 ^ w0;
    t  = {SBOX[p3[23:16]], SBOX[p3[15:8]], SBOX[p3[7:0]], SBOX[p3[31:24]]} ^ {rcon, 24'h0};
    p0 = w0 ^ t;
    return {p0, p1, p2, p3};
  endfunction

  // Rcon[r] for r = 1..10 (x^(r-1) in GF(2^8)).
  function automatic logic [7:0] rcon_of(input logic [3:0] r);
    logic [7:0] v;
    v = 8'h01;
    for (int i = 1; i < 10; i++) if (i < int'(r)) v = xtime(v);
    return v;
  endfunction

endpackage
