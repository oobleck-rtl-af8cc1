// aes_ref_pkg: a software model of one AES-128 round on the {state, round key} word
// that the AES sub-accelerators pass along. It plays the role of the software fallback
// binary for a faulty AES stage in the testbenches. It is written independently of the
// RTL: the S-box is found by searching for the multiplicative inverse with a
// shift-and-reduce GF(2^8) multiply, and bytes are handled as arrays.
package aes_ref_pkg;
  function automatic logic [7:0] mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11b << (i - 8);
    return p[7:0];
  endfunction
  function automatic logic [7:0] sb(input logic [7:0] a);
    logic [7:0] inv, s;
    inv = 0;
    for (int b = 1; b < 256; b++) if (mul(a, 8'(b)) == 8'h01) inv = 8'(b);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction
  function automatic logic [255:0] sw_round(input logic [255:0] w, input int r);
    logic [7:0] st [16], k [16], t [16];
    logic [7:0] rc;
    for (int i = 0; i < 16; i++) begin st[i] = w[255-8*i -: 8]; k[i] = w[127-8*i -: 8]; end
    if (r == 0) begin
      for (int i = 0; i < 16; i++) st[i] ^= k[i];
    end else begin
      rc = 8'h01;
      for (int i = 1; i < r; i++) rc = mul(rc, 8'h02);
      k[0] ^= sb(k[13]) ^ rc; k[1] ^= sb(k[14]); k[2] ^= sb(k[15]); k[3] ^= sb(k[12]);
      for (int i = 4; i < 16; i++) k[i] ^= k[i-4];
      for (int i = 0; i < 16; i++) t[i] = sb(st[(i + 4*(i%4)) % 16]);   // SubBytes + ShiftRows
      if (r != 10)
        for (int c = 0; c < 4; c++) begin
          st[4*c]   = mul(t[4*c], 2) ^ mul(t[4*c+1], 3) ^ t[4*c+2] ^ t[4*c+3];
          st[4*c+1] = t[4*c] ^ mul(t[4*c+1], 2) ^ mul(t[4*c+2], 3) ^ t[4*c+3];
          st[4*c+2] = t[4*c] ^ t[4*c+1] ^ mul(t[4*c+2], 2) ^ mul(t[4*c+3], 3);
          st[4*c+3] = mul(t[4*c], 3) ^ t[4*c+1] ^ t[4*c+2] ^ mul(t[4*c+3], 2);
        end
      else
        for (int i = 0; i < 16; i++) st[i] = t[i];
      for (int i = 0; i < 16; i++) st[i] ^= k[i];
    end
    for (int i = 0; i < 16; i++) begin w[255-8*i -: 8] = st[i]; w[127-8*i -: 8] = k[i]; end
    return w;
  endfunction

endpackage
