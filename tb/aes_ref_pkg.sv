// aes_ref_pkg: plain reference model of AES-128 for the testbenches.
//
// Everything here is computed in the AES polynomial basis directly from
// FIPS-197 definitions (field multiply modulo x^8+x^4+x^3+x+1, inverse as
// x^254, affine map with 0x63), independently of the tower-field arithmetic
// of the design. Also holds the normal-basis GF(2^4) multiply written out
// from its definition, used to check the masked multipliers.
package aes_ref_pkg;

  function automatic logic [7:0] ref_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = {a[6:0], 1'b0} ^ (a[7] ? 8'h1B : 8'h00);
    end
    return p;
  endfunction

  function automatic logic [7:0] ref_inv(logic [7:0] x);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < 254; i++) r = ref_mul(r, x);
    return (x == 0) ? 8'h00 : r;
  endfunction

  function automatic logic [7:0] ref_sbox(logic [7:0] x);
    logic [7:0] v, y, c;
    c = 8'h63;
    v = ref_inv(x);
    for (int i = 0; i < 8; i++)
      y[i] = v[i] ^ v[(i+4)%8] ^ v[(i+5)%8] ^ v[(i+6)%8] ^ v[(i+7)%8] ^ c[i];
    return y;
  endfunction

  function automatic logic [127:0] ref_aes128(logic [127:0] pt, logic [127:0] key);
    logic [7:0] s [16];
    logic [7:0] k [16];
    logic [7:0] t [16];
    logic [7:0] rc;
    logic [127:0] out;
    for (int i = 0; i < 16; i++) begin
      s[i] = pt[127-8*i -: 8] ^ key[127-8*i -: 8];
      k[i] = key[127-8*i -: 8];
    end
    rc = 8'h01;
    for (int r = 1; r <= 10; r++) begin
      // key expansion
      logic [7:0] w [4];
      w[0] = ref_sbox(k[13]) ^ rc; w[1] = ref_sbox(k[14]);
      w[2] = ref_sbox(k[15]);      w[3] = ref_sbox(k[12]);
      for (int i = 0; i < 16; i++) begin
        k[i] = k[i] ^ ((i < 4) ? w[i] : k[i-4]);
      end
      rc = ref_mul(rc, 8'h02);
      // SubBytes + ShiftRows
      for (int c = 0; c < 4; c++)
        for (int j = 0; j < 4; j++)
          t[4*c+j] = ref_sbox(s[4*((c+j)%4)+j]);
      // MixColumns
      for (int c = 0; c < 4; c++)
        for (int j = 0; j < 4; j++)
          s[4*c+j] = (r == 10) ? t[4*c+j] :
                     ref_mul(t[4*c+j], 8'h02) ^ ref_mul(t[4*c+(j+1)%4], 8'h03)
                     ^ t[4*c+(j+2)%4] ^ t[4*c+(j+3)%4];
      for (int i = 0; i < 16; i++) s[i] ^= k[i];
    end
    for (int i = 0; i < 16; i++) out[127-8*i -: 8] = s[i];
    return out;
  endfunction

endpackage
