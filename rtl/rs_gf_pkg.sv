// rs_gf_pkg: shared arithmetic and constants for the RS-Mask AES.
//
// The S-box inverter works in a Canright-style tower field
// GF(((2^2)^2)^2) where every level uses a normal basis:
//   GF(2^2)  over GF(2):    basis (W^2, W),  unity = 2'b11
//   GF(2^4)  over GF(2^2):  basis (Z^4, Z),  Z^2 + Z + N = 0, N = W (2'b01)
//   GF(2^8)  over GF(2^4):  basis (Y^16, Y), Y^2 + Y + nu = 0, nu = 4'b0010
// The GF(2^2) product matches the truth table printed for the GF(2^2)
// multiplier of the paper (3 is the unity, row/column 0 is all zero).
// N and nu follow Canright's compact S-box. The paper calls the GF(2^4)
// unity "15"; it is 4'b1111 here as well.
//
// NB_MAT converts an AES polynomial-basis byte to the tower representation;
// OUT_MAT converts back and applies the linear part of the AES affine map in
// one step (the "output linear transformations"). Column i of NB_MAT is the
// tower representation of beta^i, beta = 8'h24 being a root of the AES
// polynomial x^8+x^4+x^3+x+1 in the tower field; column i of OUT_MAT is
// A(NB^-1(e_i)) with A the linear part of the AES affine map. Both matrices
// are only linear, so they may be applied share by share.
package rs_gf_pkg;

  // Number of shares of every masked S-box variable (threshold implementation).
  localparam int unsigned TI_SHARES = 3;

  // Nibble scaling constants of the tower field.
  localparam logic [1:0] GF4_N   = 2'b01;
  localparam logic [3:0] GF16_NU = 4'b0010;

  // Basis-change matrices, column i is the image of bit i.
  localparam logic [7:0] NB_MAT  [8] = '{8'hFF, 8'h24, 8'h48, 8'h3F, 8'hB2, 8'h64, 8'hA3, 8'h0B};
  localparam logic [7:0] OUT_MAT [8] = '{8'h7F, 8'h51, 8'hED, 8'hA1, 8'h49, 8'hD3, 8'hDD, 8'h3A};
  localparam logic [7:0] AES_C   = 8'h63;

  // Randomness consumed by one S-box evaluation per clock cycle.
  // Expansion 8 | zero detect 8+4+2 | mults 1,2: 16 | level 6: 8+16 |
  // level 7: 4+16+16 | level 8: 8+16 | level 9: 16
  localparam int unsigned SBOX_RND_W = 138;
  // Extra randomness of the infective extension per cycle:
  // two output multipliers 16 | infection mask R1 8 | remasking 16
  localparam int unsigned INF_RND_W = 40;
  // Column-wide infective variant: four infection bytes, 16 + 4 * (8 + 16)
  localparam int unsigned INF_COL_RND_W = 112;

  typedef logic [7:0] byte_t;
  typedef byte_t [TI_SHARES-1:0] byte3_t;     // one byte in three TI shares

  // ---------------------------------------------------------------- GF(2^2)
  function automatic logic [1:0] gf4_mul(logic [1:0] x, logic [1:0] y);
    logic e;
    e = (x[1] ^ x[0]) & (y[1] ^ y[0]);
    return {(x[1] & y[1]) ^ e, (x[0] & y[0]) ^ e};
  endfunction

  // Squaring in a normal basis is a swap; in GF(2^2) it is also the inverse.
  function automatic logic [1:0] gf4_sq(logic [1:0] x);
    return {x[0], x[1]};
  endfunction

  // Multiply by N = W.
  function automatic logic [1:0] gf4_scl_n(logic [1:0] x);
    return gf4_mul(x, GF4_N);
  endfunction

  // ---------------------------------------------------------------- GF(2^4)
  // Three GF(2^2) multipliers: (a,b)(c,d) = (ac+e, bd+e), e = N(a+b)(c+d).
  function automatic logic [3:0] gf16_mul(logic [3:0] x, logic [3:0] y);
    logic [1:0] e;
    e = gf4_scl_n(gf4_mul(x[3:2] ^ x[1:0], y[3:2] ^ y[1:0]));
    return {gf4_mul(x[3:2], y[3:2]) ^ e, gf4_mul(x[1:0], y[1:0]) ^ e};
  endfunction

  // Square-scaler nu * x^2 (GF(2)-linear).
  function automatic logic [3:0] gf16_sq_scl(logic [3:0] x);
    return gf16_mul(gf16_mul(x, x), GF16_NU);
  endfunction

  // d = N(a+b)^2 + ab, the GF(2^2) value inverted inside the GF(2^4) inverter.
  function automatic logic [1:0] gf16_inv_d(logic [3:0] x);
    return gf4_scl_n(gf4_sq(x[3:2] ^ x[1:0])) ^ gf4_mul(x[3:2], x[1:0]);
  endfunction

  // Unmasked GF(2^4) inverse: (a,b)^-1 = (d^-1 b, d^-1 a).
  function automatic logic [3:0] gf16_inv(logic [3:0] x);
    logic [1:0] di;
    di = gf4_sq(gf16_inv_d(x));
    return {gf4_mul(di, x[1:0]), gf4_mul(di, x[3:2])};
  endfunction

  // ---------------------------------------------------------------- GF(2^8)
  // y^-1 = nu (x1+x0)^2 + x1 x0, the GF(2^4) value inverted inside.
  function automatic logic [3:0] gf256_inv_d(logic [7:0] x);
    return gf16_sq_scl(x[7:4] ^ x[3:0]) ^ gf16_mul(x[7:4], x[3:0]);
  endfunction

  // GF(2^8) product in the tower basis: (a,b)(c,d) = (ac+e, bd+e),
  // e = nu (a+b)(c+d). Used only by the infective extension.
  function automatic logic [7:0] gf256_mul(logic [7:0] x, logic [7:0] y);
    logic [3:0] e;
    e = gf16_mul(gf16_mul(x[7:4] ^ x[3:0], y[7:4] ^ y[3:0]), GF16_NU);
    return {gf16_mul(x[7:4], y[7:4]) ^ e, gf16_mul(x[3:0], y[3:0]) ^ e};
  endfunction

  function automatic logic [7:0] gf256_inv(logic [7:0] x);
    logic [3:0] y;
    y = gf16_inv(gf256_inv_d(x));
    return {gf16_mul(x[3:0], y), gf16_mul(x[7:4], y)};
  endfunction

  // ------------------------------------------------------- linear transforms
  function automatic logic [7:0] mat8(logic [7:0] m [8], logic [7:0] x);
    logic [7:0] r;
    r = '0;
    for (int i = 0; i < 8; i++) if (x[i]) r ^= m[i];
    return r;
  endfunction

  function automatic logic [7:0] to_nb(logic [7:0] x);
    return mat8(NB_MAT, x);
  endfunction

  // Back to polynomial basis and linear part of the affine map (no 0x63).
  function automatic logic [7:0] out_lin(logic [7:0] x);
    return mat8(OUT_MAT, x);
  endfunction

  // ------------------------------------------------------------ AES helpers
  function automatic logic [7:0] xtime(logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h1B : 8'h00);
  endfunction

  // MixColumns of one column, a[0] is row 0. Linear, applied share-wise.
  function automatic logic [31:0] mix_col(logic [31:0] c);
    logic [7:0] a [4];
    logic [7:0] r [4];
    for (int i = 0; i < 4; i++) a[i] = c[31-8*i -: 8];
    for (int i = 0; i < 4; i++)
      r[i] = xtime(a[i]) ^ xtime(a[(i+1)%4]) ^ a[(i+1)%4] ^ a[(i+2)%4] ^ a[(i+3)%4];
    return {r[0], r[1], r[2], r[3]};
  endfunction

endpackage
