// rs_sbox: AES S-box protected with random space masking (RS-Mask).
//
// Idea. The S-box input X is the sum of two data shares and the RS share R.
// Instead of inverting X directly, the inverter input is mapped into a
// random space so that the inverter produces Z' = X^-1 ^ R, the correct
// result under a uniform Boolean mask that never passes through any
// non-linear gate with key-dependent data. A fault anywhere in the
// inverter then changes Z' but the recovered value Z' ^ R stays uniform.
// Writing the inverter input as nibbles (x1, x0) and y = (nu(x1^x0)^2 ^
// x1x0)^-1, the mapping is
//   high nibble: (x0 ^ f*(r1*nu(x1^x0)^2 ^ (x0*r1)*x1)) * y = x0*y ^ r1
//   low nibble:  (x1 ^ f*(r0*nu(x1^x0)^2 ^ (x1*r0)*x0)) * y = x1*y ^ r0
// with f = 15 (unity) for X != 0. For X = 0 the mapping terms vanish (f = 0)
// and R^-1 is added to the input instead (fbar*R^-1), so the inverter
// returns (R^-1)^-1 = R = 0^-1 ^ R. The y^-1 factor in the mapping is
// recomputed from the inverter inputs on its own datapath, so a fault on the
// inverter's own y^-1 cannot cancel the mask.
//
// Structure (register levels as numbered in the paper's S-box figure):
//   input   normal-basis conversion of d0, d1 and r; R added to share 1;
//           a fresh byte splits the data into three TI shares
//   1-3     zero detector (ti_zero_detect) -> f, fbar
//   1-4     single-share GF(2^8) inverter of R (rs_gf256_inv) -> R^-1
//   5       multipliers 1,2: fbar * R^-1, added to the delayed X
//   6       x1*x0, square-scaler, multipliers 3,4 (x1*r0, x0*r1)
//   7       GF(2^4) inverter level 1, multipliers 5,6 (s*r0, s*r1) and
//           7,8 ((x1 r0) x0, (x0 r1) x1)
//   8       GF(2^4) inverter level 2 -> y, multipliers 9,10 (f * sums)
//   9       output multipliers -> Z' in three shares
//   output  Z' compressed to two shares, basis conversion back and AES
//           affine map on each share (0x63 on share 0 only); R gets the
//           same linear map, so o0 ^ o1 ^ o_r = S(d0 ^ d1 ^ r).
// Every masked product is a three-share threshold implementation with
// remasking before its register. The pairing of r1 with the high output
// nibble follows the paper's equation (2); its combined equation (6) swaps
// r0 and r1, which would leave the output masked with a nibble-swapped R,
// so it is not followed. The 2-to-3 share split at the input, the 3-to-2
// compression at the output and the remasking pattern are this design's
// choices.
//
// INFECTIVE = 1 adds the infective extension (rs_infective): the plain
// inverse is recomputed, the error E = Z ^ R ^ Z' is multiplied by a fresh
// random byte and added to Z' at an extra register level 10. The default
// (0) is the RS-Mask S-box the paper implements and evaluates.
// INF_COLUMN = 1 (with INFECTIVE = 1) selects the paper's column-wide
// variant against classical DFA: the S-box output is left uninfected and
// four infections E * R_i, converted by the same output linear map and
// compressed to two shares, leave on inf0/inf1 for the AES core to add to
// the four bytes of the column after MixColumns. Otherwise inf0/inf1 are 0.
//
// Interface: d0, d1, r are AES (polynomial basis) bytes; rnd carries
// RND_W fresh random bits every cycle (SBOX_RND_W, plus INF_RND_W with
// INFECTIVE, or INF_COL_RND_W with INF_COLUMN as well). With r = 0 the block is a plain three-share TI S-box (used for
// the key schedule, whose RS share is 0).
// Timing: fully pipelined, one byte per cycle, latency LATENCY = 9 cycles
// (10 with INFECTIVE).
module rs_sbox
  import rs_gf_pkg::*;
#(
  parameter bit          INFECTIVE  = 1'b0,
  parameter bit          INF_COLUMN = 1'b0,
  localparam int unsigned RND_W    = SBOX_RND_W +
                                     (INFECTIVE ? (INF_COLUMN ? INF_COL_RND_W : INF_RND_W) : 0),
  localparam int unsigned LATENCY  = INFECTIVE ? 10 : 9
) (
  input  logic                  clk,
  input  logic [7:0]            d0,
  input  logic [7:0]            d1,
  input  logic [7:0]            r,
  input  logic [RND_W-1:0]      rnd,
  output logic [7:0]            o0,
  output logic [7:0]            o1,
  output logic [7:0]            o_r,
  output logic [3:0][7:0]       inf0,
  output logic [3:0][7:0]       inf1
);
  // ---------------------------------------------------------- input (level 0)
  logic [7:0]      rn;
  logic [2:0][7:0] x0s;

  assign rn     = to_nb(r);
  assign x0s[0] = to_nb(d0);
  assign x0s[1] = to_nb(d1) ^ rn ^ rnd[7:0];
  assign x0s[2] = rnd[7:0];

  // RS share delay line, rn_d[k] is the value after register level k.
  logic [7:0] rn_d [1:10];
  always_ff @(posedge clk) begin
    rn_d[1] <= rn;
    for (int k = 2; k <= 10; k++) rn_d[k] <= rn_d[k-1];
  end

  // ------------------------------------------------------------ levels 1-5
  logic [2:0][3:0] f3, fbar3;
  ti_zero_detect u_zero (.clk, .x(x0s), .rnd(rnd[21:8]), .f(f3), .fbar(fbar3));

  logic [7:0] rinv4;
  rs_gf256_inv u_rinv (.clk, .r(rn), .rinv(rinv4));

  logic [2:0][7:0] x_d [1:8];
  logic [2:0][3:0] fbar4;
  logic [2:0][3:0] f_d [4:7];
  always_ff @(posedge clk) begin
    x_d[1] <= x0s;
    for (int k = 2; k <= 8; k++) x_d[k] <= x_d[k-1];
    fbar4  <= fbar3;
    f_d[4] <= f3;
    for (int k = 5; k <= 7; k++) f_d[k] <= f_d[k-1];
  end

  logic [2:0][3:0] m1, m2;
  ti_gf16_mul_rs u_mul1 (.clk, .x(fbar4), .r(rinv4[7:4]), .rnd(rnd[29:22]), .q(m1));
  ti_gf16_mul_rs u_mul2 (.clk, .x(fbar4), .r(rinv4[3:0]), .rnd(rnd[37:30]), .q(m2));

  // Inverter input after the zero-input correction.
  logic [2:0][3:0] a1, a0, s5;
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      a1[i] = x_d[5][i][7:4] ^ m1[i];
      a0[i] = x_d[5][i][3:0] ^ m2[i];
      s5[i] = gf16_sq_scl(a1[i] ^ a0[i]);
    end
  end

  // --------------------------------------------------------------- level 6
  logic [2:0][3:0] c6, s6, m3, m4, a1_6, a0_6;
  ti_gf_mul #(.W(4)) u_mul_x1x0 (.clk, .x(a1), .y(a0), .rnd(rnd[45:38]), .q(c6));
  ti_gf16_mul_rs u_mul3 (.clk, .x(a1), .r(rn_d[5][3:0]), .rnd(rnd[53:46]), .q(m3));
  ti_gf16_mul_rs u_mul4 (.clk, .x(a0), .r(rn_d[5][7:4]), .rnd(rnd[61:54]), .q(m4));
  always_ff @(posedge clk) begin
    s6   <= s5;
    a1_6 <= a1;
    a0_6 <= a0;
  end

  logic [2:0][3:0] yinv6;
  always_comb for (int i = 0; i < 3; i++) yinv6[i] = c6[i] ^ s6[i];

  // ------------------------------------------------------------ levels 7-8
  logic [2:0][3:0] y8;
  ti_gf16_inv u_inv (.clk, .g(yinv6), .rnd(rnd[73:62]), .ginv(y8));

  logic [2:0][3:0] m5, m6, m7, m8, a1_7, a0_7;
  ti_gf16_mul_rs u_mul5 (.clk, .x(s6), .r(rn_d[6][3:0]), .rnd(rnd[81:74]), .q(m5));
  ti_gf16_mul_rs u_mul6 (.clk, .x(s6), .r(rn_d[6][7:4]), .rnd(rnd[89:82]), .q(m6));
  ti_gf_mul #(.W(4)) u_mul7 (.clk, .x(m3), .y(a0_6), .rnd(rnd[97:90]),  .q(m7));
  ti_gf_mul #(.W(4)) u_mul8 (.clk, .x(m4), .y(a1_6), .rnd(rnd[105:98]), .q(m8));
  always_ff @(posedge clk) begin
    a1_7 <= a1_6;
    a0_7 <= a0_6;
  end

  logic [2:0][3:0] t_lo, t_hi;
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      t_lo[i] = m7[i] ^ m5[i];  // r0 * y^-1
      t_hi[i] = m8[i] ^ m6[i];  // r1 * y^-1
    end
  end

  logic [2:0][3:0] m9, m10, a1_8, a0_8;
  ti_gf_mul #(.W(4)) u_mul9  (.clk, .x(f_d[7]), .y(t_lo), .rnd(rnd[113:106]), .q(m9));
  ti_gf_mul #(.W(4)) u_mul10 (.clk, .x(f_d[7]), .y(t_hi), .rnd(rnd[121:114]), .q(m10));
  always_ff @(posedge clk) begin
    a1_8 <= a1_7;
    a0_8 <= a0_7;
  end

  // --------------------------------------------------------------- level 9
  logic [2:0][3:0] in_hi, in_lo, z_hi, z_lo;
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      in_hi[i] = a0_8[i] ^ m10[i];
      in_lo[i] = a1_8[i] ^ m9[i];
    end
  end
  ti_gf_mul #(.W(4)) u_mul_hi (.clk, .x(in_hi), .y(y8), .rnd(rnd[129:122]), .q(z_hi));
  ti_gf_mul #(.W(4)) u_mul_lo (.clk, .x(in_lo), .y(y8), .rnd(rnd[137:130]), .q(z_lo));

  // ---------------------------------------------- infective extension (opt.)
  logic [2:0][7:0] zo;
  logic [7:0]      ro;

  if (INFECTIVE && INF_COLUMN) begin : g_infective_col
    logic [2:0][7:0] zp, zp10;
    logic [3:0][2:0][7:0] infect;
    always_comb for (int i = 0; i < 3; i++) zp[i] = {z_hi[i], z_lo[i]};
    rs_infective #(.N_MASK(4)) u_inf (
      .clk, .x(x_d[8]), .y(y8), .zp(zp), .r(rn_d[9]),
      .rnd(rnd[RND_W-1:SBOX_RND_W]), .infect(infect)
    );
    always_ff @(posedge clk) zp10 <= zp;
    assign zo = zp10;
    assign ro = rn_d[10];
    always_comb
      for (int k = 0; k < 4; k++) begin
        inf0[k] = out_lin(infect[k][0] ^ infect[k][2]);
        inf1[k] = out_lin(infect[k][1]);
      end
  end else if (INFECTIVE) begin : g_infective
    logic [2:0][7:0] zp, zp10, infect;
    always_comb for (int i = 0; i < 3; i++) zp[i] = {z_hi[i], z_lo[i]};
    rs_infective u_inf (
      .clk, .x(x_d[8]), .y(y8), .zp(zp), .r(rn_d[9]),
      .rnd(rnd[RND_W-1:SBOX_RND_W]), .infect(infect)
    );
    always_ff @(posedge clk) zp10 <= zp;
    always_comb for (int i = 0; i < 3; i++) zo[i] = zp10[i] ^ infect[i];
    assign ro   = rn_d[10];
    assign inf0 = '0;
    assign inf1 = '0;
  end else begin : g_plain
    always_comb for (int i = 0; i < 3; i++) zo[i] = {z_hi[i], z_lo[i]};
    assign ro   = rn_d[9];
    assign inf0 = '0;
    assign inf1 = '0;
  end

  // ---------------------------------------------------------------- output
  assign o0  = out_lin(zo[0] ^ zo[2]) ^ AES_C;
  assign o1  = out_lin(zo[1]);
  assign o_r = out_lin(ro);
endmodule
