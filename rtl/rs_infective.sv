// rs_infective: error detection and infection for infective RS-Mask.
//
// The RS-Mask S-box already holds everything needed to recompute the plain
// inverse: with x = (x1, x0) the S-box input and y the output of its
// GF(2^4) inverter, Z = (x0*y, x1*y) = X^-1 takes only two more GF(2^4)
// multipliers. Without a fault Z ^ Z' = R, so E = Z ^ R ^ Z' is zero; any
// fault that changes Z' (or Z) makes E non-zero. The block returns
// E * R1 for a fresh uniform byte R1: zero when there is no error and a
// uniformly distributed value for any non-zero E, which the S-box adds to
// its output so that a faulty byte is replaced by a random one.
//
// Implementation choices of this design: x is the S-box input before the
// zero-input correction (so that X = 0 yields Z = 0); E * R1 is a full
// GF(2^8) tower-field product computed share by share (R1 has a single
// share), remasked and registered, which costs three share multipliers
// rather than the two the paper estimates.
//
// N_MASK = 4 gives the paper's column-wide variant against classical DFA:
// the same E is multiplied by four independent random bytes R_0..R_3, one
// infection per byte of the MixColumns column, so that the errors of the
// four bytes of a column keep no fixed relation. The AES core adds them
// after MixColumns. N_MASK = 1 (default) is the single infection E * R1.
//
// Interface: x and y are three-share values at the input of S-box level 9;
// zp is Z' after level 9 in three shares and r the RS mask (tower basis)
// after level 9. rnd is fresh every cycle: [15:0] remasks the two output
// multipliers (level 9); for infection k, [16+24k +: 8] is its random byte
// and [24+24k +: 16] remasks it (level 10). Timing: infect is registered at
// level 10.
module rs_infective
  import rs_gf_pkg::*;
#(
  parameter  int unsigned N_MASK = 1,
  localparam int unsigned RND_W  = 16 + 24 * N_MASK
) (
  input  logic                         clk,
  input  logic [2:0][7:0]              x,
  input  logic [2:0][3:0]              y,
  input  logic [2:0][7:0]              zp,
  input  logic [7:0]                   r,
  input  logic [RND_W-1:0]             rnd,
  output logic [N_MASK-1:0][2:0][7:0]  infect
);
  logic [2:0][3:0] x1, x0, z_hi, z_lo;
  logic [2:0][7:0] e;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      x1[i] = x[i][7:4];
      x0[i] = x[i][3:0];
    end
  end

  // Level 9: Z = (x0*y, x1*y)
  ti_gf_mul #(.W(4)) u_mul_hi (.clk, .x(x0), .y(y), .rnd(rnd[7:0]),  .q(z_hi));
  ti_gf_mul #(.W(4)) u_mul_lo (.clk, .x(x1), .y(y), .rnd(rnd[15:8]), .q(z_lo));

  always_comb begin
    for (int i = 0; i < 3; i++) e[i] = {z_hi[i], z_lo[i]} ^ zp[i];
    e[0] ^= r;
  end

  // Level 10: E * R_k, share by share
  always_ff @(posedge clk) begin
    for (int k = 0; k < N_MASK; k++) begin
      infect[k][0] <= gf256_mul(e[0], rnd[16+24*k +: 8]) ^ rnd[24+24*k +: 8];
      infect[k][1] <= gf256_mul(e[1], rnd[16+24*k +: 8]) ^ rnd[32+24*k +: 8];
      infect[k][2] <= gf256_mul(e[2], rnd[16+24*k +: 8]) ^ rnd[24+24*k +: 8]
                      ^ rnd[32+24*k +: 8];
    end
  end
endmodule
