// rs_gf256_inv: single-share GF(2^8) inverter for the RS mask R.
//
// The RS mask is independent of every key-dependent value, so its inverse
// R^-1 is computed unmasked, in one share, with the same Canright tower
// structure as the S-box inverter:
//   level 1: yinv = nu (r1 ^ r0)^2 ^ r1*r0        (GF(2^4) square-scaler, multiplier)
//   level 2: d    = N (a ^ b)^2 ^ a*b,  yinv = (a, b)   (GF(2^2) multiplier)
//   level 3: y    = (d^2 * b, d^2 * a) = yinv^-1   (two GF(2^2) multipliers)
//   level 4: R^-1 = (r0 * y, r1 * y)               (two GF(2^4) multipliers)
// The output of every non-linear component is registered, as the paper does
// so that the glitch count of this datapath does not reveal R. The linear
// terms are registered beside the products and added after the register.
// R = 0 gives R^-1 = 0.
//
// Interface: r in tower normal basis, rinv likewise. Timing: latency 4,
// one input per cycle.
module rs_gf256_inv (
  input  logic       clk,
  input  logic [7:0] r,
  output logic [7:0] rinv
);
  import rs_gf_pkg::*;

  // level 1
  logic [3:0] l1_mul, l1_lin;
  logic [7:0] l1_r;
  // level 2
  logic [1:0] l2_mul, l2_lin;
  logic [3:0] l2_yinv;
  logic [7:0] l2_r;
  // level 3
  logic [3:0] l3_y;
  logic [7:0] l3_r;

  logic [3:0] yinv;
  logic [1:0] dinv;

  always_ff @(posedge clk) begin
    l1_mul <= gf16_mul(r[7:4], r[3:0]);
    l1_lin <= gf16_sq_scl(r[7:4] ^ r[3:0]);
    l1_r   <= r;
  end

  assign yinv = l1_mul ^ l1_lin;

  always_ff @(posedge clk) begin
    l2_mul  <= gf4_mul(yinv[3:2], yinv[1:0]);
    l2_lin  <= gf4_scl_n(gf4_sq(yinv[3:2] ^ yinv[1:0]));
    l2_yinv <= yinv;
    l2_r    <= l1_r;
  end

  assign dinv = gf4_sq(l2_mul ^ l2_lin);

  always_ff @(posedge clk) begin
    l3_y <= {gf4_mul(dinv, l2_yinv[1:0]), gf4_mul(dinv, l2_yinv[3:2])};
    l3_r <= l2_r;
  end

  always_ff @(posedge clk) begin
    rinv <= {gf16_mul(l3_r[3:0], l3_y), gf16_mul(l3_r[7:4], l3_y)};
  end
endmodule
