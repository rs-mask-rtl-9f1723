// ti_gf16_inv: three-share masked GF(2^4) inverter (Canright structure).
//
// For a GF(2^4) element g = (a, b) over GF(2^2) the inverse is
//   d = N (a ^ b)^2 ^ a*b,   g^-1 = (d^-1 * b, d^-1 * a),
// and in GF(2^2) the inverse d^-1 equals the square d^2, a bit swap. Only
// the three GF(2^2) products are non-linear; each is a threshold-implemented
// multiplier (ti_gf_mul, W = 2) with remasking and a register, so the block
// has the two register levels drawn inside the inverter of the paper's
// GF(2^8) inverter figure. The linear term N (a ^ b)^2 is computed share by
// share and registered next to the product.
//
// Interface: g and the returned inverse are three shares of a nibble.
// rnd is fresh every cycle: rnd[3:0] remasks level 1, rnd[11:4] level 2.
// Timing: latency 2 cycles, one new input per cycle.
module ti_gf16_inv (
  input  logic            clk,
  input  logic [2:0][3:0] g,
  input  logic [11:0]     rnd,
  output logic [2:0][3:0] ginv
);
  import rs_gf_pkg::*;

  logic [2:0][1:0] a, b, lin, prod, d_inv, p, q;
  logic [2:0][1:0] lin_q, a_q, b_q;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      a[i]   = g[i][3:2];
      b[i]   = g[i][1:0];
      lin[i] = gf4_scl_n(gf4_sq(a[i] ^ b[i]));
    end
  end

  // Level 1: a*b
  ti_gf_mul #(.W(2)) u_mul_ab (.clk, .x(a), .y(b), .rnd(rnd[3:0]), .q(prod));

  always_ff @(posedge clk) begin
    lin_q <= lin;
    a_q   <= a;
    b_q   <= b;
  end

  always_comb begin
    for (int i = 0; i < 3; i++) d_inv[i] = gf4_sq(prod[i] ^ lin_q[i]);
  end

  // Level 2: d^-1 * b and d^-1 * a
  ti_gf_mul #(.W(2)) u_mul_hi (.clk, .x(d_inv), .y(b_q), .rnd(rnd[7:4]),  .q(p));
  ti_gf_mul #(.W(2)) u_mul_lo (.clk, .x(d_inv), .y(a_q), .rnd(rnd[11:8]), .q(q));

  always_comb begin
    for (int i = 0; i < 3; i++) ginv[i] = {p[i], q[i]};
  end
endmodule
