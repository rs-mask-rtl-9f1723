// ti_gf16_mul_rs: GF(2^4) multiplier of a three-share variable by a
// single-share mask nibble (multipliers 1 to 6 of the RS-Mask S-box).
//
// Because the mask operand r has one share only, the product distributes
// over the shares of x: x*r = (x0^x1^x2)*r = x0*r ^ x1*r ^ x2*r, so three
// plain GF(2^4) multipliers suffice and the cost grows linearly with the
// number of shares, as the paper notes. Output shares are remasked with two
// fresh nibbles and registered like every other non-linear stage.
//
// Timing: one register level.
module ti_gf16_mul_rs (
  input  logic            clk,
  input  logic [2:0][3:0] x,
  input  logic [3:0]      r,
  input  logic [7:0]      rnd,
  output logic [2:0][3:0] q
);
  import rs_gf_pkg::*;

  always_ff @(posedge clk) begin
    q[0] <= gf16_mul(x[0], r) ^ rnd[3:0];
    q[1] <= gf16_mul(x[1], r) ^ rnd[7:4];
    q[2] <= gf16_mul(x[2], r) ^ rnd[3:0] ^ rnd[7:4];
  end
endmodule
