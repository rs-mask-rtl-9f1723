// ti_gf_mul: first-order threshold-implementation multiplier, three shares.
//
// Computes q = x * y where x and y are each given as three Boolean shares
// (x = x0^x1^x2). The product is an AND gate for W = 1, a GF(2^2) normal-basis
// multiply for W = 2 and a GF(2^4) normal-basis multiply for W = 4. Output
// share i only uses input shares i+1 and i+2 (non-completeness):
//   q_i = x_{i+1}y_{i+1} ^ x_{i+1}y_{i+2} ^ x_{i+2}y_{i+1}
// so the three output shares together hold all nine cross products.
// The shares are then remasked with two fresh W-bit masks (m_a, m_b,
// m_a^m_b) and registered, which is the "remask, then register" rule the
// paper applies after every non-linear operation. The exact remasking
// pattern is this design's choice.
//
// Timing: one register level, q is valid the cycle after x, y, rnd.
module ti_gf_mul #(
  parameter int unsigned W = 4
) (
  input  logic                clk,
  input  logic [2:0][W-1:0]   x,
  input  logic [2:0][W-1:0]   y,
  input  logic [2*W-1:0]      rnd,
  output logic [2:0][W-1:0]   q
);
  import rs_gf_pkg::*;

  initial assert (W == 1 || W == 2 || W == 4) else $error("ti_gf_mul: W must be 1, 2 or 4");

  function automatic logic [W-1:0] mul(logic [W-1:0] a, logic [W-1:0] b);
    logic [3:0] a4, b4;
    a4 = 4'(a);
    b4 = 4'(b);
    if (W == 4) return W'(gf16_mul(a4, b4));
    else if (W == 2) return W'(gf4_mul(a4[1:0], b4[1:0]));
    else return W'(a4[0] & b4[0]);
  endfunction

  logic [2:0][W-1:0] p;
  logic [W-1:0] m_a, m_b;
  assign m_a = rnd[W-1:0];
  assign m_b = rnd[2*W-1:W];

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      p[i] = mul(x[(i+1)%3], y[(i+1)%3]) ^ mul(x[(i+1)%3], y[(i+2)%3])
           ^ mul(x[(i+2)%3], y[(i+1)%3]);
    end
  end

  always_ff @(posedge clk) begin
    q[0] <= p[0] ^ m_a;
    q[1] <= p[1] ^ m_b;
    q[2] <= p[2] ^ m_a ^ m_b;
  end
endmodule
