// ti_zero_detect: shared auxiliary variable of the RS-Mask S-box.
//
// The RS mapping needs f = 15 (the GF(2^4) unity) when the S-box input X is
// non-zero and f = 0 when X = 0. Adding 255 to X (on one share only) gives a
// byte whose eight bits are all one exactly when X = 0; a three-level tree of
// threshold-implemented AND gates (4, 2, 1 gates, each remasked and
// registered) reduces them to fbar0 = (X == 0). Then f0 = fbar0 ^ 1, again on
// one share only. The nibbles f and fbar used by the GF(2^4) multipliers
// are these bits replicated four times in every share, so
// f = (f0, f0, f0, f0) and fbar = (fbar0, fbar0, fbar0, fbar0) as printed in
// the paper's S-box figure.
//
// Interface: x is three shares of the normal-basis S-box input.
// rnd[7:0] remasks level 1, rnd[11:8] level 2, rnd[13:12] level 3 (fresh
// every cycle). Timing: latency 3 cycles, one input per cycle; f and fbar
// are combinational functions of the level-3 register.
module ti_zero_detect (
  input  logic            clk,
  input  logic [2:0][7:0] x,
  input  logic [13:0]     rnd,
  output logic [2:0][3:0] f,
  output logic [2:0][3:0] fbar
);
  logic [2:0][7:0] u;
  logic [2:0][3:0] l1;
  logic [2:0][1:0] l2;
  logic [2:0]      l3;

  assign u[0] = x[0] ^ 8'd255;
  assign u[1] = x[1];
  assign u[2] = x[2];

  for (genvar k = 0; k < 4; k++) begin : g_l1
    ti_gf_mul #(.W(1)) u_and (
      .clk,
      .x  ({u[2][2*k],   u[1][2*k],   u[0][2*k]}),
      .y  ({u[2][2*k+1], u[1][2*k+1], u[0][2*k+1]}),
      .rnd(rnd[2*k+1:2*k]),
      .q  ({l1[2][k], l1[1][k], l1[0][k]})
    );
  end

  for (genvar k = 0; k < 2; k++) begin : g_l2
    ti_gf_mul #(.W(1)) u_and (
      .clk,
      .x  ({l1[2][2*k],   l1[1][2*k],   l1[0][2*k]}),
      .y  ({l1[2][2*k+1], l1[1][2*k+1], l1[0][2*k+1]}),
      .rnd(rnd[8+2*k+1:8+2*k]),
      .q  ({l2[2][k], l2[1][k], l2[0][k]})
    );
  end

  ti_gf_mul #(.W(1)) u_and_l3 (
    .clk,
    .x  ({l2[2][0], l2[1][0], l2[0][0]}),
    .y  ({l2[2][1], l2[1][1], l2[0][1]}),
    .rnd(rnd[13:12]),
    .q  (l3)
  );

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      fbar[i] = {4{l3[i]}};
      f[i]    = {4{l3[i] ^ (i == 0)}};
    end
  end
endmodule
