// tb_rs_sbox_sifa: statistical ineffective fault experiment on the S-box.
//
// A permanent stuck-at-0 fault is placed on bit 0 of share 0 at the output
// of the first GF(2^2) multiplier inside the masked GF(2^4) inverter (the
// fault location used for the paper's fault-distribution experiment). Three
// S-boxes receive the same uniformly random inputs, a quarter of them X = 0:
//   u_ti   R = 0, so the RS mapping is idle: a plain three-share TI S-box
//   u_rs   RS-Mask with a uniform R (the design as evaluated)
//   u_inf  RS-Mask with the infective extension
// A fault is ineffective when the recombined output still equals S(X).
// Expected: in the TI S-box the fault is always ineffective for X = 0 (the
// inverter input is then 0 and the faulty product is multiplied by zero),
// so ineffective runs are biased towards X = 0, which a SIFA exploits.
// Under RS-Mask the ineffective rate is the same for X = 0 as for any
// other X, so the values seen in ineffective runs carry no bias. With
// the infective extension every effective fault yields a random output
// error; the test counts how many distinct error bytes appear.
module tb_rs_sbox_sifa;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned N = 8000;

  logic [7:0] d0, d1, r, o0_ti, o1_ti, or_ti, o0_rs, o1_rs, or_rs, o0_in, o1_in, or_in;
  logic [SBOX_RND_W-1:0] rnd;
  logic [SBOX_RND_W+INF_RND_W-1:0] rnd_inf;
  logic [7:0] hx [10];
  logic [7:0] hr [10];

  rs_sbox u_ti (.clk, .d0, .d1(d1 ^ r), .r(8'h00), .rnd, .o0(o0_ti), .o1(o1_ti), .o_r(or_ti),
                .inf0(), .inf1());
  rs_sbox u_rs (.clk, .d0, .d1, .r, .rnd, .o0(o0_rs), .o1(o1_rs), .o_r(or_rs), .inf0(), .inf1());
  rs_sbox #(.INFECTIVE(1'b1)) u_inf (.clk, .d0, .d1, .r, .rnd(rnd_inf),
                                     .o0(o0_in), .o1(o1_in), .o_r(or_in), .inf0(), .inf1());

  function automatic real rate(int a, int b);
    return (b == 0) ? 0.0 : real'(a) / real'(b);
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    logic [7:0] x, s;
    static int ti_z = 0, ti_zi = 0, ti_n = 0, ti_ni = 0;
    static int rs_z = 0, rs_zi = 0, rs_n = 0, rs_ni = 0;
    static int inf_eff = 0;
    bit seen [256];
    static int distinct = 0;
    real a, b, c, e;
    foreach (seen[i]) seen[i] = 1'b0;
    d0 = '0; d1 = '0; r = '0; rnd = '0; rnd_inf = '0;
    for (int i = 0; i < 10; i++) begin hx[i] = '0; hr[i] = '0; end
    force u_ti.u_inv.u_mul_ab.q[0][0] = 1'b0;
    force u_rs.u_inv.u_mul_ab.q[0][0] = 1'b0;
    force u_inf.u_inv.u_mul_ab.q[0][0] = 1'b0;
    for (int it = 0; it < N + 10; it++) begin
      @(negedge clk);
      if (it >= 10) begin
        s = ref_sbox(hx[8]);
        if (hx[8] == 0) begin
          ti_z++; rs_z++;
          if ((o0_ti ^ o1_ti ^ or_ti) == s) ti_zi++;
          if ((o0_rs ^ o1_rs ^ or_rs) == s) rs_zi++;
        end else begin
          ti_n++; rs_n++;
          if ((o0_ti ^ o1_ti ^ or_ti) == s) ti_ni++;
          if ((o0_rs ^ o1_rs ^ or_rs) == s) rs_ni++;
        end
        // infective S-box has one more register level
        s = ref_sbox(hx[9]);
        if ((o0_in ^ o1_in ^ or_in) != s) begin
          inf_eff++;
          if (!seen[o0_in ^ o1_in ^ or_in ^ s]) distinct++;
          seen[o0_in ^ o1_in ^ or_in ^ s] = 1'b1;
        end
      end
      for (int i = 9; i > 0; i--) begin hx[i] = hx[i-1]; hr[i] = hr[i-1]; end
      x  = (it % 4 == 0) ? 8'h00 : 8'($urandom);
      r  = 8'($urandom);
      d1 = 8'($urandom);
      d0 = x ^ d1 ^ r;
      hx[0] = x; hr[0] = r;
      for (int i = 0; i < SBOX_RND_W; i++) rnd[i] = 1'($urandom);
      rnd_inf = {40'({$urandom, $urandom}), rnd};
    end
    a = rate(ti_zi, ti_z); b = rate(ti_ni, ti_n);
    c = rate(rs_zi, rs_z); e = rate(rs_ni, rs_n);
    $display("ineffective rate  TI: X=0 %0.3f  X!=0 %0.3f   RS-Mask: X=0 %0.3f  X!=0 %0.3f",
             a, b, c, e);
    $display("infective: %0d effective faults, %0d distinct output errors", inf_eff, distinct);
    chk(a > 0.95, "TI S-box should be biased at X = 0");
    chk(b > 0.40 && b < 0.60, "TI ineffective rate for X != 0");
    chk(c > 0.40 && c < 0.60, "RS-Mask ineffective rate for X = 0 should match X != 0");
    chk(e > 0.40 && e < 0.60, "RS-Mask ineffective rate for X != 0");
    chk((c - e < 0.05) && (e - c < 0.05), "RS-Mask: no bias between X = 0 and X != 0");
    chk(inf_eff > N / 4, "infective: faults must be effective");
    chk(distinct > 240, "infective: output errors must spread over all bytes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
