// tb_rs_infective: checks the error-detection and infection block.
//
// Stimulus is built from the AES reference: for a random byte p the S-box
// input is X = NB(p) in three random shares, y is the GF(2^4) inverse taken
// inside the tower inverter, Z' = NB(p^-1) ^ R in three shares. Without an
// error the recombined infection must be 0; with a random error e added to
// one share of Z', it must equal NB(ref(e_p * R1_p)), the AES-field product
// mapped into the tower basis, where e = NB(e_p) and R1 = NB(R1_p). X = 0
// is included. x and y are applied one cycle ahead of Z', R and R1, as in
// the S-box pipeline; the infection appears two cycles after x.
// A second instance with N_MASK = 4 (column-wide variant) gets the same
// inputs and four random bytes R_k; each of its infections must equal
// NB(ref(e_p * R_k_p)).
module tb_rs_infective;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][7:0] x, zp, infect;
  logic [2:0][3:0] y;
  logic [7:0]      r;
  logic [INF_RND_W-1:0] rnd;

  rs_infective dut (.*);

  logic [3:0][2:0][7:0] infect4;
  logic [16+24*4-1:0]   rnd4;
  rs_infective #(.N_MASK(4)) dut4 (.clk, .x, .y, .zp, .r, .rnd(rnd4), .infect(infect4));

  function automatic logic [23:0] share3(logic [7:0] v);
    logic [7:0] a, b;
    a = 8'($urandom); b = 8'($urandom);
    return {b, a, v ^ a ^ b};
  endfunction

  initial begin
    logic [7:0] p, rp, ep, r1p, exp_v [3];
    logic [3:0] yv;
    logic [2:0][7:0] zp_n;
    logic [7:0] r_n, r1_n;
    logic [7:0] rk_p [4];
    logic [7:0] rk_n [4];
    logic [7:0] exp4 [3][4];
    static int n_err = 0;
    zp_n = '0; r_n = '0; r1_n = '0;
    rk_n = '{default: '0};
    exp4 = '{default: '0};
    rnd4 = '0;
    exp_v = '{default: '0};
    x = '0; zp = '0; y = '0; r = '0; rnd = '0;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      if (it >= 3) begin
        checks++;
        if ((infect[0] ^ infect[1] ^ infect[2]) != exp_v[1]) begin
          failures++;
          $display("FAIL got %h exp %h", infect[0]^infect[1]^infect[2], exp_v[1]);
        end
        for (int k = 0; k < 4; k++) begin
          checks++;
          if ((infect4[k][0] ^ infect4[k][1] ^ infect4[k][2]) != exp4[1][k]) begin
            failures++;
            $display("FAIL N_MASK=4 infection %0d got %h exp %h", k,
                     infect4[k][0] ^ infect4[k][1] ^ infect4[k][2], exp4[1][k]);
          end
        end
      end
      exp_v[2] = exp_v[1];
      exp_v[1] = exp_v[0];
      exp4[2] = exp4[1];
      exp4[1] = exp4[0];
      p   = (it % 5 == 0) ? 8'h00 : 8'($urandom);
      rp  = 8'($urandom);
      r1p = 8'($urandom);
      ep  = (it % 2 == 0) ? 8'h00 : 8'($urandom);
      if (ep != 0) n_err++;
      yv  = gf16_inv(gf256_inv_d(to_nb(p)));
      x   = share3(to_nb(p));
      y   = {4'($urandom), 4'($urandom), 4'h0};
      y[0] = yv ^ y[1] ^ y[2];
      // Z', R and R1 of the previous item, then prepare this item's
      zp  = zp_n;
      r   = r_n;
      rnd = {8'($urandom), 8'($urandom), r1_n, 16'($urandom)};
      rnd4[15:0] = 16'($urandom);
      for (int k = 0; k < 4; k++) begin
        rnd4[16+24*k +: 8]  = rk_n[k];
        rnd4[24+24*k +: 16] = 16'($urandom);
      end
      r_n  = to_nb(rp);
      zp_n = share3(to_nb(ref_inv(p)) ^ r_n);
      zp_n[1] ^= to_nb(ep);
      r1_n = to_nb(r1p);
      exp_v[0] = to_nb(ref_mul(ep, r1p));
      for (int k = 0; k < 4; k++) begin
        rk_p[k] = 8'($urandom);
        rk_n[k] = to_nb(rk_p[k]);
        exp4[0][k] = to_nb(ref_mul(ep, rk_p[k]));
      end
    end
    checks++;
    if (n_err < 500) begin failures++; $display("FAIL too few errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
