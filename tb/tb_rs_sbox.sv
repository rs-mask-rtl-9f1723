// tb_rs_sbox: checks the RS-Mask S-box against the FIPS-197 S-box.
//
// Every cycle a new input (d0, d1, r) enters with fresh randomness; nine
// cycles later o0 ^ o1 ^ o_r must equal S(d0 ^ d1 ^ r) from the reference
// model and o_r must equal the linear part of the affine map applied to r.
// All 256 values of X are swept with random masks, then X = 0 and
// R = 0 are forced often (the two corner cases of the RS mapping), then
// random inputs. The latency is checked by the alignment itself.
module tb_rs_sbox;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] d0, d1, r, o0, o1, o_r;
  logic [3:0][7:0] inf0, inf1;   // column infections, unused without the infective option
  logic [SBOX_RND_W-1:0] rnd;
  logic [7:0] hx [10];
  logic [7:0] hr [10];

  rs_sbox dut (.*);

  function automatic logic [7:0] lin(logic [7:0] v);
    return ref_sbox_lin(v);
  endfunction

  // Linear part of the AES affine map, from its definition.
  function automatic logic [7:0] ref_sbox_lin(logic [7:0] v);
    logic [7:0] y;
    for (int i = 0; i < 8; i++)
      y[i] = v[i] ^ v[(i+4)%8] ^ v[(i+5)%8] ^ v[(i+6)%8] ^ v[(i+7)%8];
    return y;
  endfunction

  initial begin
    logic [7:0] x;
    int n_zero = 0;
    d0 = '0; d1 = '0; r = '0; rnd = '0;
    for (int i = 0; i < 10; i++) begin hx[i] = '0; hr[i] = '0; end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      if (it >= 9) begin
        checks += 2;
        if ((o0 ^ o1 ^ o_r) != ref_sbox(hx[8])) begin
          failures++;
          $display("FAIL X=%h R=%h got %h exp %h", hx[8], hr[8], o0^o1^o_r, ref_sbox(hx[8]));
        end
        if (o_r != lin(hr[8])) begin
          failures++;
          $display("FAIL RS share R=%h got %h", hr[8], o_r);
        end
        if (hx[8] == 0) n_zero++;
      end
      for (int i = 9; i > 0; i--) begin hx[i] = hx[i-1]; hr[i] = hr[i-1]; end
      if (it < 256) x = 8'(it);
      else if (it % 3 == 0) x = 8'h00;
      else x = 8'($urandom);
      r  = (it % 7 == 3) ? 8'h00 : 8'($urandom);
      d1 = 8'($urandom);
      d0 = x ^ d1 ^ r;
      hx[0] = x; hr[0] = r;
      for (int i = 0; i < SBOX_RND_W; i++) rnd[i] = 1'($urandom);
    end
    checks++;
    if (n_zero < 100) begin failures++; $display("FAIL too few zero inputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
