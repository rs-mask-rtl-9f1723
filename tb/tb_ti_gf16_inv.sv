// tb_ti_gf16_inv: checks the masked GF(2^4) inverter.
//
// Feeds a new random three-share nibble every cycle with fresh randomness
// and checks, two cycles later, that the recombined output g' satisfies
// g * g' = 15 (the unity) for g != 0 and g' = 0 for g = 0, using the field
// multiply only, not an inverse routine. All 16 values are covered.
module tb_ti_gf16_inv;
  import rs_gf_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][3:0] g, ginv;
  logic [11:0]     rnd;
  logic [3:0]      hist [2];

  ti_gf16_inv dut (.*);

  initial begin
    logic [3:0] v, o;
    g = '0; rnd = '0; hist[0] = '0; hist[1] = '0;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      if (it >= 2) begin
        v = hist[1];
        o = ginv[0] ^ ginv[1] ^ ginv[2];
        checks++;
        if ((v == 0) ? (o != 0) : (gf16_mul(v, o) != 4'hF)) begin
          failures++;
          $display("FAIL g=%h inv=%h", v, o);
        end
      end
      hist[1] = hist[0];
      g = 12'($urandom);
      if (it < 16) g[0] = g[1] ^ g[2] ^ 4'(it);
      hist[0] = g[0] ^ g[1] ^ g[2];
      rnd = 12'($urandom);
    end
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
