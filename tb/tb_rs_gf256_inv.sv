// tb_rs_gf256_inv: checks the single-share GF(2^8) inverter of the RS mask.
//
// All 256 polynomial-basis bytes p are converted to the tower basis and fed
// one per cycle; four cycles later the output must equal the tower form of
// the AES-field inverse of p, computed by the reference model as p^254.
module tb_rs_gf256_inv;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] r, rinv;
  logic [7:0] hist [4];

  rs_gf256_inv dut (.*);

  initial begin
    logic [7:0] exp_v;
    r = '0;
    for (int i = 0; i < 4; i++) hist[i] = '0;
    for (int it = 0; it < 256 + 4; it++) begin
      @(negedge clk);
      if (it >= 4) begin
        exp_v = to_nb(ref_inv(hist[3]));
        checks++;
        if (rinv != exp_v) begin
          failures++;
          $display("FAIL p=%h got %h exp %h", hist[3], rinv, exp_v);
        end
      end
      for (int i = 3; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = 8'(it);
      r = to_nb(8'(it));
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
