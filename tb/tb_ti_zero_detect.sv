// tb_ti_zero_detect: checks the shared zero detector.
//
// A new three-share byte enters every cycle (one in four is a sharing of
// zero); three cycles later the recombined f must be 4'hF for a non-zero
// byte and 0 for zero, and fbar its complement. Every share of f and fbar
// must be a replicated bit.
module tb_ti_zero_detect;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][7:0] x;
  logic [13:0]     rnd;
  logic [2:0][3:0] f, fbar;
  logic [7:0]      hist [3];

  ti_zero_detect dut (.*);

  initial begin
    logic [3:0] fs, fbs;
    int zeros = 0;
    x = '0; rnd = '0;
    for (int i = 0; i < 3; i++) hist[i] = 8'h01;
    for (int it = 0; it < 800; it++) begin
      @(negedge clk);
      if (it >= 3) begin
        fs  = f[0] ^ f[1] ^ f[2];
        fbs = fbar[0] ^ fbar[1] ^ fbar[2];
        checks += 2;
        if (fs != ((hist[2] != 0) ? 4'hF : 4'h0)) begin
          failures++; $display("FAIL f x=%h f=%h", hist[2], fs);
        end
        if (fbs != ~fs) begin failures++; $display("FAIL fbar"); end
        if (hist[2] == 0) zeros++;
      end
      hist[2] = hist[1]; hist[1] = hist[0];
      x = 24'($urandom);
      if (it % 4 == 0) x[0] = x[1] ^ x[2];
      else if (it % 4 == 1) x[0] = x[1] ^ x[2] ^ (8'h1 << (it % 8));
      hist[0] = x[0] ^ x[1] ^ x[2];
      rnd = 14'($urandom);
    end
    checks++;
    if (zeros < 100) begin failures++; $display("FAIL too few zero inputs"); end
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
