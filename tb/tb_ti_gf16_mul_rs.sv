// tb_ti_gf16_mul_rs: checks the three-share by single-share GF(2^4)
// multiplier: the XOR of the output shares one cycle later must equal the
// product of the unshared x with r, computed here from the field definition
// (normal basis over GF(2^2) with N = W), and the shares must not be the
// bare share products (remasking is applied).
module tb_ti_gf16_mul_rs;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0][3:0] x, q;
  logic [3:0]      r;
  logic [7:0]      rnd;

  ti_gf16_mul_rs dut (.*);

  function automatic logic [1:0] m4(logic [1:0] a, logic [1:0] b);
    logic e;
    e = (a[1]^a[0]) & (b[1]^b[0]);
    return {(a[1]&b[1])^e, (a[0]&b[0])^e};
  endfunction
  function automatic logic [3:0] m16(logic [3:0] a, logic [3:0] b);
    logic [1:0] e;
    e = m4(m4(a[3:2]^a[1:0], b[3:2]^b[1:0]), 2'b01);
    return {m4(a[3:2], b[3:2])^e, m4(a[1:0], b[1:0])^e};
  endfunction

  initial begin
    logic [3:0] ex;
    int remasked = 0;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      x = 12'($urandom); r = 4'($urandom); rnd = 8'($urandom);
      ex = m16(x[0]^x[1]^x[2], r);
      @(negedge clk);
      checks++;
      if ((q[0]^q[1]^q[2]) != ex) begin
        failures++;
        $display("FAIL x=%h r=%h got %h exp %h", x, r, q[0]^q[1]^q[2], ex);
      end
      if (q[0] != m16(x[0], r)) remasked++;
    end
    checks++;
    if (remasked == 0) begin failures++; $display("FAIL no remasking seen"); end
    // unity times x
    @(negedge clk);
    x = 12'h5A3; r = 4'hF; rnd = 8'h00;
    @(negedge clk);
    checks++;
    if (q != x) begin failures++; $display("FAIL unity"); end
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
