// tb_ti_gf_mul: checks the three-share TI multiplier at W = 1, 2 and 4.
//
// Correctness: the XOR of the registered output shares must equal the
// product of the unshared inputs one cycle later (AND for W = 1, the
// GF(2^2) truth table printed in the paper for W = 2, the normal-basis
// GF(2^4) product for W = 4). Non-completeness: for each share index i the
// test repeats an input with share i of x and y changed (same remasking
// bits) and checks that output share i did not move.
module tb_ti_gf_mul;
  import rs_gf_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // Fig. 2(b) table, q = s x t, row s, column t.
  localparam logic [1:0] GF4_TABLE [4][4] = '{
    '{2'd0, 2'd0, 2'd0, 2'd0},
    '{2'd0, 2'd2, 2'd3, 2'd1},
    '{2'd0, 2'd3, 2'd1, 2'd2},
    '{2'd0, 2'd1, 2'd2, 2'd3}};

  logic [2:0]      x1, y1, q1;
  logic [1:0]      r1;
  logic [2:0][1:0] x2, y2, q2;
  logic [3:0]      r2;
  logic [2:0][3:0] x4, y4, q4;
  logic [7:0]      r4;

  ti_gf_mul #(.W(1)) u1 (.clk, .x(x1), .y(y1), .rnd(r1), .q(q1));
  ti_gf_mul #(.W(2)) u2 (.clk, .x(x2), .y(y2), .rnd(r2), .q(q2));
  ti_gf_mul #(.W(4)) u4 (.clk, .x(x4), .y(y4), .rnd(r4), .q(q4));

  // Independent GF(2^4) reference: schoolbook from the GF(2^2) table.
  function automatic logic [3:0] ref16(logic [3:0] a, logic [3:0] b);
    logic [1:0] e;
    e = GF4_TABLE[GF4_TABLE[a[3:2]^a[1:0]][b[3:2]^b[1:0]]][2'b01];
    return {GF4_TABLE[a[3:2]][b[3:2]] ^ e, GF4_TABLE[a[1:0]][b[1:0]] ^ e};
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  initial begin
    logic [3:0] ex4; logic [1:0] ex2; logic ex1;
    logic [2:0][3:0] q4a; logic [2:0][1:0] q2a; logic [2:0] q1a;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      x1 = 3'($urandom); y1 = 3'($urandom); r1 = 2'($urandom);
      x2 = 6'($urandom); y2 = 6'($urandom); r2 = 4'($urandom);
      x4 = 12'($urandom); y4 = 12'($urandom); r4 = 8'($urandom);
      ex1 = ^x1 & ^y1;
      ex2 = GF4_TABLE[x2[0]^x2[1]^x2[2]][y2[0]^y2[1]^y2[2]];
      ex4 = ref16(x4[0]^x4[1]^x4[2], y4[0]^y4[1]^y4[2]);
      @(negedge clk);
      chk((q1[0]^q1[1]^q1[2]) == ex1, "AND product");
      chk((q2[0]^q2[1]^q2[2]) == ex2, "GF(2^2) product");
      chk((q4[0]^q4[1]^q4[2]) == ex4, $sformatf("GF(2^4) product %h", ex4));
      // non-completeness: change share i, same rnd, output share i unchanged
      q4a = q4; q2a = q2; q1a = q1;
      begin
        int i;
        i = it % 3;
        x4[i] = ~x4[i]; y4[i] = y4[i] ^ 4'h5;
        x2[i] = ~x2[i]; y2[i] = ~y2[i];
        x1[i] = ~x1[i]; y1[i] = ~y1[i];
        @(negedge clk);
        chk(q4[i] == q4a[i], "GF(2^4) non-completeness");
        chk(q2[i] == q2a[i], "GF(2^2) non-completeness");
        chk(q1[i] == q1a[i], "AND non-completeness");
      end
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
