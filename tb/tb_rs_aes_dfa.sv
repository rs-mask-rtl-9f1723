// tb_rs_aes_dfa: classical DFA experiment on the two infective AES variants.
//
// Two infective AES cores run in lock step on the same inputs:
//   u_byte  INFECTIVE = 1: each S-box output is infected with E * R1
//   u_col   INFECTIVE = 1, INF_COLUMN = 1: four infections E * R_i are added
//           to the four bytes of the column after MixColumns
// Even-numbered encryptions run without a fault and must give the correct
// ciphertext (265 cycles per block). In odd-numbered ones one bit of share 0
// of the first GF(2^2) multiplier register of the masked GF(2^4) inverter is
// flipped while it holds state byte 0 at the start of round 9. This byte
// enters row 0 of column 0, so after round 9's MixColumns a plain core shows
// the difference pattern (2e, e, e, 3e) in column 0 that a DFA solves for
// the key. The testbench peels round 10 off the faulty ciphertext with the
// known last round key and checks that pattern:
//   u_byte  the per-byte infection randomises e but keeps the pattern, so
//           the pattern holds for every effective fault
//   u_col   the four bytes get independent infections: the pattern (a
//           1-in-2^24 event for random bytes) must never hold
// Both must show effective faults, with a non-zero difference in column 0.
module tb_rs_aes_dfa;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned N = 120;          // encryptions, half of them faulted
  localparam int unsigned BLOCK_CYCLES = 265;
  localparam logic [3:0]  FAULT_ROUND = 4'd9;
  localparam int unsigned FAULT_LEVEL = 7;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [127:0] pt_sh0, pt_sh1, pt_rs, key_sh0, key_sh1;
  logic [SBOX_RND_W+INF_RND_W-1:0]     rnd_b;
  logic [SBOX_RND_W+INF_COL_RND_W-1:0] rnd_c;
  logic busy_b, done_b, busy_c, done_c;
  logic [127:0] c0_b, c1_b, cr_b, c0_c, c1_c, cr_c;

  int checks = 0, failures = 0;
  bit fault_on = 1'b0;
  int n_fault = 0;
  longint cyc = 0;
  logic [7:0] sb [256];
  logic [7:0] isb [256];

  always #5 clk = ~clk;

  rs_aes #(.INFECTIVE(1'b1)) u_byte (
    .clk, .rst_n, .start, .pt_sh0, .pt_sh1, .pt_rs, .key_sh0, .key_sh1,
    .rnd(rnd_b), .busy(busy_b), .done(done_b), .ct_sh0(c0_b), .ct_sh1(c1_b), .ct_rs(cr_b));
  rs_aes #(.INFECTIVE(1'b1), .INF_COLUMN(1'b1)) u_col (
    .clk, .rst_n, .start, .pt_sh0, .pt_sh1, .pt_rs, .key_sh0, .key_sh1,
    .rnd(rnd_c), .busy(busy_c), .done(done_c), .ct_sh0(c0_c), .ct_sh1(c1_c), .ct_rs(cr_c));

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < $bits(rnd_c); i++) rnd_c[i] <= 1'($urandom);
    for (int i = 0; i < $bits(rnd_b); i++) rnd_b[i] <= 1'($urandom);
  end

  // Transient bit flip right after the edge that loaded the target byte.
  always @(posedge clk) begin
    #1;
    if (fault_on && u_byte.tag_pipe[FAULT_LEVEL].valid && !u_byte.tag_pipe[FAULT_LEVEL].is_key &&
        u_byte.tag_pipe[FAULT_LEVEL].n == 4'd0 && u_byte.round == FAULT_ROUND) begin
      u_byte.u_sbox.u_inv.u_mul_ab.q[0][0] = !u_byte.u_sbox.u_inv.u_mul_ab.q[0][0];
      n_fault++;
    end
    if (fault_on && u_col.tag_pipe[FAULT_LEVEL].valid && !u_col.tag_pipe[FAULT_LEVEL].is_key &&
        u_col.tag_pipe[FAULT_LEVEL].n == 4'd0 && u_col.round == FAULT_ROUND) begin
      u_col.u_sbox.u_inv.u_mul_ab.q[0][0] = !u_col.u_sbox.u_inv.u_mul_ab.q[0][0];
    end
  end

  // Last round key K10 (byte 0 = index 0).
  function automatic void round_key10(logic [127:0] key, output logic [7:0] k [16]);
    logic [7:0] w [4];
    logic [7:0] rc;
    for (int i = 0; i < 16; i++) k[i] = key[127-8*i -: 8];
    rc = 8'h01;
    for (int r = 1; r <= 10; r++) begin
      w[0] = sb[k[13]] ^ rc; w[1] = sb[k[14]]; w[2] = sb[k[15]]; w[3] = sb[k[12]];
      for (int i = 0; i < 16; i++) k[i] = k[i] ^ ((i < 4) ? w[i] : k[i-4]);
      rc = xtime(rc);
    end
  endfunction

  // Column 0 of the round-10 input, recovered from a ciphertext:
  // state byte 4c+j went to ciphertext byte 4((c-j) mod 4)+j.
  function automatic logic [31:0] col0_r10(logic [127:0] ct, logic [7:0] k [16]);
    logic [7:0] b [4];
    int p;
    for (int j = 0; j < 4; j++) begin
      p = 4 * ((4 - j) % 4) + j;
      b[j] = isb[ct[127-8*p -: 8] ^ k[p]];
    end
    return {b[0], b[1], b[2], b[3]};
  endfunction

  // Difference pattern of a single-byte error in row 0 before MixColumns.
  function automatic bit mc_row0_pattern(logic [31:0] d);
    logic [7:0] d0, d1, d2, d3;
    {d0, d1, d2, d3} = d;
    return d1 != 8'h00 && d1 == d2 && d0 == xtime(d1) && d3 == (xtime(d1) ^ d1);
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  initial begin
    static int eff_b = 0, pat_b = 0, eff_c = 0, pat_c = 0;
    logic [127:0] pt, key, exp_ct, got_b, got_c;
    logic [31:0] ref_col, d_b, d_c;
    logic [7:0] k10 [16];
    longint t0;
    for (int i = 0; i < 256; i++) begin
      sb[i] = ref_sbox(8'(i));
      isb[sb[i]] = 8'(i);
    end
    pt_sh0 = '0; pt_sh1 = '0; pt_rs = '0; key_sh0 = '0; key_sh1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < N; it++) begin
      pt = rand128(); key = rand128();
      exp_ct  = ref_aes128(pt, key);
      round_key10(key, k10);
      pt_rs   = rand128();
      pt_sh1  = rand128();
      pt_sh0  = pt ^ pt_sh1 ^ pt_rs;
      key_sh1 = rand128();
      key_sh0 = key ^ key_sh1;
      fault_on = (it % 2 == 1);
      @(negedge clk);
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!(done_b && done_c)) @(negedge clk);
      got_b = c0_b ^ c1_b ^ cr_b;
      got_c = c0_c ^ c1_c ^ cr_c;
      if (!fault_on) begin
        chk(got_b == exp_ct, "byte-infective core, no fault: ciphertext");
        chk(got_c == exp_ct, "column-infective core, no fault: ciphertext");
        chk(cyc - t0 == longint'(BLOCK_CYCLES), "cycles per block");
      end else begin
        ref_col = col0_r10(exp_ct, k10);
        d_b = col0_r10(got_b, k10) ^ ref_col;
        d_c = col0_r10(got_c, k10) ^ ref_col;
        if (got_b != exp_ct) begin eff_b++; if (mc_row0_pattern(d_b)) pat_b++; end
        if (got_c != exp_ct) begin eff_c++; if (mc_row0_pattern(d_c)) pat_c++; end
      end
    end
    $display("faults %0d; byte infection: %0d effective, %0d with DFA pattern; column infection: %0d effective, %0d with DFA pattern",
             n_fault, eff_b, pat_b, eff_c, pat_c);
    chk(n_fault == N / 2, "one fault per faulted encryption");
    chk(eff_b > N / 8, "byte infection: effective faults occur");
    chk(eff_c > N / 8, "column infection: effective faults occur");
    chk(pat_b == eff_b, "byte infection keeps the MixColumns difference pattern");
    chk(pat_c == 0, "column infection must break the MixColumns difference pattern");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * (BLOCK_CYCLES + 10) + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
