// tb_rs_aes_sifa: statistical ineffective fault experiment on the whole AES.
//
// Two AES cores run side by side on the same plaintexts, keys, data shares
// and randomness:
//   u_ti  RS share of the plaintext is 0, so every state S-box has R = 0 and
//         the core degenerates to a plain three-share TI AES
//   u_rs  RS share uniformly random (the RS-Mask AES)
// In every encryption one transient fault is injected into each core: bit 0
// of share 0 of the first GF(2^2) multiplier register inside the masked
// GF(2^4) inverter is cleared, in the single cycle in which that register
// holds state byte 0 at the start of round 9 (the fault location of the
// S-box figure and the round used for the attack on the full cipher).
// The fault is ineffective when the recombined ciphertext is still correct;
// an attacker who keeps only correct ciphertexts then learns the
// distribution of the faulted S-box input X.
// Half of the plaintexts are chosen so that X = 0 (found by search with a
// table-driven reference AES), the other half are random.
// Expected: TI: every encryption with X = 0 is ineffective, about half of the
// others are (a bias a SIFA attack exploits). RS-Mask: about half of the
// encryptions are ineffective for X = 0 and X != 0 alike (no bias).
// Every faulted ciphertext is compared with a plain reference AES.
// Timing: 255 cycles per encryption, both cores in lock step.
module tb_rs_aes_sifa;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned N = 400;          // encryptions
  localparam logic [3:0]  FAULT_ROUND = 4'd9;
  localparam int unsigned FAULT_LEVEL = 7;  // register level of the inverter's first multiplier

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [127:0] pt_sh0, pt_sh1, pt_rs, pt_sh0_ti, key_sh0, key_sh1;
  logic [SBOX_RND_W-1:0] rnd;
  logic busy_ti, done_ti, busy_rs, done_rs;
  logic [127:0] c0_ti, c1_ti, cr_ti, c0_rs, c1_rs, cr_rs;

  int checks = 0, failures = 0;
  int n_fault_ti = 0, n_fault_rs = 0;
  logic [7:0] sb [256];

  always #5 clk = ~clk;

  rs_aes u_ti (.clk, .rst_n, .start, .pt_sh0(pt_sh0_ti), .pt_sh1, .pt_rs('0),
               .key_sh0, .key_sh1, .rnd, .busy(busy_ti), .done(done_ti),
               .ct_sh0(c0_ti), .ct_sh1(c1_ti), .ct_rs(cr_ti));
  rs_aes u_rs (.clk, .rst_n, .start, .pt_sh0, .pt_sh1, .pt_rs,
               .key_sh0, .key_sh1, .rnd, .busy(busy_rs), .done(done_rs),
               .ct_sh0(c0_rs), .ct_sh1(c1_rs), .ct_rs(cr_rs));

  always @(posedge clk)
    for (int i = 0; i < SBOX_RND_W; i++) rnd[i] <= 1'($urandom);

  // Transient fault: overwrite the register right after the clock edge that
  // loaded the target byte; the next edge loads the following byte normally.
  always @(posedge clk) begin
    #1;
    if (u_ti.tag_pipe[FAULT_LEVEL].valid && !u_ti.tag_pipe[FAULT_LEVEL].is_key &&
        u_ti.tag_pipe[FAULT_LEVEL].n == 4'd0 && u_ti.round == FAULT_ROUND) begin
      u_ti.u_sbox.u_inv.u_mul_ab.q[0][0] = 1'b0;
      n_fault_ti++;
    end
    if (u_rs.tag_pipe[FAULT_LEVEL].valid && !u_rs.tag_pipe[FAULT_LEVEL].is_key &&
        u_rs.tag_pipe[FAULT_LEVEL].n == 4'd0 && u_rs.round == FAULT_ROUND) begin
      u_rs.u_sbox.u_inv.u_mul_ab.q[0][0] = 1'b0;
      n_fault_rs++;
    end
  end

  // Table-driven AES state after `nr` full rounds (byte 0 = bits 127:120).
  function automatic logic [127:0] state_after(logic [127:0] pt, logic [127:0] key, int nr);
    logic [7:0] s [16];
    logic [7:0] k [16];
    logic [7:0] t [16];
    logic [7:0] w [4];
    logic [7:0] rc;
    logic [127:0] out;
    for (int i = 0; i < 16; i++) begin
      s[i] = pt[127-8*i -: 8] ^ key[127-8*i -: 8];
      k[i] = key[127-8*i -: 8];
    end
    rc = 8'h01;
    for (int r = 1; r <= nr; r++) begin
      w[0] = sb[k[13]] ^ rc; w[1] = sb[k[14]]; w[2] = sb[k[15]]; w[3] = sb[k[12]];
      for (int i = 0; i < 16; i++) k[i] = k[i] ^ ((i < 4) ? w[i] : k[i-4]);
      rc = xtime(rc);
      for (int c = 0; c < 4; c++)
        for (int j = 0; j < 4; j++)
          t[4*c+j] = sb[s[4*((c+j)%4)+j]];
      for (int c = 0; c < 4; c++)
        for (int j = 0; j < 4; j++)
          s[4*c+j] = (r == 10) ? t[4*c+j] :
                     xtime(t[4*c+j]) ^ xtime(t[4*c+(j+1)%4]) ^ t[4*c+(j+1)%4]
                     ^ t[4*c+(j+2)%4] ^ t[4*c+(j+3)%4];
      for (int i = 0; i < 16; i++) s[i] ^= k[i];
    end
    for (int i = 0; i < 16; i++) out[127-8*i -: 8] = s[i];
    return out;
  endfunction

  function automatic real rate(int a, int b);
    return (b == 0) ? 0.0 : real'(a) / real'(b);
  endfunction

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    static int ti_z = 0, ti_zi = 0, ti_n = 0, ti_ni = 0;
    static int rs_z = 0, rs_zi = 0, rs_n = 0, rs_ni = 0;
    logic [127:0] pt, key, exp_ct;
    logic [7:0] x;
    real a, b, c, e;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(8'(i));
    pt_sh0 = '0; pt_sh1 = '0; pt_rs = '0; pt_sh0_ti = '0; key_sh0 = '0; key_sh1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // reference self-check of the table-driven model
    pt = rand128(); key = rand128();
    chk(state_after(pt, key, 10) == ref_aes128(pt, key), "table-driven reference AES");
    for (int it = 0; it < N; it++) begin
      key = rand128();
      do pt = rand128();
      while ((it % 2 == 0) && state_after(pt, key, int'(FAULT_ROUND) - 1) [127:120] != 8'h00);
      x = state_after(pt, key, int'(FAULT_ROUND) - 1) [127:120];
      exp_ct    = state_after(pt, key, 10);
      pt_rs     = rand128();
      pt_sh1    = rand128();
      pt_sh0    = pt ^ pt_sh1 ^ pt_rs;
      pt_sh0_ti = pt ^ pt_sh1;
      key_sh1   = rand128();
      key_sh0   = key ^ key_sh1;
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!(done_ti && done_rs)) @(negedge clk);
      if (x == 8'h00) begin
        ti_z++; rs_z++;
        if ((c0_ti ^ c1_ti ^ cr_ti) == exp_ct) ti_zi++;
        if ((c0_rs ^ c1_rs ^ cr_rs) == exp_ct) rs_zi++;
      end else begin
        ti_n++; rs_n++;
        if ((c0_ti ^ c1_ti ^ cr_ti) == exp_ct) ti_ni++;
        if ((c0_rs ^ c1_rs ^ cr_rs) == exp_ct) rs_ni++;
      end
    end
    a = rate(ti_zi, ti_z); b = rate(ti_ni, ti_n);
    c = rate(rs_zi, rs_z); e = rate(rs_ni, rs_n);
    $display("encryptions with X=0: %0d, X!=0: %0d, faults injected TI %0d RS %0d",
             ti_z, ti_n, n_fault_ti, n_fault_rs);
    $display("ineffective rate  TI: X=0 %0.3f  X!=0 %0.3f   RS-Mask: X=0 %0.3f  X!=0 %0.3f",
             a, b, c, e);
    chk(n_fault_ti == N && n_fault_rs == N, "one fault per encryption");
    chk(a > 0.95, "TI AES: faults at X = 0 are always ineffective");
    chk(b > 0.35 && b < 0.65, "TI AES: ineffective rate for X != 0");
    chk(c > 0.35 && c < 0.65, "RS-Mask AES: ineffective rate for X = 0");
    chk(e > 0.35 && e < 0.65, "RS-Mask AES: ineffective rate for X != 0");
    chk((c - e < 0.15) && (e - c < 0.15), "RS-Mask AES: no bias between X = 0 and X != 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N * 300 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
