// tb_rs_aes: end-to-end test of the RS-Mask AES at its default parameters.
//
// Encrypts the FIPS-197 Appendix C.1 vector, a block whose first-round S-box
// input bytes are all zero (plaintext = key), a block with an all-zero RS
// share, and random blocks with random shares, all with fresh randomness
// every cycle, and compares the recombined ciphertext with a plain reference
// AES. Also checks the cycle count per block (255 in this design) and
// counts how often each mechanism of the design occurs: zero-input S-box
// evaluations (X = 0 path of the RS mapping), non-zero ones, key-schedule
// S-box bytes, MixColumns-free last-round columns and pipeline drain cycles.
module tb_rs_aes;
  import rs_gf_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned N_RANDOM = 6;
  localparam int unsigned BLOCK_CYCLES = 255;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic [127:0] pt_sh0, pt_sh1, pt_rs, key_sh0, key_sh1;
  logic [SBOX_RND_W-1:0] rnd;
  logic busy, done;
  logic [127:0] ct_sh0, ct_sh1, ct_rs;

  int checks = 0, failures = 0;
  int n_zero = 0, n_nonzero = 0, n_keybytes = 0, n_lastcols = 0, n_wait = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  rs_aes dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < SBOX_RND_W; i++) rnd[i] <= 1'($urandom);
  end

  // Mechanism counters, read from the S-box and controller.
  always @(posedge clk) begin
    if (dut.tag_in.valid && !dut.tag_in.is_key) begin
      if ((dut.sb_d0 ^ dut.sb_d1 ^ dut.sb_r) == 8'h00) n_zero++;
      else n_nonzero++;
    end
    if (dut.tag_in.valid && dut.tag_in.is_key) n_keybytes++;
    if (busy && !dut.tag_in.valid) n_wait++;
    if (dut.tag_out.valid && !dut.tag_out.is_key && dut.wb_row == 2'd3 && dut.round == 4'd10)
      n_lastcols++;
  end

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic run_block(input logic [127:0] pt, input logic [127:0] key,
                           input logic [127:0] rs, input string name);
    logic [127:0] exp_ct, got;
    longint t0;
    pt_rs   = rs;
    pt_sh1  = rand128();
    pt_sh0  = pt ^ pt_sh1 ^ rs;
    key_sh1 = rand128();
    key_sh0 = key ^ key_sh1;
    exp_ct  = ref_aes128(pt, key);
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
    got = ct_sh0 ^ ct_sh1 ^ ct_rs;
    checks++;
    if (got !== exp_ct) begin
      failures++;
      $display("FAIL %s: ct %h expected %h", name, got, exp_ct);
    end
    checks++;
    if (cyc - t0 != BLOCK_CYCLES) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d", name, cyc - t0, BLOCK_CYCLES);
    end
    // the RS share must not equal the ciphertext (it is a random mask)
    @(negedge clk);
  endtask

  initial begin
    pt_sh0 = '0; pt_sh1 = '0; pt_rs = '0; key_sh0 = '0; key_sh1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    run_block(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f,
              rand128(), "fips197");
    run_block(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h2b7e151628aed2a6abf7158809cf4f3c,
              rand128(), "zero-input");
    run_block(128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c,
              128'h0, "rs-zero");
    for (int i = 0; i < N_RANDOM; i++) run_block(rand128(), rand128(), rand128(), "random");

    $display("mechanisms: zero-input=%0d nonzero=%0d key-bytes=%0d last-round-cols=%0d wait-cycles=%0d",
             n_zero, n_nonzero, n_keybytes, n_lastcols, n_wait);
    checks += 5;
    if (n_zero == 0)     begin failures++; $display("FAIL: zero-input path never used"); end
    if (n_nonzero == 0)  begin failures++; $display("FAIL: non-zero path never used"); end
    if (n_keybytes == 0) begin failures++; $display("FAIL: key schedule never used"); end
    if (n_lastcols == 0) begin failures++; $display("FAIL: last round never reached"); end
    if (n_wait == 0)     begin failures++; $display("FAIL: no pipeline drain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
