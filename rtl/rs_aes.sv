// rs_aes: AES-128 encryption protected with RS-Mask (top level).
//
// The 128-bit state is kept in three Boolean shares: two data shares and the
// RS share R, with state = s0 ^ s1 ^ R. The RS share only ever sees linear
// operations (ShiftRows, the linear part of the S-box affine map,
// MixColumns) and never a key byte; the round key is kept in two shares
// whose RS share is implicitly zero. All S-box evaluations, for the state
// and for the key schedule, go through one fully pipelined RS-Mask S-box
// (rs_sbox, 9 register levels). Register level 10 is the state register:
// when the fourth byte of a column leaves the S-box, MixColumns (skipped in
// the last round) is applied to each share of the column, the two round key
// shares are added to the two data shares, and the column is written.
//
// Schedule, per block (this design's choice; the paper gives only the
// 10-stage pipeline and the single shared S-box):
//   load      state shares = plaintext shares ^ key shares, R = pt_rs
//   pre-round 4 key-schedule bytes (RotWord of the last key word) for K1
//   round r   16 state bytes in ShiftRows order, column by column, then
//             (r < 10) the 4 key-schedule bytes of K(r+1), then wait until
//             the last column of round r is written (pipeline drain)
// A round takes 25 cycles; one block takes 255 cycles from start to done
// (265 with the infective S-box, whose latency is 10).
// The key schedule S-box bytes are evaluated with R = 0, so they are
// protected by the three-share TI only, as the paper allows for round keys.
//
// Interface: pulse start for one cycle while idle with the plaintext given
// as three shares (pt_sh0 ^ pt_sh1 ^ pt_rs) and the key as two shares.
// pt_rs must be uniformly random: it becomes the RS share. rnd must carry
// RND_W fresh random bits every cycle. INFECTIVE = 1 selects the infective
// RS-Mask S-box (an extension the paper proposes but does not evaluate);
// the default 0 is the evaluated design. INF_COLUMN = 1 (with INFECTIVE)
// selects the column-wide variant: each S-box output of a column brings four
// infections E * R_i, which are summed over the column and added to its four
// bytes after MixColumns (key-schedule bytes take infection 0 directly).
// done pulses for one cycle when
// the ciphertext shares are valid; they stay valid until the next start.
// Byte 0 of every 128-bit word is bits [127:120], as in FIPS-197.
module rs_aes
  import rs_gf_pkg::*;
#(
  parameter bit          INFECTIVE  = 1'b0,
  parameter bit          INF_COLUMN = 1'b0,
  localparam int unsigned RND_W    = SBOX_RND_W +
                                     (INFECTIVE ? (INF_COLUMN ? INF_COL_RND_W : INF_RND_W) : 0)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [127:0]          pt_sh0,
  input  logic [127:0]          pt_sh1,
  input  logic [127:0]          pt_rs,
  input  logic [127:0]          key_sh0,
  input  logic [127:0]          key_sh1,
  input  logic [RND_W-1:0]      rnd,
  output logic                  busy,
  output logic                  done,
  output logic [127:0]          ct_sh0,
  output logic [127:0]          ct_sh1,
  output logic [127:0]          ct_rs
);
  localparam int unsigned SBOX_LAT = INFECTIVE ? 10 : 9;

  typedef enum logic [1:0] {S_IDLE, S_KEY, S_DATA, S_WAIT} state_e;

  typedef struct packed {
    logic       valid;
    logic       is_key;
    logic [3:0] n;      // byte number within the feed (0..15 or 0..3)
  } tag_t;

  state_e      fsm;
  logic        pre;       // key feed before round 1
  logic [3:0]  round;     // 1..10
  logic [3:0]  cnt;
  logic [7:0]  rcon;

  logic [7:0]  st [3][16];  // shares 0,1 and RS share
  logic [7:0]  nx [3][16];  // next-round state being assembled
  logic [7:0]  rk [2][16];  // round key shares
  logic [7:0]  cb [3][3];   // column buffer: shares x rows 0..2
  logic [7:0]  kb [2][3];   // key-schedule S-box outputs 0..2

  logic        round_done;

  // ------------------------------------------------------------ feed side
  logic [7:0] sb_d0, sb_d1, sb_r, sb_o0, sb_o1, sb_or;
  logic [3:0][7:0] sb_inf0, sb_inf1;   // column infections (zero unless INF_COLUMN)
  logic [7:0] sb_k0, sb_k1;            // key-schedule S-box output shares
  logic [7:0] ia [2][4];               // column infection accumulated over rows 0..2
  tag_t       tag_in;
  tag_t       tag_pipe [1:SBOX_LAT];
  tag_t       tag_out;

  logic [3:0] src;
  always_comb begin
    tag_in = '0;
    sb_d0  = '0;
    sb_d1  = '0;
    sb_r   = '0;
    src    = '0;
    if (fsm == S_DATA) begin
      // new[row j][col c] = old[row j][col (c+j)%4]
      src    = {cnt[3:2] + cnt[1:0], cnt[1:0]};
      sb_d0  = st[0][src];
      sb_d1  = st[1][src];
      sb_r   = st[2][src];
      tag_in = '{valid: 1'b1, is_key: 1'b0, n: cnt};
    end else if (fsm == S_KEY) begin
      // RotWord of the last key word: bytes 13, 14, 15, 12
      src    = {2'b11, cnt[1:0] + 2'd1};
      sb_d0  = rk[0][src];
      sb_d1  = rk[1][src];
      tag_in = '{valid: 1'b1, is_key: 1'b1, n: cnt};
    end
  end

  rs_sbox #(.INFECTIVE(INFECTIVE), .INF_COLUMN(INF_COLUMN)) u_sbox (
    .clk, .d0(sb_d0), .d1(sb_d1), .r(sb_r), .rnd,
    .o0(sb_o0), .o1(sb_o1), .o_r(sb_or), .inf0(sb_inf0), .inf1(sb_inf1)
  );
  assign sb_k0 = sb_o0 ^ sb_inf0[0];
  assign sb_k1 = sb_o1 ^ sb_inf1[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 1; k <= SBOX_LAT; k++) tag_pipe[k] <= '0;
    end else begin
      tag_pipe[1] <= tag_in;
      for (int k = 2; k <= SBOX_LAT; k++) tag_pipe[k] <= tag_pipe[k-1];
    end
  end
  assign tag_out = tag_pipe[SBOX_LAT];

  // ------------------------------------------------------------ controller
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fsm   <= S_IDLE;
      pre   <= 1'b0;
      round <= '0;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (fsm)
        S_IDLE: if (start) begin
          fsm   <= S_KEY;
          pre   <= 1'b1;
          round <= 4'd1;
          cnt   <= '0;
        end
        S_KEY: begin
          cnt <= cnt + 4'd1;
          if (cnt == 4'd3) begin
            cnt <= '0;
            pre <= 1'b0;
            fsm <= pre ? S_DATA : S_WAIT;
          end
        end
        S_DATA: begin
          cnt <= cnt + 4'd1;
          if (cnt == 4'd15) begin
            cnt <= '0;
            fsm <= (round != 4'd10) ? S_KEY : S_WAIT;
          end
        end
        S_WAIT: if (round_done) begin
          if (round == 4'd10) begin
            fsm  <= S_IDLE;
            done <= 1'b1;
          end else begin
            round <= round + 4'd1;
            fsm   <= S_DATA;
          end
        end
      endcase
    end
  end

  assign busy = (fsm != S_IDLE);

  // --------------------------------------------------- level 10: write-back
  logic [1:0]  wb_col, wb_row;
  logic [31:0] col_new [3];
  logic [7:0]  t0 [4];
  logic [7:0]  t1 [4];
  logic [7:0]  w0 [2][16];

  assign wb_col = tag_out.n[3:2];
  assign wb_row = tag_out.n[1:0];
  assign round_done = tag_out.valid && !tag_out.is_key && tag_out.n == 4'd15;

  // Column result: MixColumns on every share, AddRoundKey on shares 0 and 1.
  always_comb begin
    logic [31:0] c [3];
    c[0] = {cb[0][0], cb[0][1], cb[0][2], sb_o0};
    c[1] = {cb[1][0], cb[1][1], cb[1][2], sb_o1};
    c[2] = {cb[2][0], cb[2][1], cb[2][2], sb_or};
    for (int s = 0; s < 3; s++) begin
      col_new[s] = (round == 4'd10) ? c[s] : mix_col(c[s]);
    end
    for (int s = 0; s < 2; s++) begin
      col_new[s] ^= {rk[s][4*wb_col], rk[s][4*wb_col+1], rk[s][4*wb_col+2], rk[s][4*wb_col+3]};
    end
    col_new[0] ^= {ia[0][0] ^ sb_inf0[0], ia[0][1] ^ sb_inf0[1],
                   ia[0][2] ^ sb_inf0[2], ia[0][3] ^ sb_inf0[3]};
    col_new[1] ^= {ia[1][0] ^ sb_inf1[0], ia[1][1] ^ sb_inf1[1],
                   ia[1][2] ^ sb_inf1[2], ia[1][3] ^ sb_inf1[3]};
  end

  // Key expansion from the four SubWord bytes (RotWord already applied).
  always_comb begin
    t0[0] = kb[0][0] ^ rcon;  t0[1] = kb[0][1];  t0[2] = kb[0][2];  t0[3] = sb_k0;
    t1[0] = kb[1][0];         t1[1] = kb[1][1];  t1[2] = kb[1][2];  t1[3] = sb_k1;
    for (int b = 0; b < 4; b++) begin
      w0[0][b] = rk[0][b] ^ t0[b];
      w0[1][b] = rk[1][b] ^ t1[b];
    end
    for (int b = 4; b < 16; b++) begin
      w0[0][b] = rk[0][b] ^ w0[0][b-4];
      w0[1][b] = rk[1][b] ^ w0[1][b-4];
    end
  end

  always_ff @(posedge clk) begin
    if (fsm == S_IDLE && start) begin
      for (int b = 0; b < 16; b++) begin
        st[0][b] <= pt_sh0[127-8*b -: 8] ^ key_sh0[127-8*b -: 8];
        st[1][b] <= pt_sh1[127-8*b -: 8] ^ key_sh1[127-8*b -: 8];
        st[2][b] <= pt_rs[127-8*b -: 8];
        rk[0][b] <= key_sh0[127-8*b -: 8];
        rk[1][b] <= key_sh1[127-8*b -: 8];
      end
      rcon <= 8'h01;
    end else if (tag_out.valid && tag_out.is_key) begin
      if (tag_out.n[1:0] != 2'd3) begin
        kb[0][tag_out.n[1:0]] <= sb_k0;
        kb[1][tag_out.n[1:0]] <= sb_k1;
      end else begin
        rk   <= w0;
        rcon <= xtime(rcon);
      end
    end else if (tag_out.valid) begin
      if (wb_row != 2'd3) begin
        cb[0][wb_row] <= sb_o0;
        cb[1][wb_row] <= sb_o1;
        cb[2][wb_row] <= sb_or;
        for (int k = 0; k < 4; k++) begin
          ia[0][k] <= ((wb_row == 2'd0) ? 8'h00 : ia[0][k]) ^ sb_inf0[k];
          ia[1][k] <= ((wb_row == 2'd0) ? 8'h00 : ia[1][k]) ^ sb_inf1[k];
        end
      end else begin
        for (int s = 0; s < 3; s++)
          for (int j = 0; j < 4; j++)
            nx[s][4*wb_col+j] <= col_new[s][31-8*j -: 8];
        if (wb_col == 2'd3) begin
          for (int s = 0; s < 3; s++) begin
            for (int b = 0; b < 12; b++) st[s][b] <= nx[s][b];
            for (int j = 0; j < 4; j++) st[s][12+j] <= col_new[s][31-8*j -: 8];
          end
        end
      end
    end
  end

  always_comb begin
    for (int b = 0; b < 16; b++) begin
      ct_sh0[127-8*b -: 8] = st[0][b];
      ct_sh1[127-8*b -: 8] = st[1][b];
      ct_rs [127-8*b -: 8] = st[2][b];
    end
  end

  // The key schedule runs with a zero RS share, so its S-box outputs must
  // carry a zero RS share as well.
  a_key_rs_zero: assert property (@(posedge clk) disable iff (!rst_n)
    (tag_out.valid && tag_out.is_key) |-> sb_or == 8'h00);
  // A new block may only start while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> fsm == S_IDLE);
endmodule
