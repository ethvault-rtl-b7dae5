// BIP39: mnemonic sentence and 512-bit seed from 256 bits of entropy.
//
// Generation (recover = 0): SHA256 hashes the entropy e (one padded block); its first byte
// is the checksum CS, nc = e || CS (264 bits) drives MNG, which writes the 24-word sentence.
// Recovery (recover = 1): the sentence is taken from mcs_in instead (the "mcsIn" input of
// the paper), left-aligned and zero-filled; its length is found by scanning for the last
// non-zero byte. Either way the sentence sits in R3 (2048 bits).
// Password: PBKDF2 uses the sentence as the HMAC key. A key of at most 128 bytes is used
// as it is (R3[2047:1024], zero-padded). A longer one is first hashed, as HMAC requires:
// R3 receives the SHA-512 padding and is sent as two raw blocks dL = R3[2047:1024] and
// dR = R3[1023:0] through the toSHA512 path of the HMAC unit; the digest becomes the key.
// A sentence over 239 bytes (only possible through mcs_in) leaves no room for the length
// field, so a third block carrying the rest of the padding follows.
// PBKDF2: U1 = HMAC(Pwd, "mnemonic" || INT(1)), Ui = HMAC(Pwd, U(i-1)), seed = U1 ^ ... ^
// U_ITER, with ITER = 2048 iterations and an empty passphrase (salt "mnemonic").
//
// The HMAC-SHA-512 unit is shared with CKDF and lives there; this block drives it through
// the h_* request port (h_start pulse, operands held until h_done).
// Interface: wl_* loads the word list; start pulse with e, recover and mcs_in; mcs_done
// pulses when the sentence is in R3 (mcs, mcs_len valid), done pulses when seed is valid.
// Timing: SHA256 66 + MNG about 200 + length scan up to 256 + optional 2 or 3 x 84 for the hash
// + ITER x 334 cycles: about 684,600 cycles at ITER = 2048 (paper: 692,827).
// Paper: SHA256 checksum, MNG, the mcsIn path, the toSHA512 hashing of a long sentence and
// the 2048-round PBKDF2 on HMACSHA512. This design's choices: the salt is "mnemonic", as
// BIP-39 defines it (the paper writes "mnemonics"); the length scan; where the SHA-512
// padding is inserted.
module bip39
  import ethvault_pkg::*;
#(
  parameter int unsigned ITER = 2048
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [255:0]  e,
  input  logic          recover,
  input  logic [2047:0] mcs_in,
  input  logic          wl_we,
  input  logic [10:0]   wl_addr,
  input  logic [71:0]   wl_data,
  output logic          busy,
  output logic          mcs_done,
  output logic [2047:0] mcs,
  output logic [8:0]    mcs_len,
  output logic          pwd_hashed,
  output logic          done,
  output logic [511:0]  seed,
  // request port to the shared HMAC-SHA-512 unit
  output logic          h_start,
  output logic          h_raw,
  output logic [1023:0] h_key,
  output logic [511:0]  h_msg,
  output logic [9:0]    h_len,
  output logic [1023:0] h_block,
  output logic          h_first,
  input  logic          h_done,
  input  logic [511:0]  h_digest
);

  typedef enum logic [3:0] {
    S_IDLE, S_CS, S_MNG, S_SCAN, S_PAD, S_DL, S_DR, S_D3, S_U1, S_UI
  } state_e;
  state_e state_q;

  logic [2047:0] r3_q;        // sentence (R3), later with SHA-512 padding
  logic [1023:0] pwd_q;       // HMAC key
  logic [511:0]  u_q, t_q;    // PBKDF2 U_i and running XOR
  logic [8:0]    len_q;       // sentence length in bytes
  logic [11:0]   it_q;        // PBKDF2 round counter
  logic          go_q;

  // SHA256 checksum
  logic         cs_start, cs_busy, cs_done;
  logic [255:0] cs_dig;
  sha256_core u_sha256 (.clk, .rst_n, .start(cs_start), .use_iv(1'b1),
                        .block({e, 1'b1, 191'd0, 64'd256}),
                        .busy(cs_busy), .done(cs_done), .digest(cs_dig));
  logic [7:0] cs_q;

  // MNG
  logic          mng_start, mng_busy, mng_done;
  logic [2047:0] mng_mcs;
  logic [8:0]    mng_len;
  mnemonic_gen u_mng (.clk, .rst_n, .start(mng_start), .nc({e, cs_q}), .wl_we, .wl_addr,
                      .wl_data, .busy(mng_busy), .done(mng_done), .mcs(mng_mcs),
                      .mcs_len(mng_len));

  assign cs_start  = go_q && state_q == S_CS;
  assign mng_start = go_q && state_q == S_MNG;
  assign busy      = (state_q != S_IDLE);
  assign mcs       = r3_q;
  assign mcs_len   = len_q;

  // third SHA-512 block, needed when the sentence leaves no room for the padding in R3
  // (over 239 bytes): the 0x80 byte if the sentence fills R3, then the bit length
  logic [1023:0] tail;
  assign tail = {(len_q == 9'd256) ? 8'h80 : 8'h00, 888'd0, 128'(int'(len_q) * 8)};

  // HMAC requests
  always_comb begin
    h_start = go_q && (state_q == S_DL || state_q == S_DR || state_q == S_D3 ||
                       state_q == S_U1 || state_q == S_UI);
    h_raw   = (state_q == S_DL || state_q == S_DR || state_q == S_D3);
    h_first = (state_q == S_DL);
    unique case (state_q)
      S_DR:    h_block = r3_q[1023:0];
      S_D3:    h_block = tail;
      default: h_block = r3_q[2047:1024];
    endcase
    h_key   = pwd_q;
    h_msg   = (state_q == S_U1) ? {BIP39_SALT1, 416'd0} : u_q;
    h_len   = (state_q == S_U1) ? 10'd96 : 10'd512;
  end

  logic [7:0] last_byte;
  assign last_byte = r3_q[2047 - 8*(int'(len_q) - 1) -: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      r3_q       <= '0;
      pwd_q      <= '0;
      u_q        <= '0;
      t_q        <= '0;
      len_q      <= '0;
      it_q       <= '0;
      go_q       <= 1'b0;
      cs_q       <= '0;
      pwd_hashed <= 1'b0;
      mcs_done   <= 1'b0;
      done       <= 1'b0;
      seed       <= '0;
    end else begin
      go_q     <= 1'b0;
      done     <= 1'b0;
      mcs_done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          go_q <= 1'b1;
          if (recover) begin
            r3_q    <= mcs_in;
            len_q   <= 9'd256;
            state_q <= S_SCAN;
          end else begin
            state_q <= S_CS;
          end
        end
        S_CS: if (cs_done) begin
          cs_q    <= cs_dig[255:248];
          go_q    <= 1'b1;
          state_q <= S_MNG;
        end
        S_MNG: if (mng_done) begin
          r3_q    <= mng_mcs;
          len_q   <= 9'd256;
          state_q <= S_SCAN;
        end
        // length = position of the last non-zero byte, one byte per cycle from the end
        S_SCAN: begin
          if (len_q != 9'd0 && last_byte == 8'd0) begin
            len_q <= len_q - 9'd1;
          end else begin
            mcs_done <= 1'b1;
            if (len_q <= 9'd128) begin
              pwd_q      <= r3_q[2047:1024];
              pwd_hashed <= 1'b0;
              it_q       <= 12'd1;
              go_q       <= 1'b1;
              state_q    <= S_U1;
            end else begin
              pwd_hashed <= 1'b1;
              state_q    <= S_PAD;
            end
          end
        end
        // SHA-512 padding of the sentence inside R3: 0x80, zeros, 128-bit length in bits
        S_PAD: begin
          if (len_q != 9'd256) r3_q[2047 - 8*int'(len_q) -: 8] <= 8'h80;
          if (len_q <= 9'd239) r3_q[127:0] <= 128'(int'(len_q) * 8);
          go_q    <= 1'b1;
          state_q <= S_DL;
        end
        S_DL: if (h_done) begin
          go_q    <= 1'b1;
          state_q <= S_DR;
        end
        S_DR, S_D3: if (h_done) begin
          go_q <= 1'b1;
          if (state_q == S_DR && len_q > 9'd239) begin
            state_q <= S_D3;
          end else begin
            // password = SHA-512 digest; restore the sentence in R3
            pwd_q <= {h_digest, 512'd0};
            if (len_q != 9'd256) r3_q[2047 - 8*int'(len_q) -: 8] <= 8'h00;
            if (len_q <= 9'd239) r3_q[127:0] <= '0;
            it_q    <= 12'd1;
            state_q <= S_U1;
          end
        end
        S_U1: if (h_done) begin
          u_q <= h_digest;
          t_q <= h_digest;
          if (it_q == 12'(ITER)) begin
            seed    <= h_digest;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            it_q    <= it_q + 12'd1;
            go_q    <= 1'b1;
            state_q <= S_UI;
          end
        end
        S_UI: if (h_done) begin
          u_q <= h_digest;
          t_q <= t_q ^ h_digest;
          if (it_q == 12'(ITER)) begin
            seed    <= t_q ^ h_digest;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            it_q <= it_q + 12'd1;
            go_q <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  initial assert (ITER >= 1 && ITER < 4096);

endmodule
