// EthVault: hardware Ethereum cold wallet, from entropy to checksummed addresses and
// transaction signatures (paper Fig. 7).
//
// A control unit (CU) runs one wallet generation per start:
//   1. BIP39 turns the entropy e into a 24-word mnemonic (or takes the sentence mcs_in
//      when recover = 1) and stretches it with PBKDF2 into a 512-bit seed.
//   2. The master key and chain code are HMAC-SHA512("Bitcoin seed", seed), held in R1.
//   3. Four CKD steps follow the BIP-44 path m/44'/60'/0'/0 (pu, ct, ac, ch); the result
//      is cached in R2, so each address reuses it instead of walking the path again.
//   4. For address_index = 0 .. n-1 (counted by CNTR): CKD gives the child private key,
//      SECP256K1 its public key ky, KECCAK256 of PAD0(ky) gives the address Ad (kept in
//      R3), KECCAK256 of PAD1(HEX2ASCII(Ad)) drives CHECKSUM (EIP-55), and the entry
//      {private key, SR(ky), cAd} is written to RAM at address_index.
// One CKDF (HMAC-SHA-512 + SECP256K1) and one KECCAK256 serve every step; BIP39's PBKDF2
// and its long-password hashing use the CKDF's HMAC through BIP39's request port.
// Signing (sign pulse while idle): the RAM entry at sel gives the private key d, and ECDSA
// signs the hash z with nonce k, using the CKDF's SECP256K1 for k * G.
//
// Interface: start pulse with n, e, recover, mcs_in; mcs_valid rises when the mnemonic is
// on mcs; keys_ready rises when all n entries are in RAM. key holds the compressed public key
// and checksummed address {pub 264, cAd 336} of RAM entry sel, one cycle after sel; the
// private key never leaves the chip. sign pulse with sel, z, k; sig_done
// pulses with r, s, sig_valid. derive_err is set if a derived key was unusable (I_L >= n
// or a zero key; probability about 2^-127 per key). wl_* loads the 2048-word list.
// Timing at ITER = 2048: about 6.30 million cycles to the first key, 3.74 million per
// further key (paper: 6,356,729 and 3,775,064), about 1.87 million per signature.
// The block set and data flow are the paper's. The RNG, the clock PLL and the USB/JTAG
// link are outside this module: e, k, clk and the ports stand in for them. n must be
// between 1 and RAM_DEPTH.
module ethvault
  import ethvault_pkg::*;
#(
  parameter int unsigned ITER      = 2048,
  parameter int unsigned RAM_DEPTH = 775,
  localparam int unsigned AW = $clog2(RAM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // wallet generation
  input  logic          start,
  input  logic [31:0]   n,
  input  logic [255:0]  e,
  input  logic          recover,
  input  logic [2047:0] mcs_in,
  input  logic          wl_we,
  input  logic [10:0]   wl_addr,
  input  logic [71:0]   wl_data,
  output logic          busy,
  output logic          mcs_valid,
  output logic [2047:0] mcs,
  output logic [8:0]    mcs_len,
  output logic          keys_ready,
  output logic          derive_err,
  // key store
  input  logic [AW-1:0] sel,
  output logic [599:0]  key,
  // signing
  input  logic          sign,
  input  logic [255:0]  z,
  input  logic [255:0]  k,
  output logic          sig_done,
  output logic [255:0]  r,
  output logic [255:0]  s,
  output logic          sig_valid
);

  typedef enum logic [3:0] {
    S_IDLE, S_BIP, S_MST, S_PATH, S_IDX, S_PUB, S_K0, S_K1, S_SRD, S_SIGN
  } state_e;
  state_e state_q;

  logic         go_q;
  logic [1:0]   step_q;         // BIP-44 path level
  logic [511:0] r1_q;           // {key, chain code} walking down the path
  logic [511:0] r2_q;           // cached m/44'/60'/0'/0
  logic [255:0] kc_q;           // child private key
  logic [511:0] ky_q;           // child public key {x, y}
  logic [159:0] r3_q;           // address Ad
  logic [511:0] seed_q;
  logic [855:0] ram_q;          // RAM entry at sel {priv, pub, cAd}

  // ---------------- CKDF signals (operand multiplexers below)
  logic          ckdf_start, ckdf_busy, ckdf_done, ckdf_inf, ckdf_valid;
  ckdf_mode_e    ckdf_mode;
  logic [255:0]  ckdf_k, ckdf_c, ckdf_khat;
  logic [31:0]   ckdf_n;
  logic [1023:0] ckdf_k0;
  logic [511:0]  ckdf_m1, ckdf_hmac, ckdf_secp;
  logic [9:0]    ckdf_len;

  // ---------------- BIP39
  logic          bip_busy, bip_mcs_done, bip_done, bip_hashed;
  logic [511:0]  bip_seed;
  logic          h_start, h_raw, h_first;
  logic [1023:0] h_key, h_block;
  logic [511:0]  h_msg;
  logic [9:0]    h_len;
  bip39 #(.ITER(ITER)) u_bip39 (
    .clk, .rst_n, .start(start && state_q == S_IDLE), .e, .recover, .mcs_in,
    .wl_we, .wl_addr, .wl_data, .busy(bip_busy), .mcs_done(bip_mcs_done), .mcs, .mcs_len,
    .pwd_hashed(bip_hashed), .done(bip_done), .seed(bip_seed),
    .h_start, .h_raw, .h_key, .h_msg, .h_len, .h_block, .h_first,
    .h_done(ckdf_done), .h_digest(ckdf_hmac)
  );

  // ---------------- ECDSA
  logic         ec_busy, ec_done, ec_valid, p_start;
  logic [255:0] p_k, ec_r, ec_s;
  logic [7:0]   ec_nred;
  ecdsa u_ecdsa (
    .clk, .rst_n, .start(go_q && state_q == S_SIGN), .k, .d(ram_q[855:600]), .z,
    .busy(ec_busy), .done(ec_done), .r(ec_r), .s(ec_s), .valid(ec_valid), .nred(ec_nred),
    .p_start, .p_k, .p_done(ckdf_done), .p_x(ckdf_secp[511:256]), .p_inf(ckdf_inf)
  );

  // ---------------- CKDF operand multiplexers
  logic [31:0]   path_idx;
  logic [31:0]   cnt;
  logic          cnt_last, cnt_clr, cnt_inc;

  always_comb begin
    unique case (step_q)
      2'd0:    path_idx = BIP44_PU;
      2'd1:    path_idx = BIP44_CT;
      2'd2:    path_idx = BIP44_AC;
      default: path_idx = BIP44_CH;
    endcase
  end

  always_comb begin
    ckdf_start = go_q && (state_q == S_MST || state_q == S_PATH || state_q == S_IDX ||
                          state_q == S_PUB);
    ckdf_mode  = CKDF_CKD;
    ckdf_k     = r1_q[511:256];
    ckdf_c     = r1_q[255:0];
    ckdf_n     = path_idx;
    ckdf_k0    = BTC_SEED_KEY;
    ckdf_m1    = seed_q;
    ckdf_len   = 10'd512;
    unique case (state_q)
      S_BIP: begin
        ckdf_start = h_start;
        ckdf_mode  = h_raw ? CKDF_SHA : CKDF_HMAC;
        ckdf_k0    = h_key;
        ckdf_m1    = h_msg;
        ckdf_len   = h_len;
      end
      S_MST:  ckdf_mode = CKDF_HMAC;
      S_IDX: begin
        ckdf_k = r2_q[511:256];
        ckdf_c = r2_q[255:0];
        ckdf_n = cnt;
      end
      S_PUB: begin
        ckdf_mode = CKDF_PUB;
        ckdf_k    = kc_q;
      end
      S_SIGN: begin
        ckdf_start = p_start;
        ckdf_mode  = CKDF_PUB;
        ckdf_k     = p_k;
      end
      default: ;
    endcase
  end

  ckdf u_ckdf (
    .clk, .rst_n, .start(ckdf_start), .mode(ckdf_mode), .k(ckdf_k), .c(ckdf_c), .n(ckdf_n),
    .k_0(ckdf_k0), .m_1(ckdf_m1), .m_1_len(ckdf_len), .to_sha512(h_block),
    .sha_first(h_first), .busy(ckdf_busy), .done(ckdf_done), .hmac_out(ckdf_hmac),
    .secp_out(ckdf_secp), .secp_inf(ckdf_inf), .k_hat(ckdf_khat), .valid(ckdf_valid)
  );

  // ---------------- CNTR
  cntr #(.WIDTH(32)) u_cntr (.clk, .rst_n, .clr(cnt_clr), .inc(cnt_inc), .limit(n),
                             .count(cnt), .last(cnt_last));

  // ---------------- address generation: PAD0/PAD1, KECCAK256, HEX2ASCII, CHECKSUM, SR
  logic [1599:0] pad0_st, pad1_st, kc_st;
  logic [319:0]  ascii;
  logic          kk_busy, kk_done;
  logic [255:0]  kk_dig;
  logic [335:0]  cad;
  logic [263:0]  pub_ser;
  keccak_pad #(.MSG_BYTES(64)) u_pad0 (.msg(ky_q), .state(pad0_st));
  hex2ascii u_hex (.addr(r3_q), .ascii);
  keccak_pad #(.MSG_BYTES(40)) u_pad1 (.msg(ascii), .state(pad1_st));
  assign kc_st = (state_q == S_K1) ? pad1_st : pad0_st;
  keccak256 u_keccak (.clk, .rst_n, .start(go_q && (state_q == S_K0 || state_q == S_K1)),
                      .state_in(kc_st), .busy(kk_busy), .done(kk_done), .digest(kk_dig));
  eip55_checksum u_cs (.a(r3_q), .d(kk_dig[255:96]), .cad);
  pubkey_serialize u_sr (.pub(ky_q), .ser(pub_ser));

  // ---------------- RAM
  logic         ram_we;
  key_ram #(.DEPTH(RAM_DEPTH), .WIDTH(856)) u_ram (
    .clk, .we(ram_we), .waddr(AW'(cnt)), .wdata({kc_q, pub_ser, cad}), .raddr(sel),
    .rdata(ram_q)
  );
  assign key = ram_q[599:0];   // public key and address only; the private key stays inside

  assign ram_we  = (state_q == S_K1) && kk_done;
  assign cnt_clr = (state_q == S_PATH) && ckdf_done && step_q == 2'd3;
  assign cnt_inc = ram_we && !cnt_last;
  assign busy    = (state_q != S_IDLE);

  // ---------------- CU
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      go_q       <= 1'b0;
      step_q     <= '0;
      r1_q       <= '0;
      r2_q       <= '0;
      kc_q       <= '0;
      ky_q       <= '0;
      r3_q       <= '0;
      seed_q     <= '0;
      mcs_valid  <= 1'b0;
      keys_ready <= 1'b0;
      derive_err <= 1'b0;
      sig_done   <= 1'b0;
      r          <= '0;
      s          <= '0;
      sig_valid  <= 1'b0;
    end else begin
      go_q     <= 1'b0;
      sig_done <= 1'b0;
      if (bip_mcs_done) mcs_valid <= 1'b1;
      unique case (state_q)
        S_IDLE: begin
          if (start) begin
            mcs_valid  <= 1'b0;
            keys_ready <= 1'b0;
            derive_err <= 1'b0;
            state_q    <= S_BIP;
          end else if (sign && keys_ready) begin
            state_q <= S_SRD;
          end
        end
        S_BIP: if (bip_done) begin
          seed_q  <= bip_seed;
          go_q    <= 1'b1;
          state_q <= S_MST;
        end
        S_MST: if (ckdf_done) begin
          r1_q    <= ckdf_hmac;                      // {master key, master chain code}
          if (!ckdf_valid) derive_err <= 1'b1;
          step_q  <= '0;
          go_q    <= 1'b1;
          state_q <= S_PATH;
        end
        S_PATH: if (ckdf_done) begin
          r1_q <= {ckdf_khat, ckdf_hmac[255:0]};
          if (!ckdf_valid) derive_err <= 1'b1;
          go_q <= 1'b1;
          if (step_q == 2'd3) begin
            r2_q    <= {ckdf_khat, ckdf_hmac[255:0]};
            state_q <= S_IDX;
          end else begin
            step_q <= step_q + 2'd1;
          end
        end
        S_IDX: if (ckdf_done) begin
          kc_q    <= ckdf_khat;
          if (!ckdf_valid) derive_err <= 1'b1;
          go_q    <= 1'b1;
          state_q <= S_PUB;
        end
        S_PUB: if (ckdf_done) begin
          ky_q    <= ckdf_secp;
          go_q    <= 1'b1;
          state_q <= S_K0;
        end
        S_K0: if (kk_done) begin
          r3_q    <= kk_dig[159:0];
          go_q    <= 1'b1;
          state_q <= S_K1;
        end
        S_K1: if (kk_done) begin
          if (cnt_last) begin
            keys_ready <= 1'b1;
            state_q    <= S_IDLE;
          end else begin
            go_q    <= 1'b1;
            state_q <= S_IDX;
          end
        end
        // RAM read of the signing key (one cycle), then ECDSA
        S_SRD: begin
          go_q    <= 1'b1;
          state_q <= S_SIGN;
        end
        S_SIGN: if (ec_done) begin
          r         <= ec_r;
          s         <= ec_s;
          sig_valid <= ec_valid;
          sig_done  <= 1'b1;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state_q == S_IDLE) |-> (n >= 32'd1 && n <= 32'(RAM_DEPTH)));
  assert property (@(posedge clk) disable iff (!rst_n) (state_q == S_SIGN) |-> $stable(sel));

endmodule
