// CKDF: child key derivation function of BIP-32, with the shared HMAC-SHA-512 and
// SECP256K1 engines of the wallet.
//
// mode selects what one start does:
//   CKDF_CKD  - derive the child private key of (k, c) at index n. For a hardened index
//               (n[31] = 1) the HMAC data is 0x00 || k || n; otherwise SECP256K1 first
//               computes K = k * G, SR compresses it, and the data is serP(K) || n. The
//               296-bit data goes to the HMAC's m_0 input with the chain code c as key
//               (k_1 = c zero-padded). The child key is k_hat = (I_L + k) mod n and the
//               child chain code is I_R (hmac_out[255:0]).
//   CKDF_PUB  - only the point multiplication k * G (public key, and the k * G of ECDSA).
//   CKDF_HMAC - plain HMAC(k_0, m_1) of up to 512 bits (master key, PBKDF2 rounds).
//   CKDF_SHA  - one raw SHA-512 block compression of to_sha512 (mnemonic hashing).
// valid is low when the derived key is unusable (I_L >= n or k_hat = 0 in CKD mode,
// I_L >= n or I_L = 0 in HMAC mode); BIP-32 then asks for the next index.
//
// Interface: start pulse with mode and operands (held stable until done); done pulses one
// cycle with hmac_out, secp_out/secp_inf, k_hat and valid held until the next start.
// Timing: hardened CKD and HMAC 335 cycles, non-hardened CKD about 1,871,200 cycles
// (point multiplication then HMAC; paper: 1,887,855), PUB about 1,870,900, SHA 84.
// The block structure (HMACSHA512, SECP256K1, SR, the 0x00 || prefix, MOD and the < n
// check) is the paper's. The reduction is done modulo the group order n: the paper's text
// calls the modulus "p, the 256-bit prime" but also states that an overflow gives
// "k mod n = 0", and BIP-32 needs n. The chain code enters as the HMAC key (k_1), which is
// what HMAC-SHA512(c, data) of BIP-32 requires.
module ckdf
  import ethvault_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ckdf_mode_e    mode,
  input  logic [255:0]  k,
  input  logic [255:0]  c,
  input  logic [31:0]   n,
  input  logic [1023:0] k_0,
  input  logic [511:0]  m_1,
  input  logic [9:0]    m_1_len,
  input  logic [1023:0] to_sha512,
  input  logic          sha_first,
  output logic          busy,
  output logic          done,
  output logic [511:0]  hmac_out,
  output logic [511:0]  secp_out,
  output logic          secp_inf,
  output logic [255:0]  k_hat,
  output logic          valid
);

  typedef enum logic [1:0] {S_IDLE, S_SECP, S_HMAC} state_e;
  state_e      state_q;
  ckdf_mode_e  mode_q;
  logic        go_q;

  // SECP256K1 and SR
  logic         secp_start, secp_busy, secp_done, pinf;
  logic [511:0] pub;
  logic [263:0] ser;
  secp256k1 u_secp (.clk, .rst_n, .start(secp_start), .k, .busy(secp_busy), .done(secp_done),
                    .pub, .inf(pinf));
  pubkey_serialize u_sr (.pub(secp_out), .ser);

  // HMACSHA512
  logic         h_start, h_busy, h_done;
  logic [511:0] h_dig;
  logic [295:0] m_0;
  logic         hard;
  assign hard = n[31];
  assign m_0  = hard ? {8'h00, k, n} : {ser, n};
  hmac_sha512 u_hmac (
    .clk, .rst_n, .start(h_start), .raw(mode_q == CKDF_SHA),
    .sel_k(mode_q == CKDF_CKD), .k_0, .k_1({c, 768'd0}),
    .sel_m(mode_q != CKDF_CKD), .m_0, .m_1, .m_1_len,
    .to_sha512, .sha_first, .busy(h_busy), .done(h_done), .digest(h_dig)
  );

  assign secp_start = go_q && state_q == S_SECP;
  assign h_start    = go_q && state_q == S_HMAC;
  assign busy       = (state_q != S_IDLE);

  // MOD and the < n comparison
  logic [255:0] il;
  logic [256:0] sum;
  logic [255:0] sum_red;
  logic         il_ok;
  always_comb begin
    il      = h_dig[511:256];
    il_ok   = (il < SECP_N);
    sum     = {1'b0, il} + {1'b0, k};
    sum_red = (sum >= {1'b0, SECP_N}) ? 256'(sum - {1'b0, SECP_N}) : sum[255:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      mode_q   <= CKDF_CKD;
      go_q     <= 1'b0;
      hmac_out <= '0;
      secp_out <= '0;
      secp_inf <= 1'b0;
      k_hat    <= '0;
      valid    <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      go_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          mode_q <= mode;
          go_q   <= 1'b1;
          if (mode == CKDF_PUB || (mode == CKDF_CKD && !n[31])) state_q <= S_SECP;
          else                                                  state_q <= S_HMAC;
        end
        S_SECP: if (secp_done) begin
          secp_out <= pub;
          secp_inf <= pinf;
          if (mode_q == CKDF_PUB) begin
            valid   <= !pinf;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            go_q    <= 1'b1;
            state_q <= S_HMAC;
          end
        end
        S_HMAC: if (h_done) begin
          hmac_out <= h_dig;
          k_hat    <= (mode_q == CKDF_CKD) ? (il_ok ? sum_red : '0) : il;
          valid    <= il_ok && ((mode_q == CKDF_CKD) ? (sum_red != '0) : (il != '0));
          done     <= 1'b1;
          state_q  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  assert property (@(posedge clk) disable iff (!rst_n) (start && mode == CKDF_CKD) |-> k < SECP_N);

endmodule
