// Universal HMAC-SHA-512 (HMACSHA512) with a single shared SHA-512 engine.
//
// HMAC(k, m) = H((k ^ opad) || H((k ^ ipad) || m)) with ipad = 0x36.., opad = 0x5C.. is
// computed as four SHA-512 block compressions on one sha512_core:
//   B0 = k ^ ipad (from IV), B1 = PDC-padded m (chained), inner digest -> R0,
//   B2 = k ^ opad (from IV), B3 = PDC-padded R0 (chained) -> digest.
// sel_k chooses the key k_0 or k_1 (1024 bits, already zero-padded to the block size).
// sel_m chooses the message: m_0 (296 bits, fixed length: the 37-byte BIP-32 data
// ser(h) || ser32(n)) or m_1 (up to 512 bits, left-aligned, length m_1_len in bits, a
// multiple of 8). The PDC unit pads the chosen message for a total length of 1024 + L bits
// (1320 for m_0, 1536 for a full m_1) into one 1024-bit block.
// A third mode (raw = 1) passes the 1024-bit to_sha512 block straight to SHA-512, starting
// from the IV when sha_first = 1 or chaining otherwise; this is the toSHA512 path the
// paper uses to hash the mnemonic.
//
// Timing: done pulses 4 x 83 + 1 = 333 cycles after start in HMAC mode (the paper reports
// 335), and 83 cycles after start in raw mode. digest is held until the next start.
// Follows the paper's Fig. 9 (two key inputs, two message inputs, PDC, R0, toSHA512).
// The m_1 length input is this design's addition: the first PBKDF2 message
// "mnemonic" || INT(1) is 96 bits and must be padded at its true length.
module hmac_sha512
  import ethvault_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          raw,
  input  logic          sel_k,
  input  logic [1023:0] k_0,
  input  logic [1023:0] k_1,
  input  logic          sel_m,
  input  logic [295:0]  m_0,
  input  logic [511:0]  m_1,
  input  logic [9:0]    m_1_len,
  input  logic [1023:0] to_sha512,
  input  logic          sha_first,
  output logic          busy,
  output logic          done,
  output logic [511:0]  digest
);

  typedef enum logic [2:0] {S_IDLE, S_B0, S_B1, S_B2, S_B3, S_RAW} state_e;
  state_e state_q;

  logic [1023:0] key;
  logic [511:0]  r0_q;          // R0: inner digest
  logic [1023:0] blk;
  logic          use_iv, sha_start, sha_busy, sha_done, launched_q;
  logic [511:0]  sha_digest;

  localparam logic [1023:0] IPAD = {128{8'h36}};
  localparam logic [1023:0] OPAD = {128{8'h5C}};

  assign key = sel_k ? k_1 : k_0;

  // PDC: pad a left-aligned message of len bits for total length 1024 + len
  function automatic logic [1023:0] pdc(input logic [511:0] msg, input logic [9:0] len);
    logic [1023:0] b;
    logic [511:0]  mask;
    mask = ~({512{1'b1}} >> len);   // keep the top len bits of msg
    b = {msg & mask, 512'd0};
    b[1023 - int'(len)] = 1'b1;
    b[127:0] = 128'(1024 + int'(len));
    return b;
  endfunction

  logic [511:0] msg;
  logic [9:0]   msg_len;
  always_comb begin
    msg     = sel_m ? m_1 : {m_0, 216'd0};
    msg_len = sel_m ? m_1_len : 10'd296;
  end

  always_comb begin
    unique case (state_q)
      S_B0:    begin blk = key ^ IPAD;        use_iv = 1'b1;      end
      S_B1:    begin blk = pdc(msg, msg_len); use_iv = 1'b0;      end
      S_B2:    begin blk = key ^ OPAD;        use_iv = 1'b1;      end
      S_B3:    begin blk = pdc(r0_q, 10'd512); use_iv = 1'b0;     end
      S_RAW:   begin blk = to_sha512;         use_iv = sha_first; end
      default: begin blk = to_sha512;         use_iv = 1'b1;      end
    endcase
  end

  assign sha_start = (state_q != S_IDLE) && !launched_q;

  sha512_core u_sha (
    .clk, .rst_n, .start(sha_start), .use_iv, .block(blk),
    .busy(sha_busy), .done(sha_done), .digest(sha_digest)
  );

  assign busy   = (state_q != S_IDLE);
  assign digest = sha_digest;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      launched_q <= 1'b0;
      r0_q       <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sha_start) launched_q <= 1'b1;
      unique case (state_q)
        S_IDLE: if (start) state_q <= raw ? S_RAW : S_B0;
        S_B0:   if (sha_done) begin state_q <= S_B1; launched_q <= 1'b0; end
        S_B1:   if (sha_done) begin state_q <= S_B2; launched_q <= 1'b0; r0_q <= sha_digest; end
        S_B2:   if (sha_done) begin state_q <= S_B3; launched_q <= 1'b0; end
        S_B3, S_RAW:
                if (sha_done) begin state_q <= S_IDLE; launched_q <= 1'b0; done <= 1'b1; end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The message length must leave room for the 0x80 byte and the 128-bit length field
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !raw && sel_m) |-> (m_1_len <= 10'd512 && m_1_len[2:0] == 3'd0));

endmodule
