// SHA-512 compression engine (the SHA512 block shared by HMACSHA512, PBKDF2 and BIP-39).
//
// Processes one 1024-bit message block per start pulse, one of the 80 rounds per clock
// cycle, with the message schedule kept in a 16-word sliding window. The chaining value H
// is kept between blocks: with use_iv = 1 the block starts from the standard initial value,
// with use_iv = 0 it continues from the previous block, so a multi-block message is hashed
// by issuing its (already padded) blocks in order.
//
// Interface: start (one-cycle pulse, ignored while busy), use_iv, block (big-endian, word 0
// in bits 1023:960). done pulses for one cycle when digest (= H, 512 bits, big-endian) is
// valid; digest holds its value until the next start.
// Timing: start at cycle 0, done at cycle 82 (80 rounds, one feed-forward cycle, one
// output cycle). The paper only names the block and reports an HMAC latency of 335 cycles
// for four blocks; the round-per-cycle organisation is this design's choice consistent
// with that figure.
module sha512_core
  import ethvault_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          use_iv,
  input  logic [1023:0] block,
  output logic          busy,
  output logic          done,
  output logic [511:0]  digest
);

  logic [63:0] h_q [8];
  logic [63:0] v_q [8];
  logic [63:0] w_q [16];
  logic [6:0]  rnd_q;
  logic        fin_q;

  function automatic logic [63:0] rotr(input logic [63:0] x, input int n);
    return (x >> n) | (x << (64 - n));
  endfunction

  logic [63:0] s0, s1, ch, maj, t1, t2, w_new, ls0, ls1;
  always_comb begin
    s1    = rotr(v_q[4], 14) ^ rotr(v_q[4], 18) ^ rotr(v_q[4], 41);
    ch    = (v_q[4] & v_q[5]) ^ (~v_q[4] & v_q[6]);
    t1    = v_q[7] + s1 + ch + SHA512_K[rnd_q] + w_q[0];
    s0    = rotr(v_q[0], 28) ^ rotr(v_q[0], 34) ^ rotr(v_q[0], 39);
    maj   = (v_q[0] & v_q[1]) ^ (v_q[0] & v_q[2]) ^ (v_q[1] & v_q[2]);
    t2    = s0 + maj;
    ls0   = rotr(w_q[1], 1) ^ rotr(w_q[1], 8) ^ (w_q[1] >> 7);
    ls1   = rotr(w_q[14], 19) ^ rotr(w_q[14], 61) ^ (w_q[14] >> 6);
    w_new = ls1 + w_q[9] + ls0 + w_q[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) begin
        h_q[i] <= SHA512_IV[i];
        v_q[i] <= '0;
      end
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
      rnd_q <= '0;
      busy  <= 1'b0;
      fin_q <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int i = 0; i < 8; i++) begin
          v_q[i] <= use_iv ? SHA512_IV[i] : h_q[i];
          h_q[i] <= use_iv ? SHA512_IV[i] : h_q[i];
        end
        for (int i = 0; i < 16; i++) w_q[i] <= block[1023-64*i -: 64];
        rnd_q <= '0;
        busy  <= 1'b1;
        fin_q <= 1'b0;
      end else if (busy && !fin_q) begin
        v_q[7] <= v_q[6];
        v_q[6] <= v_q[5];
        v_q[5] <= v_q[4];
        v_q[4] <= v_q[3] + t1;
        v_q[3] <= v_q[2];
        v_q[2] <= v_q[1];
        v_q[1] <= v_q[0];
        v_q[0] <= t1 + t2;
        for (int i = 0; i < 15; i++) w_q[i] <= w_q[i+1];
        w_q[15] <= w_new;
        if (rnd_q == 7'd79) fin_q <= 1'b1;
        else rnd_q <= rnd_q + 7'd1;
      end else if (busy) begin
        for (int i = 0; i < 8; i++) h_q[i] <= h_q[i] + v_q[i];
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_comb
    for (int i = 0; i < 8; i++) digest[511-64*i -: 64] = h_q[i];

endmodule
