// SHA-256 compression engine (the SHA256 block inside BIP39).
//
// BIP-39 uses SHA-256 only to form the mnemonic checksum: the first ENT/32 = 8 bits of
// SHA-256(e) are appended to the 256-bit entropy e. This engine compresses one padded
// 512-bit block per start pulse, one of the 64 rounds per clock cycle, from the standard
// initial value (use_iv = 1) or from the previous chaining value (use_iv = 0).
//
// Interface: start pulse, use_iv, block (big-endian, word 0 in bits 511:480); done pulses
// one cycle when digest (256 bits, big-endian) is valid. Timing: done follows start by 66
// cycles. The paper reports 73 cycles for its SHA256 and gives no insides; the
// organisation here is this design's own.
module sha256_core
  import ethvault_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         use_iv,
  input  logic [511:0] block,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);

  logic [31:0] h_q [8];
  logic [31:0] v_q [8];
  logic [31:0] w_q [16];
  logic [5:0]  rnd_q;
  logic        fin_q;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] s0, s1, ch, maj, t1, t2, w_new, ls0, ls1;
  always_comb begin
    s1    = rotr(v_q[4], 6) ^ rotr(v_q[4], 11) ^ rotr(v_q[4], 25);
    ch    = (v_q[4] & v_q[5]) ^ (~v_q[4] & v_q[6]);
    t1    = v_q[7] + s1 + ch + SHA256_K[rnd_q] + w_q[0];
    s0    = rotr(v_q[0], 2) ^ rotr(v_q[0], 13) ^ rotr(v_q[0], 22);
    maj   = (v_q[0] & v_q[1]) ^ (v_q[0] & v_q[2]) ^ (v_q[1] & v_q[2]);
    t2    = s0 + maj;
    ls0   = rotr(w_q[1], 7) ^ rotr(w_q[1], 18) ^ (w_q[1] >> 3);
    ls1   = rotr(w_q[14], 17) ^ rotr(w_q[14], 19) ^ (w_q[14] >> 10);
    w_new = ls1 + w_q[9] + ls0 + w_q[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) begin
        h_q[i] <= SHA256_IV[i];
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
          v_q[i] <= use_iv ? SHA256_IV[i] : h_q[i];
          h_q[i] <= use_iv ? SHA256_IV[i] : h_q[i];
        end
        for (int i = 0; i < 16; i++) w_q[i] <= block[511-32*i -: 32];
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
        if (rnd_q == 6'd63) fin_q <= 1'b1;
        else rnd_q <= rnd_q + 6'd1;
      end else if (busy) begin
        for (int i = 0; i < 8; i++) h_q[i] <= h_q[i] + v_q[i];
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_comb
    for (int i = 0; i < 8; i++) digest[255-32*i -: 32] = h_q[i];

endmodule
