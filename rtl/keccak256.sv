// Keccak-256 permutation engine (KECCAK256), used twice per Ethereum address: once on the
// 64-byte public key and once on the 40-character ASCII address for the EIP-55 checksum.
//
// Both messages fit in one 1088-bit rate block, so the engine takes an already padded
// 1600-bit state (built by keccak_pad, the PAD0/PAD1 units) and applies the 24 rounds of
// Keccak-f[1600], one round per clock cycle. The 256-bit digest is the first 32 bytes of
// the state, returned big-endian (digest byte 0 in bits 255:248), so an Ethereum address
// is digest[159:0] and the checksum nibbles are digest[255:96].
// State layout: lane (x, y) occupies state[64*(x+5y) +: 64], bytes little-endian in a lane.
//
// Interface: start pulse with state_in; done pulses for one cycle with digest valid until
// the next start. Timing: done follows start by 25 cycles (paper: 25 cycles). The paper
// takes its Keccak core from the Keccak team's open-source code and gives no insides; this
// is a plain iterative implementation of the standard permutation.
module keccak256
  import ethvault_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1599:0] state_in,
  output logic          busy,
  output logic          done,
  output logic [255:0]  digest
);

  logic [63:0] a_q [25];
  logic [63:0] a_n [25];
  logic [4:0]  rnd_q;

  // rotation offsets r[x + 5y]
  localparam int ROT [25] = '{ 0,  1, 62, 28, 27,
                              36, 44,  6, 55, 20,
                               3, 10, 43, 25, 39,
                              41, 45, 15, 21,  8,
                              18,  2, 61, 56, 14};

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  always_comb begin
    logic [63:0] c [5];
    logic [63:0] d [5];
    logic [63:0] b [25];
    for (int x = 0; x < 5; x++)
      c[x] = a_q[x] ^ a_q[x+5] ^ a_q[x+10] ^ a_q[x+15] ^ a_q[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    // theta, rho and pi: B[y, 2x+3y] = rot(A[x,y] ^ D[x], r[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a_q[x + 5*y] ^ d[x], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a_n[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    a_n[0] = a_n[0] ^ KECCAK_RC[rnd_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 25; i++) a_q[i] <= '0;
      rnd_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int i = 0; i < 25; i++) a_q[i] <= state_in[64*i +: 64];
        rnd_q <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        for (int i = 0; i < 25; i++) a_q[i] <= a_n[i];
        if (rnd_q == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else rnd_q <= rnd_q + 5'd1;
      end
    end
  end

  always_comb
    for (int i = 0; i < 32; i++)
      digest[255 - 8*i -: 8] = a_q[i/8][8*(i%8) +: 8];

endmodule
