// CHECKSUM: EIP-55 mixed-case checksummed Ethereum address.
//
// For each of the 40 nibbles of the raw address a (a[159:156] first) the output character
// is a digit 0x30 + n when n <= 9; a letter otherwise, upper case (0x41 + n - 10) when the
// nibble in the same position of d = Keccak-256(lower-case ASCII address) is above 7, lower
// case (0x61 + n - 10) when not. d is given as its first 160 bits (digest[255:96]). The
// output is "0x" followed by the 40 characters: 42 ASCII characters, 336 bits, first
// character in bits 335:328. Purely combinational.
// Follows the paper's Alg. 5 (letter test a(k:k-3) > 9, hash test d(k:k-3) > 7) and its
// fixed-offset capital() conversion; the "0x" prefix fills the paper's 336-bit width.
module eip55_checksum (
  input  logic [159:0] a,
  input  logic [159:0] d,
  output logic [335:0] cad
);

  always_comb begin
    cad[335:320] = 16'h3078;   // "0x"
    for (int i = 0; i < 40; i++) begin
      logic [3:0] n, h;
      n = a[159 - 4*i -: 4];
      h = d[159 - 4*i -: 4];
      if (n <= 4'd9)      cad[319 - 8*i -: 8] = 8'h30 + {4'd0, n};
      else if (h > 4'd7)  cad[319 - 8*i -: 8] = 8'h37 + {4'd0, n};
      else                cad[319 - 8*i -: 8] = 8'h57 + {4'd0, n};
    end
  end

endmodule
