// HEX2ASCII: converts a 160-bit Ethereum address into 40 lower-case ASCII hexadecimal
// characters (320 bits, first character in bits 319:312), the input of the checksum hash.
// Each nibble n becomes 0x30 + n for n <= 9 and 0x61 + (n - 10) otherwise: fixed offsets,
// no table. Purely combinational. The paper names the unit and its widths (160 -> 320).
module hex2ascii (
  input  logic [159:0] addr,
  output logic [319:0] ascii
);

  always_comb
    for (int i = 0; i < 40; i++) begin
      logic [3:0] n;
      n = addr[159 - 4*i -: 4];
      ascii[319 - 8*i -: 8] = (n <= 4'd9) ? (8'h30 + {4'd0, n}) : (8'h57 + {4'd0, n});
    end

endmodule
