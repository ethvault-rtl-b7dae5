// SR: compressed serialization of a SECP256K1 public key (BIP-32 serP).
//
// Takes the affine point {x, y} from SECP256K1 (512 bits, x in bits 511:256) and forms the
// 33-byte compressed encoding: prefix byte 0x02 when y is even or 0x03 when y is odd,
// followed by the 32 bytes of x. Output is 264 bits with the prefix in bits 263:256.
// Purely combinational. The paper names the unit (SR) and its 512 -> 264 bit widths; the
// prefix rule is the standard one the paper relies on for BIP-32. The unit is wiring plus
// one bit (the parity of y selects the prefix), so synthesis finds no gates in it.
module pubkey_serialize (
  input  logic [511:0] pub,
  output logic [263:0] ser
);

  always_comb ser = {7'b0000001, pub[0], pub[511:256]};

endmodule
