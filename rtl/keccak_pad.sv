// Keccak-256 input padding (PAD0 and PAD1 of the EthVault datapath).
//
// Places a short message of MSG_BYTES bytes (big-endian: byte 0 in the top bits of msg)
// into a 1600-bit Keccak state and applies the original Keccak multi-rate padding for a
// 1088-bit rate: 0x01 after the last message byte, 0x80 in the last rate byte (byte 135),
// zeros elsewhere. PAD0 is MSG_BYTES = 64 (public key x || y), PAD1 is MSG_BYTES = 40
// (ASCII address). Purely combinational.
// The paper says only that PAD0/PAD1 append zero bits to reach 1600 bits; the 0x01/0x80
// pad bits are needed for a correct Keccak-256 digest and are added here. The unit only
// places bytes and constant pad bits, so synthesis finds no gates in it.
module keccak_pad #(
  parameter int MSG_BYTES = 64
) (
  input  logic [8*MSG_BYTES-1:0] msg,
  output logic [1599:0]          state
);

  always_comb begin
    state = '0;
    for (int i = 0; i < MSG_BYTES; i++)
      state[64*(i/8) + 8*(i%8) +: 8] = msg[8*MSG_BYTES-1 - 8*i -: 8];
    state[64*(MSG_BYTES/8) + 8*(MSG_BYTES%8) +: 8] =
      state[64*(MSG_BYTES/8) + 8*(MSG_BYTES%8) +: 8] ^ 8'h01;
    state[64*16 + 8*7 +: 8] = state[64*16 + 8*7 +: 8] ^ 8'h80;
  end

  initial assert (MSG_BYTES < 136) else $error("message must fit one Keccak-256 block");

endmodule
