// RAM: on-chip key store of the wallet.
//
// Each entry holds one derived account: the 256-bit private key, the 264-bit compressed
// public key and the 336-bit EIP-55 checksummed address string "0x...", 856 bits in all,
// packed {priv, pub, cad} with priv in the top bits. One synchronous write port (used by
// the control unit while deriving keys) and one synchronous read port (data one cycle
// after the address, used for display and for signing).
// The paper gives 648 kb for the RAM and 856 bits per key; DEPTH = floor(648 * 1024 / 856)
// = 775 entries is derived from those two numbers. The memory has no reset: an entry is
// read only after it has been written.
module key_ram #(
  parameter int unsigned DEPTH = 775,
  parameter int unsigned WIDTH = 856,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  assert property (@(posedge clk) we |-> (int'(waddr) < DEPTH));

endmodule
