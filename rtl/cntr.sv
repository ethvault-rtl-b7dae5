// CNTR: address-index counter of the BIP-44 derivation loop.
//
// Holds the current address_index (the last level of m/44'/60'/0'/0/address_index) and
// signals when the last requested index has been reached, so the control unit derives
// keys 0 .. limit-1 from the cached m/44'/60'/0'/0 node. clr sets the count to 0, inc adds
// one; last is high while count = limit - 1. Registers update on the rising clock edge.
// The paper shows CNTR feeding the index into CKDF and gives n 32 bits; the clear/increment
// interface is this design's choice.
module cntr #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,
  input  logic [WIDTH-1:0] limit,
  output logic [WIDTH-1:0] count,
  output logic             last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (inc) count <= count + 1'b1;
  end

  assign last = (count == limit - 1'b1);

  assert property (@(posedge clk) disable iff (!rst_n) !(clr && inc));

endmodule
