// Self-checking testbench of keccak_pad: a 64-byte (PAD0) and a 40-byte (PAD1) instance,
// compared with Keccak pad10*1 states built independently, for several messages.
module tb_keccak_pad;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 100;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0;
  int failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [511:0] msg64;
  logic [319:0] msg40;
  logic [1599:0] st64, st40;
  keccak_pad #(.MSG_BYTES(64)) u64 (.msg(msg64), .state(st64));
  keccak_pad #(.MSG_BYTES(40)) u40 (.msg(msg40), .state(st40));

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    msg64 = 512'h73dd8fdbecc7777382da96302fcd8379a19dcb2f18724d241789cfe3b1a20a98fb65f673a7bd9da6289f03d487100f0930e13d9907c776537097d732843ba34b;
    msg40 = 320'h30313233343536373839616263646566303132333435363738396162636465663031323334353637;
    #1;
    check(st64 == 1600'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000008000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000014ba33b8432d797705376c707993de130090f1087d4039f28a69dbda773f665fb980aa2b1e3cf8917244d72182fcb9da17983cd2f3096da827377c7ecdb8fdd73, "pad 64 bytes");
    check(st40 == 1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000080000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000137363534333231306665646362613938373635343332313066656463626139383736353433323130, "pad 40 bytes");
    msg64 = 512'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    msg40 = 320'h00000000000000000000000000000000000000000000000000000000000000000000000000000000;
    #1;
    check(st64 == 1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000080000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000100000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000, "pad 64 bytes");
    check(st40 == 1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000080000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000100000000000000000000000000000000000000000000000000000000000000000000000000000000, "pad 40 bytes");
    msg64 = 512'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff;
    msg40 = 320'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff;
    #1;
    check(st64 == 1600'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000001ffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, "pad 64 bytes");
    check(st40 == 1600'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000001ffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, "pad 40 bytes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
