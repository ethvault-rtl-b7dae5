// Self-checking testbench of keccak256: hashes two padded single-block messages (a 64-byte
// public key and a 40-character address) and the empty message, against Keccak-256 digests
// computed independently; checks the 25-cycle latency the paper gives.
module tb_keccak256;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 2000;
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

  logic start, busy, done;
  logic [1599:0] state_in;
  logic [255:0] digest;
  keccak256 dut (.*);

  task automatic run(input logic [1599:0] s, output int cyc);
    @(negedge clk); state_in = s; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; state_in = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(1600'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000008000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000014ba33b8432d797705376c707993de130090f1087d4039f28a69dbda773f665fb980aa2b1e3cf8917244d72182fcb9da17983cd2f3096da827377c7ecdb8fdd73, c);
    check(digest == 256'h28dd9a759d59e41c53b2c1713d78836dbcb3476d4a71ab3790a46f5c8b5fcb75, "keccak 64 bytes");
    check(c == 25, $sformatf("latency %0d != 25", c));
    run(1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000080000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000137363534333231306665646362613938373635343332313066656463626139383736353433323130, c);
    check(digest == 256'he615a0110b665eda35f8f9422f43ba54b0c3694ceb1128ca2da6be42ac64c8a5, "keccak 40 bytes");
    run(1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000080000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000001, c);
    check(digest == 256'hc5d2460186f7233c927e7db2dcc703c0e500b653ca82273b7bfad8045d85a470, "keccak empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
