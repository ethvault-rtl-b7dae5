// Self-checking testbench of sha512_core: one-block "abc" (FIPS 180 example), a two-block
// 200-byte message (chaining with use_iv = 0), and the 82-cycle latency.
module tb_sha512_core;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 5000;
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

  logic start, use_iv, busy, done;
  logic [1023:0] block;
  logic [511:0] digest;
  sha512_core dut (.*);

  task automatic run(input logic [1023:0] b, input bit iv, output int cyc);
    @(negedge clk); block = b; use_iv = iv; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; use_iv = 1; block = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(1024'h6162638000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000018, 1'b1, c);
    check(digest == 512'hddaf35a193617abacc417349ae20413112e6fa4e89a97ea20a9eeee64b55d39a2192992a274fc1a836ba3c23a3feebbd454d4423643ce80e2a9ac94fa54ca49f, "sha512(abc)");
    check(c == 82, $sformatf("latency %0d != 82", c));
    run(1024'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f202122232425262728292a2b2c2d2e2f303132333435363738393a3b3c3d3e3f404142434445464748494a4b4c4d4e4f505152535455565758595a5b5c5d5e5f606162636465666768696a6b6c6d6e6f707172737475767778797a7b7c7d7e7f, 1'b1, c);
    run(1024'h808182838485868788898a8b8c8d8e8f909192939495969798999a9b9c9d9e9fa0a1a2a3a4a5a6a7a8a9aaabacadaeafb0b1b2b3b4b5b6b7b8b9babbbcbdbebfc0c1c2c3c4c5c6c78000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000640, 1'b0, c);
    check(digest == 512'h986058e9895e2c2ab8f9e8cbdf801db12a44842a56a91d5a4e87b1fc98b293722c4664142e42c3c551ff898646268cd92b84ed230b8c94bed7798d4f27cd7465, "sha512 two blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
