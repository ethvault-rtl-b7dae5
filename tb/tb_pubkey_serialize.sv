// Self-checking testbench of pubkey_serialize: compressed public keys (prefix 02/03 by the
// parity of y) of several points, against encodings formed independently.
module tb_pubkey_serialize;
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

  logic [511:0] pub;
  logic [263:0] ser;
  pubkey_serialize dut (.*);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    pub = 512'hf3cd7244a05a37a28cfd0f0e1f6d95c7237569922cdc34943190138e371adb1a13a04d0ee3513fecb13304af04d6a360d2062009165326a45014052b46092122; #1;
    check(ser == 264'h02f3cd7244a05a37a28cfd0f0e1f6d95c7237569922cdc34943190138e371adb1a, "point #0 (y even)");
    pub = 512'h4a2d0d1e974f547f9fd380004f151f090d2d83c5cb3bce66ec920767e3db4e5b0d18951b550afa8c9277729419f89b00ce8eeb4f8da066f31c2b861f03207768; #1;
    check(ser == 264'h024a2d0d1e974f547f9fd380004f151f090d2d83c5cb3bce66ec920767e3db4e5b, "point #1 (y even)");
    pub = 512'h92f39c6f47c6775fb841a2eabd21395e77a47c2e0df9787a0163c9fd41369cbacc8567ee7541a2376d584358b97e09936666e8924bbe29b02a8806fb8a26acf0; #1;
    check(ser == 264'h0292f39c6f47c6775fb841a2eabd21395e77a47c2e0df9787a0163c9fd41369cba, "point #2 (y even)");
    pub = 512'h920bfef826caf2353a23da4e92f55b86aab6cffe06ebb996b74790f3e8ae5dc5db6c8a1854f02c4cd69196ac8851a9c4ecacc5a3a86b1adee8f7ffeca5cb4a72; #1;
    check(ser == 264'h02920bfef826caf2353a23da4e92f55b86aab6cffe06ebb996b74790f3e8ae5dc5, "point #3 (y even)");
    pub = 512'h135efe3ee170510712dd7ade3a7122348b77e8ed9641cca24e35047f47368aa03a13851d26cac3e38719fab7f00aeaffea8113d2ba7d51d22f88fc719cfdf562; #1;
    check(ser == 264'h02135efe3ee170510712dd7ade3a7122348b77e8ed9641cca24e35047f47368aa0, "point #4 (y even)");
    pub = 512'h3f09aae5153af606ee9418e3f88850fe9f3759915f37d8ba008c1ccd0e0cfe5f9344c7290efe4e96c7767a838f29ad61af4668004f1ea76e44cb6352011a062b; #1;
    check(ser == 264'h033f09aae5153af606ee9418e3f88850fe9f3759915f37d8ba008c1ccd0e0cfe5f, "point #5 (y odd)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
