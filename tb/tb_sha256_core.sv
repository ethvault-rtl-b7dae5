// Self-checking testbench of sha256_core: "abc" and a 256-bit entropy value (the BIP-39
// checksum use), against independently computed SHA-256 digests; checks the latency.
module tb_sha256_core;
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
  logic [511:0] block;
  logic [255:0] digest;
  sha256_core dut (.*);

  task automatic run(input logic [511:0] b, output int cyc);
    @(negedge clk); block = b; use_iv = 1'b1; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; use_iv = 1; block = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(512'h61626380000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000018, c);
    check(digest == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "sha256(abc)");
    check(c == 66, $sformatf("latency %0d != 66", c));
    run(512'hd23f0824128b2f330c5c7fd0a6a3a4506513270e269e0d37f2a74de452e6b4388000000000000000000000000000000000000000000000000000000000000100, c);
    check(digest == 256'h1995e759e6240c35c1de986c860ff3e4967a7376adac34482f5b9db40cf75f77, "sha256(entropy)");
    check(digest[255:248] == 8'h19, "checksum byte");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
