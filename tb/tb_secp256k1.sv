// Self-checking testbench of secp256k1: k * G for a random scalar, a small scalar, k = n
// (point at infinity) and the edge cases k = 0, n - 1, n + 1, 2^256 - 1 and 2^255, against
// an independent affine double-and-add; checks that the latency is within 1% of the
// 1,887,520 cycles the paper gives (the ladder alone is 512 PA operations of 3651 cycles)
// and differs between keys only by the inversion.
module tb_secp256k1;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 17000000;
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

  logic start, busy, done, inf;
  logic [255:0] k;
  logic [511:0] pub;
  secp256k1 dut (.*);

  task automatic run(input logic [255:0] v, output int cyc);
    @(negedge clk); k = v; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; k = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(256'hd14125844d25deb354f46a6910acff0043892dfc254cb864ef901b932a7c1880, c);
    check(pub == 512'h89cdddcc699467e8460a619e44fac9060782e6ae46e1e8bca4642e3ea58c2f4a49d7100e4869b7bff43e4d7f97a79e9b473aba16c267c1086d4ca336e9d0f27b && inf == 1'b0, "k*G #0");
    check(c > 1869500 && c < 1872000, $sformatf("latency %0d vs paper 1887520", c));
    $display("scalar multiplication #0: %0d cycles", c);
    run(256'h0000000000000000000000000000000000000000000000000000000000000003, c);
    check(pub == 512'hf9308a019258c31049344f85f89d5229b531c845836f99b08601f113bce036f9388f7b0f632de8140fe337e62a37f3566500a99934c2231b6cb9fd7584b8e672 && inf == 1'b0, "k*G #1");
    check(c > 1869500 && c < 1872000, $sformatf("latency %0d vs paper 1887520", c));
    $display("scalar multiplication #1: %0d cycles", c);
    run(256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd0364141, c);
    check(pub == 512'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && inf == 1'b1, "k*G #2");
    check(c > 1869500 && c < 1872000, $sformatf("latency %0d vs paper 1887520", c));
    $display("scalar multiplication #2: %0d cycles", c);
    // edge-case scalars: 0, n - 1, n + 1, 2^256 - 1 (reduced modulo n by the group
    // itself) and 2^255 (only the top bit set)
    run(256'h0000000000000000000000000000000000000000000000000000000000000000, c);
    check(pub == 512'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && inf == 1'b1, "k = 0: k*G");
    check(c > 1869500 && c < 1872000, $sformatf("k = 0: latency %0d vs paper 1887520", c));
    run(256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd0364140, c);
    check(pub == 512'h79be667ef9dcbbac55a06295ce870b07029bfcdb2dce28d959f2815b16f81798b7c52588d95c3b9aa25b0403f1eef75702e84bb7597aabe663b82f6f04ef2777 && inf == 1'b0, "k = n-1: k*G");
    check(c > 1869500 && c < 1872000, $sformatf("k = n-1: latency %0d vs paper 1887520", c));
    run(256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd0364142, c);
    check(pub == 512'h79be667ef9dcbbac55a06295ce870b07029bfcdb2dce28d959f2815b16f81798483ada7726a3c4655da4fbfc0e1108a8fd17b448a68554199c47d08ffb10d4b8 && inf == 1'b0, "k = n+1: k*G");
    check(c > 1869500 && c < 1872000, $sformatf("k = n+1: latency %0d vs paper 1887520", c));
    run(256'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, c);
    check(pub == 512'h9166c289b9f905e55f9e3df9f69d7f356b4a22095f894f4715714aa4b56606aff181eb966be4acb5cff9e16b66d809be94e214f06c93fd091099af98499255e7 && inf == 1'b0, "k = 2^256-1: k*G");
    check(c > 1869500 && c < 1872000, $sformatf("k = 2^256-1: latency %0d vs paper 1887520", c));
    run(256'h8000000000000000000000000000000000000000000000000000000000000000, c);
    check(pub == 512'hb23790a42be63e1b251ad6c94fdef07271ec0aada31db6c3e8bd32043f8be384fc6b694919d55edbe8d50f88aa81f94517f004f4149ecb58d10a473deb19880e && inf == 1'b0, "k = 2^255: k*G");
    check(c > 1869500 && c < 1872000, $sformatf("k = 2^255: latency %0d vs paper 1887520", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
