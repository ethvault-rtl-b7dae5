// Self-checking testbench of ecdsa, with a secp256k1 unit answering its point-multiplication
// request port as CKDF does in the wallet: a random signature, one with k > n and z > n
// (exercising the "-n" reduction loops), the invalid nonce k = 0, d > n, k = d = z = all ones,
// k = d = z = 1 and d = z = 0 (s = 0, rejected), against an independent ECDSA model; the
// latency is compared with the 1,888,550 cycles of the paper.
module tb_ecdsa;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 15000000;
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

  logic start, busy, done, valid, p_start, p_done, p_inf, pb;
  logic [255:0] k, d, z, r, s, p_k;
  logic [511:0] p_pub;
  logic [7:0] nred;
  ecdsa dut (.*, .p_x(p_pub[511:256]));
  secp256k1 u_secp (.clk, .rst_n, .start(p_start), .k(p_k), .busy(pb), .done(p_done),
                    .pub(p_pub), .inf(p_inf));

  task automatic run(input logic [255:0] kk, input logic [255:0] dd, input logic [255:0] zz,
                     output int cyc);
    @(negedge clk); k = kk; d = dd; z = zz; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; k = '0; d = '0; z = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(256'h613c2e3831c8e93d70a758d3b6fed184aab2348c9e60a7e5fcbf32c0dcda59b8, 256'h9ab1dca8ada85c5aada14be761036fdb484436ab28cfbcc79c6abc0dd389addf, 256'hb1c01a185af43b97aac487b5011a8be7586afe5f3299a5c0e331f1f5563b9c31, c);
    check(r == 256'h3daf59f76a2dadd42ad7c86c8e0ea98f894bb6b75776e1a41865612a6db02ab2 && s == 256'h41d0531287430cc629b0cca3669d800b6934df8495e4072c7839754268de04d6 && valid, "random k, d, z");
    check(c > 1869000 && c < 1888550, $sformatf("latency %0d", c));
    $display("ECDSA: %0d cycles (paper 1888550)", c);
    run(256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd036717a, 256'h9ab1dca8ada85c5aada14be761036fdb484436ab28cfbcc79c6abc0dd389addf, 256'hffffffffffffffffffffffffffffffffffffffffffffffff090cdca6b46094ec, c);
    check(r == 256'hf01d6b9018ab421dd410404cb869072065522bf85734008f105cf385a023a80f && s == 256'he5e9933fa020593ea27c6631f1c423b53c84b534b52bc356a8fd8f43e092a417 && valid, "k > n and z > n");
    check(c > 1869000 && c < 1888550, $sformatf("latency %0d", c));
    $display("ECDSA: %0d cycles (paper 1888550)", c);
    check(nred >= 1, $sformatf("-n steps %0d", nred));
    run(256'h0000000000000000000000000000000000000000000000000000000000000000, 256'h9ab1dca8ada85c5aada14be761036fdb484436ab28cfbcc79c6abc0dd389addf, 256'hb1c01a185af43b97aac487b5011a8be7586afe5f3299a5c0e331f1f5563b9c31, c);
    check(!valid && r == 0, "k = 0: rejected");
    // edge cases of the paper's signature tests: d > n, all ones, small values, zero d and z
    run(256'h613c2e3831c8e93d70a758d3b6fed184aab2348c9e60a7e5fcbf32c0dcda59b8, 256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd036717a, 256'hb1c01a185af43b97aac487b5011a8be7586afe5f3299a5c0e331f1f5563b9c31, c);
    check(r == 256'h3daf59f76a2dadd42ad7c86c8e0ea98f894bb6b75776e1a41865612a6db02ab2 && s == 256'h1c66b3d4528c1ba7ef71dbf06ef084fd334f9574caab4af30cb6cc926ab12f06 && valid, "d > n");
    check(c > 1869000 && c < 1888550, $sformatf("d > n: latency %0d", c));
    run(256'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, 256'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, 256'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff, c);
    check(r == 256'h9166c289b9f905e55f9e3df9f69d7f356b4a22095f894f4715714aa4b56606af && s == 256'h9166c289b9f905e55f9e3df9f69d7f356b4a22095f894f4715714aa4b56606b0 && valid, "k, d, z all ones");
    check(c > 1869000 && c < 1888550, $sformatf("k, d, z all ones: latency %0d", c));
    run(256'h0000000000000000000000000000000000000000000000000000000000000001, 256'h0000000000000000000000000000000000000000000000000000000000000001, 256'h0000000000000000000000000000000000000000000000000000000000000001, c);
    check(r == 256'h79be667ef9dcbbac55a06295ce870b07029bfcdb2dce28d959f2815b16f81798 && s == 256'h79be667ef9dcbbac55a06295ce870b07029bfcdb2dce28d959f2815b16f81799 && valid, "small k, d, z");
    check(c > 1869000 && c < 1888550, $sformatf("small k, d, z: latency %0d", c));
    run(256'h613c2e3831c8e93d70a758d3b6fed184aab2348c9e60a7e5fcbf32c0dcda59b8, 256'h0000000000000000000000000000000000000000000000000000000000000000, 256'h0000000000000000000000000000000000000000000000000000000000000000, c);
    check(r == 256'h3daf59f76a2dadd42ad7c86c8e0ea98f894bb6b75776e1a41865612a6db02ab2 && !valid, "d = 0 and z = 0");
    check(c > 1869000 && c < 1888550, $sformatf("d = 0 and z = 0: latency %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
