// Self-checking testbench of bin_inv: modular inverses mod p and mod n (the two instances
// used by SECP256K1 and ECDSA), including 1, 2, M-1, an input above M and zero, against
// inverses computed independently; checks the data-dependent latency stays bounded.
module tb_bin_inv;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 30000;
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

  logic start, busy, done, start_n, busy_n, done_n;
  logic [255:0] z, r, r_n;
  bin_inv dut (.*);
  bin_inv #(.MODULUS(SECP_N)) dut_n (.clk, .rst_n, .start(start_n), .z, .busy(busy_n),
                                     .done(done_n), .r(r_n));

  task automatic run(input logic [255:0] v, input bit modn, output int cyc);
    @(negedge clk); z = v; start = !modn; start_n = modn;
    @(negedge clk); start = 1'b0; start_n = 1'b0; cyc = 1;
    while (!(modn ? done_n : done)) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; start_n = 0; z = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(256'h0000000000000000000000000000000000000000000000000000000000000001, 1'b0, c);
    check(r == 256'h0000000000000000000000000000000000000000000000000000000000000001, "inverse mod p #0");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h0000000000000000000000000000000000000000000000000000000000000002, 1'b0, c);
    check(r == 256'h7fffffffffffffffffffffffffffffffffffffffffffffffffffffff7ffffe18, "inverse mod p #1");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 1'b0, c);
    check(r == 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, "inverse mod p #2");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h126a1e48cc11d357c30d8b7628dbd25e63b229f1c4069545de11cc9dea959c21, 1'b0, c);
    check(r == 256'hbfb76e7b118697bbbe3c1f64905d28dd207495f1d9aef30744fd7dabdf6d88d8, "inverse mod p #3");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'hf8eb18b90074513021da8978206f5c6671e0c07e9e115e4b9e30691c238642ea, 1'b0, c);
    check(r == 256'h79fe41a50116aa3eb0d79147731dd90e1fa2ba046801f8f50e37756fab1e9d5a, "inverse mod p #4");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'haa759159fb7ff337f5cae3bf3729c619c60a3cab359eeefb015c33b2df1461aa, 1'b0, c);
    check(r == 256'hdf15103eab07f399619930978179b52419f41df8bfb1f95c90d1395a7fd53c1a, "inverse mod p #5");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h0000000000000000000000000000000000000000000000000000000000000001, 1'b1, c);
    check(r_n == 256'h0000000000000000000000000000000000000000000000000000000000000001, "inverse mod n #6");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h0000000000000000000000000000000000000000000000000000000000000002, 1'b1, c);
    check(r_n == 256'h7fffffffffffffffffffffffffffffff5d576e7357a4501ddfe92f46681b20a1, "inverse mod n #7");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd0364140, 1'b1, c);
    check(r_n == 256'hfffffffffffffffffffffffffffffffebaaedce6af48a03bbfd25e8cd0364140, "inverse mod n #8");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'he049548e8a0a8c9632ea6928f6236bf2504b74ba4a0fe75d2a9eba0cdf561d80, 1'b1, c);
    check(r_n == 256'h6f8ffbc9e1fa8d9dd04923ac09b391006f84d55e6a25cdf51f18ea810e94df69, "inverse mod n #9");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h3266aa3bb0cde917f7f35634f0e3cd972e81d66d346c6e2ba02fdaa1ad864c44, 1'b1, c);
    check(r_n == 256'h2b6259b83a3cb0b09a949cddda22bea9d5cc9c14a59eb28d80a50c0c4b38a0af, "inverse mod n #10");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'hea3753915c76f18a0585a01c4c7d6df0621aef57e4cc4132f7108e96f770c226, 1'b1, c);
    check(r_n == 256'h51b61b5e9bb8557396268c911640ab4b9894f38df3a98e6c54ee0dd051594cc9, "inverse mod n #11");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    run(256'h0000000000000000000000000000000000000000000000000000000000000000, 1'b0, c);
    check(r == 256'h0000000000000000000000000000000000000000000000000000000000000000, "inverse mod p #12");
    check(c <= 1100, $sformatf("inverse latency %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
