// Self-checking testbench of ckdf: a hardened and a non-hardened BIP-32 child derivation
// (key, chain code, k_hat), the public-key mode, the master-key HMAC with "Bitcoin seed" and
// a raw SHA-512 block, against an independent BIP-32 model; checks the latencies against
// the paper (HMAC 335, non-hardened CKD 1,887,855 cycles).
module tb_ckdf;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 8000000;
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

  logic start, sha_first, busy, done, secp_inf, valid;
  ckdf_mode_e mode;
  logic [255:0] k, c, k_hat;
  logic [31:0] n;
  logic [1023:0] k_0, to_sha512;
  logic [511:0] m_1, hmac_out, secp_out;
  logic [9:0] m_1_len;
  ckdf dut (.*);

  task automatic run(input ckdf_mode_e md, output int cyc);
    @(negedge clk); mode = md; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cy;
    start = 0; mode = CKDF_CKD; sha_first = 1; m_1_len = 10'd512;
    k = 256'h05013278ed8dbab6cf0141301ff7f21216a591f4d1484c93bdb39a6227a1d402; c = 256'h26ae54ee7c1589b466be6e5457c9b2c0ba7c3a758d500f76293dc20674002b8e;
    k_0 = BTC_SEED_KEY; m_1 = 512'ha87266a2e4daf1c3cd8bbe9cf8013ebbac7dc96b356455533287533dc7bf13aa131a83dc3c202fb0d1f4fb87ddaaad70784e1ea40981fa59aa4486552fd940bb; to_sha512 = 1024'h7878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787878787880000000000000000000000000000000000000000000000000000320;
    n = BIP44_CT;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(CKDF_CKD, cy);
    check(hmac_out == 512'h92384dee3837f43cb81465f7df2f98e140f49f72d5a9f6bce7ba277de6b3f9f5c3f6e1ca5d08ebbb791a93318b3dac98fe51a2ddfb900e357c6834120aad9935, "hardened CKD: HMAC output");
    check(k_hat == 256'h9739806725c5aef38715a727ff278af3579a3167a6f24350a56dc1e00e55cdf7 && hmac_out[255:0] == 256'hc3f6e1ca5d08ebbb791a93318b3dac98fe51a2ddfb900e357c6834120aad9935 && valid,
          "hardened CKD: child key and chain code");
    check(cy <= 337, $sformatf("hardened CKD latency %0d (paper HMAC 335)", cy));
    n = 32'd5;
    run(CKDF_CKD, cy);
    check(hmac_out == 512'h42a84695a007f95ace6234660c096fd7ac8a5e9124acee27421a9d2ca9cbd74c83c8d1a5077c2e5faa67e196bad5e60836c8eedd8c7d3c3252b8054e70b022db, "non-hardened CKD: HMAC output");
    check(k_hat == 256'h47a9790e8d95b4119d6375962c0161e9c32ff085f5f53abaffce378ed16dab4e && hmac_out[255:0] == 256'h83c8d1a5077c2e5faa67e196bad5e60836c8eedd8c7d3c3252b8054e70b022db && valid,
          "non-hardened CKD: child key and chain code");
    check(cy > 1869000 && cy < 1887855, $sformatf("non-hardened CKD latency %0d", cy));
    $display("non-hardened CKD: %0d cycles (paper 1887855)", cy);
    run(CKDF_PUB, cy);
    check(secp_out == 512'h0e6294ad0eab7474a37f77276fc15f25807b3b215b5c2f43ddc3263bf443e4990d03a6ee8cb2f61a01d420fe62ac5b386d9c70d3e11b2d3190092592fe0da4e9 && !secp_inf && valid, "public key");
    run(CKDF_HMAC, cy);
    check(hmac_out == 512'h5495d6182adbec8dfb789331440168dd9d52fe8490b6986c2b7f1df364be4269b95869b6f03d35e1e24af142971d48fd6589ebb9df917be5a73cc686d764dbb5 && k_hat == hmac_out[511:256] && valid, "master key HMAC");
    run(CKDF_SHA, cy);
    check(hmac_out == 512'h879d456eb64a95ed7939f45911d620c33bba3a761b01d92ede06250c63b03334efb91f95bc86123053b99258b08d9518d343030a38ed0f86124feabc31b6e821, "raw SHA-512 block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
