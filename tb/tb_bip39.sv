// Self-checking testbench of bip39 at the full 2048 PBKDF2 rounds, with an hmac_sha512 unit
// answering its HMAC request port as CKDF does in the wallet. Case 1 generates a mnemonic
// from entropy (a sentence over 128 bytes, so the password is first hashed with SHA-512);
// case 2 recovers from a given sentence of at most 128 bytes (password used directly);
// cases 3-5 are the edge cases mcsIn = all ones, a 245-byte sentence and mcsIn = all zeros;
// cases 6-7 generate from the entropy edge cases e = all ones and e = all zeros.
// Mnemonics, lengths and seeds are compared with an independent BIP-39 model using the same
// word list; the latency is compared with the 692,827 cycles of the paper.
module tb_bip39;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 7000000;
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

  // Word list used by the tests: word i has 3 + (i % 6) letters,
  // letter j = 'a' + ((7 i + 11 j + (i >> 5)) % 26). Entry = {letters left-aligned, bits}.
  function automatic logic [71:0] wl_entry(input int i);
    logic [71:0] w;
    int len;
    w = '0;
    len = 3 + (i % 6);
    for (int j = 0; j < len; j++) w[71 - 8*j -: 8] = 8'(97 + ((i*7 + j*11 + (i >> 5)) % 26));
    w[7:0] = 8'(8 * len);
    return w;
  endfunction

  logic start, recover, wl_we, busy, mcs_done, pwd_hashed, done;
  logic [255:0] e;
  logic [2047:0] mcs_in, mcs;
  logic [10:0] wl_addr;
  logic [71:0] wl_data;
  logic [8:0] mcs_len;
  logic [511:0] seed, h_msg, h_digest;
  logic h_start, h_raw, h_first, h_done, hb;
  logic [1023:0] h_key, h_block;
  logic [9:0] h_len;
  bip39 dut (.*);
  hmac_sha512 u_hmac (.clk, .rst_n, .start(h_start), .raw(h_raw), .sel_k(1'b0), .k_0(h_key),
                      .k_1('0), .sel_m(1'b1), .m_0('0), .m_1(h_msg), .m_1_len(h_len),
                      .to_sha512(h_block), .sha_first(h_first), .busy(hb), .done(h_done),
                      .digest(h_digest));

  int mcs_seen = 0;
  always @(posedge clk) if (rst_n && mcs_done) mcs_seen++;

  task automatic run(input bit rec, output int cyc);
    @(negedge clk); recover = rec; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; recover = 0; wl_we = 0; wl_addr = 0; wl_data = 72'd8; mcs_seen = 0;
    e = 256'h221c4e003f9931ee3af27f802dc5fd3d9974d75b333824fe61790134676b1b69;
    mcs_in = 2048'h616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720626d78697465206873640000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < 2048; i++) begin
      wl_we = 1; wl_addr = 11'(i); wl_data = wl_entry(i); @(negedge clk);
    end
    wl_we = 0;
    run(1'b0, c);
    check(mcs == 2048'h6f7a6b766720746570616c77687320796a756671626d20616c7768736420616c77206a7566716220616c77687320756671626d78206671626d78697465206772636e796a7566206873646f7a6b76206a756671206671626d78697420766772636e792068736420766772636e20756671622073646f207869746570616c20646f7a6b206772636e796a75662072636e206570616c207a6b766700000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && mcs_len == 9'd153, "generated mnemonic");
    check(pwd_hashed, "long sentence: password hashed");
    check(seed == 512'h11e6d96c43dcd1d8d815c4540c027728435d6a302d584dc4918ed38958d8f38ae0cadd30f195e72351faf297569725b312acec10dd7bcf9ea290fc16a1da1a92, "seed from generated mnemonic");
    check(c > 680000 && c < 692827, $sformatf("generation latency %0d", c));
    $display("BIP39 generation: %0d cycles (paper 692827)", c);
    run(1'b1, c);
    check(mcs == mcs_in && mcs_len == 9'd98, "recovered mnemonic and length");
    check(!pwd_hashed, "short sentence: password used directly");
    check(seed == 512'hdd1baa7193c62767238ce46d7c4bfc6e189f9db3cd04131666dffee002c2a3fade9f81eea887f9d8a85380b9c6b29e066651075b0f908670d9e86fc5a981c5e8, "seed from recovered mnemonic");
    check(c > 680000 && c < 692827, $sformatf("recovery latency %0d", c));
    mcs_in = 2048'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff;
    run(1'b1, c);
    check(mcs_len == 9'd256 && pwd_hashed == 1'b1, "mcsIn all ones (256 bytes, three SHA-512 blocks): length and password path");
    check(seed == 512'hb828bca32d7f6fb8f8b963feb83d0800d3b4320617d4a1b761fe4fe09d8c249de97771cb07153c874f3ca156f17c7fb18abcc9e7f9cb2793ebe34ede9b166377, "mcsIn all ones (256 bytes, three SHA-512 blocks): seed");
    mcs_in = 2048'h610b215d31435759450b794f3f19355d4f4b1b6573652f69316f571b133b55176d492b0b795b4357630b3d293305234701371b2f7f77450b3b4373194d3b7d072d111b79755b155f65394d777d1779415517050f03153d5769350b7737510b13274f01312b1143331973657d07511b392145336961112d79593d7707115f6f5b4d635f134d79350f0d0f1325177f173513771b714729633f671d6d210f6d692f1757094125014b6b072b1b31332b6967333135692f450b177105772f5d6d3363391d276d531d535d270d6f595d291b61675b575b1f312539617b0b7139357b752109412575576f29653d4511777321377125357b550000000000000000000000;
    run(1'b1, c);
    check(mcs_len == 9'd245 && pwd_hashed == 1'b1, "245-byte mcsIn (three SHA-512 blocks): length and password path");
    check(seed == 512'h6be82624c44ad067898f0e413aa7f8e7193d372f88d0cb489c7fed7519120d25f7142839c51abfe056aa767435b63e88178cb681c886aef1adecbccf64cdc4be, "245-byte mcsIn (three SHA-512 blocks): seed");
    mcs_in = 2048'h00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    run(1'b1, c);
    check(mcs_len == 9'd0 && pwd_hashed == 1'b0, "mcsIn all zeros (empty password): length and password path");
    check(seed == 512'h4ed8d4b17698ddeaa1f1559f152f87b5d472f725ca86d341bd0276f1b61197e21dd5a391f9f5ed7340ff4d4513aab9cce44f9497a5e7ed85fd818876b6eb402e, "mcsIn all zeros (empty password): seed");
    // cases 6-7: the entropy edge cases e = all ones and e = all zeros
    e = 256'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffff;
    run(1'b0, c);
    check(mcs == 2048'h6f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b7620796a756671626d7800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && mcs_len == 9'd123, "e all ones: mnemonic");
    check(pwd_hashed == 1'b0, "e all ones: password path");
    check(seed == 512'h338059df891bfb0904c1d68f14ae8de3514d1078ad693dcaaf66a469fa7e1f0d49a7fbfb70fe061404b3b1d227619474cecd1d96969840781f28d137b00fce27, "e all ones: seed");
    e = 256'h0000000000000000000000000000000000000000000000000000000000000000;
    run(1'b0, c);
    check(mcs == 2048'h616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c772070616c0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && mcs_len == 9'd95, "e all zeros: mnemonic");
    check(pwd_hashed == 1'b0, "e all zeros: password path");
    check(seed == 512'h7a4b45b9315fea8753a35195d6a2376a1e444a6d8947ad06b46ea4d8cf27b3ef309e147ae4384b8a1f4393e13ce10ff2e566a5d4e35e2ec057466ab2ec6c65a4, "e all zeros: seed");
    check(mcs_seen == 7, "mcs_done once per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
