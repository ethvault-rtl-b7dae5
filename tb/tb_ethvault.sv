// End-to-end testbench of the ethvault top (PBKDF2 shortened to ITER = 2 rounds; everything
// else at its default size). Run 1 generates a wallet from entropy with two addresses and
// signs with both keys (one signature with k > n and z > n); run 2 recovers a wallet from a
// given mnemonic. Mnemonics, key outputs {compressed public key, EIP-55 address}
// (RAM entries) and signatures are compared with an independent BIP-39/32/44 + Ethereum model.
// Every mechanism of the design is counted from its control signals, and a mechanism that
// never happened counts as a failure.
module tb_ethvault;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 40000000;
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

  logic start, recover, wl_we, busy, mcs_valid, keys_ready, derive_err, sign, sig_done, sig_valid;
  logic [31:0] n;
  logic [255:0] e, z, k, r, s;
  logic [2047:0] mcs_in, mcs;
  logic [10:0] wl_addr;
  logic [71:0] wl_data;
  logic [8:0] mcs_len;
  logic [9:0] sel;
  logic [599:0] key;

  ethvault #(.ITER(2)) dut (.*);

  // mechanism counters, from the control signals (states: 1 BIP39, 2 master key,
  // 4 address-index CKD, 6/7 Keccak on PAD0/PAD1)
  int n_hard = 0, n_soft = 0, n_pub = 0, n_reuse = 0, n_gen = 0, n_rec = 0, n_hash = 0, n_direct = 0, n_sign = 0, n_nred = 0;
  int n_pad0 = 0, n_pad1 = 0, n_ram = 0, n_master = 0, n_pbkdf2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ckdf.start && dut.u_ckdf.mode == CKDF_CKD &&  dut.u_ckdf.n[31]) n_hard++;
    if (dut.u_ckdf.start && dut.u_ckdf.mode == CKDF_CKD && !dut.u_ckdf.n[31]) n_soft++;
    if (dut.u_ckdf.start && dut.u_ckdf.mode == CKDF_PUB) n_pub++;
    if (dut.u_ckdf.start && int'(dut.state_q) == 4 && dut.cnt != 0) n_reuse++;
    if (dut.u_ckdf.start && int'(dut.state_q) == 2) n_master++;
    if (dut.u_ckdf.start && dut.u_ckdf.mode == CKDF_HMAC && int'(dut.state_q) == 1) n_pbkdf2++;
    if (dut.u_bip39.start && !recover) n_gen++;
    if (dut.u_bip39.start &&  recover) n_rec++;
    if (dut.u_bip39.mcs_done &&  dut.u_bip39.pwd_hashed) n_hash++;
    if (dut.u_bip39.mcs_done && !dut.u_bip39.pwd_hashed) n_direct++;
    if (dut.u_keccak.start && int'(dut.state_q) == 6) n_pad0++;
    if (dut.u_keccak.start && int'(dut.state_q) == 7) n_pad1++;
    if (dut.ram_we) n_ram++;
    if (sig_done) n_sign++;
    if (dut.u_ecdsa.done && dut.u_ecdsa.nred != 0) n_nred++;
  end

  task automatic need(input int cnt, input string what);
    checks++;
    $display("mechanism %-34s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  task automatic load_words();
    for (int i = 0; i < 2048; i++) begin
      wl_we = 1; wl_addr = 11'(i); wl_data = wl_entry(i); @(negedge clk);
    end
    wl_we = 0;
  endtask

  // wallet generation; returns the cycles to the first RAM write and between RAM writes
  task automatic make_wallet(input bit rec, input logic [31:0] nk, output int first,
                          output int next);
    int cyc, last;
    @(negedge clk); recover = rec; n = nk; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1; first = 0; next = 0; last = 0;
    while (!keys_ready) begin
      if (dut.ram_we) begin
        if (first == 0) first = cyc; else next = cyc - last;
        last = cyc;
      end
      @(negedge clk); cyc++;
    end
  endtask

  task automatic read_key(input int idx, output logic [599:0] v);
    @(negedge clk); sel = 10'(idx);
    @(negedge clk); v = key;
  endtask

  task automatic do_sign(input int idx, input logic [255:0] kk, input logic [255:0] zz,
                         output int cyc);
    @(negedge clk); sel = 10'(idx); k = kk; z = zz; sign = 1'b1;
    @(negedge clk); sign = 1'b0; cyc = 1;
    while (!sig_done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int f, nx, c;
    logic [599:0] v;
    start = 0; recover = 0; wl_we = 0; wl_addr = 0; wl_data = 72'd8; sign = 0; n = 32'd1;
    e = '0; z = '0; k = '0; sel = '0; mcs_in = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    load_words();

    // run 1: generation from entropy, two addresses
    e = 256'hf149f542e935b87017346b4501eaf6141de9ea6670d3da1fc735df5ef7697fb9;
    make_wallet(1'b0, 32'd2, f, nx);
    check(mcs_valid && mcs == 2048'h796a756671626d206772636e206c776873646f20646f7a6b766720796a75206570616c7768732072636e796a756620776873646f7a20687364207a6b766772207a6b766772636e20766772636e79206a756671626d782069746570616c77682071626d20626d78692071626d7869746520756671626d7869742069746570616c7768206b766772207768736420756671626d786974206b766772636e796a2072636e796a7566000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && mcs_len == 9'd166, "generated mnemonic");
    check(!derive_err, "no derivation error");
    read_key(0, v);
    check(v == 600'h029e8d84eccb4a39b77dc4f8312b84bf419bf666c209ff9f4ff1ed17621300fbca307844334531646232413537626546383431333761343533383746366446313234333135343337393946, "run 1 index 0: 0xD3E1db2A57beF84137a45387F6dF12431543799F");
    read_key(1, v);
    check(v == 600'h03e6534915afe9239938ef814dd5682a0fd8577c723368a9b5050ce91c59b39943307832456130616333303563386637664630393546313946373137346136353863363165353646444166, "run 1 index 1: 0x2Ea0ac305c8f7fF095F19F7174a658c61e56FDAf");
    check(nx > 3700000 && nx < 3775064, $sformatf("cycles per further key %0d", nx));
    do_sign(1, 256'h19322fed157cf9c6b16e2d5cabeb959208f0ebd4950cddd9ce97b5bdf073eed2, 256'h040e1e30c9ed0248fc9799a707e36d6004762a223c9f90c95ac96628c4381836, c);
    check(sig_valid && r == 256'h97d7ad39972d6488fb523eb109606fd13d8b6849be67b07b27ca204003abdced && s == 256'h38722c3f4b948d05399b0f0bdaf76137d57ec7d39295e92560c869fa1f04c0b2, "signature with key 1");
    do_sign(0, 256'hfffffffffffffffffffffffffffffffebaaedcee4ed8003765ca689728cf8a94, 256'hfffffffffffffffffffffffffffffffffffffffed9f852a08954eb8a6259e702, c);
    check(sig_valid && r == 256'h6ee36679da05a680c09d5bc21a8867a4f39ffba40dd20d7bfacb5dbd7e79eda8 && s == 256'h96dade7ec49023d3519ee157556710f125ac6f560b8ceb5d22ad590474118a2a, "signature with k > n, z > n");
    // run 2: recovery from a given sentence, one address
    mcs_in = 2048'h616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720626d78697465206873640000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    make_wallet(1'b1, 32'd1, f, nx);
    check(mcs == mcs_in && mcs_len == 9'd98, "recovered mnemonic");
    read_key(0, v);
    check(v == 600'h02180c989270546fa33d42e85da0a1b42c00feb43b7eebefa71d6589cb96efbc92307844613844376238393930656135396230363631433345443644416338614334646266383632346136, "run 2 index 0: 0xDa8D7b8990ea59b0661C3ED6DAc8aC4dbf8624a6");

    need(n_gen,    "mnemonic generation from entropy");
    need(n_rec,    "recovery from mcsIn");
    need(n_hash,   "long password hashed (toSHA512)");
    need(n_direct, "short password used directly");
    need(n_pbkdf2, "PBKDF2 HMAC rounds");
    need(n_master, "master key from Bitcoin seed");
    need(n_hard,   "hardened CKD");
    need(n_soft,   "non-hardened CKD");
    need(n_reuse,  "cached m/44'/60'/0'/0 reused");
    need(n_pub,    "public key by SECP256K1");
    need(n_pad0,   "KECCAK256 on PAD0 (address)");
    need(n_pad1,   "KECCAK256 on PAD1 (checksum)");
    need(n_ram,    "RAM key writes");
    need(n_sign,   "ECDSA signatures");
    need(n_nred,   "-n reduction in ECDSA");
    check(n_hard == 6 && n_soft == 2 + 3 && n_ram == 3 && n_reuse == 1 && n_sign == 2,
          "mechanism counts match the two runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
