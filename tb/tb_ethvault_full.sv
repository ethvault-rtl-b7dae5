// Full-size testbench of the ethvault top, every parameter at its default (2048 PBKDF2
// rounds, 775-entry RAM): generates a wallet with two addresses from entropy, checks the
// mnemonic, both key outputs and one signature (which uses the stored private key)
// against an independent BIP-39/32/44 + Ethereum model, and compares the cycles to the
// first key, to the second key and for a signature with the paper (6,356,729, 3,775,064 and 1,888,550 cycles).
module tb_ethvault_full;
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

  ethvault dut (.*);

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

    e = 256'he16682717c9bbfae80ca17b703be0e66d868c2cf1d4a2b12b6a20bb02edf0743;
    make_wallet(1'b0, 32'd2, f, nx);
    check(mcs_valid && mcs == 2048'h70616c776873206e796a756620626d786974207a6b7667206c776873646f2072636e20746570612072636e79207869742071626d7869746570206d786974652077687364207a6b7667722072636e796a7566712071626d786974206570616c77687320616c7768732073646f7a6b76206f7a6b76677263206f7a6b76206671626d78697465206671626d78697420746570616c776820626d7869000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000 && mcs_len == 9'd154, "mnemonic");
    read_key(0, v);
    check(v == 600'h035b562f8b08cbe004e92adddd54cf3a420afd215ed96746ee575606f96445f3f6307866326646323462413666653966663066393039363430466544353938653639653432353346636245, "index 0: 0xf2fF24bA6fe9ff0f909640FeD598e69e4253FcbE");
    read_key(1, v);
    check(v == 600'h022048a689fece1a448b6619c5c0d44335e12effeb1261949731818e8187f5b89a307839613930433846446138313039353342383642436446374337373544314138373135463339393161, "index 1: 0x9a90C8FDa810953B86BCdF7C775D1A8715F3991a");
    $display("first key %0d cycles (paper 6356729), next key %0d (paper 3775064)", f, nx);
    check(f > 6200000 && f < 6356729, $sformatf("cycles to first key %0d", f));
    check(nx > 3700000 && nx < 3775064, $sformatf("cycles per further key %0d", nx));
    do_sign(0, 256'h118dc10e774520d7e98d7c358a84c15caad14268108727563ff4bb8cf703ca00, 256'hd30aad4b45038e220bc4621b9439852083d9fca716c40a33acd51e6699f9823c, c);
    check(sig_valid && r == 256'had33057436ef0cf1c8aa60d3cd381f82da805e615e533d0c1e3a2cc20e01246a && s == 256'h80dc138160131d8cc2d52805bb1dd8ddc946f37c0182281d5d4d1dc8a5f9125e, "signature");
    $display("signature %0d cycles (paper 1888550)", c);
    check(c > 1869000 && c < 1888550, $sformatf("signature cycles %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
