// Self-checking testbench of mnemonic_gen: loads a 2048-word list through the write port,
// then turns three 264-bit entropy+checksum values into sentences and compares them, with
// their lengths, against sentences built independently; checks the latency bound.
module tb_mnemonic_gen;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 20000;
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

  logic start, wl_we, busy, done;
  logic [263:0] nc;
  logic [10:0] wl_addr;
  logic [71:0] wl_data;
  logic [2047:0] mcs;
  logic [8:0] mcs_len;
  mnemonic_gen dut (.*);

  initial begin
    int c;
    start = 0; wl_we = 0; wl_addr = 0; wl_data = 72'd8; nc = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < 2048; i++) begin
      wl_we = 1; wl_addr = 11'(i); wl_data = wl_entry(i); @(negedge clk);
    end
    wl_we = 0;
    nc = 264'h05f204ab5e5284e4f01aea92f3b3eb97a618d1431da5b627b1a470b67f5f96b68c; start = 1; @(negedge clk); start = 0; c = 1;
    while (!done) begin @(negedge clk); c++; end
    check(mcs == 2048'h73646f7a6b7667722076677263206d786920636e796a756620636e796a756671206c776873646f206671626d786920746570616c20746570616c7768732074657020746570616c772066716220796a75206a756671626d20756671626d7820756671626d78697420616c776873646f7a20626d78206570612070616c7768732073646f7a6b76206671626d7820697465206772636e7900000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000, "sentence #0");
    check(mcs_len == 9'd150, $sformatf("length %0d != 150", mcs_len));
    check(c <= 270, $sformatf("latency %0d", c));
    nc = 264'h000000000000000000000000000000000000000000000000000000000000000066; start = 1; @(negedge clk); start = 0; c = 1;
    while (!done) begin @(negedge clk); c++; end
    check(mcs == 2048'h616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c7720616c772070616c0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000, "sentence #1");
    check(mcs_len == 9'd95, $sformatf("length %0d != 95", mcs_len));
    check(c <= 270, $sformatf("latency %0d", c));
    nc = 264'hffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffffaf; start = 1; @(negedge clk); start = 0; c = 1;
    while (!done) begin @(negedge clk); c++; end
    check(mcs == 2048'h6f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b76206f7a6b7620796a756671626d7800000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000, "sentence #2");
    check(mcs_len == 9'd123, $sformatf("length %0d != 123", mcs_len));
    check(c <= 270, $sformatf("latency %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
