// Self-checking testbench of hmac_sha512: HMAC with key k_0 and the 296-bit m_0 message, key
// k_1 and a full 512-bit m_1 message, k_0 with the 96-bit PBKDF2 salt block on m_1, and the
// raw toSHA512 path over two chained blocks; checks the HMAC latency (paper: 335 cycles).
module tb_hmac_sha512;
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

  logic start, raw, sel_k, sel_m, sha_first, busy, done;
  logic [1023:0] k_0, k_1, to_sha512;
  logic [295:0] m_0;
  logic [511:0] m_1, digest;
  logic [9:0] m_1_len;
  hmac_sha512 dut (.*);

  task automatic go(input bit r, output int cyc);
    @(negedge clk); raw = r; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; raw = 0; sel_k = 0; sel_m = 0; sha_first = 1; m_1_len = 10'd512;
    k_0 = 1024'h89185d950ee8813609166f6b113d178d6c0fd3901ff239a1a095f20f9395650cf9380b8edb224a6b248a1e924e8fd0ae2e1a9492a3305f188cb610900f9e347f00000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    k_1 = 1024'h0102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f20000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000;
    m_0 = 296'hae886dc6507795ec745c4c3fcb2eb2c73e14934c867ee057ba72499bfa121e836b2ac15726;
    m_1 = '0; to_sha512 = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    go(1'b0, c);
    check(digest == 512'h32f719644a8874fdafea00e668da45e8639e31fa9a723bbf3e5ffdf2e15348972a38c1ddfb81516c19afa85872acb196055956b87112ebf3423134d2fc8e252a, "HMAC k_0, m_0");
    check(c <= 335, $sformatf("HMAC latency %0d above 335", c));
    sel_k = 1; sel_m = 1; m_1 = 512'hee7d6b0af6ab13c38e92cae0d15057b159987f94cc7411d717f14579b2aa100fbbb34fa593feaed27248b762e3ab5805f0765a2b9c1d7e0f37c44921bd3f6564;
    go(1'b0, c);
    check(digest == 512'h9eefe2a8f2356eec4173ddbf34979dbaca14ee19a952ad9e0a328bc2136abee2e7207de65983e621324287236453948a230703b7451d6fda3178c8654eb0ed7b, "HMAC k_1, m_1");
    sel_k = 0; m_1 = {96'h6d6e656d6f6e696300000001, 416'h6e36aab0d1bc52d9230d977ee22571594720771f8ca8181166d2287672fdf2022a96fb1a14a0f9e77f1b103cdf1582b0eab477d2}; m_1_len = 10'd96;
    go(1'b0, c);
    check(digest == 512'h804d35f0779c865a42b960e84395dbbed518f93b545730e403a775d5365e94cd5487e178349c13fda59deb1a107865409ff26460497de3bd748bbe5bd903ace0, "HMAC k_0, 96-bit m_1 (garbage beyond length ignored)");
    to_sha512 = 1024'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f202122232425262728292a2b2c2d2e2f303132333435363738393a3b3c3d3e3f404142434445464748494a4b4c4d4e4f505152535455565758595a5b5c5d5e5f606162636465666768696a6b6c6d6e6f707172737475767778797a7b7c7d7e7f; sha_first = 1'b1;
    go(1'b1, c);
    to_sha512 = 1024'h808182838485868788898a8b8c8d8e8f909192939495969798999a9b9c9d9e9fa0a1a2a3a4a5a6a7a8a9aaabacadaeafb0b1b2b3b4b5b6b7b8b9babbbcbdbebfc0c1c2c3c4c5c6c78000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000640; sha_first = 1'b0;
    go(1'b1, c);
    check(digest == 512'h986058e9895e2c2ab8f9e8cbdf801db12a44842a56a91d5a4e87b1fc98b293722c4664142e42c3c551ff898646268cd92b84ed230b8c94bed7798d4f27cd7465, "raw toSHA512 two blocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
