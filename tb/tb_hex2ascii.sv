// Self-checking testbench of hex2ascii: Ethereum addresses to lowercase ASCII hex, compared
// with strings formatted independently (including all-zero and all-ones addresses).
module tb_hex2ascii;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 100;
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

  logic [159:0] addr;
  logic [319:0] ascii;
  hex2ascii dut (.*);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    addr = 160'h7e5f4552091a69125d5dfcb7b8c2659029395bdf; #1;
    check(ascii == 320'h37653566343535323039316136393132356435646663623762386332363539303239333935626466, "address 7e5f4552091a69125d5dfcb7b8c2659029395bdf");
    addr = 160'h2b5ad5c4795c026514f8317c7a215e218dccd6cf; #1;
    check(ascii == 320'h32623561643563343739356330323635313466383331376337613231356532313864636364366366, "address 2b5ad5c4795c026514f8317c7a215e218dccd6cf");
    addr = 160'h9d8a62f656a8d1615c1294fd71e9cfb3e4855a4f; #1;
    check(ascii == 320'h39643861363266363536613864313631356331323934666437316539636662336534383535613466, "address 9d8a62f656a8d1615c1294fd71e9cfb3e4855a4f");
    addr = 160'h7b12d7cb9f5542f81f122b0fd219580b87707f2e; #1;
    check(ascii == 320'h37623132643763623966353534326638316631323262306664323139353830623837373037663265, "address 7b12d7cb9f5542f81f122b0fd219580b87707f2e");
    addr = 160'h0000000000000000000000000000000000000000; #1;
    check(ascii == 320'h30303030303030303030303030303030303030303030303030303030303030303030303030303030, "address 0000000000000000000000000000000000000000");
    addr = 160'hffffffffffffffffffffffffffffffffffffffff; #1;
    check(ascii == 320'h66666666666666666666666666666666666666666666666666666666666666666666666666666666, "address ffffffffffffffffffffffffffffffffffffffff");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
