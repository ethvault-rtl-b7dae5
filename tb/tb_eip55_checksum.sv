// Self-checking testbench of eip55_checksum: raw address plus the Keccak hash of its ASCII
// form, compared with EIP-55 checksummed strings computed independently (the first vector
// is the address of private key 1).
module tb_eip55_checksum;
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

  logic [159:0] a, d;
  logic [335:0] cad;
  eip55_checksum dut (.*);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    a = 160'h7e5f4552091a69125d5dfcb7b8c2659029395bdf; d = 160'ha8aaec6aceafa450816b295770adcd144ce18d63; #1;
    check(cad == 336'h307837453546343535323039314136393132356435446643623762384332363539303239333935426466, "0x7E5F4552091A69125d5DfCb7b8C2659029395Bdf");
    a = 160'h2b5ad5c4795c026514f8317c7a215e218dccd6cf; d = 160'h4e49a072e73433845000beb444eee9a33b2bf02c; #1;
    check(cad == 336'h307832423541443563343739356330323635313466383331376337613231354532313844634344366346, "0x2B5AD5c4795c026514f8317c7a215E218DcCD6cF");
    a = 160'h9d8a62f656a8d1615c1294fd71e9cfb3e4855a4f; d = 160'hb45c537f9919422cb9574c54c13ead5de84a0909; #1;
    check(cad == 336'h307839643841363266363536613864313631354331323934666437316539434662334534383535413446, "0x9d8A62f656a8d1615C1294fd71e9CFb3E4855A4F");
    a = 160'h7b12d7cb9f5542f81f122b0fd219580b87707f2e; d = 160'h16db0e2b6e492c1717b0db92a7609ff1d4393a1c; #1;
    check(cad == 336'h307837623132643763423946353534326638316631323242306644323139353830623837373037463245, "0x7b12d7cB9F5542f81f122B0fD219580b87707F2E");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
