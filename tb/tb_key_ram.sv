// Self-checking testbench of key_ram at its full 775 x 856 size: writes every entry with a
// pattern derived from its address, reads them back in another order, checks the one-cycle
// read latency and that a write does not disturb its neighbours.
module tb_key_ram;
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

  logic we;
  logic [9:0] waddr, raddr;
  logic [855:0] wdata, rdata;
  key_ram dut (.*);

  function automatic logic [855:0] pat(input int a, input int salt);
    logic [855:0] v;
    for (int i = 0; i < 27; i++) v[32*i +: 32] = 32'(a * 32'h9E3779B1 + i * 977 + salt);
    v[855:864-32] = 32'(a + salt);
    return v;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int a = 0; a < 775; a++) begin
      we = 1; waddr = 10'(a); wdata = pat(a, 0); @(negedge clk);
    end
    we = 0;
    for (int a = 774; a >= 0; a -= 7) begin
      raddr = 10'(a); @(negedge clk);
      check(rdata == pat(a, 0), $sformatf("entry %0d", a));
    end
    we = 1; waddr = 10'd300; wdata = pat(300, 5); @(negedge clk); we = 0;
    raddr = 10'd300; @(negedge clk);
    check(rdata == pat(300, 5), "overwrite");
    raddr = 10'd299; @(negedge clk);
    check(rdata == pat(299, 0), "neighbour below unchanged");
    raddr = 10'd301; #1;
    check(rdata == pat(299, 0), "read data changes only at the clock edge");
    @(negedge clk);
    check(rdata == pat(301, 0), "neighbour above unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
