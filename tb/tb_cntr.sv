// Self-checking testbench of cntr: counts 0 .. limit-1 with the last flag, holds without inc,
// clears, and handles limit = 1 and a 32-bit count.
module tb_cntr;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 2000;
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

  logic clr, inc, last;
  logic [31:0] limit, count;
  cntr dut (.*);

  initial begin
    clr = 0; inc = 0; limit = 32'd5;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    check(count == 0 && !last, "reset value");
    for (int i = 0; i < 5; i++) begin
      check(count == 32'(i), $sformatf("count %0d", i));
      check(last == (i == 4), $sformatf("last at %0d", i));
      inc = 1; @(negedge clk); inc = 0;
    end
    repeat (3) @(negedge clk);
    check(count == 5, "holds without inc");
    clr = 1; @(negedge clk); clr = 0;
    check(count == 0, "clear");
    limit = 1; #1;
    check(last, "limit 1: index 0 is the last");
    limit = 32'hFFFF_FFFF;
    for (int i = 0; i < 300; i++) begin inc = 1; @(negedge clk); end
    inc = 0;
    check(count == 300 && !last, "long count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
