// Self-checking testbench of point_add: the complete formula for addition, doubling, the
// point at infinity and P + (-P), against the same formula evaluated independently, plus an
// affine check that the projective result is the right point; checks the fixed 3651-cycle
// latency.
module tb_point_add;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 40000;
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

  logic start, busy, done;
  logic [767:0] p1, p2, p3;
  point_add dut (.*);

  task automatic run(input logic [767:0] a, input logic [767:0] b, output int cyc);
    @(negedge clk); p1 = a; p2 = b; start = 1'b1;
    @(negedge clk); start = 1'b0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; p1 = '0; p2 = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(768'hdc0ab4a27a23557cba3bb761113edcec067e3ed139dc1be881a7f120e204db90ff863504c88b01e33ceb0995a32b3e92be2a5eb08ae1b2a79b3c99118018904f2827688de6a16a3b0d464138a62332553fc1ea36f17fd374c6a5387777330bdc, 768'hc273acdb50331d4510742aefa2685cd49935a0f48d87c6ec00d8a31fa6d48fc4b108eb7efa8e5e78be4d986cb890d3cfd26dcb6931db85e8edd5c4fe7129c32a1a1afe878b33e968617959ce3f1f65a8de5271007814e8a25f2dd97f1cfb10f7, c);
    check(p3 == 768'ha0e64eda9f9ecdea0216b5a131afb43cf60063878e76e136e4d6f90cff137227428352c22a0129658f4ee6e5b1678b3e0267ba4ad2e410f3c6de396fc29ff23e2fadc352858c33fbd3603b59722ef78ee21fdf7311ff31c02dbb67d2d3f39657, "P + Q");
    check(c == 3651, $sformatf("P + Q latency %0d", c));
    run(768'h2593e85e745c15bf35d912d86958871c44ba610557abb4fbb314c5463217747a837747d60059966aa0b1738394afa1b6a6fc7430bb3aa65598dc6f90ffe36cc32e9c82b1478c281d687c966c377b9aa2bb2edb20035b73993fd4235992edcf46, 768'h2593e85e745c15bf35d912d86958871c44ba610557abb4fbb314c5463217747a837747d60059966aa0b1738394afa1b6a6fc7430bb3aa65598dc6f90ffe36cc32e9c82b1478c281d687c966c377b9aa2bb2edb20035b73993fd4235992edcf46, c);
    check(p3 == 768'h8e3e69b503400ea3123a33acd51ceb7db54a0615d0efbafc919d29a7c6146fc56a4c5d5cb88e0041894e0645589f06d23952a717acbb149ae92250822aa485f1f4dd9172373176e261d06de03bb4e114457d4b81e147aa75e1d990fb96491736, "P + P (doubling)");
    check(c == 3651, $sformatf("P + P (doubling) latency %0d", c));
    run(768'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000010000000000000000000000000000000000000000000000000000000000000000, 768'h5987bb638484c471e74214f88b29dc7166ece572c6c43ca401c44d06686facaa08fb008515f12ac13a58d21b3e0654a7d776c3adf7c3924ed9d0ab69e3def13a0000000000000000000000000000000000000000000000000000000000000007, c);
    check(p3 == 768'h8401bd98d035f9b0eba0d6212a5df2ddeeac9d13a63bb1f69a05ebebe9c05a419c3aea59a6932b7127b92919b7f6dc42d0d14e5440280fb0f6aba3dbc6b6d8173edd03a399982b48986dbebeb22c5096e43f59c1c6590027f4b4afe53b189896, "O + Q");
    check(c == 3651, $sformatf("O + Q latency %0d", c));
    run(768'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000010000000000000000000000000000000000000000000000000000000000000000, 768'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000010000000000000000000000000000000000000000000000000000000000000000, c);
    check(p3 == 768'h000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000010000000000000000000000000000000000000000000000000000000000000000, "O + O");
    check(c == 3651, $sformatf("O + O latency %0d", c));
    run(768'h93573aefbc121c9ee9ecd0f2ab8bdcca1a745bae6ddb51608a8325dbfbdee91d7f899d3d3a50f3886591ade7849b518a7dd056869d30b83a137c2290daa865cf0000000000000000000000000000000000000000000000000000000000000003, 768'hf591623a39738508db355c3f1de91aa62c1743780c6d87a0e6da946ea3c8d9db2b6ff9ef497914c756b7de28cda7cd6e83a4c51fa4aeccf48a311bb83e3ca7d60000000000000000000000000000000000000000000000000000000000000005, c);
    check(p3 == 768'h0000000000000000000000000000000000000000000000000000000000000000c00b889350059d069a8efc58491fdaab080708031a27fdf07028aa44088d24a30000000000000000000000000000000000000000000000000000000000000000, "P + (-P)");
    check(c == 3651, $sformatf("P + (-P) latency %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
