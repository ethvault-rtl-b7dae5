// Self-checking testbench of malu: modular add, subtract and multiply mod p (default) and mod n
// (the ECDSA instance), random and boundary operands, with the 1-cycle add/sub and 257-cycle
// multiply latencies.
module tb_malu;
  import ethvault_pkg::*;
  localparam int WATCHDOG = 30000;
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

  logic start, busy, done, start_n, busy_n, done_n;
  malu_op_e op;
  logic [255:0] a, b, result, result_n;
  malu dut (.*);
  malu #(.MODULUS(SECP_N)) dut_n (.clk, .rst_n, .start(start_n), .op, .a, .b, .busy(busy_n),
                                  .done(done_n), .result(result_n));

  task automatic run(input malu_op_e o, input logic [255:0] x, input logic [255:0] y,
                     input bit modn, output int cyc);
    @(negedge clk); op = o; a = x; b = y; start = !modn; start_n = modn;
    @(negedge clk); start = 1'b0; start_n = 1'b0; cyc = 1;
    while (!(modn ? done_n : done)) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int c;
    start = 0; start_n = 0; op = MALU_ADD; a = '0; b = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run(MALU_ADD, 256'h4105cca7b53302fc154cd2aad7185ddaee82ec3ffee5a5b28d1fe1daff666589, 256'h902a174f11fa2ac0079dd25a49fe85b0834c687a3acb6266c20ba2c250b601fc, 1'b0, c);
    check(result == 256'hd12fe3f6c72d2dbc1ceaa5052116e38b71cf54ba39b108194f2b849d501c6785, "MALU_ADD mod p #0");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h4105cca7b53302fc154cd2aad7185ddaee82ec3ffee5a5b28d1fe1daff666589, 256'h902a174f11fa2ac0079dd25a49fe85b0834c687a3acb6266c20ba2c250b601fc, 1'b0, c);
    check(result == 256'hb0dbb558a338d83c0daf00508d19d82a6b3683c5c41a434bcb143f17aeb05fbc, "MALU_SUB mod p #1");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'h4105cca7b53302fc154cd2aad7185ddaee82ec3ffee5a5b28d1fe1daff666589, 256'h902a174f11fa2ac0079dd25a49fe85b0834c687a3acb6266c20ba2c250b601fc, 1'b0, c);
    check(result == 256'hf70fcd1d3d31031d15fb0c3383b6afe25e938966e719fe1bd2cc0bcdedde7f59, "MALU_MUL mod p #2");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'h111b8aaa62f28d1a4a789cb3d8b9b45c1b98fbe466809a111ba1192ec42b7170, 256'hed52a24135b00a5436a80bdf0023b682af5570eed8e94b150452ef05f542441d, 1'b0, c);
    check(result == 256'hfe6e2ceb98a2976e8120a892d8dd6adecaee6cd33f69e5261ff40834b96db58d, "MALU_ADD mod p #3");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h111b8aaa62f28d1a4a789cb3d8b9b45c1b98fbe466809a111ba1192ec42b7170, 256'hed52a24135b00a5436a80bdf0023b682af5570eed8e94b150452ef05f542441d, 1'b0, c);
    check(result == 256'h23c8e8692d4282c613d090d4d895fdd96c438af58d974efc174e2a27cee92982, "MALU_SUB mod p #4");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'h111b8aaa62f28d1a4a789cb3d8b9b45c1b98fbe466809a111ba1192ec42b7170, 256'hed52a24135b00a5436a80bdf0023b682af5570eed8e94b150452ef05f542441d, 1'b0, c);
    check(result == 256'h572ccf41fa754874adb8b52204ba08017b487f1a3f98521f074542dbb7eafe59, "MALU_MUL mod p #5");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'h6b77730f65bd9acbb57a6a1dfaf8cda9601e5b45785116080d650372e90794df, 256'h563e9bed45100358acc6d8f2c74c7ccf32d03fdda123f50190f5380e12b2a414, 1'b0, c);
    check(result == 256'hc1b60efcaacd9e2462414310c2454a7892ee9b2319750b099e5a3b80fbba38f3, "MALU_ADD mod p #6");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h6b77730f65bd9acbb57a6a1dfaf8cda9601e5b45785116080d650372e90794df, 256'h563e9bed45100358acc6d8f2c74c7ccf32d03fdda123f50190f5380e12b2a414, 1'b0, c);
    check(result == 256'h1538d72220ad977308b3912b33ac50da2d4e1b67d72d21067c6fcb64d654f0cb, "MALU_SUB mod p #7");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'h6b77730f65bd9acbb57a6a1dfaf8cda9601e5b45785116080d650372e90794df, 256'h563e9bed45100358acc6d8f2c74c7ccf32d03fdda123f50190f5380e12b2a414, 1'b0, c);
    check(result == 256'h9a64a2ca3a9bce9c58bf9d2cf2bfb6bd91dea4f5c0c325f4f9bf63078284a03c, "MALU_MUL mod p #8");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'hec3fbf4dc20ef16468f918d8f6cdb2f803e0d681552454f14fab6f3e164f1513, 256'h77064c2c0f552c9402cdf2af19de2bc1b4ff00ae3f1347de2274ea181e34b3f1, 1'b0, c);
    check(result == 256'h63460b79d1641df86bc70b8810abdeb9b8dfd72f94379ccf722059573483ccd5, "MALU_ADD mod p #9");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'hec3fbf4dc20ef16468f918d8f6cdb2f803e0d681552454f14fab6f3e164f1513, 256'h77064c2c0f552c9402cdf2af19de2bc1b4ff00ae3f1347de2274ea181e34b3f1, 1'b0, c);
    check(result == 256'h75397321b2b9c4d0662b2629dcef87364ee1d5d316110d132d368525f81a6122, "MALU_SUB mod p #10");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'hec3fbf4dc20ef16468f918d8f6cdb2f803e0d681552454f14fab6f3e164f1513, 256'h77064c2c0f552c9402cdf2af19de2bc1b4ff00ae3f1347de2274ea181e34b3f1, 1'b0, c);
    check(result == 256'h37ba28cdc19cb6021a297c494116973786ce121480712704c0a1d356ae366cc4, "MALU_MUL mod p #11");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'h82450164728a6fcf303a07b28f2df760ae9ca08b2d7c50487ca07386cc099a1e, 256'h623d8eb7a4ca83b26b52b08d21870f0bc4ff64debb5d6b48fc3b66fa30d0b194, 1'b0, c);
    check(result == 256'he482901c1754f3819b8cb83fb0b5066c739c0569e8d9bb9178dbda80fcda4bb2, "MALU_ADD mod p #12");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h82450164728a6fcf303a07b28f2df760ae9ca08b2d7c50487ca07386cc099a1e, 256'h623d8eb7a4ca83b26b52b08d21870f0bc4ff64debb5d6b48fc3b66fa30d0b194, 1'b0, c);
    check(result == 256'h200772accdbfec1cc4e757256da6e854e99d3bac721ee4ff80650c8c9b38e88a, "MALU_SUB mod p #13");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'h82450164728a6fcf303a07b28f2df760ae9ca08b2d7c50487ca07386cc099a1e, 256'h623d8eb7a4ca83b26b52b08d21870f0bc4ff64debb5d6b48fc3b66fa30d0b194, 1'b0, c);
    check(result == 256'h1820feb96565b284cf4f761d196d95ba216e4b368cf6c4b467d22a859245b3b3, "MALU_MUL mod p #14");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'hdd44fd3645114889001edc8e367e5d6dfd7410696bb6a3de65151c401dd377bf, 256'h050684bfe286852cff769e374ddc74c897bdd982cdac6046f9903b72f88ece64, 1'b0, c);
    check(result == 256'he24b81f62797cdb5ff957ac5845ad2369531e9ec396304255ea557b316624623, "MALU_ADD mod p #15");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'hdd44fd3645114889001edc8e367e5d6dfd7410696bb6a3de65151c401dd377bf, 256'h050684bfe286852cff769e374ddc74c897bdd982cdac6046f9903b72f88ece64, 1'b0, c);
    check(result == 256'hd83e7876628ac35c00a83e56e8a1e8a565b636e69e0a43976b84e0cd2544a95b, "MALU_SUB mod p #16");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'hdd44fd3645114889001edc8e367e5d6dfd7410696bb6a3de65151c401dd377bf, 256'h050684bfe286852cff769e374ddc74c897bdd982cdac6046f9903b72f88ece64, 1'b0, c);
    check(result == 256'hfacedead8ad1cc076a73cf47042f3fa17d93dcd69102778ff7492b1324218312, "MALU_MUL mod p #17");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 1'b0, c);
    check(result == 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2d, "MALU_ADD mod p #18");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h0000000000000000000000000000000000000000000000000000000000000000, 256'h0000000000000000000000000000000000000000000000000000000000000001, 1'b0, c);
    check(result == 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, "MALU_SUB mod p #19");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 1'b0, c);
    check(result == 256'h0000000000000000000000000000000000000000000000000000000000000001, "MALU_MUL mod p #20");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_MUL, 256'h0000000000000000000000000000000000000000000000000000000000000000, 256'hfffffffffffffffffffffffffffffffffffffffffffffffffffffffefffffc2e, 1'b0, c);
    check(result == 256'h0000000000000000000000000000000000000000000000000000000000000000, "MALU_MUL mod p #21");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_MUL, 256'h93b3a3d9a44f576a9a1de24edab871d5feef16e964ef2ebe2ff3600735f11af2, 256'h027385c9421e7a607108e02236971e1b2577c1ecfd42e0440ac793f519af685d, 1'b1, c);
    check(result_n == 256'hbb1ffc87aff9eca0bfbab36fd7274296b170484a8e9951ecc83897ac8c2b50b2, "MALU_MUL mod n #22");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'h93b3a3d9a44f576a9a1de24edab871d5feef16e964ef2ebe2ff3600735f11af2, 256'h027385c9421e7a607108e02236971e1b2577c1ecfd42e0440ac793f519af685d, 1'b1, c);
    check(result_n == 256'h962729a2e66dd1cb0b26c271114f8ff12466d8d662320f023abaf3fc4fa0834f, "MALU_ADD mod n #23");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h027385c9421e7a607108e02236971e1b2577c1ecfd42e0440ac793f519af685d, 256'h93b3a3d9a44f576a9a1de24edab871d5feef16e964ef2ebe2ff3600735f11af2, 1'b1, c);
    check(result_n == 256'h6ebfe1ef9dcf22f5d6eafdd35bdeac43e13787ea479c51c19aa6927ab3f48eac, "MALU_SUB mod n #24");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'h1304145212ca3f7062dc08d64bdbf090d48dd9f354366c219c3ecb54c5cefdd8, 256'h5e617f8e99edbce703f8670d3e361858a2f7647a952e1b8b356f8bd11711eb57, 1'b1, c);
    check(result_n == 256'h9c7aba8ad3327ebc4449df402ba8f8535e1293a4f01e7eb5fff76e1a65585f9f, "MALU_MUL mod n #25");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'h1304145212ca3f7062dc08d64bdbf090d48dd9f354366c219c3ecb54c5cefdd8, 256'h5e617f8e99edbce703f8670d3e361858a2f7647a952e1b8b356f8bd11711eb57, 1'b1, c);
    check(result_n == 256'h716593e0acb7fc5766d46fe38a1208e977853e6de96487acd1ae5725dce0e92f, "MALU_ADD mod n #26");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h5e617f8e99edbce703f8670d3e361858a2f7647a952e1b8b356f8bd11711eb57, 256'h1304145212ca3f7062dc08d64bdbf090d48dd9f354366c219c3ecb54c5cefdd8, 1'b1, c);
    check(result_n == 256'h4b5d6b3c87237d76a11c5e36f25a27c7ce698a8740f7af699930c07c5142ed7f, "MALU_SUB mod n #27");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    run(MALU_MUL, 256'hd5157e9d7bd55ee6965768e0f589d99a20918fa7740572419f452c075f27ff08, 256'h4f91540c27756991a0931ed42ecdcc0a62d74145ddd4a05422bfb8e0931719fd, 1'b1, c);
    check(result_n == 256'hfd932405d05d4c51e7f0ed719fa8d84d91bc475a9eec41ae5bdeae054812f2fe, "MALU_MUL mod n #28");
    check(c == 257, $sformatf("MALU_MUL latency %0d", c));
    run(MALU_ADD, 256'hd5157e9d7bd55ee6965768e0f589d99a20918fa7740572419f452c075f27ff08, 256'h4f91540c27756991a0931ed42ecdcc0a62d74145ddd4a05422bfb8e0931719fd, 1'b1, c);
    check(result_n == 256'h24a6d2a9a34ac87836ea87b52457a5a5c8b9f406a291725a0232865b2208d7c4, "MALU_ADD mod n #29");
    check(c == 1, $sformatf("MALU_ADD latency %0d", c));
    run(MALU_SUB, 256'h4f91540c27756991a0931ed42ecdcc0a62d74145ddd4a05422bfb8e0931719fd, 256'hd5157e9d7bd55ee6965768e0f589d99a20918fa7740572419f452c075f27ff08, 1'b1, c);
    check(result_n == 256'h7a7bd56eaba00aab0a3bb5f33943f26efcf48e851917ce4e434ceb6604255c36, "MALU_SUB mod n #30");
    check(c == 1, $sformatf("MALU_SUB latency %0d", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
