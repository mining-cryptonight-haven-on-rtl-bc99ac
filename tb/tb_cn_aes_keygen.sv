// tb_cn_aes_keygen: expands the FIPS-197 AES-256 example key
// (00 01 .. 1f) and compares all 10 round keys with the standard schedule.
module tb_cn_aes_keygen;
  import cn_pkg::*;
  localparam int WD = 100;
  logic clk = 1'b0, rst_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  // reset edge before the first clock edge
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (WD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [255:0] key; logic [1279:0] keys;
  cn_aes_keygen dut (.key, .keys);
  initial begin
    key = 256'h1f1e1d1c1b1a191817161514131211100f0e0d0c0b0a09080706050403020100; #1;
    check(keys == 1280'h0a820a64334d0d3087d3b21760a6f5452f1c87c1a44552ad48097bc25f90dc0b39cf0754b49ebf27e7754752753ae23d8b59d56cec4c296f1799a7c97f8256c68d51b87353ebf875924fa56f48f1e16d6715fc03fbd58ea6681bf10ff0df87aedeba4006c1a45d1adabe4402cda851169cc072a593ce7fa998c476a19fc273a51f1e1d1c1b1a191817161514131211100f0e0d0c0b0a09080706050403020100, "all 10 round keys");
    check(keys[256 +: 128] == 128'h9cc072a593ce7fa998c476a19fc273a5, "round key 2 (FIPS-197)");
    key = '1; #1;
    check(keys[255:0] == '1, "first two keys are the key itself");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
