// tb_cn_aes10_pipe: streams eight blocks back to back through the 10-stage
// AES pipeline and checks each result against ten precomputed AES rounds and
// the 10-cycle latency.
module tb_cn_aes10_pipe;
  import cn_pkg::*;
  localparam int WD = 200;
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
  logic in_valid = 0, out_valid; block_t in_data, out_data; logic [1279:0] keys;
  block_t exp [8]; block_t din [8];
  int n_out = 0, first_cycle = -1, first_in = -1, cyc = 0;
  cn_aes10_pipe dut (.clk, .rst_n, .in_valid, .in_data, .keys, .out_valid, .out_data);
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && first_in < 0) first_in = cyc;
    if (out_valid) begin
      if (first_cycle < 0) first_cycle = cyc;
      if (n_out < 8) check(out_data == exp[n_out], $sformatf("block %0d after 10 rounds", n_out));
      n_out++;
    end
  end
  initial begin
    keys = 1280'h0a820a64334d0d3087d3b21760a6f5452f1c87c1a44552ad48097bc25f90dc0b39cf0754b49ebf27e7754752753ae23d8b59d56cec4c296f1799a7c97f8256c68d51b87353ebf875924fa56f48f1e16d6715fc03fbd58ea6681bf10ff0df87aedeba4006c1a45d1adabe4402cda851169cc072a593ce7fa998c476a19fc273a51f1e1d1c1b1a191817161514131211100f0e0d0c0b0a09080706050403020100;
    din[0] = 128'h2d2a2724211e1b1815120f0c09060300; exp[0] = 128'h2dd5cc469fdb9f11b71486d409a8c73e;
    din[1] = 128'h3835322f2c292623201d1a1714110e0b; exp[1] = 128'he308c3fe3ec84291c3b7d971bce2997a;
    din[2] = 128'h43403d3a3734312e2b2825221f1c1916; exp[2] = 128'h2329b7e3bf63bb66f72348bd6b663a5e;
    din[3] = 128'h4e4b4845423f3c393633302d2a272421; exp[3] = 128'hb76fc75119c24c2a844e02c946a91d2c;
    din[4] = 128'h595653504d4a4744413e3b3835322f2c; exp[4] = 128'h51555e3c572bf153e17aff92704c5ed9;
    din[5] = 128'h64615e5b5855524f4c494643403d3a37; exp[5] = 128'h572439c797ab7984575c67e750d87856;
    din[6] = 128'h6f6c696663605d5a5754514e4b484542; exp[6] = 128'hebded251c477ec8660bf0670932fb33f;
    din[7] = 128'h7a7774716e6b6865625f5c595653504d; exp[7] = 128'h748671cbbcc4fa840d5acf3d7d1a56ac;
    in_data = '0; repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin in_valid = 1; in_data = din[i]; @(negedge clk); end
    in_valid = 0;
    repeat (20) @(negedge clk);
    check(n_out == 8, "eight outputs, back to back");
    check(first_cycle - first_in == 10, $sformatf("first output 10 cycles after entry (%0d)", first_cycle - first_in));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
