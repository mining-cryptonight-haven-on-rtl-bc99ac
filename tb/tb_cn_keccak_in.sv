// tb_cn_keccak_in: hashes a 76-byte blob and an empty input with the input
// Keccak and compares the whole 200-byte state with precomputed values; the
// first 32 bytes of the empty-input state are the well-known Keccak-256("")
// digest. Also checks that the tag travels with the job and that the output
// is held under back-pressure.
module tb_cn_keccak_in;
  import cn_pkg::*;
  localparam int WD = 3000;
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
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1079:0] in_data; logic [7:0] in_len; logic [6:0] in_tag, out_tag; state_t out_state;
  cn_keccak_in dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_len, .in_tag,
                    .out_valid, .out_ready, .out_state, .out_tag);
  task automatic run(input logic [1079:0] d, input int len, input state_t exp, input int tg);
    @(negedge clk); in_data = d; in_len = 8'(len); in_tag = 7'(tg); in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0; in_data = '1;
    while (!out_valid) @(negedge clk);
    repeat (3) @(negedge clk);
    check(out_valid, "output held while not ready");
    check(out_state == exp, $sformatf("state for len %0d", len));
    check(out_tag == 7'(tg), "tag");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid, "output consumed");
  endtask
  initial begin
    in_data = '0; in_len = 0; in_tag = 0; repeat (3) @(posedge clk); rst_n = 1;
    run(1080'(608'h100902fbf4ede6dfd8d1cac3bcb5aea7a099928b847d766f68615a534c453e373029221b140d06fff8f1eae3dcd5cec7c0b9b2aba49d968f88817a736c655e575049423b342d261f18110a03), 76, 1600'h113e11c026d84dbb46c21133a090782bf250b4ca1fa77da2e738da226ce415885555c98eff43baf064b9d5d51bfebcc5e0422459313dbde498c7ada3cf340dbeb7ce097b5d051da3773ff36ee13c8c9ffecf3a39432d097c934c0f23d4788c8cb79c1b1a19ad3a52250e827a488008980483945a84458bfbfd49222dceb8c3b507ead6f276f1bd5473ce62ac9f7743536d35833fbe18498ced59df472ec84f13d6fc612751c139232e4a00d1cd192301616e068529123fbe2e56c99fa7b261bbef13f8d358a1d2a8, 5);
    run('0, 0, 1600'ha3fe1af7779fafd7b7fa22cf622318be6b571b9910726d91163b62b71dcf4521dee8b8eca7b2acba9c3088bdeebb0936fe8734e16471ab9f064146f400e16b721b5d1a6545a611ffeb829c854e19a9493bfed7eb12c7ce09fa0d3cd3b03b15bbba7d9fa73545d2a23bce6a98fe5b72103cf26d5eba2553e8b1d551b7242b765b81babfbcab8046d2820dc6175fa241611f2211c4c0f9ed5ccb9b1161ecb0a2b974a97cd82c9abb3d70a4855d04d8fa7b3b2782ca53b600e5c003c7dcb27d7e923c23f7860146d2c5, 9);
    check(out_state[255:0] == 256'h70a4855d04d8fa7b3b2782ca53b600e5c003c7dcb27d7e923c23f7860146d2c5, "first 32 bytes are Keccak-256 of the empty string (byte 0 in bits 7:0)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
