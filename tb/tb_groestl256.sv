// tb_groestl256: hashes four 200-byte messages (three patterns and all zeros) and
// compares the digests with a reference implementation of the standard
// algorithm (itself checked against the published empty-message digest);
// checks the fixed latency. The message is held stable while the hash runs,
// as the module requires.
module tb_groestl256;
  import cn_pkg::*;
  localparam int WD = 2000;
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
  logic start = 0, busy, done; state_t msg; logic [255:0] digest;
  groestl256 dut (.clk, .rst_n, .start, .msg, .busy, .done, .digest);
  task automatic run(input state_t m, input logic [255:0] exp, input int n);
    int c;
    @(negedge clk); msg = m; start = 1; @(negedge clk); start = 0; c = 0;
    while (!done) begin @(negedge clk); c++; end
    check(digest == exp, $sformatf("digest of message %0d", n));
    check(c == 55, $sformatf("latency %0d cycles", c));
  endtask
  initial begin
    msg = '0; repeat (3) @(posedge clk); rst_n = 1;
    run(1600'h526d88a3fe19344f46a98cd73a1d604bda85a04b76113ce79eb1546f0225f893827d5833eec9a49f96b9dc072a4d709baaf5103b46618cd7ce21047f52b5e8c3320d68439ef9d42f66092cf79abd406b3ae5c0ab96715c07fed1b48f624518f3225d7893cee9043f7659bce7ca2d107b4a95f0db26016cb7ee81a45f7215c8e392ad48633ed9f48f86694c17fadda08b9ac5e00b36517ca7def1142f4265b8d3c23d1873ae89e4df56791cc7ea8db05b6a35d0fb86a14c170ee1c4bf92752803f2cda8835e3914ef, 256'hdce10e5e72202396412e80c0644509e50622cd3dee3ba890a9612b60ae4fb0ea, 0);
    run(1600'hef0a35507ba6c1ec0c294663b8d5f20f096cb396fdc0270a26c3ec89b25f7825d3f689ac471a3dd0c0a58a6f3419fec35d78a7c2e914335e9abfd0f50e23449987e2dd38134ea98494b15e7b20cdea97a1441b3ed5e88fa24e2b04e1dab7904dcbee11345f82a5c8e80d22479cb1d6eb35104faa81fcdb360227c8ed96bb5c013fdae580ab76113cfcd9b693482502ff395c83a6cdf0173a7693bcd9e20f2875a386f9dc376a4da0f095ba5f0429cef38da8771239c4e38e6a4f2005fed3b46957320de8c39e7954, 256'h8cfe7bd85482f8745753e1210dcea1c9edd44c4af9574646c3b7fcdadee35940, 1);
    run(1600'h6c47221df8d38e69aed5f01f3a618cabc8e306597c97aacdca11745bbe85e8cf640f2ad5f09b4661162dc8e78259741300ebce91745f220512496c83a6ddf0175c7792adc8e33e595ea580efca117c5bd8f396496c073addda81644b2e15f8df947f5a2500ebb69186bdd8f71249648390fbde01644fb295e2391c7356ad80e74c67023dd8f3ae494e3510ffda816c4b2803e6b99c774a2dea31547b9ea5c8ef046f4ab590fb2601764da887e239147320cbeeb1547f0225f2a98c63463d10f7bc97724d2803deb9, 256'h051d547295ee6455c459e261e4f100f5220047272c58d694dda3815637034ec0, 2);
    run(1600'h0000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000000, 256'h703f0cf601d948a74a97fd04534e5db40ba88fe44dead9f2150fe51ee519e324, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
