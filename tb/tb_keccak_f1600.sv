// tb_keccak_f1600: applies Keccak-f[1600] to a fixed 200-byte state and to the
// all-zero state and compares with precomputed results; checks the 24-cycle
// latency and the done pulse.
module tb_keccak_f1600;
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
  state_t sin, sout; logic start = 0, busy, done;
  keccak_f1600 dut (.clk, .rst_n, .start, .state_in(sin), .busy, .done, .state_out(sout));
  task automatic run(input state_t x, input state_t exp, input string nm);
    int cyc;
    @(negedge clk); sin = x; start = 1; @(negedge clk); start = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(sout == exp, {nm, " permutation result"});
    check(cyc == 24, $sformatf("%s latency %0d", nm, cyc));
    @(negedge clk); check(!done && sout == exp, {nm, " done is a pulse, result holds"});
  endtask
  initial begin
    sin = '0; repeat (3) @(posedge clk); rst_n = 1;
    run(1600'h2b16f1dc87624d281cf1d68b60453a1ff5a88f62593c13f6ae8364593217c8ad877a5d30ebcea184785532efc4a19e7b510cebc6bd9877520ae7c0bd96732c09e3deb9944f2a05e0c4a98e53381de2c7ad70573a01e4cbae765b3c01eacf90755f2205e8b396795c200deab79c79462309d4b39e65402f0ad2bf98654e2bf4d1bb86614c17f2ddb88c61461bf0d5aa8f65381ff2c9ac83663e13f4c9a287583d17eacda07b5e3114e8c5a27f54310eebc19c7b562d08e7c29a77502d06e3bc99734e2904dfba9570, 1600'hf64aecac6cdade4e64318a24f445a7ac7e3326b4ff55b5af07a6a57a9e4bb7cbbbc29609011ea75404dcf09253e4e41bf50fa2e2c0b06122b823ab84f602d034a1f194fc78f2e9499199dcbeaba0a92aeae762d1f7fada695e4732c1ca843cd0ed2d900c09ef927db536b8536133d59f33673408383bda6b94c80e0ba670630bdf821e8a6652ab9ef8a464cd75d66276e63842b046cf641fcafadbb9aa68a62dcf2632e009825b3f381ae32a01126b22cfe3b5344bd7c0858521f947f5d7a3be24f4df75f1e21deb, "pattern");
    run('0, 1600'heaf1ff7b5ceca24975f644e97f30a13b16f53526e70465c21841f924a2c509e4940c7922ae3a26148c3ee88a1ccf32c8b87c5a554fd00ecb613670957bc4661164befef28cc970f205e5635a21d9ae6101f22f1a11a5569f43b831cd0347c82681a57c16dbcf555fa9a6e6260d712103eb5aa93f2317d63530935ab7d08ffc64ad30a6f71b19059c8c5bda0cd6192e7690fee5a0a44647c4ff97a42d7f8e6fd48b284e056253d057bd1547306f80494dd598261ea65aa9ee84d5ccf933c0478af1258f7940e1dde7, "zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
