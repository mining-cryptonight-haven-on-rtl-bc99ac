// tb_cn_final_hash: sends five 200-byte states through the final stage,
// chosen so that the permuted state selects BLAKE-256, Groestl-256, JH-256,
// Skein-512-256 and JH-256 again, and compares digest, selection and tag
// with a reference model. Checks the latency of each path (1 + 24 Keccak +
// 1 + core latency + 1 cycles), that in_ready stays low while a job is in
// progress, and that the output holds steady under back-pressure.
module tb_cn_final_hash;
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
  localparam int N = 5;
  state_t ins [N]; logic [255:0] exph [N]; logic [1:0] expa [N]; int explat [N];
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  state_t in_state = '0; logic [6:0] in_tag = '0, out_tag; logic [255:0] out_hash; logic [1:0] out_alg;
  int cyc = 0, t0, busy_ready = 0;
  cn_final_hash dut (.clk, .rst_n, .in_valid, .in_ready, .in_state, .in_tag,
    .out_valid, .out_ready, .out_hash, .out_tag, .out_alg);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    ins[0] = 1600'h025d7893aec9e43f6649ac97fadd006b4ab590fb26016c57be91f42f026558b392cd28037e59b4efd6391c674aadf0db3a05604b96f1dc270e61449ff2d5280362bd98f3ce29045fc6e98cb75a7d20cbea95b05b0621ccf79eb1540f22c5f893b26d0823def9944f76193cc7ea8d507b1a25c0ebb6517c072ec1e4bf52750823c29db8536e0924ffa6896c573a1dc0ab8a75503be6c1ac977e5134efc2a59873520de8c3be99742f16f9dca78a6d301bfac5a08b56311ce7cea1845f3215e8c3a27d58330ee9c49f; exph[0] = 256'h650d5defea16c4ac751a93edda27f85cd7a7d38b1811cd8f8f91783d91ee2378; expa[0] = 2'd0; explat[0] = 87;
    ins[1] = 1600'hb590fbc6210c57b290f5ce230459b297efca217c5bb68de8ba5f0429cef398bd61042fd2f59843660c29d2ff98456e0b3bdef5a84f62193cd6f3a845621f34d18da8437e1934ef8ab85d660b2cf19abf476209d4f39ea5406207dcf196ab406539dcf78aad401b3ed4f18aa7401d36d3d3b69d40270af1d4be9b402d0af7dcb965402b16f1dc876240251ef3d48962473f1af1ac8b665d380aefb4997e43280dd1b49f624528f3d6bc99624f28f5debb8b6e4518ffd2a98c664318f5d2af84613d18f3cea9845f3a; exph[1] = 256'h6ffa4afacd9803d615ef7d8690b091ce49dca7a4878f7baf0fad9ee721ab2444; expa[1] = 2'd1; explat[1] = 82;
    ins[2] = 1600'h306b86a1dcf7124d7e95a8cfe2395c73ac97fadd006b4eb19af12c0b665db897e8331e7944af8ad5466d1037da81a44b641f32d588a346790229f493be45600f20fb96b14c6702ddcea5987f5209ecc3bc876a4d10fbdea18a613c1bf6cda88798c3ee09345f7aa5d6fd00274a91b4dbf40f224598b3d6e9321944a38ef5d03f104ba681fcd7326d5eb588efc2197c53ccf79abd600b2ed1fa914c6b063dd8f788537e1924cfeab5664d3017faa1846b443f12f5a88366592209d4b39e65402f00dbb6916c4722fd; exph[2] = 256'hb1460ac12b8abc78445bc7a8bbceda2027f3bd329e791d82663ca2554b4dddc0; expa[2] = 2'd2; explat[2] = 285;
    ins[3] = 1600'h2b16f1dc87624d281cf1d68b60453a1ff5a88f62593c13f6ae8364593217c8ad877a5d30ebcea184785532efc4a19e7b510cebc6bd9877520ae7c0bd96732c09e3deb9944f2a05e0c4a98e53381de2c7ad70573a01e4cbae765b3c01eacf90755f2205e8b396795c200deab79c79462309d4b39e65402f0ad2bf98654e2bf4d1bb86614c17f2ddb88c61461bf0d5aa8f65381ff2c9ac83663e13f4c9a287583d17eacda07b5e3114e8c5a27f54310eebc19c7b562d08e7c29a77502d06e3bc99734e2904dfba9570; exph[3] = 256'h3b4e0e9e44810667ab51a9d50b836b435c92e257c48279126b3bcb19933b7262; expa[3] = 2'd3; explat[3] = 122;
    ins[4] = 1600'h306b86a1dcf7124d7e95a8cfe2395c73ac97fadd006b4eb19af12c0b665db897e8331e7944af8ad5466d1037da81a44b641f32d588a346790229f493be45600f20fb96b14c6702ddcea5987f5209ecc3bc876a4d10fbdea18a613c1bf6cda88798c3ee09345f7aa5d6fd00274a91b4dbf40f224598b3d6e9321944a38ef5d03f104ba681fcd7326d5eb588efc2197c53ccf79abd600b2ed1fa914c6b063dd8f788537e1924cfeab5664d3017faa1846b443f12f5a88366592209d4b39e65402f00dbb6916c4722fd; exph[4] = 256'hb1460ac12b8abc78445bc7a8bbceda2027f3bd329e791d82663ca2554b4dddc0; expa[4] = 2'd2; explat[4] = 285;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_state = ins[i]; in_tag = 7'(i + 3); in_valid = 1; t0 = cyc;
      @(negedge clk); in_valid = 0; in_state = '0;
      while (!out_valid) begin
        if (in_ready) busy_ready++;
        @(negedge clk);
      end
      check(cyc - t0 == explat[i], $sformatf("job %0d latency %0d, expected %0d", i, cyc - t0, explat[i]));
      // hold the output back for a few cycles
      repeat (3) begin
        @(negedge clk);
        check(out_valid && out_hash == exph[i], $sformatf("job %0d output held", i));
      end
      check(out_hash == exph[i], $sformatf("job %0d digest", i));
      check(out_alg == expa[i], $sformatf("job %0d hash selection", i));
      check(out_tag == 7'(i + 3), $sformatf("job %0d tag", i));
      out_ready = 1; @(negedge clk); out_ready = 0;
      check(!out_valid && in_ready, $sformatf("job %0d handed over", i));
    end
    check(busy_ready == 0, "in_ready low while a job is in progress");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
