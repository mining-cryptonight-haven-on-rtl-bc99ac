// tb_cn_shuffle: runs three hashes interleaved through Shuffle (4 slots,
// 1 KiB scratchpads preloaded with a fixed pattern, 64 iterations) against
// a memory with random stalls and 6-cycle latency, and compares each
// region's final contents with a reference model of the CryptoNight-Haven
// loop (AES step, multiply-add step, division step).
module tb_cn_shuffle;
  import cn_pkg::*;
  localparam int WD = 100000;
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
  localparam int MEMB = 1024, W = MEMB/16, ITER = 64;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, mreq_valid, mreq_ready, rsp_valid, rsp_ready;
  state_t in_state, out_state; logic [1:0] in_tag, out_tag; mem_req_t mreq; block_t rsp_data;
  logic [31:0] n_active; int max_active = 0;
  int stalls, reads, writes, done_n = 0, cyc = 0;
  state_t sts [3]; logic [127:0] exps [3];
  cn_shuffle #(.SLOTS(4), .ITERATIONS(ITER), .MEM_BYTES(MEMB)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .in_state, .in_tag, .out_valid, .out_ready, .out_state, .out_tag, .mem_req_valid(mreq_valid),
    .mem_req_ready(mreq_ready), .mem_req(mreq), .mem_rsp_valid(rsp_valid), .mem_rsp_ready(rsp_ready),
    .mem_rsp_data(rsp_data), .n_active);
  hbm_model #(.LATENCY(6), .STALL_PCT(25)) mem (.clk, .req_valid(mreq_valid), .req_ready(mreq_ready),
    .req(mreq), .rsp_valid, .rsp_ready, .rsp_data, .stalls, .reads, .writes);
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && int'(n_active) > max_active) max_active = int'(n_active);
  end
  initial begin
    sts[0] = 1600'h306b86a1dcf7124d7e95a8cfe2395c73ac97fadd006b4eb19af12c0b665db897e8331e7944af8ad5466d1037da81a44b641f32d588a346790229f493be45600f20fb96b14c6702ddcea5987f5209ecc3bc876a4d10fbdea18a613c1bf6cda88798c3ee09345f7aa5d6fd00274a91b4dbf40f224598b3d6e9321944a38ef5d03f104ba681fcd7326d5eb588efc2197c53ccf79abd600b2ed1fa914c6b063dd8f788537e1924cfeab5664d3017faa1846b443f12f5a88366592209d4b39e65402f00dbb6916c4722fd; exps[0] = 128'h995b6538d7907721befd1d48b63d1266;
    sts[1] = 1600'h2d08d3be99644f2a00254e7394b9e20727427994b3ee05204a6f84d9fe13284d59bce7ca2d107b5e8ce9c23f1875ae8bf3d62d0067ba91f4b6537825c2ef94b155702bc6e19cb752183dd6eb8ca17a1f0fead1bc9b462d08e2c7ac71563b00e5c1a47f523508e3c66481aad7f01d46639bbec5e80f52799caecbe03d5a778ca9fdd8036e49b49ffa30157e43a489d237177249a483de35101a3fd489ae43781d29cc97ba5d600b2efc99b24f6805defba3867d5037eac1a486634815f2dfa48165401bf6d1ac8762; exps[1] = 128'ha0b6fcb9211440d808650ccc8d57b6c5;
    sts[2] = 1600'haa45603bd6f18ca776290ce7dabd904b321df8c3ae89543fee11345f82a5c8f31a35508ba6c1fc1726799cb7caed005b42ad88f3de39644fbe81e4cf127558a38ae5c01b7651ac8796496c073addf0ab527d1823cee9b45f4e3114ffa28568533a15f0ab86615c3706d9bc976a4d20fb224d6893bed9042f5e6184aff21538436a85a0fb16314c67b6e9cc271a7d508bf2dd38036e4994ffae51741fc2e588b35a7510cbe681bc576639dcf78aad401b02edc8b39e79240ffec1a48f523518e3caa5805b3611ecc7; exps[2] = 128'h7419726ba7162425661c1caaf60b3fea;
    for (int t = 0; t < 3; t++) for (int i = 0; i < W; i++)
      hbm_pkg::words[longint'(t*W + i)] = hbm_pkg::pattern(longint'(t*W + i));
    in_state = '0; in_tag = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk); in_state = sts[t]; in_tag = 2'(t); in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk); in_valid = 0;
    end
    while (done_n < 3) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) == 0);
      if (out_valid && out_ready) begin
        check(out_state == sts[out_tag], $sformatf("state passed through for slot %0d", out_tag));
        check(hbm_pkg::digest(longint'(out_tag) * W, W) == exps[out_tag],
              $sformatf("scratchpad of slot %0d after %0d iterations", out_tag, ITER));
        done_n++;
      end
    end
    check(reads == 3*3*ITER && writes == 3*3*ITER, $sformatf("one read and one write per step (%0d/%0d)", reads, writes));
    check(max_active == 3, $sformatf("three hashes interleaved (%0d)", max_active));
    check(stalls > 0, "memory back-pressure exercised");
    check(hbm_pkg::digest(3*W, W) == '0, "unused slot untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
