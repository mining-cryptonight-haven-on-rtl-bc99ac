// tb_cn_explode: runs Explode on a fixed state with a 1 KiB scratchpad in
// region 2 and compares the written words (digest, first and last word)
// with a reference model of the CryptoNight-Heavy explode; checks the cycle
// count of the warm-up and writing passes.
module tb_cn_explode;
  import cn_pkg::*;
  localparam int WD = 20000;
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
  localparam int MEMB = 1024;
  localparam logic [127:0] EXP_DIGEST = 128'h2bc530c998664d386f56addebbdca521;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, mreq_valid, mreq_ready, rsp_valid;
  state_t in_state, out_state; logic [6:0] in_tag = 7'd2, out_tag; mem_req_t mreq; block_t rsp_data;
  int stalls, reads, writes, cyc = 0, t0 = 0, t1 = 0;
  cn_explode #(.MEM_BYTES(MEMB)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_state, .in_tag,
    .out_valid, .out_ready, .out_state, .out_tag, .mem_req_valid(mreq_valid),
    .mem_req_ready(mreq_ready), .mem_req(mreq));
  hbm_model #(.STALL_PCT(0)) mem (.clk, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid, .rsp_ready(1'b1), .rsp_data, .stalls, .reads, .writes);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    in_state = 1600'hb590fbc6210c57b290f5ce230459b297efca217c5bb68de8ba5f0429cef398bd61042fd2f59843660c29d2ff98456e0b3bdef5a84f62193cd6f3a845621f34d18da8437e1934ef8ab85d660b2cf19abf476209d4f39ea5406207dcf196ab406539dcf78aad401b3ed4f18aa7401d36d3d3b69d40270af1d4be9b402d0af7dcb965402b16f1dc876240251ef3d48962473f1af1ac8b665d380aefb4997e43280dd1b49f624528f3d6bc99624f28f5debb8b6e4518ffd2a98c664318f5d2af84613d18f3cea9845f3a;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); in_valid = 1; t0 = cyc;
    @(negedge clk); in_valid = 0;
    while (!out_valid) @(negedge clk);
    t1 = cyc;
    check(writes == MEMB/16, $sformatf("word writes %0d", writes));
    check(hbm_pkg::digest(64'd2 * MEMB/16, MEMB/16) == EXP_DIGEST, "scratchpad digest");
    check(hbm_pkg::rd(64'd2 * MEMB/16) == 128'h216591f170d94e76cc26518c15cc19c2, "first word");
    check(hbm_pkg::rd(64'd2 * MEMB/16 + MEMB/16 - 1) == 128'h308a898b235bcaff7637e61f71d53a14, "last word");
    check(hbm_pkg::rd(64'd2 * MEMB/16 + MEMB/16) == '0, "nothing written past the region");
    check(out_state == in_state && out_tag == in_tag, "state and tag passed on");
    // 2 setup cycles; 16 warm-up passes of 19; MEMB/128 passes of 27 cycles
    check(t1 - t0 == 2 + 16*19 + (MEMB/128)*27, $sformatf("cycles %0d", t1 - t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
