// tb_cn_implode: runs Implode on a fixed state over a 1 KiB scratchpad
// region preloaded with a fixed pattern and compares the resulting state
// with a reference model of the CryptoNight-Heavy implode (two reads of the
// scratchpad, 16 extra passes, mix after every pass); checks that memory
// reads are hidden behind the AES pipeline (19 cycles per pass).
module tb_cn_implode;
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
  localparam int MEMB = 1024, W = MEMB/16;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, mreq_valid, mreq_ready, rsp_valid, rsp_ready;
  state_t in_state, out_state; logic [6:0] in_tag = 7'd1, out_tag; mem_req_t mreq; block_t rsp_data;
  int stalls, reads, writes, cyc = 0, t0, t1;
  cn_implode #(.MEM_BYTES(MEMB)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_state, .in_tag,
    .out_valid, .out_ready, .out_state, .out_tag, .mem_req_valid(mreq_valid),
    .mem_req_ready(mreq_ready), .mem_req(mreq), .mem_rsp_valid(rsp_valid), .mem_rsp_ready(rsp_ready),
    .mem_rsp_data(rsp_data));
  hbm_model #(.LATENCY(4), .STALL_PCT(0)) mem (.clk, .req_valid(mreq_valid), .req_ready(mreq_ready),
    .req(mreq), .rsp_valid, .rsp_ready, .rsp_data, .stalls, .reads, .writes);
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    for (int i = 0; i < W; i++) hbm_pkg::words[longint'(1*W + i)] = hbm_pkg::pattern(longint'(1*W + i));
    in_state = 1600'h39c4ef8a55701b26c8e5be5b74112ac7db866d483712f9a48a675c3916f3a8857d402b0ed1b49f624c21fadfb0956e43df02294c7396bde00e23587d92b7ec01215c7792cde8033e406db6d3fc19224f63bed5f00f2a419c82efd4311e7ba08de5d8331649ac87fac4297257b89de6cb277a51b48beec518062bd0f59abf640929d4ff9a45600b36d8f5ae4b64013ad7ebb65d780722c994ba576c0926c398b56d503b1ec1a48f725c31eacfa0857e532ff2d9bc83664d10fed3a88d62471cf1d1ac87623d18f3ce;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); in_valid = 1; t0 = cyc;
    @(negedge clk); in_valid = 0;
    while (!out_valid) @(negedge clk);
    t1 = cyc;
    check(out_state == 1600'h39c4ef8a55701b26af6b9103b1276651627e087edd89b8354f8943553d1b57a775c7fba18deeeb74234f0a4174f4aacce53f926ed560b75911c06cfeb603ae7855ec54e913b252ad694de0f615a244a87dab064d0ad56462bc1d139a8fa27537ab8e55a36a8e505f48b25aed059465cea8edce877bf72e894f8f1d68d15f6113d9a2a8318d19ac01d8f5ae4b64013ad7ebb65d780722c994ba576c0926c398b56d503b1ec1a48f725c31eacfa0857e532ff2d9bc83664d10fed3a88d62471cf1d1ac87623d18f3ce, "imploded state");
    check(out_tag == in_tag, "tag");
    check(reads == 2*W, $sformatf("scratchpad read twice (%0d reads)", reads));
    check(writes == 0, "no writes");
    // 2 setup cycles, then (2*MEMB/128 + 16) passes of 19 cycles; the reads of a pass overlap
    // the AES pipeline of the previous one, costing at most 2 extra cycles per memory pass
    // (4-cycle latency) plus the unhidden reads of the first pass
    check(t1 - t0 >= 2 + (2*MEMB/128 + 16)*19 && t1 - t0 <= 2 + (2*MEMB/128 + 16)*19 + 2*(2*MEMB/128) + 13,
          $sformatf("cycles %0d", t1 - t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
