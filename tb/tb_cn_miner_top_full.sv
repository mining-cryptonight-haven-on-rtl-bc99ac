// tb_cn_miner_top_full: one hash through the mining kernel at its default,
// full-size parameters (128 slots, 4 MiB scratchpad per hash, 262144
// Shuffle iterations, 16 warm-up and 16 extra passes). One 76-byte blob is
// pushed in and its 256-bit hash, final-hash selection and tag are compared
// with the reference model's result. The memory models answer after one
// cycle without stalls so that the run stays short. Also checks the
// number of scratchpad accesses (Explode writes 4 MiB once, Implode reads
// it twice, Shuffle makes one read and one write per step) and the cycle
// count of the memory-hard loop: with one hash in flight each Shuffle step
// is bounded by the memory round trip.
module tb_cn_miner_top_full;
  import cn_pkg::*;
  localparam int unsigned MEMB = 4194304, ITER = 262144, WORDS = MEMB / 16;
  localparam int WD = 6000000;

  logic clk = 1'b0, clk_sh = 1'b0, rst_n, rst_sh_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always #2 clk_sh = ~clk_sh;
  initial begin
    rst_n = 1'b1; rst_sh_n = 1'b1;
    #1 rst_n = 1'b0; rst_sh_n = 1'b0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "tb_cn_miner_top_full_vectors.svh"

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [1079:0] in_data = '0; logic [7:0] in_len = 8'd76;
  logic [255:0] out_hash; logic [1:0] out_alg; logic [6:0] out_tag;
  logic ex_v, ex_r, im_v, im_r, im_rv, im_rr, sh_v, sh_r, sh_rv, sh_rr, ex_rv;
  mem_req_t ex_q, im_q, sh_q; block_t im_rd, sh_rd, ex_rd;
  int ex_st, ex_rd_n, ex_wr_n, im_st, im_rd_n, im_wr_n, sh_st, sh_rd_n, sh_wr_n;
  logic awv = 0, awr, wv = 0, wr, bv, arv = 0, arr, rv;
  logic [31:0] rd; logic [1:0] bresp, rresp;

  cn_miner_top dut (
    .clk, .rst_n, .clk_sh, .rst_sh_n, .in_valid, .in_ready, .in_data, .in_len,
    .out_valid, .out_ready, .out_hash, .out_alg, .out_tag,
    .ex_mem_req_valid(ex_v), .ex_mem_req_ready(ex_r), .ex_mem_req(ex_q),
    .im_mem_req_valid(im_v), .im_mem_req_ready(im_r), .im_mem_req(im_q),
    .im_mem_rsp_valid(im_rv), .im_mem_rsp_ready(im_rr), .im_mem_rsp_data(im_rd),
    .sh_mem_req_valid(sh_v), .sh_mem_req_ready(sh_r), .sh_mem_req(sh_q),
    .sh_mem_rsp_valid(sh_rv), .sh_mem_rsp_ready(sh_rr), .sh_mem_rsp_data(sh_rd),
    .s_awvalid(awv), .s_awready(awr), .s_awaddr(12'h0), .s_wvalid(wv), .s_wready(wr),
    .s_wdata(32'h0), .s_bvalid(bv), .s_bready(1'b1), .s_bresp(bresp), .s_arvalid(arv),
    .s_arready(arr), .s_araddr(12'h0), .s_rvalid(rv), .s_rready(1'b1), .s_rdata(rd), .s_rresp(rresp));

  hbm_model #(.LATENCY(1), .STALL_PCT(0)) m_ex (.clk, .req_valid(ex_v), .req_ready(ex_r),
    .req(ex_q), .rsp_valid(ex_rv), .rsp_ready(1'b1), .rsp_data(ex_rd), .stalls(ex_st),
    .reads(ex_rd_n), .writes(ex_wr_n));
  hbm_model #(.LATENCY(1), .STALL_PCT(0)) m_im (.clk, .req_valid(im_v), .req_ready(im_r),
    .req(im_q), .rsp_valid(im_rv), .rsp_ready(im_rr), .rsp_data(im_rd), .stalls(im_st),
    .reads(im_rd_n), .writes(im_wr_n));
  hbm_model #(.LATENCY(1), .STALL_PCT(0)) m_sh (.clk(clk_sh), .req_valid(sh_v), .req_ready(sh_r),
    .req(sh_q), .rsp_valid(sh_rv), .rsp_ready(sh_rr), .rsp_data(sh_rd), .stalls(sh_st),
    .reads(sh_rd_n), .writes(sh_wr_n));

  // Shuffle run time, in clk_sh cycles
  longint sh_cycles = 0;
  always @(posedge clk_sh) if (rst_sh_n && dut.u_shuffle.n_active != 0) sh_cycles++;

  initial begin : watchdog
    repeat (WD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk); rst_n = 1; rst_sh_n = 1;
    @(negedge clk); in_data = BLOB; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
    while (!out_valid) @(negedge clk);
    check(out_hash == EXPH, $sformatf("hash %h", out_hash));
    check(out_alg == EXPA, "final hash selection");
    check(out_tag == 7'd0, "tag");
    check(ex_wr_n == WORDS, $sformatf("Explode writes %0d", ex_wr_n));
    check(im_rd_n == 2 * WORDS, $sformatf("Implode reads %0d", im_rd_n));
    check(sh_rd_n == 3 * ITER && sh_wr_n == 3 * ITER, $sformatf("Shuffle reads %0d writes %0d", sh_rd_n, sh_wr_n));
    check(sh_cycles <= longint'(3 * ITER * 6), $sformatf("Shuffle cycles %0d", sh_cycles));
    $display("Shuffle: %0d clk_sh cycles for %0d steps", sh_cycles, 3 * ITER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
