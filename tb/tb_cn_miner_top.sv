// tb_cn_miner_top: end-to-end test of the mining kernel at reduced size.
//
// Parameters: 4 slots, 1 KiB scratchpads, 64 Shuffle iterations (the
// warm-up and extra passes keep their real count of 16). Seven 76-byte
// blobs that differ only in their nonce are pushed in as fast as the kernel
// takes them; their hashes are compared with an independent reference
// model, and the blobs were chosen so that all four final hash functions
// are used. The three scratchpad ports are served by memory models with
// random stalls (Explode and Implode on the 200 MHz-style clock, Shuffle on
// the faster clock, 2.5x). At the end the AXI4-Lite status registers are
// read back. Each mechanism of the design must have happened at least once:
// every final hash selection, the slot limit holding back the input, tag
// reuse, several hashes interleaved in Shuffle, memory back-pressure on all
// three ports, and output back-pressure.
module tb_cn_miner_top;
  import cn_pkg::*;
  localparam int SLOTS = 4, MEMB = 1024, ITER = 64, WD = 400000;

  logic clk = 1'b0, clk_sh = 1'b0, rst_n, rst_sh_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always #2 clk_sh = ~clk_sh;
  // reset edge at time 1, so that asynchronously reset flops start from a
  // defined state before the first clock edge reaches the memory models
  initial begin
    rst_n = 1'b1; rst_sh_n = 1'b1;
    #1 rst_n = 1'b0; rst_sh_n = 1'b0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "tb_cn_miner_top_vectors.svh"

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1079:0] in_data = '0; logic [7:0] in_len = 8'd76;
  logic [255:0] out_hash; logic [1:0] out_alg; logic [1:0] out_tag;
  logic ex_v, ex_r, im_v, im_r, im_rv, im_rr, sh_v, sh_r, sh_rv, sh_rr, ex_rv;
  mem_req_t ex_q, im_q, sh_q; block_t im_rd, sh_rd, ex_rd;
  int ex_st, ex_rd_n, ex_wr_n, im_st, im_rd_n, im_wr_n, sh_st, sh_rd_n, sh_wr_n;
  logic awv = 0, awr, wv = 0, wr, bv, br = 1, arv = 0, arr, rv, rr = 1;
  logic [11:0] awa = '0, ara = '0; logic [31:0] wd = '0, rd; logic [1:0] bresp, rresp;

  cn_miner_top #(.SLOTS(SLOTS), .MEM_BYTES(MEMB), .ITERATIONS(ITER)) dut (
    .clk, .rst_n, .clk_sh, .rst_sh_n, .in_valid, .in_ready, .in_data, .in_len,
    .out_valid, .out_ready, .out_hash, .out_alg, .out_tag,
    .ex_mem_req_valid(ex_v), .ex_mem_req_ready(ex_r), .ex_mem_req(ex_q),
    .im_mem_req_valid(im_v), .im_mem_req_ready(im_r), .im_mem_req(im_q),
    .im_mem_rsp_valid(im_rv), .im_mem_rsp_ready(im_rr), .im_mem_rsp_data(im_rd),
    .sh_mem_req_valid(sh_v), .sh_mem_req_ready(sh_r), .sh_mem_req(sh_q),
    .sh_mem_rsp_valid(sh_rv), .sh_mem_rsp_ready(sh_rr), .sh_mem_rsp_data(sh_rd),
    .s_awvalid(awv), .s_awready(awr), .s_awaddr(awa), .s_wvalid(wv), .s_wready(wr), .s_wdata(wd),
    .s_bvalid(bv), .s_bready(br), .s_bresp(bresp), .s_arvalid(arv), .s_arready(arr),
    .s_araddr(ara), .s_rvalid(rv), .s_rready(rr), .s_rdata(rd), .s_rresp(rresp));

  hbm_model #(.LATENCY(3), .STALL_PCT(20)) m_ex (.clk, .req_valid(ex_v), .req_ready(ex_r),
    .req(ex_q), .rsp_valid(ex_rv), .rsp_ready(1'b1), .rsp_data(ex_rd), .stalls(ex_st),
    .reads(ex_rd_n), .writes(ex_wr_n));
  hbm_model #(.LATENCY(5), .STALL_PCT(20)) m_im (.clk, .req_valid(im_v), .req_ready(im_r),
    .req(im_q), .rsp_valid(im_rv), .rsp_ready(im_rr), .rsp_data(im_rd), .stalls(im_st),
    .reads(im_rd_n), .writes(im_wr_n));
  hbm_model #(.LATENCY(8), .STALL_PCT(20)) m_sh (.clk(clk_sh), .req_valid(sh_v), .req_ready(sh_r),
    .req(sh_q), .rsp_valid(sh_rv), .rsp_ready(sh_rr), .rsp_data(sh_rd), .stalls(sh_st),
    .reads(sh_rd_n), .writes(sh_wr_n));

  // mechanism counters
  int n_alg [4] = '{0, 0, 0, 0};
  int n_slot_hold = 0, n_out_hold = 0, max_interleave = 0, n_tag_reuse = 0, n_out = 0;
  bit tag_seen [SLOTS];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && dut.kin_ready && dut.in_flight_q == SLOTS) n_slot_hold++;
    if (out_valid && !out_ready) n_out_hold++;
  end
  always @(posedge clk_sh) if (rst_sh_n && int'(dut.u_shuffle.n_active) > max_interleave)
    max_interleave = int'(dut.u_shuffle.n_active);

  task automatic axil_read(input logic [11:0] a, output logic [31:0] v);
    @(negedge clk); ara = a; arv = 1;
    do @(posedge clk); while (!arr);
    @(negedge clk); arv = 0;
    while (!rv) @(negedge clk);
    v = rd;
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (WD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired after %0d outputs", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    repeat (4) @(posedge clk); rst_n = 1; rst_sh_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_data = blobs[i]; in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk); in_valid = 0;
    end
  end

  // consumer and final checks
  initial begin
    logic [31:0] v;
    while (n_out < N) begin
      @(negedge clk);
      out_ready = ($urandom_range(1) == 0);
      #1;
      if (out_valid && out_ready) begin
        check(out_hash == exph[n_out], $sformatf("hash %0d", n_out));
        check(out_alg == expa[n_out], $sformatf("final hash selection of hash %0d", n_out));
        check(int'(out_tag) == n_out % SLOTS, $sformatf("tag of hash %0d", n_out));
        n_alg[out_alg]++;
        if (tag_seen[out_tag]) n_tag_reuse++;
        tag_seen[out_tag] = 1'b1;
        n_out++;
      end
    end
    @(negedge clk); out_ready = 0;
    axil_read(12'h000, v); check(v == 32'h434E4856, "status ID register");
    axil_read(12'h008, v); check(v == 32'(N), $sformatf("blobs accepted counter %0d", v));
    axil_read(12'h014, v); check(v == 32'(N), $sformatf("hashes delivered counter %0d", v));
    axil_read(12'h018, v); check(v == 32'(n_slot_hold), $sformatf("slot-limit counter %0d vs %0d", v, n_slot_hold));
    axil_read(12'h004, v); check(v == 0, "no jobs left in flight");
    $display("mechanisms: blake=%0d groestl=%0d jh=%0d skein=%0d slot_hold=%0d tag_reuse=%0d interleave=%0d stalls ex/sh/im=%0d/%0d/%0d out_hold=%0d",
             n_alg[0], n_alg[1], n_alg[2], n_alg[3], n_slot_hold, n_tag_reuse, max_interleave,
             ex_st, sh_st, im_st, n_out_hold);
    for (int a = 0; a < 4; a++) check(n_alg[a] > 0, $sformatf("final hash %0d used", a));
    check(n_slot_hold > 0, "slot limit held the input back");
    check(n_tag_reuse > 0, "tags reused");
    check(max_interleave >= 2, "hashes interleaved in Shuffle");
    check(ex_st > 0 && sh_st > 0 && im_st > 0, "memory back-pressure on all three ports");
    check(n_out_hold > 0, "output back-pressure");
    check(ex_wr_n == N * MEMB / 16, "Explode wrote every scratchpad once");
    check(im_rd_n == 2 * N * MEMB / 16, "Implode read every scratchpad twice");
    check(sh_rd_n == 3 * N * ITER && sh_wr_n == 3 * N * ITER, "Shuffle: one read and one write per step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
