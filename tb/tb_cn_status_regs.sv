// tb_cn_status_regs: drives random pulses on the 8 event inputs of
// cn_status_regs while keeping its own count of each, then reads every
// register over AXI4-Lite: the identification word, the status word and the
// eight counters. Then it clears the counters with one write where the
// address comes first and one where the data comes first, checks the write
// responses and that all counters read zero, reads an unmapped address
// (must be 0), and checks read back-pressure (rvalid and rdata hold while
// rready is low).
module tb_cn_status_regs;
  localparam int WD = 20000, NCNT = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
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

  logic [NCNT-1:0] events = '0; logic [31:0] status = 32'h1234_5678;
  logic awv = 0, awr, wv = 0, wr, bv, br = 0, arv = 0, arr, rv, rr = 1;
  logic [11:0] awa = '0, ara = '0; logic [31:0] wd = '0, rd; logic [1:0] bresp, rresp;
  cn_status_regs #(.NCNT(NCNT)) dut (.clk, .rst_n, .events, .status,
    .s_awvalid(awv), .s_awready(awr), .s_awaddr(awa), .s_wvalid(wv), .s_wready(wr), .s_wdata(wd),
    .s_bvalid(bv), .s_bready(br), .s_bresp(bresp), .s_arvalid(arv), .s_arready(arr),
    .s_araddr(ara), .s_rvalid(rv), .s_rready(rr), .s_rdata(rd), .s_rresp(rresp));

  int exp_cnt [NCNT];
  always @(posedge clk) if (rst_n) for (int i = 0; i < NCNT; i++) if (events[i]) exp_cnt[i]++;

  task automatic rd_reg(input logic [11:0] a, output logic [31:0] v);
    @(negedge clk); ara = a; arv = 1;
    do @(posedge clk); while (!arr);
    @(negedge clk); arv = 0;
    while (!rv) @(negedge clk);
    v = rd;
    check(rresp == 2'b00, "read response OKAY");
    @(negedge clk);
  endtask

  task automatic wr_reg(input logic [11:0] a, input logic [31:0] v, input bit data_first);
    @(negedge clk); br = 1;
    if (data_first) begin wv = 1; wd = v; end else begin awv = 1; awa = a; end
    do @(posedge clk); while (!(data_first ? wr : awr));
    @(negedge clk); wv = 0; awv = 0;
    repeat (2) @(negedge clk);
    check(!bv, "no write response before both address and data");
    if (data_first) begin awv = 1; awa = a; end else begin wv = 1; wd = v; end
    do @(posedge clk); while (!(data_first ? awr : wr));
    @(negedge clk); wv = 0; awv = 0;
    while (!bv) @(negedge clk);
    check(bresp == 2'b00, "write response OKAY");
    @(negedge clk); br = 0;
  endtask

  initial begin
    logic [31:0] v;
    for (int i = 0; i < NCNT; i++) exp_cnt[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (500) begin
      @(negedge clk); events = NCNT'($urandom());
    end
    @(negedge clk); events = '0;
    rd_reg(12'h000, v); check(v == 32'h434E4856, "identification register");
    rd_reg(12'h004, v); check(v == status, "status word");
    for (int i = 0; i < NCNT; i++) begin
      rd_reg(12'(8 + 4 * i), v);
      check(v == 32'(exp_cnt[i]), $sformatf("counter %0d: %0d, expected %0d", i, v, exp_cnt[i]));
    end
    rd_reg(12'h100, v); check(v == 0, "unmapped address reads 0");
    // clear with the address first, count a little, clear with the data first
    wr_reg(12'h000, 32'h0, 1'b0);
    for (int i = 0; i < NCNT; i++) begin rd_reg(12'(8 + 4 * i), v); check(v == 0, "cleared (address first)"); end
    @(negedge clk); events = '1; @(negedge clk); events = '0;
    rd_reg(12'h008, v); check(v == 1, "counting after clear");
    wr_reg(12'h000, 32'h1, 1'b1);
    rd_reg(12'h008, v); check(v == 0, "cleared (data first)");
    // read back-pressure
    @(negedge clk); rr = 0; ara = 12'h000; arv = 1;
    do @(posedge clk); while (!arr);
    @(negedge clk); arv = 0;
    repeat (4) begin @(negedge clk); check(rv && rd == 32'h434E4856, "read data held while rready is low"); end
    rr = 1; @(negedge clk); check(!rv, "read handed over");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
