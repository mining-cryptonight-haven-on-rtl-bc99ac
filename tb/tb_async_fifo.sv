// tb_async_fifo: two async_fifo instances (4 deep, 32 bits) carry 1000
// items each across clock domains, one from a 10-unit clock to a 4-unit
// clock (the 200 MHz to 500 MHz direction of the miner) and one the other
// way, with random valid and ready on both sides. Each received stream is
// checked against the sent sequence (order, no loss, no duplicates), and
// in_ready must never be high when the write side already holds DEPTH
// unread items.
module tb_async_fifo;
  localparam int WD = 40000, N = 1000, DEPTH = 4;
  logic clk = 1'b0, clk_f = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always #2 clk_f = ~clk_f;
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

  // instance 0: write on clk, read on clk_f; instance 1: the reverse
  logic        iv [2], ir [2], ov [2], orr [2];
  logic [31:0] id [2], od [2];
  int sent [2], rcvd [2], bad [2], over [2];

  async_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_up (
    .wclk(clk), .wrst_n(rst_n), .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .rclk(clk_f), .rrst_n(rst_n), .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]));
  async_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_down (
    .wclk(clk_f), .wrst_n(rst_n), .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .rclk(clk), .rrst_n(rst_n), .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]));

  initial for (int k = 0; k < 2; k++) begin
    iv[k] = 0; orr[k] = 0; id[k] = '0; sent[k] = 0; rcvd[k] = 0; bad[k] = 0; over[k] = 0;
  end

  // writer of instance k runs on its write clock, reader on its read clock
  task automatic writer(input int k);
    forever begin
      if (k == 0) @(posedge clk); else @(posedge clk_f);
      if (rst_n) begin
        if (iv[k] && ir[k]) begin
          sent[k]++;
          if (sent[k] - rcvd[k] > DEPTH) over[k]++;
        end
        iv[k] <= (sent[k] + int'(iv[k] && ir[k]) < N) && ($urandom_range(99) < 60);
        id[k] <= 32'(k * 100000 + sent[k]);
        if (iv[k] && !ir[k]) begin iv[k] <= 1'b1; id[k] <= id[k]; end
      end
    end
  endtask
  task automatic reader(input int k);
    forever begin
      if (k == 0) @(posedge clk_f); else @(posedge clk);
      if (rst_n) begin
        if (ov[k] && orr[k]) begin
          if (od[k] != 32'(k * 100000 + rcvd[k])) bad[k]++;
          rcvd[k]++;
        end
        orr[k] <= ($urandom_range(99) < 50);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      writer(0); writer(1); reader(0); reader(1);
    join_none
    while (rcvd[0] < N || rcvd[1] < N) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int k = 0; k < 2; k++) begin
      check(bad[k] == 0, $sformatf("fifo %0d: data order (%0d mismatches)", k, bad[k]));
      check(sent[k] == N && rcvd[k] == N, $sformatf("fifo %0d: %0d sent, %0d received", k, sent[k], rcvd[k]));
      check(over[k] == 0, $sformatf("fifo %0d: never more than DEPTH items held", k));
      check(!ov[k], $sformatf("fifo %0d: empty at the end", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
