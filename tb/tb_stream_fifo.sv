// tb_stream_fifo: random push/pop traffic through a 4-deep, 16-bit
// stream_fifo checked against a scoreboard queue. Checks data order, the
// count output, that in_ready drops exactly when 4 entries are held, that
// out_valid drops exactly when empty, and that a push and a pop in the same
// cycle keep one item per cycle flowing (full throughput run of 64 items in
// 65 cycles with both sides always willing).
module tb_stream_fifo;
  localparam int WD = 20000, DEPTH = 4, N = 2000;
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

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  logic [2:0] count;
  stream_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);

  logic [15:0] sb [$];
  int sent = 0, rcvd = 0, bad_order = 0, bad_flags = 0, pv = 50, pr = 50;
  bit running = 0;

  // drive at negedge, check and account at the following posedge
  always @(negedge clk) if (running) begin
    in_valid  = (sent < N) && ($urandom_range(99) < pv);
    in_data   = 16'(sent * 7 + 1);
    out_ready = ($urandom_range(99) < pr);
  end
  always @(posedge clk) if (running) begin
    if (int'(count) != sb.size()) bad_flags++;
    if (in_ready != (sb.size() < DEPTH)) bad_flags++;
    if (out_valid != (sb.size() > 0)) bad_flags++;
    if (out_valid && out_ready) begin
      if (out_data != sb[0]) bad_order++;
      void'(sb.pop_front());
      rcvd++;
    end
    if (in_valid && in_ready) begin
      sb.push_back(in_data);
      sent++;
    end
  end

  initial begin
    int t0;
    repeat (3) @(posedge clk); rst_n = 1;
    // random traffic with three mixes of push and pop probabilities
    running = 1;
    pv = 50; pr = 50; while (sent < 700) @(posedge clk);
    pv = 90; pr = 30; while (sent < 1400) @(posedge clk);
    pv = 30; pr = 90; while (rcvd < N) @(posedge clk);
    @(negedge clk); running = 0; in_valid = 0; out_ready = 0;
    check(bad_order == 0, $sformatf("data order (%0d mismatches)", bad_order));
    check(bad_flags == 0, $sformatf("count/in_ready/out_valid (%0d mismatches)", bad_flags));
    check(sent == N && rcvd == N, "all items through");
    // fill to full and check in_ready
    for (int i = 0; i < DEPTH; i++) begin in_valid = 1; in_data = 16'(100 + i); @(negedge clk); end
    check(!in_ready && count == 3'(DEPTH), "full after DEPTH pushes");
    in_valid = 0;
    for (int i = 0; i < DEPTH; i++) begin
      check(out_valid && out_data == 16'(100 + i), $sformatf("drain item %0d", i));
      out_ready = 1; @(negedge clk);
    end
    out_ready = 0;
    check(!out_valid && count == 0, "empty after draining");
    // throughput: both sides always willing, one item per cycle
    t0 = 0;
    for (int i = 0; i < 64 + 1; i++) begin
      in_valid = (i < 64); in_data = 16'(i); out_ready = 1;
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (out_data != 16'(t0)) bad_order++;
        t0++;
      end
      @(negedge clk);
    end
    check(t0 == 64 && bad_order == 0, $sformatf("64 items in 65 cycles (%0d)", t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
