// tb_cn_aes_round: compares the AES round core with precomputed rounds,
// including round 1 of the FIPS-197 Appendix B example.
module tb_cn_aes_round;
  import cn_pkg::*;
  localparam int WD = 100;
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
  block_t blk, key, out;
  cn_aes_round dut (.blk, .key, .out);
  initial begin
    blk = 128'h04f3e2d1c0af9e8d7c6b5a4938271605; key = 128'hb4977a5d402306e9ccaf9275583b1e01; #1 check(out == 128'ha1c5f12dd3552f3c898caf14dd116b85, "aes round");
    blk = 128'h231201f0dfcebdac9b8a796857463524; key = 128'hc1a4876a4d3013f6d9bc9f8265482b0e; #1 check(out == 128'h81fb2028eb55800513e735144eafca0e, "aes round");
    blk = 128'h4231200ffeeddccbbaa9988776655443; key = 128'hceb194775a3d2003e6c9ac8f7255381b; #1 check(out == 128'hca8c779372086946ee85c6cf17d77d9c, "aes round");
    blk = 128'h61503f2e1d0cfbead9c8b7a695847362; key = 128'hdbbea184674a2d10f3d6b99c7f624528; #1 check(out == 128'hbc3c1220b55994f097255cbc08ac5096, "aes round");
    blk = 128'h0848f8e92a8dc69a2be2f4a0bee33d19; key = 128'h05766c2a3939a323b12c548817fefaa0; #1 check(out == 128'h49506a0243ea5b6b2b359f68f27f9ca4, "FIPS-197 round 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
