// cn_status_regs: AXI4-Lite readable status and performance counters.
//
// The paper's kernel exposes status registers over AXI-Lite to collect
// performance and debug information on the card; which counters it holds is
// not given, so this block offers a generic set: NCNT 32-bit event counters,
// each incremented by one cycle of its input in events[], plus a live
// 32-bit status word. Register map (byte addresses): 0x00 identification
// 0x434E4856 ("CNHV"), 0x04 status word, 0x08 + 4*i counter i. Writing any
// value to 0x00 clears all counters. Reads of unmapped addresses return 0.
// AXI4-Lite: one outstanding read and one outstanding write, OKAY
// responses only; an address and its write data may arrive in either order.
// Unused by design (reported by lint): the write data (any write to 0x00
// clears), address bits [1:0] (word-aligned registers) and the high bits of
// the computed counter index.
module cn_status_regs #(
  parameter int unsigned NCNT = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NCNT-1:0] events,
  input  logic [31:0]     status,
  // AXI4-Lite slave
  input  logic            s_awvalid,
  output logic            s_awready,
  input  logic [11:0]     s_awaddr,
  input  logic            s_wvalid,
  output logic            s_wready,
  input  logic [31:0]     s_wdata,
  output logic            s_bvalid,
  input  logic            s_bready,
  output logic [1:0]      s_bresp,
  input  logic            s_arvalid,
  output logic            s_arready,
  input  logic [11:0]     s_araddr,
  output logic            s_rvalid,
  input  logic            s_rready,
  output logic [31:0]     s_rdata,
  output logic [1:0]      s_rresp
);
  localparam logic [31:0] ID = 32'h434E4856;
  localparam int unsigned CIW = (NCNT > 1) ? $clog2(NCNT) : 1;

  logic [31:0] cnt_q [NCNT];
  logic        aw_have, w_have, clear;
  logic [11:0] awaddr_q;

  assign s_awready = !aw_have && !s_bvalid;
  assign s_wready  = !w_have && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  // counter index of a read address (valid only for 0x08 .. 0x08 + 4*(NCNT-1))
  logic [9:0]    ridx_full;
  logic [CIW-1:0] ridx;
  assign ridx_full = s_araddr[11:2] - 10'd2;
  assign ridx      = ridx_full[CIW-1:0];

  assign clear     = aw_have && w_have && !s_bvalid && (awaddr_q[11:2] == 10'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 1'b0; w_have <= 1'b0; awaddr_q <= '0; s_bvalid <= 1'b0;
      s_rvalid <= 1'b0; s_rdata <= '0;
      for (int i = 0; i < int'(NCNT); i++) cnt_q[i] <= '0;
    end else begin
      // write channel
      if (s_awvalid && s_awready) begin aw_have <= 1'b1; awaddr_q <= s_awaddr; end
      if (s_wvalid && s_wready) w_have <= 1'b1;
      if (aw_have && w_have && !s_bvalid) begin
        s_bvalid <= 1'b1;
        aw_have  <= 1'b0;
        w_have   <= 1'b0;
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      // read channel
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (s_araddr[11:2] == 10'd0)      s_rdata <= ID;
        else if (s_araddr[11:2] == 10'd1) s_rdata <= status;
        else if (32'(s_araddr[11:2]) < 32'(NCNT) + 2) s_rdata <= cnt_q[ridx];
        else                              s_rdata <= '0;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
      // counters
      for (int i = 0; i < int'(NCNT); i++)
        if (clear) cnt_q[i] <= '0;
        else if (events[i]) cnt_q[i] <= cnt_q[i] + 32'd1;
    end
  end
endmodule
