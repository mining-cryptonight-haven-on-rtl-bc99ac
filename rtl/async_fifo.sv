// async_fifo: clock-domain-crossing FIFO with valid/ready on both sides.
//
// Shuffle runs on its own fast clock (500 MHz in the paper) while the other
// stages run at 200 MHz; jobs cross between the two domains through this
// FIFO. Classic design: binary pointers in each domain, their Gray-coded
// copies passed through two-flop synchronisers to the other side, full and
// empty computed from the synchronised Gray pointers. The storage is written
// in the write domain and read combinationally at the read pointer. DEPTH
// must be a power of two. The crossing scheme is this design's choice; the
// paper gives only the two clock rates and the FIFOs.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign in_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  always_ff @(posedge wclk) begin
    if (in_valid && in_ready) mem[wbin[AW-1:0]] <= in_data;
  end
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (in_valid && in_ready) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // read domain
  assign out_valid = (rgray != wgray_r2);
  assign out_data  = mem[rbin[AW-1:0]];
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (out_valid && out_ready) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("async_fifo: DEPTH must be a power of two >= 4");
endmodule
