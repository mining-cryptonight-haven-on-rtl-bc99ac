// stream_fifo: synchronous valid/ready FIFO joining two pipeline stages.
//
// The paper's stages talk over AXI-Stream links with FIFOs between them;
// this is that FIFO for stages in the same clock domain. DEPTH entries of
// WIDTH bits, stored in an array (write on push, registered read pointer,
// combinational read of the head). in_ready is low when full, out_valid is
// high when not empty; a push and a pop may happen in the same cycle. DEPTH
// must be a power of two. Depth and width are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("stream_fifo: DEPTH must be a power of two >= 2");
endmodule
