// cn_aes10_pipe: ten AES round cores in a 10-stage pipeline.
//
// Stage k applies one AES round with round key k (keys[128k +: 128]), so a
// block entering with in_valid leaves 10 cycles later with out_valid, having
// been through 10 AES rounds. One block may enter every cycle; the pipeline
// has no back-pressure, so the caller must be ready to take each output. The
// paper gives Explode and Implode 10 AES cores each; placing them one per
// pipeline stage is this design's choice. Keys must stay stable while blocks
// are in flight.
module cn_aes10_pipe import cn_pkg::*; #(
  parameter int unsigned STAGES = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  block_t              in_data,
  input  logic [128*STAGES-1:0] keys,
  output logic                out_valid,
  output block_t              out_data
);
  block_t data_q  [STAGES];
  logic   valid_q [STAGES];
  block_t rnd_out [STAGES];

  for (genvar k = 0; k < STAGES; k++) begin : g_core
    cn_aes_round u_round (
      .blk(k == 0 ? in_data : data_q[k == 0 ? 0 : k-1]),
      .key(keys[128*k +: 128]),
      .out(rnd_out[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(STAGES); k++) begin
        valid_q[k] <= 1'b0;
        data_q[k]  <= '0;
      end
    end else begin
      for (int k = 0; k < int'(STAGES); k++) begin
        valid_q[k] <= (k == 0) ? in_valid : valid_q[k == 0 ? 0 : k-1];
        data_q[k]  <= rnd_out[k];
      end
    end
  end

  assign out_valid = valid_q[STAGES-1];
  assign out_data  = data_q[STAGES-1];
endmodule
