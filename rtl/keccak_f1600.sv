// keccak_f1600: iterative Keccak-f[1600] permutation.
//
// Used twice in the CryptoNight-Haven flow: to turn the input blob into the
// 200-byte hash state, and as the permutation applied to the state after
// Implode. One round per clock: a pulse on start loads state_in, 24 rounds
// later done pulses for one cycle with the permuted state on state_out,
// which then holds until the next start. busy is high while rounds run; a
// start while busy is ignored. The round function is the standard Keccak
// one (cn_pkg::keccak_round); the one-round-per-cycle schedule is this
// design's choice, justified by the small share of time the Keccak steps
// take in the whole hash.
module keccak_f1600 import cn_pkg::*; #(
  parameter int unsigned ROUNDS = 24
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  state_t state_in,
  output logic   busy,
  output logic   done,
  output state_t state_out
);
  logic [4:0] round_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      round_q   <= '0;
      state_out <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy      <= 1'b1;
        round_q   <= '0;
        state_out <= state_in;
      end else if (busy) begin
        state_out <= keccak_round(state_out, KECCAK_RC[round_q]);
        if (round_q == 5'(ROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        round_q <= round_q + 5'd1;
      end
    end
  end
endmodule
