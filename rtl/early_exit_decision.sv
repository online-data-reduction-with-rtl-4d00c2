// early_exit_decision -- turns the two output neurons of the Aggregation SNN into
// one Signal+Noise / Noise-Only verdict per bunch crossing.
//
// Output neuron 1 votes Signal+Noise, neuron 0 votes Noise-Only. Spike counts
// n_sig and n_noise are accumulated over the timesteps of the bunch crossing and
// tested whenever a timestep closes (SYNC word):
//   * early exit (ee_en_i = 1): the first class whose count reaches et_i wins;
//     Signal is tested first, so it wins when both reach et_i in the same step;
//   * otherwise, when timestep T_MAX-1 closes (or at end of event if still
//     undecided), rate coding decides: Signal if
//     n_sig / (n_sig + n_noise) > RATIO_NUM / RATIO_DEN, else Noise-Only
//     (no output spike at all therefore gives Noise-Only).
// The verdict is a one-cycle pulse with the class, whether early exit decided it,
// and the number of timesteps used (closing timestep + 1). Words after the verdict
// are counted but ignored until the end of event resets the counters.
//
// Interface: AER input (always ready), et_i, ee_en_i; verdict_* outputs.
// Follows the paper: accumulated counts, threshold ET, Signal priority, fallback
// to a rate-coded decision after T_max timesteps. Choices of this design: the
// neuron-to-class mapping and the 1/2 fallback ratio (the paper gives no value).
module early_exit_decision
  import drich_snn_pkg::*;
#(
  parameter int unsigned T_MAX     = 10,
  parameter int unsigned CNT_W     = 8,
  parameter int unsigned RATIO_NUM = 1,
  parameter int unsigned RATIO_DEN = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  aer_word_t        in_word_i,
  input  logic [CNT_W-1:0] et_i,
  input  logic             ee_en_i,
  output logic             verdict_valid_o,
  output logic             verdict_signal_o,
  output logic             verdict_early_o,
  output logic [TS_W-1:0]  verdict_steps_o
);

  logic [CNT_W-1:0] n_sig_q, n_noise_q;
  logic             decided_q;

  assign in_ready_o = 1'b1;

  // Counts including the word being accepted.
  logic [CNT_W-1:0] n_sig, n_noise;
  logic             rate_signal;
  always_comb begin
    n_sig   = n_sig_q;
    n_noise = n_noise_q;
    if (in_valid_i && in_word_i.kind == AER_SPIKE) begin
      if (in_word_i.nid == NID_W'(1)) n_sig   = (&n_sig_q)   ? n_sig_q   : n_sig_q + 1'b1;
      if (in_word_i.nid == NID_W'(0)) n_noise = (&n_noise_q) ? n_noise_q : n_noise_q + 1'b1;
    end
    rate_signal = (32'(n_sig) * RATIO_DEN) > (32'(n_sig) + 32'(n_noise)) * RATIO_NUM;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_sig_q          <= '0;
      n_noise_q        <= '0;
      decided_q        <= 1'b0;
      verdict_valid_o  <= 1'b0;
      verdict_signal_o <= 1'b0;
      verdict_early_o  <= 1'b0;
      verdict_steps_o  <= '0;
    end else begin
      verdict_valid_o <= 1'b0;
      if (in_valid_i) begin
        n_sig_q   <= n_sig;
        n_noise_q <= n_noise;
        case (in_word_i.kind)
          AER_SYNC: if (!decided_q) begin
            if (ee_en_i && n_sig >= et_i) begin
              decided_q <= 1'b1; verdict_valid_o <= 1'b1; verdict_signal_o <= 1'b1;
              verdict_early_o <= 1'b1; verdict_steps_o <= in_word_i.ts + 1'b1;
            end else if (ee_en_i && n_noise >= et_i) begin
              decided_q <= 1'b1; verdict_valid_o <= 1'b1; verdict_signal_o <= 1'b0;
              verdict_early_o <= 1'b1; verdict_steps_o <= in_word_i.ts + 1'b1;
            end else if (in_word_i.ts >= TS_W'(T_MAX - 1)) begin
              decided_q <= 1'b1; verdict_valid_o <= 1'b1; verdict_signal_o <= rate_signal;
              verdict_early_o <= 1'b0; verdict_steps_o <= in_word_i.ts + 1'b1;
            end
          end
          AER_EOE: begin
            if (!decided_q) begin
              verdict_valid_o <= 1'b1; verdict_signal_o <= rate_signal;
              verdict_early_o <= 1'b0; verdict_steps_o <= TS_W'(T_MAX);
            end
            n_sig_q   <= '0;
            n_noise_q <= '0;
            decided_q <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
