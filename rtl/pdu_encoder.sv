// pdu_encoder -- per-PDU LIF temporal-coincidence encoder with its registered
// state and its interface to the AER serializer.
//
// Each cycle with word_valid_i & word_ready_o, one hit word passes through the
// combinational four-stage cascade (lif_encoder_cascade); the new membrane, the
// t_max time reference and the idle flag are written back to the state
// registers, so a word costs one clock cycle regardless of its hit count. A spike
// found in the word is held in a one-entry slot (spk_valid_o / spk_bin_o) from
// the next cycle on, until the serializer takes or drops it (spk_take_i). Only
// the first spike of a bunch crossing (BC) is kept: after it the PDU is idle.
//
// The word flagged `last` ends the PDU's BC: done_o rises and the input stalls
// (word_ready_o = 0) until the serializer has heard from every PDU and closes
// the BC (bc_close_i). The close clears the slot, the done flag and the state
// (membrane 0, time reference bin 0, not idle) for the next BC.
//
// Follows the paper: one word per cycle, state seeded from registers and written
// back per word, the next word's leak anchored to t_max, single spike per BC.
// Choices of this design: the `last` flag, the stall-until-close handshake and
// the per-BC state reset.
module pdu_encoder
  import drich_snn_pkg::*;
#(
  parameter int unsigned MEM_W  = 1,
  parameter int unsigned LEAK_K = 1,
  parameter int unsigned THETA  = 2,
  parameter int unsigned W_IN   = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             word_valid_i,
  output logic             word_ready_o,
  input  pdu_word_t        word_i,
  output logic             spk_valid_o,
  output logic [BIN_W-1:0] spk_bin_o,
  input  logic             spk_take_i,
  output logic             done_o,
  input  logic             bc_close_i
);

  logic [MEM_W-1:0] vmem_q, vmem_d;
  logic [BIN_W-1:0] tref_q, t_max, t_curr_unused;
  logic             idle_q, idle_d;
  enc_spike_t       spike;

  lif_encoder_cascade #(
    .MEM_W(MEM_W), .LEAK_K(LEAK_K), .THETA(THETA), .W_IN(W_IN)
  ) u_cascade (
    .hits_i   (word_i.hits),
    .vmem_i   (vmem_q),
    .t_curr_i (tref_q),
    .idle_i   (idle_q),
    .vmem_o   (vmem_d),
    .t_curr_o (t_curr_unused),
    .spike_o  (spike),
    .t_max_o  (t_max),
    .idle_o   (idle_d)
  );

  assign word_ready_o = !done_o;
  wire accept = word_valid_i && word_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem_q      <= '0;
      tref_q      <= '0;
      idle_q      <= 1'b0;
      done_o      <= 1'b0;
      spk_valid_o <= 1'b0;
      spk_bin_o   <= '0;
    end else if (bc_close_i) begin
      vmem_q      <= '0;
      tref_q      <= '0;
      idle_q      <= 1'b0;
      done_o      <= 1'b0;
      spk_valid_o <= 1'b0;
    end else begin
      if (spk_take_i) spk_valid_o <= 1'b0;
      if (accept) begin
        vmem_q <= vmem_d;
        tref_q <= t_max;
        idle_q <= idle_d;
        if (word_i.last) done_o <= 1'b1;
        if (spike.valid) begin
          spk_valid_o <= 1'b1;
          spk_bin_o   <= spike.bin_idx;
        end
      end
    end
  end

  // A second spike in one BC cannot happen: the idle flag blocks the cascade.
  assert property (@(posedge clk) disable iff (!rst_n) accept && spike.valid |-> !idle_q);

endmodule
