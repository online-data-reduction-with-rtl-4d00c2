// lif_encoder_cascade -- the single-cycle datapath of the per-PDU LIF
// temporal-coincidence encoder.
//
// One input word holds up to four hits of one PDU. Each hit drives one of four
// cascaded LIF update stages, all combinational, so a whole word is absorbed in
// one clock cycle. The chain state (v_c, t_c) enters from the PDU's registered
// state (vmem_i, t_curr_i). Stage k:
//   act_k  = act_{k-1} & ~spk_{k-1}           (act_0 = ~idle_i)
//   dt     = hit.bin - t_c(k)                  (bins elapsed since the last update)
//   v_leak = v_c(k) >> (LEAK_K * dt)           (shift leak: divide by 2^k per bin)
//   v_sum  = v_leak + W_IN                     (unit weight for every SiPM)
//   spk_k  = act_k & hit.valid & (v_sum >= THETA)
// A firing stage resets the membrane to zero; a non-firing active stage stores
// the saturated v_sum and moves t_c to the hit's bin. With the deployed point
// (1-bit membrane, LEAK_K=1, THETA=2) this collapses to spk_k = v_leak: the PDU
// fires when two hits fall in the same bin.
//
// Spike resolution reports the first stage that fired and its bin. The t_max
// logic reports the bin of the latest valid hit in the word whether or not a
// spike happened (seeded with t_curr_i for a word without hits); the caller
// anchors the next word's leak to it. idle_o tells the caller the PDU has
// spiked in this bunch crossing (single spike per BC).
//
// Follows the paper: the four-stage cascade, the stage equations, spike
// resolution, the t_max tracker and the deployed parameter values. Choices of
// this design: the per-hit valid bit, the >= comparison (the paper's "two or
// more hits in one bin" rule), reset-to-zero on a spike, the general
// multi-bit form, and dt clamped to 0 for a hit whose bin precedes t_c.
module lif_encoder_cascade
  import drich_snn_pkg::*;
#(
  parameter int unsigned MEM_W  = 1,   // membrane width
  parameter int unsigned LEAK_K = 1,   // leak shift per elapsed bin
  parameter int unsigned THETA  = 2,   // firing threshold
  parameter int unsigned W_IN   = 1    // uniform input weight
) (
  input  hit_t [HITS_PER_WORD-1:0] hits_i,
  input  logic [MEM_W-1:0]         vmem_i,
  input  logic [BIN_W-1:0]         t_curr_i,
  input  logic                     idle_i,
  output logic [MEM_W-1:0]         vmem_o,
  output logic [BIN_W-1:0]         t_curr_o,
  output enc_spike_t               spike_o,
  output logic [BIN_W-1:0]         t_max_o,
  output logic                     idle_o
);

  localparam int unsigned SUM_W = MEM_W + 2;
  localparam logic [SUM_W-1:0] VMAX = SUM_W'((1 << MEM_W) - 1);

  logic [MEM_W-1:0] v_c [HITS_PER_WORD+1];
  logic [BIN_W-1:0] t_c [HITS_PER_WORD+1];
  logic             act [HITS_PER_WORD+1];
  logic [HITS_PER_WORD-1:0] spk;

  always_comb begin
    v_c[0] = vmem_i;
    t_c[0] = t_curr_i;
    act[0] = ~idle_i;
    for (int k = 0; k < HITS_PER_WORD; k++) begin
      logic [BIN_W-1:0] dt;
      logic [SUM_W-1:0] v_leak, v_sum;
      int unsigned      shamt;
      dt     = (hits_i[k].bin >= t_c[k]) ? hits_i[k].bin - t_c[k] : '0;
      shamt  = LEAK_K * 32'(dt);
      v_leak = (shamt >= MEM_W) ? '0 : SUM_W'(v_c[k] >> shamt);
      v_sum  = v_leak + SUM_W'(W_IN);
      spk[k] = act[k] && hits_i[k].valid && (v_sum >= SUM_W'(THETA));
      if (act[k] && hits_i[k].valid) begin
        v_c[k+1] = spk[k] ? '0 : ((v_sum > VMAX) ? VMAX[MEM_W-1:0] : v_sum[MEM_W-1:0]);
        t_c[k+1] = hits_i[k].bin;
      end else begin
        v_c[k+1] = v_c[k];
        t_c[k+1] = t_c[k];
      end
      act[k+1] = act[k] && !spk[k];
    end
  end

  // Spike resolution: first stage with spk_k = 1.
  always_comb begin
    spike_o = '0;
    for (int k = HITS_PER_WORD - 1; k >= 0; k--) begin
      if (spk[k]) begin
        spike_o.valid   = 1'b1;
        spike_o.bin_idx = hits_i[k].bin;
      end
    end
  end

  // t_max: bin of the latest valid hit, independent of act / spk.
  always_comb begin
    t_max_o = t_curr_i;
    for (int k = 0; k < HITS_PER_WORD; k++)
      if (hits_i[k].valid && hits_i[k].bin >= t_max_o) t_max_o = hits_i[k].bin;
  end

  assign vmem_o   = v_c[HITS_PER_WORD];
  assign t_curr_o = t_c[HITS_PER_WORD];
  assign idle_o   = idle_i | (|spk);

endmodule
