// tp_feature_merger -- joins the feature streams of all sub-sectors into the
// single input stream of the Aggregation SNN on the Trigger Processor.
//
// Each of the N_LINK links carries, per bunch crossing, the spikes of N_FEAT
// feature neurons per timestep, one SYNC word closing each timestep and one
// end-of-event (EOE) word. The merger forwards spike words round-robin among the
// links, renaming neuron n of link l to l*N_FEAT + n, so the Aggregation SNN sees
// the concatenation of all local features. A link whose head word is a SYNC or
// EOE is held there. Once every link holds the same kind of marker, all of them
// are consumed together and a single SYNC (or EOE) is emitted: timestep t is
// closed downstream only after every sub-sector has closed it.
//
// Interface: valid/ready AER per link in, valid/ready AER out (registered). One
// word leaves per cycle. Follows the paper: concatenation of the 30 x 4 features
// and timestep synchronisation; the alignment rule and round-robin order are
// choices of this design.
module tp_feature_merger
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_LINK = 30,
  parameter int unsigned N_FEAT = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic      [N_LINK-1:0] in_valid_i,
  output logic      [N_LINK-1:0] in_ready_o,
  input  aer_word_t [N_LINK-1:0] in_word_i,
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output aer_word_t              out_word_o
);

  localparam int unsigned LIDX_W = (N_LINK > 1) ? $clog2(N_LINK) : 1;

  logic [N_LINK-1:0] is_spike, is_sync, is_eoe;
  logic              can_push, all_sync, all_eoe, pick_valid;
  logic [LIDX_W-1:0] rr_q, pick;

  always_comb begin
    for (int l = 0; l < N_LINK; l++) begin
      is_spike[l] = in_valid_i[l] && in_word_i[l].kind == AER_SPIKE;
      is_sync[l]  = in_valid_i[l] && in_word_i[l].kind == AER_SYNC;
      is_eoe[l]   = in_valid_i[l] && in_word_i[l].kind == AER_EOE;
    end
  end
  assign all_sync = &is_sync;
  assign all_eoe  = &is_eoe;
  assign can_push = !out_valid_o || out_ready_i;

  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int j = N_LINK - 1; j >= 0; j--) begin
      int unsigned l;
      l = (32'(rr_q) + 32'(j)) % N_LINK;
      if (is_spike[l]) begin
        pick_valid = 1'b1;
        pick       = LIDX_W'(l);
      end
    end
  end

  always_comb begin
    in_ready_o = '0;
    if (can_push) begin
      if (pick_valid)                in_ready_o[pick] = 1'b1;
      else if (all_sync || all_eoe)  in_ready_o       = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_o <= 1'b0;
      out_word_o  <= '0;
      rr_q        <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (can_push) begin
        if (pick_valid) begin
          out_valid_o <= 1'b1;
          out_word_o  <= '{kind: AER_SPIKE, ts: in_word_i[pick].ts,
                           nid: NID_W'(32'(pick) * N_FEAT + 32'(in_word_i[pick].nid))};
          rr_q        <= (32'(pick) == N_LINK - 1) ? '0 : pick + 1'b1;
        end else if (all_sync || all_eoe) begin
          out_valid_o <= 1'b1;
          out_word_o  <= in_word_i[0];
        end
      end
    end
  end

  // Links close timesteps in lock-step: when all hold a sync it is the same one.
  assert property (@(posedge clk) disable iff (!rst_n)
                   all_sync |-> in_word_i[N_LINK-1].ts == in_word_i[0].ts);
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_word_o));

endmodule
