// aer_adapter -- turns the serializer's time-ordered spike stream into the
// timestep-driven AER traffic an AIGOR core expects.
//
// AIGOR cores advance algorithmic time only when told: every timestep must be
// closed by a synchronisation word, even one without spikes. One timestep here is
// one encoder time bin. The adapter keeps the index of the next timestep to close
// (cur). A spike of timestep ts > cur first makes it emit SYNC(cur), SYNC(cur+1),
// ... up to SYNC(ts-1), one per cycle, and then passes the spike. The end-of-event
// word makes it close every remaining timestep up to T_MAX-1 and then pass the
// end of event, after which cur returns to 0. A BC therefore always carries
// exactly T_MAX sync words.
//
// Interface: valid/ready AER in and out; the output is registered and one word
// moves per cycle. The paper names this block ("AER adapter for AIGOR") and the
// synchronisation rule; the word format and this sequencing are choices of this
// design.
module aer_adapter
  import drich_snn_pkg::*;
#(
  parameter int unsigned T_MAX = 10
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid_i,
  output logic      in_ready_o,
  input  aer_word_t in_word_i,
  output logic      out_valid_o,
  input  logic      out_ready_i,
  output aer_word_t out_word_o
);

  logic [TS_W-1:0] cur_q;
  logic            can_push, need_sync;
  logic [TS_W-1:0] target;

  assign can_push  = !out_valid_o || out_ready_i;
  // Timestep up to which syncs must be issued before the input word may pass.
  assign target    = (in_word_i.kind == AER_EOE) ? TS_W'(T_MAX) :
                     ((in_word_i.ts >= TS_W'(T_MAX)) ? TS_W'(T_MAX - 1) : in_word_i.ts);
  assign need_sync = in_valid_i && (cur_q < target);
  assign in_ready_o = can_push && !need_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q       <= '0;
      out_valid_o <= 1'b0;
      out_word_o  <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (can_push && need_sync) begin
        out_valid_o <= 1'b1;
        out_word_o  <= '{kind: AER_SYNC, ts: cur_q, nid: '0};
        cur_q       <= cur_q + 1'b1;
      end else if (in_valid_i && in_ready_o) begin
        out_valid_o <= 1'b1;
        out_word_o  <= in_word_i;
        if (in_word_i.kind == AER_SPIKE) out_word_o.ts <= target;
        if (in_word_i.kind == AER_EOE)   cur_q <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_word_o));

endmodule
