// aer_serializer -- greedy min-tree AER serializer of one sub-sector.
//
// Every PDU encoder offers at most one spike per bunch crossing (BC). Each cycle
// a binary min-tree picks, among the pending spikes whose bin is not below the
// running watermark, the one with the smallest bin (ties: lowest PDU index) and
// puts it on the AER bus as a spike word {ts = bin, nid = PDU index}; the
// watermark then moves to that bin. A pending spike whose bin is already below
// the watermark arrived too late to keep the stream time-ordered and is dropped
// (drop_o pulses). When every PDU has reported the end of the BC (done_i) and no
// spike is pending, an end-of-event word is emitted, bc_close_o pulses to release
// the encoders into the next BC, and the watermark returns to 0.
//
// Timing: one word per cycle while out_ready_i is high, so a BC with s spikes
// costs s + 1 cycles on the bus (at most N_PDU + 1). The output is a registered
// valid/ready port that holds its word until accepted.
//
// Follows the paper: greedy min-tree, non-decreasing bin order, watermark drop,
// end-of-event token after all PDUs reported. Choices of this design: tie
// break, word format, same-cycle drop of late spikes.
module aer_serializer
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_PDU = 42
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_PDU-1:0]             spk_valid_i,
  input  logic [N_PDU-1:0][BIN_W-1:0]  spk_bin_i,
  input  logic [N_PDU-1:0]             done_i,
  output logic [N_PDU-1:0]             spk_take_o,
  output logic                         bc_close_o,
  output logic                         drop_o,
  output logic                         out_valid_o,
  input  logic                         out_ready_i,
  output aer_word_t                    out_word_o
);

  localparam int unsigned LEVELS = (N_PDU > 1) ? $clog2(N_PDU) : 1;
  localparam int unsigned LEAVES = 1 << LEVELS;
  localparam int unsigned IDX_W  = (LEVELS < NID_W) ? NID_W : LEVELS;

  typedef struct packed {
    logic             valid;
    logic [BIN_W-1:0] bin;
    logic [IDX_W-1:0] idx;
  } cand_t;

  logic [BIN_W-1:0]  wm_q;
  logic [N_PDU-1:0]  cand, late;
  cand_t             tree [2*LEAVES];
  cand_t             winner;
  logic              can_push, emit_spike, emit_eoe;

  always_comb begin
    for (int i = 0; i < N_PDU; i++) begin
      cand[i] = spk_valid_i[i] && (spk_bin_i[i] >= wm_q);
      late[i] = spk_valid_i[i] && (spk_bin_i[i] <  wm_q);
    end
  end

  // Binary min-tree, heap layout: leaves at LEAVES..2*LEAVES-1, root at 1.
  always_comb begin
    tree[0] = '0;
    for (int i = 0; i < LEAVES; i++) begin
      if (i < N_PDU) tree[LEAVES+i] = '{valid: cand[i], bin: spk_bin_i[i], idx: IDX_W'(i)};
      else           tree[LEAVES+i] = '0;
    end
    for (int n = LEAVES - 1; n >= 1; n--) begin
      cand_t a, b;
      a = tree[2*n];
      b = tree[2*n+1];
      if (a.valid && (!b.valid || a.bin <= b.bin)) tree[n] = a;
      else                                         tree[n] = b;
    end
    winner = tree[1];
  end

  assign can_push   = !out_valid_o || out_ready_i;
  assign emit_spike = can_push && winner.valid;
  assign emit_eoe   = can_push && (&done_i) && !(|spk_valid_i);

  always_comb begin
    spk_take_o = late;
    if (emit_spike) spk_take_o[winner.idx[LEVELS-1:0]] = 1'b1;
  end
  assign bc_close_o = emit_eoe;
  assign drop_o     = |late;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wm_q        <= '0;
      out_valid_o <= 1'b0;
      out_word_o  <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (emit_spike) begin
        out_valid_o <= 1'b1;
        out_word_o  <= '{kind: AER_SPIKE, ts: TS_W'(winner.bin), nid: NID_W'(winner.idx)};
        wm_q        <= winner.bin;
      end else if (emit_eoe) begin
        out_valid_o <= 1'b1;
        out_word_o  <= '{kind: AER_EOE, ts: '0, nid: '0};
        wm_q        <= '0;
      end
    end
  end

  // Spikes leave in non-decreasing bin order within a BC.
  assert property (@(posedge clk) disable iff (!rst_n) emit_spike |-> winner.bin >= wm_q);
  // AER handshake: a word is held stable until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_word_o));

endmodule
