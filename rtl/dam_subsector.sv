// dam_subsector -- the sub-sector spiking network of one DAM board.
//
// N_PDU per-PDU LIF encoders turn the raw hit words of the sub-sector into at most
// one spike per PDU per bunch crossing (BC). The greedy min-tree serializer merges
// these spikes onto one time-ordered AER stream and closes each BC with an
// end-of-event word; the adapter adds the T_MAX timestep-sync words the cores
// need. The stream enters the router at port 0 and is switched to core 0 (port 1,
// N_PDU -> N_H0 LIF layer), from core 0 to core 1 (port 2, N_H0 -> N_H1), and from
// core 1 to port 3, which is the feature output towards the Trigger Processor
// (feat_*): N_H1 feature neurons, their spikes per timestep, T_MAX syncs and one
// end of event per BC.
//
// Interface: per-PDU valid/ready hit-word streams; weight writes select a core
// with cfg_layer_i (0 = core 0, 1 = core 1); valid/ready feature output; drop_o
// pulses when the serializer discards a late spike; spike_o pulses for each
// encoder spike put on the bus.
// Timing: each encoder takes one word per cycle; the PDUs of the sub-sector move
// from one BC to the next together, when the serializer has heard from all.
//
// Follows the paper: 42 encoders, serializer, AIGOR adapter, routing IP with its
// four ports and one core per layer (42 -> 16 -> 4). The BC lock-step of the
// encoders and the configuration port are choices of this design.
module dam_subsector
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_PDU    = 42,
  parameter int unsigned N_H0     = 16,
  parameter int unsigned N_H1     = 4,
  parameter int unsigned T_MAX    = 10,
  parameter int unsigned ENC_MEM_W  = 1,
  parameter int unsigned ENC_LEAK_K = 1,
  parameter int unsigned ENC_THETA  = 2,
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned FRAC_W   = 20,
  parameter int unsigned LEAK_K   = 2,
  parameter logic signed [DATA_W-1:0] THETA = DATA_W'(1) <<< FRAC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic      [N_PDU-1:0]   word_valid_i,
  output logic      [N_PDU-1:0]   word_ready_o,
  input  pdu_word_t [N_PDU-1:0]   word_i,
  input  logic                    cfg_we_i,
  input  logic                    cfg_layer_i,
  input  logic [7:0]              cfg_row_i,
  input  logic [7:0]              cfg_col_i,
  input  logic [DATA_W-1:0]       cfg_data_i,
  output logic                    feat_valid_o,
  input  logic                    feat_ready_i,
  output aer_word_t               feat_word_o,
  output logic                    drop_o,
  output logic                    spike_o
);

  logic [N_PDU-1:0]            spk_valid, spk_take, done;
  logic [N_PDU-1:0][BIN_W-1:0] spk_bin;
  logic                        bc_close;

  for (genvar p = 0; p < N_PDU; p++) begin : g_enc
    pdu_encoder #(
      .MEM_W(ENC_MEM_W), .LEAK_K(ENC_LEAK_K), .THETA(ENC_THETA)
    ) u_enc (
      .clk, .rst_n,
      .word_valid_i (word_valid_i[p]),
      .word_ready_o (word_ready_o[p]),
      .word_i       (word_i[p]),
      .spk_valid_o  (spk_valid[p]),
      .spk_bin_o    (spk_bin[p]),
      .spk_take_i   (spk_take[p]),
      .done_o       (done[p]),
      .bc_close_i   (bc_close)
    );
  end

  logic      ser_valid, ser_ready;
  aer_word_t ser_word;

  aer_serializer #(.N_PDU(N_PDU)) u_ser (
    .clk, .rst_n,
    .spk_valid_i (spk_valid),
    .spk_bin_i   (spk_bin),
    .done_i      (done),
    .spk_take_o  (spk_take),
    .bc_close_o  (bc_close),
    .drop_o      (drop_o),
    .out_valid_o (ser_valid),
    .out_ready_i (ser_ready),
    .out_word_o  (ser_word)
  );

  assign spike_o = ser_valid && ser_ready && ser_word.kind == AER_SPIKE;

  logic [3:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  aer_word_t [3:0] r_in_word, r_out_word;

  aer_adapter #(.T_MAX(T_MAX)) u_adapt (
    .clk, .rst_n,
    .in_valid_i  (ser_valid),
    .in_ready_o  (ser_ready),
    .in_word_i   (ser_word),
    .out_valid_o (r_in_valid[0]),
    .out_ready_i (r_in_ready[0]),
    .out_word_o  (r_in_word[0])
  );

  aigor_router #(.N_PORTS(4), .ROUTE('{1, 2, 3, -1})) u_router (
    .clk, .rst_n,
    .in_valid_i  (r_in_valid),
    .in_ready_o  (r_in_ready),
    .in_word_i   (r_in_word),
    .out_valid_o (r_out_valid),
    .out_ready_i (r_out_ready),
    .out_word_o  (r_out_word)
  );

  aigor_lif_core #(
    .N_IN(N_PDU), .N_OUT(N_H0), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .LEAK_K(LEAK_K), .THETA(THETA)
  ) u_core0 (
    .clk, .rst_n,
    .in_valid_i  (r_out_valid[1]),
    .in_ready_o  (r_out_ready[1]),
    .in_word_i   (r_out_word[1]),
    .out_valid_o (r_in_valid[1]),
    .out_ready_i (r_in_ready[1]),
    .out_word_o  (r_in_word[1]),
    .cfg_we_i    (cfg_we_i && !cfg_layer_i),
    .cfg_row_i, .cfg_col_i, .cfg_data_i
  );

  aigor_lif_core #(
    .N_IN(N_H0), .N_OUT(N_H1), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .LEAK_K(LEAK_K), .THETA(THETA)
  ) u_core1 (
    .clk, .rst_n,
    .in_valid_i  (r_out_valid[2]),
    .in_ready_o  (r_out_ready[2]),
    .in_word_i   (r_out_word[2]),
    .out_valid_o (r_in_valid[2]),
    .out_ready_i (r_in_ready[2]),
    .out_word_o  (r_in_word[2]),
    .cfg_we_i    (cfg_we_i && cfg_layer_i),
    .cfg_row_i, .cfg_col_i, .cfg_data_i
  );

  // Port 3: feature link towards the Trigger Processor (nothing injected there).
  assign r_in_valid[3]  = 1'b0;
  assign r_in_word[3]   = '0;
  assign feat_valid_o   = r_out_valid[3];
  assign r_out_ready[3] = feat_ready_i;
  assign feat_word_o    = r_out_word[3];
  // Port 0 receives nothing under the default route table.
  assign r_out_ready[0] = 1'b1;

endmodule
