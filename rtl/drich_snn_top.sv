// drich_snn_top -- the complete spiking-neural-network data reduction system of
// the dRICH detector: N_DAM DAM boards and one Trigger Processor.
//
// Every DAM (dam_node) receives the hit words of its N_PDU photo-detection units,
// encodes them into at most one spike per PDU per bunch crossing, runs its
// sub-sector network (N_PDU -> 16 -> 4 LIF) and sends the 4 local features as AER
// words to the Trigger Processor. There, the Aggregation SNN (N_DAM*4 -> 120 -> 2
// LIF) and the early-exit logic produce one Signal+Noise / Noise-Only verdict per
// bunch crossing. The verdict is broadcast back to every DAM, whose buffer then
// forwards the bunch crossing's raw RDO words to its egress port or flushes them.
//
// The DAM-to-TP optical links and the timing-system broadcast of the verdict are
// external systems; here they are direct lossless connections, and the verdict is
// also brought out on verdict_*. The PDU-link merger of the DAM is external too,
// so hit words (word_*) and raw RDO words (rdo_*) enter on separate ports.
//
// Weight configuration: cfg_node_i selects DAM 0..N_DAM-1 or the TP (N_DAM);
// cfg_layer_i selects the first or second core of that node.
module drich_snn_top
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_DAM     = 30,
  parameter int unsigned N_PDU     = 42,
  parameter int unsigned N_H0      = 16,
  parameter int unsigned N_H1      = 4,
  parameter int unsigned N_AGG     = 120,
  parameter int unsigned T_MAX     = 10,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned RDO_W     = 512,
  parameter int unsigned RDO_DEPTH = 1024
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic      [N_DAM-1:0][N_PDU-1:0]    word_valid_i,
  output logic      [N_DAM-1:0][N_PDU-1:0]    word_ready_o,
  input  pdu_word_t [N_DAM-1:0][N_PDU-1:0]    word_i,
  input  logic      [N_DAM-1:0]               rdo_valid_i,
  output logic      [N_DAM-1:0]               rdo_ready_o,
  input  logic      [N_DAM-1:0][RDO_W-1:0]    rdo_data_i,
  input  logic      [N_DAM-1:0]               rdo_last_i,
  output logic      [N_DAM-1:0]               eg_valid_o,
  input  logic      [N_DAM-1:0]               eg_ready_i,
  output logic      [N_DAM-1:0][RDO_W-1:0]    eg_data_o,
  output logic      [N_DAM-1:0]               eg_last_o,
  input  logic                                cfg_we_i,
  input  logic [7:0]                          cfg_node_i,
  input  logic                                cfg_layer_i,
  input  logic [7:0]                          cfg_row_i,
  input  logic [7:0]                          cfg_col_i,
  input  logic [DATA_W-1:0]                   cfg_data_i,
  input  logic [7:0]                          et_i,
  input  logic                                ee_en_i,
  output logic                                verdict_valid_o,
  output logic                                verdict_signal_o,
  output logic                                verdict_early_o,
  output logic [TS_W-1:0]                     verdict_steps_o,
  output logic      [N_DAM-1:0]               drop_o,
  output logic      [N_DAM-1:0]               spike_o,
  output logic      [N_DAM-1:0]               fwd_bc_o,
  output logic      [N_DAM-1:0]               flush_bc_o,
  output logic      [N_DAM-1:0]               dec_overflow_o
);

  logic      [N_DAM-1:0] feat_valid, feat_ready;
  aer_word_t [N_DAM-1:0] feat_word;

  for (genvar d = 0; d < N_DAM; d++) begin : g_dam
    dam_node #(
      .N_PDU(N_PDU), .N_H0(N_H0), .N_H1(N_H1), .T_MAX(T_MAX), .DATA_W(DATA_W),
      .RDO_W(RDO_W), .RDO_DEPTH(RDO_DEPTH)
    ) u_dam (
      .clk, .rst_n,
      .word_valid_i   (word_valid_i[d]),
      .word_ready_o   (word_ready_o[d]),
      .word_i         (word_i[d]),
      .rdo_valid_i    (rdo_valid_i[d]),
      .rdo_ready_o    (rdo_ready_o[d]),
      .rdo_data_i     (rdo_data_i[d]),
      .rdo_last_i     (rdo_last_i[d]),
      .cfg_we_i       (cfg_we_i && cfg_node_i == 8'(d)),
      .cfg_layer_i, .cfg_row_i, .cfg_col_i, .cfg_data_i,
      .feat_valid_o   (feat_valid[d]),
      .feat_ready_i   (feat_ready[d]),
      .feat_word_o    (feat_word[d]),
      .dec_valid_i    (verdict_valid_o),
      .dec_signal_i   (verdict_signal_o),
      .eg_valid_o     (eg_valid_o[d]),
      .eg_ready_i     (eg_ready_i[d]),
      .eg_data_o      (eg_data_o[d]),
      .eg_last_o      (eg_last_o[d]),
      .drop_o         (drop_o[d]),
      .spike_o        (spike_o[d]),
      .fwd_bc_o       (fwd_bc_o[d]),
      .flush_bc_o     (flush_bc_o[d]),
      .dec_overflow_o (dec_overflow_o[d])
    );
  end

  trigger_processor #(
    .N_LINK(N_DAM), .N_FEAT(N_H1), .N_AGG(N_AGG), .T_MAX(T_MAX), .DATA_W(DATA_W)
  ) u_tp (
    .clk, .rst_n,
    .in_valid_i (feat_valid),
    .in_ready_o (feat_ready),
    .in_word_i  (feat_word),
    .cfg_we_i   (cfg_we_i && cfg_node_i == 8'(N_DAM)),
    .cfg_layer_i, .cfg_row_i, .cfg_col_i, .cfg_data_i,
    .et_i, .ee_en_i,
    .verdict_valid_o, .verdict_signal_o, .verdict_early_o, .verdict_steps_o
  );

endmodule
