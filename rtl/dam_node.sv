// dam_node -- the data-reduction firmware of one DAM board.
//
// Two paths share the board. The processing path (dam_subsector) encodes the
// sub-sector's PDU hit words and runs the sub-sector spiking network, producing
// the AER feature stream for the Trigger Processor. The readout path
// (rdo_event_buffer) holds the raw RDO words of every bunch crossing until the
// trigger verdict, returned through the timing system, says to forward them to
// the egress link or to flush them.
//
// Interface: per-PDU hit words (word_*), the raw RDO stream (rdo_*), weight
// configuration (cfg_*), the feature output (feat_*), the verdict input
// (dec_valid_i / dec_signal_i, one per bunch crossing in order) and the egress
// stream (eg_*). Statistics pulses: drop_o, spike_o, fwd_bc_o, flush_bc_o.
//
// On the board a merger aggregates the PDU links and feeds both paths; it is not
// part of this design, so the hit words and the raw RDO words enter separately.
module dam_node
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_PDU     = 42,
  parameter int unsigned N_H0      = 16,
  parameter int unsigned N_H1      = 4,
  parameter int unsigned T_MAX     = 10,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned RDO_W     = 512,
  parameter int unsigned RDO_DEPTH = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic      [N_PDU-1:0] word_valid_i,
  output logic      [N_PDU-1:0] word_ready_o,
  input  pdu_word_t [N_PDU-1:0] word_i,
  input  logic                  rdo_valid_i,
  output logic                  rdo_ready_o,
  input  logic [RDO_W-1:0]      rdo_data_i,
  input  logic                  rdo_last_i,
  input  logic                  cfg_we_i,
  input  logic                  cfg_layer_i,
  input  logic [7:0]            cfg_row_i,
  input  logic [7:0]            cfg_col_i,
  input  logic [DATA_W-1:0]     cfg_data_i,
  output logic                  feat_valid_o,
  input  logic                  feat_ready_i,
  output aer_word_t             feat_word_o,
  input  logic                  dec_valid_i,
  input  logic                  dec_signal_i,
  output logic                  eg_valid_o,
  input  logic                  eg_ready_i,
  output logic [RDO_W-1:0]      eg_data_o,
  output logic                  eg_last_o,
  output logic                  drop_o,
  output logic                  spike_o,
  output logic                  fwd_bc_o,
  output logic                  flush_bc_o,
  output logic                  dec_overflow_o
);

  dam_subsector #(
    .N_PDU(N_PDU), .N_H0(N_H0), .N_H1(N_H1), .T_MAX(T_MAX), .DATA_W(DATA_W)
  ) u_sub (
    .clk, .rst_n,
    .word_valid_i, .word_ready_o, .word_i,
    .cfg_we_i, .cfg_layer_i, .cfg_row_i, .cfg_col_i, .cfg_data_i,
    .feat_valid_o, .feat_ready_i, .feat_word_o,
    .drop_o, .spike_o
  );

  rdo_event_buffer #(.DATA_W(RDO_W), .DEPTH(RDO_DEPTH)) u_buf (
    .clk, .rst_n,
    .rdo_valid_i, .rdo_ready_o, .rdo_data_i, .rdo_last_i,
    .dec_valid_i, .dec_signal_i,
    .eg_valid_o, .eg_ready_i, .eg_data_o, .eg_last_o,
    .fwd_bc_o, .flush_bc_o, .dec_overflow_o
  );

endmodule
