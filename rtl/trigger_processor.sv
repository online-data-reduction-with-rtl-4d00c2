// trigger_processor -- the Aggregation SNN and trigger evaluation on the Trigger
// Processor board.
//
// The feature merger concatenates the N_LINK x N_FEAT sub-sector features into
// one AER stream. Core A (N_LINK*N_FEAT -> N_AGG LIF neurons) and core B
// (N_AGG -> 2 LIF neurons) run the Aggregation SNN, one core per layer. The
// early-exit decision unit turns the two output neurons into one verdict per
// bunch crossing, which the timing system distributes to every DAM.
//
// Interface: per-link valid/ready AER input; weight writes with cfg_layer_i
// selecting core A (0) or core B (1); et_i / ee_en_i early-exit settings; the
// verdict pulse with class, early flag and timesteps used.
// Follows the paper: 120 -> 120 -> 2 LIF layers, one core per layer, early exit.
// The direct core-to-core connection (no router) is a choice of this design.
module trigger_processor
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_LINK = 30,
  parameter int unsigned N_FEAT = 4,
  parameter int unsigned N_AGG  = 120,
  parameter int unsigned N_CLS  = 2,
  parameter int unsigned T_MAX  = 10,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned FRAC_W = 20,
  parameter int unsigned LEAK_K = 2,
  parameter logic signed [DATA_W-1:0] THETA = DATA_W'(1) <<< FRAC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic      [N_LINK-1:0] in_valid_i,
  output logic      [N_LINK-1:0] in_ready_o,
  input  aer_word_t [N_LINK-1:0] in_word_i,
  input  logic                   cfg_we_i,
  input  logic                   cfg_layer_i,
  input  logic [7:0]             cfg_row_i,
  input  logic [7:0]             cfg_col_i,
  input  logic [DATA_W-1:0]      cfg_data_i,
  input  logic [7:0]             et_i,
  input  logic                   ee_en_i,
  output logic                   verdict_valid_o,
  output logic                   verdict_signal_o,
  output logic                   verdict_early_o,
  output logic [TS_W-1:0]        verdict_steps_o
);

  logic      m_valid, m_ready, a_valid, a_ready, b_valid, b_ready;
  aer_word_t m_word, a_word, b_word;

  tp_feature_merger #(.N_LINK(N_LINK), .N_FEAT(N_FEAT)) u_merge (
    .clk, .rst_n,
    .in_valid_i, .in_ready_o, .in_word_i,
    .out_valid_o (m_valid), .out_ready_i (m_ready), .out_word_o (m_word)
  );

  aigor_lif_core #(
    .N_IN(N_LINK*N_FEAT), .N_OUT(N_AGG), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .LEAK_K(LEAK_K), .THETA(THETA)
  ) u_core_hidden (
    .clk, .rst_n,
    .in_valid_i (m_valid), .in_ready_o (m_ready), .in_word_i (m_word),
    .out_valid_o (a_valid), .out_ready_i (a_ready), .out_word_o (a_word),
    .cfg_we_i (cfg_we_i && !cfg_layer_i), .cfg_row_i, .cfg_col_i, .cfg_data_i
  );

  aigor_lif_core #(
    .N_IN(N_AGG), .N_OUT(N_CLS), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .LEAK_K(LEAK_K), .THETA(THETA)
  ) u_core_out (
    .clk, .rst_n,
    .in_valid_i (a_valid), .in_ready_o (a_ready), .in_word_i (a_word),
    .out_valid_o (b_valid), .out_ready_i (b_ready), .out_word_o (b_word),
    .cfg_we_i (cfg_we_i && cfg_layer_i), .cfg_row_i, .cfg_col_i, .cfg_data_i
  );

  early_exit_decision #(.T_MAX(T_MAX)) u_dec (
    .clk, .rst_n,
    .in_valid_i (b_valid), .in_ready_o (b_ready), .in_word_i (b_word),
    .et_i, .ee_en_i,
    .verdict_valid_o, .verdict_signal_o, .verdict_early_o, .verdict_steps_o
  );

endmodule
