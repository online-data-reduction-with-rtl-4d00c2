// drich_snn_pkg -- types and constants shared by the dRICH spiking-neural-network
// data-reduction pipeline.
//
// A PDU (photo-detection unit, 256 SiPMs) delivers hit words of up to four hits;
// each hit carries the index of the sub-bunch-crossing time bin it fell in. The
// deployed encoder uses 1.27 ns bins, i.e. 8 bins per ~10 ns bunch crossing (BC),
// so a bin index is 3 bits (this width is derived here, not printed in the paper).
//
// All spiking traffic after the encoder is carried as AER (address-event) words:
// a spike (timestep, neuron id), a timestep-synchronisation word that closes
// timestep `ts`, or an end-of-event word that closes the BC. The word layout is a
// choice of this design.
package drich_snn_pkg;

  localparam int BIN_W         = 3;   // sub-BC bin index width (8 bins of 1.27 ns)
  localparam int HITS_PER_WORD = 4;   // hits per input word from the RDO
  localparam int TS_W          = 4;   // timestep field of an AER word (T_max = 10)
  localparam int NID_W         = 8;   // neuron id field of an AER word (up to 256)

  // One hit slot of an input word.
  typedef struct packed {
    logic             valid;
    logic [BIN_W-1:0] bin;
  } hit_t;

  // Input word of one PDU: up to four hits, plus a flag marking the PDU's last
  // word of the current bunch crossing.
  typedef struct packed {
    hit_t [HITS_PER_WORD-1:0] hits;
    logic                     last;
  } pdu_word_t;

  // Spike resolved by the encoder cascade.
  typedef struct packed {
    logic             valid;
    logic [BIN_W-1:0] bin_idx;
  } enc_spike_t;

  typedef enum logic [1:0] {
    AER_SPIKE = 2'd0,   // spike of neuron `nid` in timestep `ts`
    AER_SYNC  = 2'd1,   // timestep `ts` is complete
    AER_EOE   = 2'd2    // end of event: the bunch crossing is complete
  } aer_kind_e;

  typedef struct packed {
    aer_kind_e        kind;
    logic [TS_W-1:0]  ts;
    logic [NID_W-1:0] nid;
  } aer_word_t;

endpackage
