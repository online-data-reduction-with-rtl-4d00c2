// aigor_lif_core -- one neuromorphic core hosting one fully connected LIF layer.
//
// The core holds an N_IN x N_OUT weight memory (signed fixed point, FRAC_W
// fractional bits; Q12.20 by default) and, per neuron, a membrane V and an
// input-current accumulator I. It is driven by AER words:
//   SPIKE(nid)  I[n] += w[nid][n] for every neuron n (one cycle per spike);
//               ids >= N_IN are ignored.
//   SYNC(ts)    end of timestep ts: every neuron is updated with the LIF rule
//                 V <- alpha*V + I,  alpha = 1 - 2^-LEAK_K  (V - (V >>> LEAK_K))
//               fires if V > THETA, and a neuron that fired is reset to 0; I is
//               cleared. The fired neurons are then sent out one per cycle as
//               SPIKE(ts, n), picked round-robin, followed by SYNC(ts).
//   EOE         end of event: V and I are cleared and EOE is passed on.
// All arithmetic saturates at the DATA_W-bit range.
//
// Interface: valid/ready AER in and out (output registered); a weight write port
// (cfg_we_i, cfg_row_i = presynaptic index, cfg_col_i = neuron, cfg_data_i).
// Timing: input is accepted one word per cycle while the core is idle; after a
// SYNC the core spends one cycle per fired neuron plus one for its own SYNC.
//
// Follows the paper: one core per LIF layer, weights in memory, per-neuron state
// updated with the LIF equation on timestep boundaries, round-robin output
// arbitration, Q12.20 arithmetic of the hardware testbed. Choices of this design:
// the all-neurons-in-parallel update (the paper's cores split neurons over
// "workers"), the register-array weight memory and its write port, the leak and
// threshold defaults (trained values are not published), the separate current
// accumulator and the reset at end of event.
module aigor_lif_core
  import drich_snn_pkg::*;
#(
  parameter int unsigned N_IN   = 42,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned FRAC_W = 20,
  parameter int unsigned LEAK_K = 2,
  parameter logic signed [DATA_W-1:0] THETA = DATA_W'(1) <<< FRAC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  aer_word_t         in_word_i,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output aer_word_t         out_word_o,
  input  logic              cfg_we_i,
  input  logic [7:0]        cfg_row_i,
  input  logic [7:0]        cfg_col_i,
  input  logic [DATA_W-1:0] cfg_data_i
);

  localparam logic signed [DATA_W:0] SMAX = ((DATA_W+1)'(1) << (DATA_W-1)) - 1;
  localparam logic signed [DATA_W:0] SMIN = -SMAX - 1;
  localparam int unsigned OIDX_W = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned IIDX_W = (N_IN > 1) ? $clog2(N_IN) : 1;

  typedef enum logic {S_IDLE, S_EMIT} state_e;

  logic signed [DATA_W-1:0] weight [N_IN][N_OUT];
  logic signed [DATA_W-1:0] vmem   [N_OUT];
  logic signed [DATA_W-1:0] cur    [N_OUT];
  logic [N_OUT-1:0]         fired_q;
  logic [OIDX_W-1:0]        rr_q;
  logic [TS_W-1:0]          ts_q;
  state_e                   state_q;

  function automatic logic signed [DATA_W-1:0] sat(input logic signed [DATA_W:0] x);
    if (x > SMAX)      return SMAX[DATA_W-1:0];
    else if (x < SMIN) return SMIN[DATA_W-1:0];
    else               return x[DATA_W-1:0];
  endfunction

  // Weight memory write port.
  always_ff @(posedge clk) begin
    if (cfg_we_i && cfg_row_i < 8'(N_IN) && cfg_col_i < 8'(N_OUT))
      weight[IIDX_W'(cfg_row_i)][OIDX_W'(cfg_col_i)] <= cfg_data_i;
  end

  logic can_push;
  assign can_push   = !out_valid_o || out_ready_i;
  // Only an end of event is passed straight on, and it waits for a free output
  // register (not for out_ready_i, so no combinational path runs input to output).
  assign in_ready_o = (state_q == S_IDLE) && (in_word_i.kind != AER_EOE || !out_valid_o);
  wire   accept     = in_valid_i && in_ready_o;

  // Round-robin pick among fired neurons, starting at rr_q.
  logic              pick_valid;
  logic [OIDX_W-1:0] pick;
  always_comb begin
    pick_valid = 1'b0;
    pick       = '0;
    for (int j = N_OUT - 1; j >= 0; j--) begin
      if (fired_q[OIDX_W'((32'(rr_q) + 32'(j)) % N_OUT)]) begin
        pick_valid = 1'b1;
        pick       = OIDX_W'((32'(rr_q) + 32'(j)) % N_OUT);
      end
    end
  end

  // Leaky integration of every neuron, applied when a timestep closes.
  logic signed [DATA_W-1:0] v_next [N_OUT];
  always_comb begin
    for (int n = 0; n < N_OUT; n++)
      v_next[n] = sat((DATA_W+1)'(vmem[n]) - (DATA_W+1)'(vmem[n] >>> LEAK_K) + (DATA_W+1)'(cur[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      fired_q     <= '0;
      rr_q        <= '0;
      ts_q        <= '0;
      out_valid_o <= 1'b0;
      out_word_o  <= '0;
      for (int n = 0; n < N_OUT; n++) begin
        vmem[n] <= '0;
        cur[n]  <= '0;
      end
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      case (state_q)
        S_IDLE: if (accept) begin
          case (in_word_i.kind)
            AER_SPIKE: if (in_word_i.nid < NID_W'(N_IN)) begin
              for (int n = 0; n < N_OUT; n++)
                cur[n] <= sat((DATA_W+1)'(cur[n]) + (DATA_W+1)'(weight[IIDX_W'(in_word_i.nid)][n]));
            end
            AER_SYNC: begin
              for (int n = 0; n < N_OUT; n++) begin
                fired_q[n] <= (v_next[n] > THETA);
                vmem[n]    <= (v_next[n] > THETA) ? '0 : v_next[n];
                cur[n]     <= '0;
              end
              ts_q    <= in_word_i.ts;
              state_q <= S_EMIT;
            end
            default: begin  // end of event
              for (int n = 0; n < N_OUT; n++) begin
                vmem[n] <= '0;
                cur[n]  <= '0;
              end
              out_valid_o <= 1'b1;
              out_word_o  <= '{kind: AER_EOE, ts: '0, nid: '0};
            end
          endcase
        end
        S_EMIT: if (can_push) begin
          if (pick_valid) begin
            out_valid_o   <= 1'b1;
            out_word_o    <= '{kind: AER_SPIKE, ts: ts_q, nid: NID_W'(pick)};
            fired_q[pick] <= 1'b0;
            rr_q          <= (32'(pick) == N_OUT - 1) ? '0 : pick + 1'b1;
          end else begin
            out_valid_o <= 1'b1;
            out_word_o  <= '{kind: AER_SYNC, ts: ts_q, nid: '0};
            state_q     <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_word_o));

endmodule
