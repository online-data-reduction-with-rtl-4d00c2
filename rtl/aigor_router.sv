// aigor_router -- packet-switched AER router connecting the blocks of one
// sub-sector (encoder, SNN cores, and the outgoing feature link).
//
// Every port p has an input (words injected by the block attached to p) and an
// output (words delivered to that block). A word entering at port p is switched
// to output port ROUTE[p]; ROUTE[p] < 0 means words from p are discarded. Each
// output port owns a one-word register and, when several inputs target it,
// grants them round-robin. Spike, timestep-sync and end-of-event words are
// switched alike, so the order of words from one source is preserved.
//
// Default table (feed-forward sub-sector): port 0 encoder -> port 1 core 0 ->
// port 2 core 1 -> port 3 outgoing features. Port 3 injects nothing in this
// table, so its input ready is constantly 1 (discarding) by design.
// Timing: a word crosses the router in one cycle; each output moves one word per
// cycle. The paper names this router and its ports and says it switches the
// encoded stream to the two cores and onwards; the static route table, the
// per-output register and the round-robin arbitration are choices of this design.
module aigor_router
  import drich_snn_pkg::*;
#(
  parameter int N_PORTS = 4,
  parameter int ROUTE [N_PORTS] = '{1, 2, 3, -1}
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic      [N_PORTS-1:0] in_valid_i,
  output logic      [N_PORTS-1:0] in_ready_o,
  input  aer_word_t [N_PORTS-1:0] in_word_i,
  output logic      [N_PORTS-1:0] out_valid_o,
  input  logic      [N_PORTS-1:0] out_ready_i,
  output aer_word_t [N_PORTS-1:0] out_word_o
);

  localparam int unsigned PIDX_W = (N_PORTS > 1) ? $clog2(N_PORTS) : 1;

  logic [N_PORTS-1:0][PIDX_W-1:0] rr_q;      // per output: first input to consider
  logic [N_PORTS-1:0][N_PORTS-1:0] grant;    // [output][input]
  logic [N_PORTS-1:0]              drop;

  always_comb begin
    int src;
    src        = 0;
    grant      = '0;
    in_ready_o = '0;
    drop       = '0;
    for (int i = 0; i < N_PORTS; i++)
      if (ROUTE[i] < 0 || ROUTE[i] >= N_PORTS) drop[i] = 1'b1;
    for (int o = 0; o < N_PORTS; o++) begin
      if (!out_valid_o[o] || out_ready_i[o]) begin
        for (int j = N_PORTS - 1; j >= 0; j--) begin
          src = (int'(rr_q[o]) + j) % N_PORTS;
          if (in_valid_i[src] && ROUTE[src] == o) begin
            grant[o]      = '0;
            grant[o][src] = 1'b1;
          end
        end
      end
    end
    for (int i = 0; i < N_PORTS; i++) begin
      in_ready_o[i] = drop[i];
      for (int o = 0; o < N_PORTS; o++)
        if (grant[o][i]) in_ready_o[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_o <= '0;
      out_word_o  <= '0;
      rr_q        <= '0;
    end else begin
      for (int o = 0; o < N_PORTS; o++) begin
        if (out_valid_o[o] && out_ready_i[o]) out_valid_o[o] <= 1'b0;
        for (int i = 0; i < N_PORTS; i++) begin
          if (grant[o][i]) begin
            out_valid_o[o] <= 1'b1;
            out_word_o[o]  <= in_word_i[i];
            rr_q[o]        <= PIDX_W'((i + 1) % N_PORTS);
          end
        end
      end
    end
  end

  for (genvar o = 0; o < N_PORTS; o++) begin : g_hs
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid_o[o] && !out_ready_i[o] |=> out_valid_o[o] && $stable(out_word_o[o]));
  end

endmodule
