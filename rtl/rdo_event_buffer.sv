// rdo_event_buffer -- DAM-side buffer that holds the raw readout (RDO) data of
// each bunch crossing until the trigger verdict for it arrives.
//
// Raw RDO words (DATA_W bits, `last` marks the final word of a bunch crossing)
// are written into a FIFO of DEPTH words. Verdicts arrive one per bunch crossing,
// in bunch-crossing order, and wait in a small queue. A three-state FSM at the
// FIFO output takes the oldest verdict: on Signal+Noise it forwards the words of
// the oldest buffered bunch crossing to the egress port (towards the 100 GbE
// link), on Noise-Only it flushes them, one word per cycle in both cases, up to
// and including the `last` word, then takes the next verdict. fwd_bc_o and
// flush_bc_o pulse once per forwarded and flushed bunch crossing.
//
// Backpressure: rdo_ready_o falls when the FIFO is full; the egress honours
// eg_ready_i. The verdict input has no backpressure; a verdict arriving with the
// queue full is lost and sets the sticky dec_overflow_o.
//
// Follows the paper: a FIFO holding raw RDO data pending the verdict, forwarding
// on positive and flushing on negative verdicts, 512-bit words. Choices of this
// design: the depths, the `last` framing, the verdict queue and the FSM.
module rdo_event_buffer #(
  parameter int unsigned DATA_W    = 512,
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned DEC_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rdo_valid_i,
  output logic              rdo_ready_o,
  input  logic [DATA_W-1:0] rdo_data_i,
  input  logic              rdo_last_i,
  input  logic              dec_valid_i,
  input  logic              dec_signal_i,
  output logic              eg_valid_o,
  input  logic              eg_ready_i,
  output logic [DATA_W-1:0] eg_data_o,
  output logic              eg_last_o,
  output logic              fwd_bc_o,
  output logic              flush_bc_o,
  output logic              dec_overflow_o
);

  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned DAW = $clog2(DEC_DEPTH);

  typedef enum logic [1:0] {S_WAIT, S_FWD, S_FLUSH} state_e;

  // Word FIFO.
  logic [DATA_W:0] mem [DEPTH];
  logic [AW:0]     wr_q, rd_q;
  logic            fifo_empty, fifo_full, push, pop;
  assign fifo_empty  = (wr_q == rd_q);
  assign fifo_full   = (wr_q[AW-1:0] == rd_q[AW-1:0]) && (wr_q[AW] != rd_q[AW]);
  assign rdo_ready_o = !fifo_full;
  assign push        = rdo_valid_i && rdo_ready_o;

  always_ff @(posedge clk) begin
    if (push) mem[wr_q[AW-1:0]] <= {rdo_last_i, rdo_data_i};
  end

  // Verdict queue.
  logic [DEC_DEPTH-1:0] dq;
  logic [DAW:0]         dwr_q, drd_q;
  logic                 dq_empty, dq_full, dq_pop;
  assign dq_empty = (dwr_q == drd_q);
  assign dq_full  = (dwr_q[DAW-1:0] == drd_q[DAW-1:0]) && (dwr_q[DAW] != drd_q[DAW]);

  state_e          state_q;
  logic [DATA_W:0] head;
  assign head = mem[rd_q[AW-1:0]];

  always_comb begin
    pop    = 1'b0;
    dq_pop = 1'b0;
    case (state_q)
      S_WAIT:  dq_pop = !dq_empty;
      S_FWD:   pop    = !fifo_empty && eg_ready_i;
      S_FLUSH: pop    = !fifo_empty;
      default: ;
    endcase
  end

  assign eg_valid_o = (state_q == S_FWD) && !fifo_empty;
  assign eg_data_o  = head[DATA_W-1:0];
  assign eg_last_o  = head[DATA_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q           <= '0;
      rd_q           <= '0;
      dwr_q          <= '0;
      drd_q          <= '0;
      dq             <= '0;
      state_q        <= S_WAIT;
      fwd_bc_o       <= 1'b0;
      flush_bc_o     <= 1'b0;
      dec_overflow_o <= 1'b0;
    end else begin
      fwd_bc_o   <= 1'b0;
      flush_bc_o <= 1'b0;
      if (push) wr_q <= wr_q + 1'b1;
      if (pop)  rd_q <= rd_q + 1'b1;
      if (dec_valid_i) begin
        if (dq_full) dec_overflow_o <= 1'b1;
        else begin
          dq[dwr_q[DAW-1:0]] <= dec_signal_i;
          dwr_q              <= dwr_q + 1'b1;
        end
      end
      if (dq_pop) begin
        drd_q   <= drd_q + 1'b1;
        state_q <= dq[drd_q[DAW-1:0]] ? S_FWD : S_FLUSH;
      end
      if (pop && head[DATA_W]) begin
        state_q <= S_WAIT;
        if (state_q == S_FWD) fwd_bc_o   <= 1'b1;
        else                  flush_bc_o <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   eg_valid_o && !eg_ready_i |=> eg_valid_o && $stable(eg_data_o));

endmodule
