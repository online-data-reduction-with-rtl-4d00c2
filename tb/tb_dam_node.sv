// tb_dam_node -- one DAM board at reduced size: 6 PDU streams, 8 -> 4 LIF
// neurons, 64-bit RDO words and a 32-word RDO buffer.
//
// Random bunch crossings (BCs) go into the PDU streams (PDU 0 is a slow stream,
// so its spikes are often late and dropped) and 1..4 raw RDO words per BC into
// the RDO port. When the feature stream has delivered the end of event of a BC,
// the testbench answers with a random verdict for it, as the Trigger Processor
// would. Checks: per BC, spikes sent plus spikes dropped equal the reference
// encoder; T_MAX SYNCs per BC on the feature output; the egress carries exactly
// the RDO words of the Signal BCs, in order and with their last flags;
// one forward or flush pulse per BC; the verdict queue never overflows.
// Mechanism counters (each must be non-zero): spikes, late drops, input stalls,
// RDO backpressure (full buffer), forwarded BCs, flushed BCs.
module tb_dam_node;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 6, H0 = 8, H1 = 4, T = 10, NBC = 150, W = 64, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] wv, wr;
  pdu_word_t [N-1:0] wd;
  logic rv, rr, rl, ev, er, el, cfg_we, cfg_layer, fv, fr, dv, ds;
  logic drop, spike, fwd, flush, dovf;
  logic [W-1:0] rd, ed;
  logic [7:0] cfg_row, cfg_col;
  logic [31:0] cfg_data;
  aer_word_t fw;

  dam_node #(.N_PDU(N), .N_H0(H0), .N_H1(H1), .T_MAX(T), .RDO_W(W), .RDO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .word_valid_i(wv), .word_ready_o(wr), .word_i(wd),
    .rdo_valid_i(rv), .rdo_ready_o(rr), .rdo_data_i(rd), .rdo_last_i(rl),
    .cfg_we_i(cfg_we), .cfg_layer_i(cfg_layer), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_data_i(cfg_data), .feat_valid_o(fv), .feat_ready_i(fr), .feat_word_o(fw),
    .dec_valid_i(dv), .dec_signal_i(ds),
    .eg_valid_o(ev), .eg_ready_i(er), .eg_data_o(ed), .eg_last_o(el),
    .drop_o(drop), .spike_o(spike), .fwd_bc_o(fwd), .flush_bc_o(flush), .dec_overflow_o(dovf));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  pdu_word_t words [N][$];
  logic [W-1:0] rdo_q [$];
  bit           rdo_l [$];
  logic [W-1:0] rdo_of [NBC][$];
  int exp_nspk [NBC], got_nspk [NBC];
  logic [W-1:0] exp_eg [$];
  bit           exp_eg_last [$];
  int enc_bc = 0, feat_bc = 0, n_sync = 0, n_dec = 0;
  int n_spike = 0, n_drop = 0, n_stall = 0, n_rdo_bp = 0, n_fwd = 0, n_flush = 0, n_sig = 0;

  initial begin
    for (int bc = 0; bc < NBC; bc++) begin
      bit sig;
      int nr;
      sig = (bc % 2 == 0);
      exp_nspk[bc] = 0;
      got_nspk[bc] = 0;
      for (int p = 0; p < N; p++) begin
        enc_state_t s;
        int nw, b;
        bit fired;
        s.v = 0; s.t = 0; s.idle = 0; fired = 0;
        nw = $urandom_range(1, 2);
        b = (p == 0) ? 0 : (sig ? $urandom_range(1, 3) : 0);
        for (int w = 0; w < nw; w++) begin
          pdu_word_t x;
          for (int k = 0; k < 4; k++) begin
            if (sig) b = b + (($urandom_range(0, 3) == 0) ? 1 : 0);
            else b = b + $urandom_range(0, 3);
            if (b > 7) b = 7;
            x.hits[k].valid = sig ? ($urandom_range(0, 2) != 0) : ($urandom_range(0, 3) == 0);
            x.hits[k].bin = BIN_W'(b);
            if (x.hits[k].valid && enc_hit(s, b, 1, 1, 2) && !fired) begin
              fired = 1;
              exp_nspk[bc]++;
            end
          end
          x.last = (w == nw - 1);
          words[p].push_back(x);
        end
      end
      nr = $urandom_range(1, 4);
      for (int w = 0; w < nr; w++) begin
        logic [W-1:0] x;
        x = {$urandom, 32'(bc * 16 + w)};
        rdo_q.push_back(x);
        rdo_l.push_back(w == nr - 1);
        rdo_of[bc].push_back(x);
      end
    end
  end

  initial begin
    wv = '0; wd = '0; rv = 0; rd = '0; rl = 0; er = 0; fr = 0; dv = 0; ds = 0;
    cfg_we = 0; cfg_layer = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < (l == 0 ? N : H0); i++)
        for (int n = 0; n < (l == 0 ? H0 : H1); n++) begin
          @(negedge clk);
          cfg_we = 1; cfg_layer = l[0]; cfg_row = 8'(i); cfg_col = 8'(n);
          cfg_data = 32'(test_weight(l, i, n));
        end
    @(negedge clk);
    cfg_we = 0;
    for (int cyc = 0; cyc < 80000; cyc++) begin
      bit acc [N];
      bit racc;
      @(negedge clk);
      dv = 0;
      fr = ($urandom_range(0, 3) != 0);
      // The egress is slow for a while, so the RDO buffer fills up.
      er = (cyc > 3000 && cyc < 6000) ? 1'b0 : ($urandom_range(0, 2) != 0);
      for (int p = 0; p < N; p++)
        if (!wv[p] && words[p].size() > 0 && ((p == 0) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 3) != 0))) begin
          wv[p] = 1; wd[p] = words[p].pop_front();
        end
      if (!rv && rdo_q.size() > 0 && $urandom_range(0, 1) == 0) begin
        rv = 1; rd = rdo_q.pop_front(); rl = rdo_l.pop_front();
      end
      // One verdict per BC whose features have been sent.
      if (n_dec < feat_bc && n_dec < n_fwd + n_flush + 12 && $urandom_range(0, 3) == 0) begin
        dv = 1;
        ds = ($urandom_range(0, 2) == 0);
        if (ds) begin
          n_sig++;
          foreach (rdo_of[n_dec][w]) begin
            exp_eg.push_back(rdo_of[n_dec][w]);
            exp_eg_last.push_back(w == rdo_of[n_dec].size() - 1);
          end
        end
        n_dec++;
      end
      #1;
      racc = rv && rr;
      if (rv && !rr) n_rdo_bp++;
      for (int p = 0; p < N; p++) begin
        acc[p] = wv[p] && wr[p];
        if (wv[p] && !wr[p]) n_stall++;
      end
      if (fv && fr) begin
        if (fw.kind == AER_SYNC) n_sync++;
        if (fw.kind == AER_EOE) begin
          check("T_MAX syncs per BC", n_sync, T);
          n_sync = 0;
          feat_bc++;
        end
      end
      if (ev && er) begin
        if (exp_eg.size() == 0) check("egress word expected", 0, 1);
        else begin
          check("egress data", ed == exp_eg.pop_front(), 1);
          check("egress last", el, exp_eg_last.pop_front());
        end
      end
      if (fwd) n_fwd++;
      if (flush) n_flush++;
      check("verdict queue never overflows", dovf, 0);
      @(posedge clk);
      #1;
      if (racc) rv = 0;
      for (int p = 0; p < N; p++) if (acc[p]) wv[p] = 0;
      if (n_dec == NBC && exp_eg.size() == 0 && n_fwd + n_flush == NBC) break;
    end
    repeat (50) @(posedge clk);
    check("all verdicts given", n_dec, NBC);
    check("egress drained", exp_eg.size(), 0);
    check("forwarded BCs", n_fwd, n_sig);
    check("flushed BCs", n_flush, NBC - n_sig);
    for (int bc = 0; bc < NBC; bc++) check("sent + dropped = reference spikes", got_nspk[bc], exp_nspk[bc]);
    check("spikes seen", n_spike > 0, 1);
    check("late drops seen", n_drop > 0, 1);
    check("input stalls seen", n_stall > 0, 1);
    check("RDO backpressure seen", n_rdo_bp > 0, 1);
    check("forwards seen", n_fwd > 0, 1);
    check("flushes seen", n_flush > 0, 1);
    $display("spikes %0d drops %0d stalls %0d rdo_bp %0d fwd %0d flush %0d",
             n_spike, n_drop, n_stall, n_rdo_bp, n_fwd, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Spikes sent or dropped belong to the BC the serializer is working on.
  always @(posedge clk)
    if (rst_n) begin
      int k;
      k = $countones(dut.u_sub.u_ser.late) + int'(spike);
      n_drop  += $countones(dut.u_sub.u_ser.late);
      n_spike += int'(spike);
      if (enc_bc < NBC) got_nspk[enc_bc] += k;
      if (dut.u_sub.ser_valid && dut.u_sub.ser_ready && dut.u_sub.ser_word.kind == AER_EOE)
        enc_bc = enc_bc + 1;
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
