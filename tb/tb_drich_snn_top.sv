// tb_drich_snn_top -- end-to-end run of the whole system at its default size:
// 30 DAM boards with 42 PDU streams each, and the Trigger Processor.
//
// Random bunch crossings (BCs) are generated for every PDU: signal-like BCs with
// same-bin hit pairs, noise-like BCs with scattered hits. Two PDUs of every DAM
// are slow streams, so their spikes often come after later bins have been sent
// and are dropped by the serializer. Every DAM also receives 1..3 raw RDO words
// per BC. The run has three phases, with the Trigger Processor output weights
// reprogrammed between them:
//   phase 0: early exit on, output weights favour Signal   (early Signal exits,
//            rate-coded Noise for silent BCs);
//   phase 1: early exit off                                 (rate-coded verdicts);
//   phase 2: early exit on, output weights favour Noise     (early Noise exits).
// Checks:
//   * per DAM and BC, spikes sent plus spikes dropped equal the reference encoder;
//   * every verdict equals a reference computed from the merged feature stream
//     entering the Trigger Processor (reference LIF layers plus the exit policy);
//   * exactly one verdict per BC, in order;
//   * every DAM's egress carries exactly the RDO words of the Signal BCs, in
//     order, and forwards/flushes once per BC; the verdict queue never overflows.
// Mechanism counters (each must be non-zero): encoder spikes, late drops, input
// stalls, feature spikes, early Signal, early Noise, rate-coded verdicts,
// forwarded BCs, flushed BCs, egress backpressure.
module tb_drich_snn_top;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 30, N = 42, H0 = 16, H1 = 4, A = 120, T = 10;
  localparam int NPH = 8;             // BCs per phase
  localparam int NBC = 3 * NPH;
  localparam int W = 512;
  localparam longint THETA = 64'd1 << 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [D-1:0][N-1:0] wv, wr;
  pdu_word_t [D-1:0][N-1:0] wd;
  logic      [D-1:0]        rv, rr, rl, ev, er, el;
  logic      [D-1:0][W-1:0] rd, ed;
  logic                     cfg_we, cfg_layer, ee_en;
  logic [7:0]               cfg_node, cfg_row, cfg_col, et;
  logic [31:0]              cfg_data;
  logic                     v_valid, v_signal, v_early;
  logic [TS_W-1:0]          v_steps;
  logic      [D-1:0]        drop, spike, fwd, flush, dovf;

  drich_snn_top dut (
    .clk, .rst_n,
    .word_valid_i(wv), .word_ready_o(wr), .word_i(wd),
    .rdo_valid_i(rv), .rdo_ready_o(rr), .rdo_data_i(rd), .rdo_last_i(rl),
    .eg_valid_o(ev), .eg_ready_i(er), .eg_data_o(ed), .eg_last_o(el),
    .cfg_we_i(cfg_we), .cfg_node_i(cfg_node), .cfg_layer_i(cfg_layer),
    .cfg_row_i(cfg_row), .cfg_col_i(cfg_col), .cfg_data_i(cfg_data),
    .et_i(et), .ee_en_i(ee_en),
    .verdict_valid_o(v_valid), .verdict_signal_o(v_signal),
    .verdict_early_o(v_early), .verdict_steps_o(v_steps),
    .drop_o(drop), .spike_o(spike), .fwd_bc_o(fwd), .flush_bc_o(flush),
    .dec_overflow_o(dovf));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Stimulus, tagged with its BC so each phase can be released on its own.
  pdu_word_t words [D][N][$];
  int        wbc   [D][N][$];
  logic [W-1:0] rdo_q [D][$];
  bit           rdo_last [D][$];
  int           rdo_bcq [D][$];
  logic [W-1:0] rdo_of [D][NBC][$];
  int exp_enc_n [D][NBC];          // reference encoder spikes per DAM and BC
  int got_enc_n [D][NBC];          // sent + dropped, attributed to the BC in progress
  int enc_bc [D];                  // BC each DAM's encoders are working on

  // Reference state of the Trigger Processor.
  longint wa[][], wb[][], va[], vb[];
  bit fa[], fb[];
  int ts_spk [T][$];
  int exp_sig [$], exp_early [$], exp_steps [$];
  int got_sig [$], got_early [$], got_steps [$];
  int cur_et;
  bit cur_ee;
  int ee_of_bc [NBC], et_of_bc [NBC];
  logic [W-1:0] exp_eg [D][$];
  bit           exp_eg_last [D][$];
  int n_verdict = 0, n_tp_bc = 0;

  // Mechanism counters.
  longint n_spike = 0, n_drop = 0, n_stall = 0, n_feat = 0, n_early_sig = 0, n_early_noise = 0;
  longint n_rate = 0, n_fwd = 0, n_flush = 0, n_egbp = 0, n_eg_words = 0;

  initial begin
    for (int bc = 0; bc < NBC; bc++)
      for (int d = 0; d < D; d++) begin
        bit sig;
        int nr;
        sig = ((bc + d) % 3 == 0) && (bc % 4 != 3);   // every 4th BC silent-ish
        exp_enc_n[d][bc] = 0;
        got_enc_n[d][bc] = 0;
        for (int p = 0; p < N; p++) begin
          enc_state_t s;
          int nw, b;
          bit fired;
          s.v = 0; s.t = 0; s.idle = 0;
          fired = 0;
          nw = $urandom_range(1, 2);
          b = (p < 2) ? 0 : (sig ? $urandom_range(1, 3) : 0);
          for (int w = 0; w < nw; w++) begin
            pdu_word_t x;
            for (int k = 0; k < 4; k++) begin
              if (sig) b = b + (($urandom_range(0, 3) == 0) ? 1 : 0);
              else b = b + $urandom_range(0, 3);
              if (b > 7) b = 7;
              if (bc % 4 == 3) x.hits[k].valid = ($urandom_range(0, 7) == 0);
              else x.hits[k].valid = sig ? ($urandom_range(0, 2) != 0) : ($urandom_range(0, 3) == 0);
              x.hits[k].bin = BIN_W'(b);
              if (x.hits[k].valid && enc_hit(s, b, 1, 1, 2) && !fired) begin
                fired = 1;
                exp_enc_n[d][bc]++;
              end
            end
            x.last = (w == nw - 1);
            words[d][p].push_back(x);
            wbc[d][p].push_back(bc);
          end
        end
        nr = $urandom_range(1, 3);
        for (int w = 0; w < nr; w++) begin
          logic [W-1:0] x;
          x = {$urandom, $urandom, $urandom, $urandom, 384'(0)} | W'(bc * 1000 + d * 10 + w);
          rdo_q[d].push_back(x);
          rdo_last[d].push_back(w == nr - 1);
          rdo_bcq[d].push_back(bc);
          rdo_of[d][bc].push_back(x);
        end
      end
  end

  // Output-layer weights of the Trigger Processor for a phase.
  function automatic longint out_weight(input int phase, input int i, input int n);
    bit favour;
    favour = (phase == 2) ? (n == 0) : (n == 1);
    return favour ? (64'sd1 <<< 19) + longint'((i % 5) <<< 16) : -(64'sd1 <<< 18);
  endfunction

  task automatic cfg_write(input int node, input int layer, input int row, input int col,
                           input longint val);
    @(negedge clk);
    cfg_we = 1; cfg_node = 8'(node); cfg_layer = layer[0];
    cfg_row = 8'(row); cfg_col = 8'(col); cfg_data = 32'(val);
  endtask

  task automatic program_out_layer(input int phase);
    for (int i = 0; i < A; i++)
      for (int n = 0; n < 2; n++) begin
        cfg_write(D, 1, i, n, out_weight(phase, i, n));
        wb[i][n] = out_weight(phase, i, n);
      end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Reference verdict for one BC from the spikes that entered the TP hidden core.
  task automatic model_tp(input int bc);
    int n_sig, n_noise;
    bit done;
    n_sig = 0; n_noise = 0; done = 0;
    foreach (va[n]) va[n] = 0;
    foreach (vb[n]) vb[n] = 0;
    for (int t = 0; t < T; t++) begin
      int hid[$];
      hid.delete();
      lif_step(va, ts_spk[t], wa, 2, THETA, fa);
      for (int n = 0; n < A; n++) if (fa[n]) hid.push_back(n);
      lif_step(vb, hid, wb, 2, THETA, fb);
      n_sig += fb[1];
      n_noise += fb[0];
      ts_spk[t].delete();
      if (!done) begin
        if (ee_of_bc[bc] && n_sig >= et_of_bc[bc]) begin
          exp_sig.push_back(1); exp_early.push_back(1); exp_steps.push_back(t + 1); done = 1;
        end else if (ee_of_bc[bc] && n_noise >= et_of_bc[bc]) begin
          exp_sig.push_back(0); exp_early.push_back(1); exp_steps.push_back(t + 1); done = 1;
        end else if (t == T - 1) begin
          exp_sig.push_back(2 * n_sig > n_sig + n_noise);
          exp_early.push_back(0); exp_steps.push_back(T); done = 1;
        end
      end
    end
  endtask

  int phase = 0;
  bit run_done = 0;
  int bc_limit = NPH;

  initial begin
    wv = '0; wd = '0; rv = '0; rd = '0; rl = '0; er = '0;
    cfg_we = 0; cfg_node = 0; cfg_layer = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    et = 8'd2; ee_en = 1; cur_et = 2; cur_ee = 1;
    wa = new[D * H1]; foreach (wa[i]) wa[i] = new[A];
    wb = new[A]; foreach (wb[i]) wb[i] = new[2];
    va = new[A]; vb = new[2]; fa = new[A]; fb = new[2];
    foreach (enc_bc[d]) enc_bc[d] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Same sub-sector weights on every DAM.
    for (int d = 0; d < D; d++) begin
      for (int i = 0; i < N; i++)
        for (int n = 0; n < H0; n++) cfg_write(d, 0, i, n, test_weight(0, i, n));
      for (int i = 0; i < H0; i++)
        for (int n = 0; n < H1; n++) cfg_write(d, 1, i, n, test_weight(1, i, n));
    end
    for (int i = 0; i < D * H1; i++)
      for (int n = 0; n < A; n++) begin
        cfg_write(D, 0, i, n, test_weight(2, i, n));
        wa[i][n] = test_weight(2, i, n);
      end
    program_out_layer(0);
    for (int bc = 0; bc < NBC; bc++) begin
      ee_of_bc[bc] = (bc / NPH != 1);
      et_of_bc[bc] = 2;
    end

    for (int cyc = 0; cyc < 400000; cyc++) begin
      bit acc [D][N];
      bit racc [D];
      @(negedge clk);
      // Phase change: once every BC of the phase has been decided and drained.
      if (n_verdict == bc_limit && n_tp_bc == bc_limit && bc_limit < NBC) begin
        bit drained;
        drained = 1;
        for (int d = 0; d < D; d++) if (exp_eg[d].size() > 0) drained = 0;
        if (drained) begin
          phase++;
          repeat (200) @(negedge clk);   // let the output core finish the last BC
          ee_en = (phase != 1);
          if (phase == 2) program_out_layer(2);
          @(negedge clk);
          bc_limit += NPH;
        end
      end
      for (int d = 0; d < D; d++) begin
        er[d] = ($urandom_range(0, 3) != 0);
        for (int p = 0; p < N; p++)
          if (!wv[d][p] && words[d][p].size() > 0 && wbc[d][p][0] < bc_limit &&
              ((p < 2) ? ($urandom_range(0, 11) == 0) : ($urandom_range(0, 3) != 0))) begin
            wv[d][p] = 1; wd[d][p] = words[d][p].pop_front(); void'(wbc[d][p].pop_front());
          end
        if (!rv[d] && rdo_q[d].size() > 0 && rdo_bcq[d][0] < bc_limit && $urandom_range(0, 1) == 0) begin
          rv[d] = 1; rd[d] = rdo_q[d].pop_front(); rl[d] = rdo_last[d].pop_front();
          void'(rdo_bcq[d].pop_front());
        end
      end
      #1;
      for (int d = 0; d < D; d++) begin
        racc[d] = rv[d] && rr[d];
        for (int p = 0; p < N; p++) begin
          acc[d][p] = wv[d][p] && wr[d][p];
          if (wv[d][p] && !wr[d][p]) n_stall++;
        end
        // Egress.
        if (ev[d] && !er[d]) n_egbp++;
        if (ev[d] && er[d]) begin
          n_eg_words++;
          if (exp_eg[d].size() == 0) begin
            check("egress word expected", 0, 1);
          end else begin
            check("egress data", ed[d] == exp_eg[d].pop_front(), 1);
            check("egress last", el[d], exp_eg_last[d].pop_front());
          end
        end
        check("verdict queue never overflows", dovf[d], 0);
      end
      // Merged feature stream into the Trigger Processor hidden core.
      if (dut.u_tp.m_valid && dut.u_tp.m_ready) begin
        if (dut.u_tp.m_word.kind == AER_SPIKE) begin
          ts_spk[dut.u_tp.m_word.ts].push_back(int'(dut.u_tp.m_word.nid));
          n_feat++;
        end else if (dut.u_tp.m_word.kind == AER_EOE) begin
          model_tp(n_tp_bc);
          n_tp_bc++;
        end
      end
      // Verdicts.
      if (v_valid) begin
        got_sig.push_back(v_signal); got_early.push_back(v_early); got_steps.push_back(v_steps);
        if (v_early && v_signal) n_early_sig++;
        if (v_early && !v_signal) n_early_noise++;
        if (!v_early) n_rate++;
        for (int d = 0; d < D; d++)
          if (v_signal)
            foreach (rdo_of[d][n_verdict][w]) begin
              exp_eg[d].push_back(rdo_of[d][n_verdict][w]);
              exp_eg_last[d].push_back(w == rdo_of[d][n_verdict].size() - 1);
            end
        n_verdict++;
      end
      while (exp_sig.size() > 0 && got_sig.size() > 0) begin
        check("verdict class", got_sig.pop_front(), exp_sig.pop_front());
        check("verdict early flag", got_early.pop_front(), exp_early.pop_front());
        check("verdict timesteps", got_steps.pop_front(), exp_steps.pop_front());
      end
      @(posedge clk);
      #1;
      for (int d = 0; d < D; d++) begin
        if (racc[d]) rv[d] = 0;
        for (int p = 0; p < N; p++) if (acc[d][p]) wv[d][p] = 0;
      end
      if (n_verdict == NBC && n_tp_bc == NBC && n_fwd + n_flush == D * NBC) begin
        bit drained;
        drained = 1;
        for (int d = 0; d < D; d++) if (exp_eg[d].size() > 0) drained = 0;
        if (drained) break;
      end
    end
    repeat (20) @(posedge clk);
    run_done = 1;
  end

  // Encoder spikes, sent or dropped, belong to the BC the serializer of the DAM
  // is on; it moves to the next BC when the serializer sends the end of event.
  for (genvar d = 0; d < D; d++) begin : g_mon
    always @(posedge clk)
      if (rst_n) begin
        int k;
        k = $countones(dut.g_dam[d].u_dam.u_sub.u_ser.late) + int'(spike[d]);
        n_drop  += $countones(dut.g_dam[d].u_dam.u_sub.u_ser.late);
        n_spike += int'(spike[d]);
        if (enc_bc[d] < NBC) got_enc_n[d][enc_bc[d]] += k;
        if (fwd[d]) n_fwd++;
        if (flush[d]) n_flush++;
        if (dut.g_dam[d].u_dam.u_sub.ser_valid && dut.g_dam[d].u_dam.u_sub.ser_ready &&
            dut.g_dam[d].u_dam.u_sub.ser_word.kind == AER_EOE)
          enc_bc[d] = enc_bc[d] + 1;
      end
  end

  initial begin
    wait (run_done);
    check("one verdict per BC", n_verdict, NBC);
    check("every BC reached the TP", n_tp_bc, NBC);
    for (int d = 0; d < D; d++) begin
      check("egress drained", exp_eg[d].size(), 0);
      for (int bc = 0; bc < NBC; bc++)
        check("sent + dropped = reference encoder spikes", got_enc_n[d][bc], exp_enc_n[d][bc]);
    end
    check("forward/flush pulses per BC and DAM", n_fwd + n_flush, D * NBC);
    check("encoder spikes seen", n_spike > 0, 1);
    check("late drops seen", n_drop > 0, 1);
    check("input stalls seen", n_stall > 0, 1);
    check("feature spikes seen", n_feat > 0, 1);
    check("early Signal exits seen", n_early_sig > 0, 1);
    check("early Noise exits seen", n_early_noise > 0, 1);
    check("rate-coded verdicts seen", n_rate > 0, 1);
    check("forwarded BCs seen", n_fwd > 0, 1);
    check("flushed BCs seen", n_flush > 0, 1);
    check("egress backpressure seen", n_egbp > 0, 1);
    $display("spikes %0d drops %0d stalls %0d features %0d early_sig %0d early_noise %0d rate %0d fwd %0d flush %0d eg_bp %0d eg_words %0d",
             n_spike, n_drop, n_stall, n_feat, n_early_sig, n_early_noise, n_rate, n_fwd, n_flush, n_egbp, n_eg_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (120000) @(posedge clk);
    failures++;
    $display("watchdog: verdicts %0d tp %0d", n_verdict, n_tp_bc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
