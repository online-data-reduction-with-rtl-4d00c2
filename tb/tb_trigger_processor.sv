// tb_trigger_processor -- the Trigger Processor at reduced size: 3 links of 4
// features, 8 hidden neurons, 2 output neurons.
//
// Every link sends random feature spikes (each feature at most once per
// timestep), a SYNC per timestep and an EOE per bunch crossing, with random gaps.
// The run has three epochs of 30 bunch crossings: early exit on with output
// weights that favour Signal, early exit off, and early exit on (ET = 1) with
// output weights that favour Noise. The reference renames the link features,
// runs the two LIF layers per timestep and applies the exit policy.
// Checks: one verdict per bunch crossing with the reference class, early flag and
// timestep count; every kind of verdict (early Signal, early Noise, rate coded)
// must occur.
module tb_trigger_processor;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 3, F = 4, A = 8, T = 10, NEP = 30, NEV = 3 * NEP;
  localparam longint THETA = 64'd1 << 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [L-1:0] in_valid, in_ready;
  aer_word_t [L-1:0] in_word;
  logic cfg_we, cfg_layer, ee_en, v_valid, v_signal, v_early;
  logic [7:0] cfg_row, cfg_col, et;
  logic [31:0] cfg_data;
  logic [TS_W-1:0] v_steps;

  trigger_processor #(.N_LINK(L), .N_FEAT(F), .N_AGG(A), .T_MAX(T)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_word_i(in_word),
    .cfg_we_i(cfg_we), .cfg_layer_i(cfg_layer), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_data_i(cfg_data), .et_i(et), .ee_en_i(ee_en),
    .verdict_valid_o(v_valid), .verdict_signal_o(v_signal), .verdict_early_o(v_early),
    .verdict_steps_o(v_steps));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  aer_word_t stream [L][$];
  int        sbc    [L][$];
  int        spk    [NEV][T][$];   // global feature ids per event and timestep
  longint wa[][], wb[][], va[], vb[];
  bit fa[], fb[];
  int n_verdict = 0, n_early_sig = 0, n_early_noise = 0, n_rate = 0;

  function automatic longint out_weight(input int epoch, input int i, input int n);
    bit favour;
    favour = (epoch == 2) ? (n == 0) : (n == 1);
    return favour ? (64'sd1 <<< 19) + longint'((i % 5) <<< 16) : -(64'sd1 <<< 18);
  endfunction

  task automatic cfg_write(input int layer, input int row, input int col, input longint val);
    @(negedge clk);
    cfg_we = 1; cfg_layer = layer[0]; cfg_row = 8'(row); cfg_col = 8'(col); cfg_data = 32'(val);
  endtask

  task automatic program_out(input int epoch);
    for (int i = 0; i < A; i++)
      for (int n = 0; n < 2; n++) begin
        cfg_write(1, i, n, out_weight(epoch, i, n));
        wb[i][n] = out_weight(epoch, i, n);
      end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Expected verdict of one event: {signal, early, steps}.
  task automatic model(input int ev, input bit ee, input int thr,
                       output bit sig, output bit early, output int steps);
    int n_sig, n_noise;
    bit done;
    n_sig = 0; n_noise = 0; done = 0; sig = 0; early = 0; steps = T;
    foreach (va[n]) va[n] = 0;
    foreach (vb[n]) vb[n] = 0;
    for (int t = 0; t < T; t++) begin
      int hid[$];
      hid.delete();
      lif_step(va, spk[ev][t], wa, 2, THETA, fa);
      for (int n = 0; n < A; n++) if (fa[n]) hid.push_back(n);
      lif_step(vb, hid, wb, 2, THETA, fb);
      n_sig += fb[1];
      n_noise += fb[0];
      if (!done) begin
        if (ee && n_sig >= thr) begin
          sig = 1; early = 1; steps = t + 1; done = 1;
        end else if (ee && n_noise >= thr) begin
          sig = 0; early = 1; steps = t + 1; done = 1;
        end else if (t == T - 1) begin
          sig = (2 * n_sig > n_sig + n_noise); early = 0; steps = T; done = 1;
        end
      end
    end
  endtask

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      int dens;
      dens = (ev % 3 == 0) ? 2 : ((ev % 3 == 1) ? 6 : 20);   // busy, medium, quiet
      for (int t = 0; t < T; t++)
        for (int l = 0; l < L; l++) begin
          for (int f = 0; f < F; f++)
            if ($urandom_range(0, dens - 1) == 0) begin
              stream[l].push_back('{kind: AER_SPIKE, ts: TS_W'(t), nid: NID_W'(f)});
              sbc[l].push_back(ev);
              spk[ev][t].push_back(l * F + f);
            end
          stream[l].push_back('{kind: AER_SYNC, ts: TS_W'(t), nid: '0});
          sbc[l].push_back(ev);
          if (t == T - 1) begin
            stream[l].push_back('{kind: AER_EOE, ts: '0, nid: '0});
            sbc[l].push_back(ev);
          end
        end
    end
  end

  initial begin
    int limit;
    in_valid = '0; in_word = '0;
    cfg_we = 0; cfg_layer = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    ee_en = 1; et = 8'd2;
    wa = new[L * F]; foreach (wa[i]) wa[i] = new[A];
    wb = new[A]; foreach (wb[i]) wb[i] = new[2];
    va = new[A]; vb = new[2]; fa = new[A]; fb = new[2];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < L * F; i++)
      for (int n = 0; n < A; n++) begin
        cfg_write(0, i, n, test_weight(2, i, n));
        wa[i][n] = test_weight(2, i, n);
      end
    program_out(0);
    limit = NEP;
    for (int cyc = 0; cyc < 60000 && n_verdict < NEV; cyc++) begin
      bit acc [L];
      @(negedge clk);
      if (n_verdict == limit && limit < NEV) begin
        // Epoch change once the last event has left the output core.
        repeat (100) @(negedge clk);
        if (limit == NEP) ee_en = 0;
        else begin
          ee_en = 1; et = 8'd1;
          program_out(2);
        end
        limit += NEP;
      end
      for (int l = 0; l < L; l++)
        if (!in_valid[l] && stream[l].size() > 0 && sbc[l][0] < limit && $urandom_range(0, 2) != 0) begin
          in_valid[l] = 1; in_word[l] = stream[l].pop_front(); void'(sbc[l].pop_front());
        end
      #1;
      for (int l = 0; l < L; l++) acc[l] = in_valid[l] && in_ready[l];
      if (v_valid) begin
        bit s, e;
        int st;
        model(n_verdict, ee_en, int'(et), s, e, st);
        check("verdict class", v_signal, s);
        check("verdict early flag", v_early, e);
        check("verdict timesteps", v_steps, st);
        if (v_early && v_signal) n_early_sig++;
        if (v_early && !v_signal) n_early_noise++;
        if (!v_early) n_rate++;
        n_verdict++;
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) if (acc[l]) in_valid[l] = 0;
    end
    repeat (200) @(posedge clk);
    check("one verdict per event", n_verdict, NEV);
    check("early Signal exits seen", n_early_sig > 0, 1);
    check("early Noise exits seen", n_early_noise > 0, 1);
    check("rate-coded verdicts seen", n_rate > 0, 1);
    $display("early_sig %0d early_noise %0d rate %0d", n_early_sig, n_early_noise, n_rate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
