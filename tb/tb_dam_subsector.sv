// tb_dam_subsector -- one full sub-sector (42 PDU encoders, serializer, adapter,
// router, 42->16->4 LIF cores) with test weights. Random bunch crossings are
// generated per PDU (signal-like crossings with same-bin hit pairs, noise-like
// crossings with scattered hits); every PDU stream has its own random gaps.
// Checks: every spike on the internal AER bus is the reference encoder spike of
// that PDU and BC; spikes on the bus plus late drops equal the reference count;
// the feature stream carries, per timestep, exactly the neurons the reference
// LIF layers fire when fed the spikes that reached the bus; T_MAX syncs and one
// end of event per BC. Counts drops, stalls and spikes; each must occur.
module tb_dam_subsector;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 42, H0 = 16, H1 = 4, T = 10, NBC = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] wv, wr;
  pdu_word_t [N-1:0] wd;
  logic cfg_we, cfg_layer, fv, fr, drop, spike;
  logic [7:0] cfg_row, cfg_col;
  logic [31:0] cfg_data;
  aer_word_t fw;

  dam_subsector dut (
    .clk, .rst_n, .word_valid_i(wv), .word_ready_o(wr), .word_i(wd),
    .cfg_we_i(cfg_we), .cfg_layer_i(cfg_layer), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col),
    .cfg_data_i(cfg_data), .feat_valid_o(fv), .feat_ready_i(fr), .feat_word_o(fw),
    .drop_o(drop), .spike_o(spike));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  pdu_word_t words [N][$];
  int exp_enc [NBC][N];
  int exp_nspk [NBC];
  longint w0[][], w1[][], v0[], v1[];
  bit f0[], f1[];
  int bus_spk [T][$];         // spikes of the current BC on the bus, by timestep
  int bc_bus = 0, bc_feat = 0, ts_feat = 0, n_bus = 0, n_drop = 0, n_stall = 0;
  int exp_feat [NBC][T][$];   // neurons of core 1 firing, per BC and timestep
  int got_feat [$];
  int got_bc [T][$];
  int n_feat_spk = 0;

  initial begin
    for (int bc = 0; bc < NBC; bc++) begin
      bit sig;
      sig = (bc % 3 == 0);
      exp_nspk[bc] = 0;
      for (int p = 0; p < N; p++) begin
        enc_state_t s;
        int nw, b;
        s.v = 0; s.t = 0; s.idle = 0;
        exp_enc[bc][p] = -1;
        nw = $urandom_range(1, 2);
        b = sig ? $urandom_range(1, 3) : 0;
        for (int w = 0; w < nw; w++) begin
          pdu_word_t x;
          for (int k = 0; k < 4; k++) begin
            if (sig) b = b + (($urandom_range(0, 3) == 0) ? 1 : 0);
            else b = b + $urandom_range(0, 3);
            if (b > 7) b = 7;
            x.hits[k].valid = sig ? ($urandom_range(0, 2) != 0) : ($urandom_range(0, 3) == 0);
            x.hits[k].bin = BIN_W'(b);
            if (x.hits[k].valid && enc_hit(s, b, 1, 1, 2) && exp_enc[bc][p] < 0) begin
              exp_enc[bc][p] = b;
              exp_nspk[bc]++;
            end
          end
          x.last = (w == nw - 1);
          words[p].push_back(x);
        end
      end
    end
  end

  // Reference LIF layers for one BC, fed with the spikes that reached the bus.
  task automatic model_bc(input int bc);
    foreach (v0[n]) v0[n] = 0;
    foreach (v1[n]) v1[n] = 0;
    for (int t = 0; t < T; t++) begin
      int l1[$];
      lif_step(v0, bus_spk[t], w0, 2, 64'd1 << 20, f0);
      for (int n = 0; n < H0; n++) if (f0[n]) l1.push_back(n);
      lif_step(v1, l1, w1, 2, 64'd1 << 20, f1);
      for (int n = 0; n < H1; n++) if (f1[n]) exp_feat[bc][t].push_back(n);
      bus_spk[t].delete();
    end
  endtask

  initial begin
    wv = '0; wd = '0; fr = 0; cfg_we = 0; cfg_layer = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0;
    w0 = new[N]; foreach (w0[i]) w0[i] = new[H0];
    w1 = new[H0]; foreach (w1[i]) w1[i] = new[H1];
    v0 = new[H0]; v1 = new[H1]; f0 = new[H0]; f1 = new[H1];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < (l == 0 ? N : H0); i++)
        for (int n = 0; n < (l == 0 ? H0 : H1); n++) begin
          @(negedge clk);
          cfg_we = 1; cfg_layer = l[0]; cfg_row = 8'(i); cfg_col = 8'(n);
          cfg_data = 32'(test_weight(l, i, n));
          if (l == 0) w0[i][n] = test_weight(l, i, n); else w1[i][n] = test_weight(l, i, n);
        end
    @(negedge clk);
    cfg_we = 0;
    for (int cyc = 0; cyc < 40000 && bc_feat < NBC; cyc++) begin
      bit acc [N];
      @(negedge clk);
      fr = ($urandom_range(0, 3) != 0);
      for (int p = 0; p < N; p++)
        if (!wv[p] && words[p].size() > 0 && $urandom_range(0, 3) != 0) begin
          wv[p] = 1; wd[p] = words[p].pop_front();
        end
      #1;
      for (int p = 0; p < N; p++) begin
        acc[p] = wv[p] && wr[p];
        if (wv[p] && !wr[p]) n_stall++;
      end
      // Internal AER bus between serializer and adapter.
      n_drop += $countones(dut.u_ser.late);
      if (dut.ser_valid && dut.ser_ready) begin
        if (dut.ser_word.kind == AER_SPIKE) begin
          check("bus spike is the reference spike", exp_enc[bc_bus][dut.ser_word.nid], dut.ser_word.ts);
          bus_spk[dut.ser_word.ts].push_back(dut.ser_word.nid);
          n_bus++;
        end else begin
          int on_bus;
          on_bus = 0;
          for (int t = 0; t < T; t++) on_bus += bus_spk[t].size();
          check("bus + dropped = reference spikes", on_bus + n_drop, exp_nspk[bc_bus]);
          n_drop_total += n_drop;
          n_drop = 0;
          model_bc(bc_bus);
          bc_bus++;
        end
      end
      // Feature output.
      if (fv && fr) begin
        if (fw.kind == AER_SPIKE) begin
          got_feat.push_back(fw.nid);
          check("feature ts", fw.ts, ts_feat);
          n_feat_spk++;
        end else if (fw.kind == AER_SYNC) begin
          check("sync ts", fw.ts, ts_feat);
          got_feat.sort();
          got_bc[ts_feat] = got_feat;
          got_feat.delete();
          ts_feat++;
        end else begin
          check("T_MAX syncs before EOE", ts_feat, T);
          // The bus of this BC is complete by now: compare with the reference.
          check("reference ready", bc_bus > bc_feat, 1);
          for (int t = 0; t < T; t++) begin
            exp_feat[bc_feat][t].sort();
            check("feature spikes of timestep", got_bc[t] == exp_feat[bc_feat][t], 1);
          end
          ts_feat = 0;
          bc_feat++;
        end
      end
      @(posedge clk);
      #1;
      for (int p = 0; p < N; p++) if (acc[p]) wv[p] = 0;
    end
    check("all BCs through", bc_feat, NBC);
    check("encoder spikes seen", n_bus > 100, 1);
    check("input stalls seen", n_stall > 0, 1);
    check("feature spikes seen", n_feat_spk > 50, 1);
    $display("bus spikes %0d drops %0d stalls %0d feature spikes %0d", n_bus, n_drop_total, n_stall, n_feat_spk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int n_drop_total = 0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
