// tb_tp_feature_merger -- three links (4 features each) send independent random
// streams (spikes per timestep, SYNC per timestep, EOE per event) with random
// gaps; the output sees random backpressure. Checks: between two output SYNCs
// the spikes are exactly the union of the links' spikes for that timestep, with
// ids renamed to link*4 + id; one SYNC per timestep in order, one EOE per event;
// no output SYNC before every link delivered its own.
module tb_tp_feature_merger;
  import drich_snn_pkg::*;

  localparam int L = 3, F = 4, T = 10, NEV = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [L-1:0] in_valid, in_ready;
  aer_word_t [L-1:0] in_word;
  logic out_valid, out_ready;
  aer_word_t out_word;

  tp_feature_merger #(.N_LINK(L), .N_FEAT(F)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_word_i(in_word),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_word_o(out_word));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  aer_word_t stream [L][$];
  int exp_cnt [NEV][T][L*F];      // expected spikes per event, timestep, global id
  int got_cnt [L*F];
  int ev_o = 0, ts_o = 0, n_sync = 0, n_eoe = 0;
  int synced_links [L];           // SYNCs accepted per link

  initial begin
    for (int ev = 0; ev < NEV; ev++)
      for (int t = 0; t < T; t++) begin
        for (int l = 0; l < L; l++) begin
          int n;
          n = $urandom_range(0, 3);
          for (int i = 0; i < n; i++) begin
            int id;
            id = $urandom_range(0, F - 1);
            stream[l].push_back('{kind: AER_SPIKE, ts: TS_W'(t), nid: NID_W'(id)});
            exp_cnt[ev][t][l * F + id]++;
          end
          stream[l].push_back('{kind: AER_SYNC, ts: TS_W'(t), nid: '0});
          if (t == T - 1) stream[l].push_back('{kind: AER_EOE, ts: '0, nid: '0});
        end
      end
  end

  initial begin
    in_valid = '0; in_word = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit acc [L];
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      for (int l = 0; l < L; l++)
        if (!in_valid[l] && stream[l].size() > 0 && $urandom_range(0, 2) != 0) begin
          in_valid[l] = 1; in_word[l] = stream[l].pop_front();
        end
      #1;
      if (out_valid && out_ready) begin
        if (out_word.kind == AER_SPIKE) begin
          check("spike ts", out_word.ts, ts_o);
          if (out_word.nid < L * F) got_cnt[out_word.nid]++;
        end else if (out_word.kind == AER_SYNC) begin
          check("sync ts", out_word.ts, ts_o);
          for (int l = 0; l < L; l++) check("all links synced first", synced_links[l] > n_sync, 1);
          for (int g = 0; g < L * F; g++) begin
            check("spike set of timestep", got_cnt[g], exp_cnt[ev_o][ts_o][g]);
            got_cnt[g] = 0;
          end
          n_sync++;
          ts_o++;
        end else begin
          check("EOE after T syncs", ts_o, T);
          n_eoe++; ev_o++; ts_o = 0;
        end
      end
      for (int l = 0; l < L; l++) begin
        acc[l] = in_valid[l] && in_ready[l];
        if (acc[l] && in_word[l].kind == AER_SYNC) synced_links[l]++;
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) if (acc[l]) in_valid[l] = 0;
      if (n_eoe == NEV) break;
    end
    check("all events out", n_eoe, NEV);
    check("all syncs out", n_sync, NEV * T);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
