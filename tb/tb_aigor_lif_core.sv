// tb_aigor_lif_core -- loads random Q12.20 weights into a small core
// (6 inputs, 5 neurons, theta = 1.0, k = 2), drives random spike traffic with a
// SYNC per timestep and an EOE per event, and compares every output word with
// the reference LIF layer: which neurons fire in each timestep, the round-robin
// order in which they leave, the SYNC that follows them, the EOE reset.
// The cycle cost after a SYNC (one per fired neuron plus one) is checked too.
module tb_aigor_lif_core;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 6, NO = 5, T = 10, K = 2;
  localparam longint TH = 64'd1 << 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  aer_word_t in_word, out_word;
  logic [7:0] cfg_row, cfg_col;
  logic [31:0] cfg_data;

  aigor_lif_core #(.N_IN(NI), .N_OUT(NO), .LEAK_K(K)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_word_i(in_word),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_word_o(out_word),
    .cfg_we_i(cfg_we), .cfg_row_i(cfg_row), .cfg_col_i(cfg_col), .cfg_data_i(cfg_data));

  int checks = 0, failures = 0, n_fire = 0, n_multi = 0;
  aer_word_t exp_q[$];
  longint w[][];
  longint v[];
  bit fired[];
  int rr = 0;
  bit stall_out = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Output side: pick out_ready at the falling edge, record the handshake that
  // the next rising edge will complete.
  always @(negedge clk) if (rst_n) begin
    out_ready = stall_out ? 1'b1 : ($urandom_range(0, 3) != 0);
    #1;
    if (out_valid && out_ready) begin
      check("word available", exp_q.size() > 0, 1);
      if (exp_q.size() > 0) begin
        if (out_word !== exp_q[0])
          $display("  got kind %0d ts %0d nid %0d, expected kind %0d ts %0d nid %0d",
                   out_word.kind, out_word.ts, out_word.nid, exp_q[0].kind, exp_q[0].ts, exp_q[0].nid);
        check("word", out_word, exp_q[0]);
        void'(exp_q.pop_front());
      end
    end
  end

  task automatic send(input aer_word_t x);
    @(negedge clk);
    in_valid = 1; in_word = x;
    #2;
    while (!in_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_word = '0; cfg_we = 0; cfg_row = 0; cfg_col = 0; cfg_data = 0; out_ready = 1;
    w = new[NI]; foreach (w[i]) w[i] = new[NO];
    v = new[NO]; fired = new[NO];
    foreach (v[n]) v[n] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++)
      for (int n = 0; n < NO; n++) begin
        w[i][n] = longint'($urandom_range(0, 24)) - 6;
        w[i][n] = w[i][n] <<< 17;         // -0.75 .. 2.25
        @(negedge clk);
        cfg_we = 1; cfg_row = 8'(i); cfg_col = 8'(n); cfg_data = 32'(w[i][n]);
      end
    @(negedge clk);
    cfg_we = 0;
    for (int ev = 0; ev < 120; ev++) begin
      for (int t = 0; t < T; t++) begin
        int spk[$];
        int nf;
        int ns;
        spk.delete();
        ns = $urandom_range(0, 3);
        for (int s = 0; s < ns; s++) begin
          spk.push_back($urandom_range(0, NI));   // NI itself: an id the core ignores
          send('{kind: AER_SPIKE, ts: TS_W'(t), nid: NID_W'(spk[$])});
        end
        lif_step(v, spk, w, K, TH, fired);
        nf = 0;
        for (int j = 0; j < NO; j++) begin
          int n;
          n = (rr + j) % NO;
          if (fired[n]) begin
            exp_q.push_back('{kind: AER_SPIKE, ts: TS_W'(t), nid: NID_W'(n)});
            nf++;
          end
        end
        // Round-robin pointer moves past the last neuron granted.
        begin
          int last_n;
          last_n = -1;
          for (int j = 0; j < NO; j++) if (fired[(rr + j) % NO]) last_n = (rr + j) % NO;
          if (last_n >= 0) rr = (last_n + 1) % NO;
        end
        n_fire += nf;
        if (nf > 1) n_multi++;
        exp_q.push_back('{kind: AER_SYNC, ts: TS_W'(t), nid: '0});
        if (ev % 10 == 0) begin
          // Timing check without backpressure: core busy for nf + 1 cycles.
          int busy;
          stall_out = 1;
          repeat (3) @(posedge clk);
          send('{kind: AER_SYNC, ts: TS_W'(t), nid: '0});
          busy = 0;
          @(negedge clk); #2;
          while (!in_ready) begin @(negedge clk); #2; busy++; end
          check("cycles after SYNC", busy, nf + 1);
          stall_out = 0;
        end else
          send('{kind: AER_SYNC, ts: TS_W'(t), nid: '0});
      end
      send('{kind: AER_EOE, ts: '0, nid: '0});
      exp_q.push_back('{kind: AER_EOE, ts: '0, nid: '0});
      foreach (v[n]) v[n] = 0;
    end
    repeat (30) @(posedge clk);
    check("all words out", exp_q.size(), 0);
    check("neurons fired", n_fire > 100, 1);
    check("multi-spike timesteps", n_multi > 20, 1);
    $display("fired %0d, multi-spike steps %0d", n_fire, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
