// tb_aer_adapter -- feeds random time-ordered spike streams, each closed by an
// end of event, through the adapter under random backpressure, and compares the
// output word for word with the expected sequence: every timestep 0..T_MAX-1
// closed by exactly one SYNC after its spikes, then EOE. Also checks that a BC
// with no spikes still produces T_MAX syncs.
module tb_aer_adapter;
  import drich_snn_pkg::*;

  localparam int T_MAX = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  aer_word_t in_word, out_word;

  aer_adapter #(.T_MAX(T_MAX)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_word_i(in_word),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_word_o(out_word));

  int checks = 0, failures = 0, n_out = 0, n_sync = 0, n_empty_bc = 0;
  aer_word_t exp_q[$];

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Output monitor.
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && out_ready) begin
      n_out++;
      if (out_word.kind == AER_SYNC) n_sync++;
      check("word available", exp_q.size() > 0, 1);
      if (exp_q.size() > 0) begin
        check("word", out_word, exp_q[0]);
        void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    in_valid = 0; in_word = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int bc = 0; bc < 300; bc++) begin
      int ts, nspk, cur;
      aer_word_t w;
      nspk = (bc % 5 == 0) ? 0 : $urandom_range(1, 8);
      if (nspk == 0) n_empty_bc++;
      ts = 0; cur = 0;
      for (int s = 0; s <= nspk; s++) begin
        if (s < nspk) begin
          ts = ts + $urandom_range(0, 2);
          if (ts > 7) ts = 7;
          w = '{kind: AER_SPIKE, ts: TS_W'(ts), nid: NID_W'($urandom_range(0, 41))};
          while (cur < ts) begin
            exp_q.push_back('{kind: AER_SYNC, ts: TS_W'(cur), nid: '0});
            cur++;
          end
          exp_q.push_back(w);
        end else begin
          w = '{kind: AER_EOE, ts: '0, nid: '0};
          while (cur < T_MAX) begin
            exp_q.push_back('{kind: AER_SYNC, ts: TS_W'(cur), nid: '0});
            cur++;
          end
          exp_q.push_back(w);
        end
        @(negedge clk);
        in_valid = 1; in_word = w;
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = 0;
      end
    end
    repeat (50) @(posedge clk);
    check("all words out", exp_q.size(), 0);
    check("T_MAX syncs per BC", n_sync, 300 * T_MAX);
    $display("words %0d syncs %0d", n_out, n_sync);
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
