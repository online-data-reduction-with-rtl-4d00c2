// tb_aigor_router -- two router instances. The first uses the default sub-sector
// table (0->1, 1->2, 2->3, port 3 discarded); the second sends ports 0 and 1 to
// port 2 to exercise round-robin arbitration. Random words are injected on every
// port with random backpressure at the outputs. Checks: every word reaches the
// output its table names, in order per source, nothing else arrives, words from
// a discarded port are consumed; under contention both sources are served and
// neither waits more than one grant of the other.
module tb_aigor_router;
  import drich_snn_pkg::*;

  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  logic      [1:0][P-1:0] in_valid, in_ready, out_valid, out_ready;
  aer_word_t [1:0][P-1:0] in_word, out_word;

  aigor_router #(.N_PORTS(P)) dut_a (
    .clk, .rst_n, .in_valid_i(in_valid[0]), .in_ready_o(in_ready[0]), .in_word_i(in_word[0]),
    .out_valid_o(out_valid[0]), .out_ready_i(out_ready[0]), .out_word_o(out_word[0]));
  aigor_router #(.N_PORTS(P), .ROUTE('{2, 2, -1, -1})) dut_b (
    .clk, .rst_n, .in_valid_i(in_valid[1]), .in_ready_o(in_ready[1]), .in_word_i(in_word[1]),
    .out_valid_o(out_valid[1]), .out_ready_i(out_ready[1]), .out_word_o(out_word[1]));

  int route [2][P] = '{'{1, 2, 3, -1}, '{2, 2, -1, -1}};
  aer_word_t sent_q [2][P][$];   // per instance, per source: words in flight
  int n_recv [2][P];
  int n_sent [2][P];
  int wait_b [2];
  bit acc [2][P];                 // consecutive grants of the other source while waiting

  // All traffic handled at the falling edge; the rising edge completes it.
  initial begin
    in_valid = '0; in_word = '0; out_ready = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      for (int d = 0; d < 2; d++)
        for (int p = 0; p < P; p++) begin
          out_ready[d][p] = (cyc > 5000) || ($urandom_range(0, 3) != 0);
          if (!in_valid[d][p] && cyc < 5000 && $urandom_range(0, 1) == 0) begin
            in_valid[d][p] = 1;
            in_word[d][p]  = '{kind: aer_kind_e'($urandom_range(0, 2)), ts: TS_W'($urandom_range(0, 9)),
                              nid: NID_W'(p * 64 + (n_sent[d][p] % 64))};
          end
        end
      #1;
      for (int d = 0; d < 2; d++)
        for (int p = 0; p < P; p++) begin
          if (out_valid[d][p] && out_ready[d][p]) begin
            int src;
            src = out_word[d][p].nid / 64;
            check("delivered to routed port", route[d][src], p);
            check("word in order", sent_q[d][src].size() > 0 && out_word[d][p] == sent_q[d][src][0], 1);
            if (sent_q[d][src].size() > 0) void'(sent_q[d][src].pop_front());
            n_recv[d][src]++;
          end
        end
      // Fairness under contention on dut_b port 2.
      if (in_valid[1][0] && in_valid[1][1]) begin
        if (in_ready[1][1] && !in_ready[1][0]) begin wait_b[0]++; check("src0 not starved", wait_b[0] <= 1, 1); end
        if (in_ready[1][0] && !in_ready[1][1]) begin wait_b[1]++; check("src1 not starved", wait_b[1] <= 1, 1); end
      end
      for (int d = 0; d < 2; d++)
        for (int p = 0; p < P; p++)
          if (in_valid[d][p] && in_ready[d][p]) begin
            acc[d][p] = 1;
            if (route[d][p] >= 0) sent_q[d][p].push_back(in_word[d][p]);
            n_sent[d][p]++;
            if (d == 1 && p < 2) wait_b[p] = 0;
          end
      @(posedge clk);
      #1;
      for (int d = 0; d < 2; d++)
        for (int p = 0; p < P; p++)
          if (acc[d][p]) begin in_valid[d][p] = 0; acc[d][p] = 0; end
    end
    for (int d = 0; d < 2; d++)
      for (int p = 0; p < P; p++) begin
        check("all delivered", sent_q[d][p].size(), 0);
        if (route[d][p] >= 0) check("traffic seen", n_recv[d][p] > 500, 1);
        else check("discarded port consumed", n_sent[d][p] > 500, 1);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
