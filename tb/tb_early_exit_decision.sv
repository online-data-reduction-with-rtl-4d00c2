// tb_early_exit_decision -- random output-layer traffic (spikes of neuron 0 =
// Noise-Only and neuron 1 = Signal, a SYNC per timestep, EOE per event) with
// random ET and early exit on or off. The expected verdict is computed from the
// policy: first class whose accumulated count reaches ET at a timestep boundary
// wins, Signal first; otherwise after T_MAX steps Signal iff n_sig > n_noise
// (ratio 1/2). Checks: exactly one verdict per event, its class, early flag and
// timestep count; the tie case is forced a number of times.
module tb_early_exit_decision;
  import drich_snn_pkg::*;

  localparam int T_MAX = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, ee_en, v_valid, v_signal, v_early;
  aer_word_t in_word;
  logic [7:0] et;
  logic [TS_W-1:0] v_steps;

  early_exit_decision #(.T_MAX(T_MAX)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_word_i(in_word),
    .et_i(et), .ee_en_i(ee_en), .verdict_valid_o(v_valid), .verdict_signal_o(v_signal),
    .verdict_early_o(v_early), .verdict_steps_o(v_steps));

  int checks = 0, failures = 0, n_verdicts = 0;
  int n_early_sig = 0, n_early_noise = 0, n_fallback = 0, n_tie = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  always @(posedge clk) if (v_valid) n_verdicts++;

  task automatic send(input aer_kind_e k, input int ts, input int nid);
    @(negedge clk);
    in_valid = 1; in_word = '{kind: k, ts: TS_W'(ts), nid: NID_W'(nid)};
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_word = '0; et = 1; ee_en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 2000; ev++) begin
      int ns, nn, exp_steps, got_v, n_before;
      bit decided, exp_sig, exp_early, tie;
      et    = 8'($urandom_range(1, 3));
      ee_en = (ev % 4 != 3);
      ns = 0; nn = 0; decided = 0; exp_sig = 0; exp_early = 0; exp_steps = 0;
      tie = (ev % 50 == 0);
      n_before = n_verdicts;
      for (int t = 0; t < T_MAX; t++) begin
        int a, b;
        a = tie ? ((t == 2) ? int'(et) : 0) : (($urandom_range(0, 5) == 0) ? $urandom_range(1, 2) : 0);
        b = tie ? ((t == 2) ? int'(et) : 0) : (($urandom_range(0, 5) == 0) ? $urandom_range(1, 2) : 0);
        for (int i = 0; i < a; i++) send(AER_SPIKE, t, 1);
        for (int i = 0; i < b; i++) send(AER_SPIKE, t, 0);
        ns += a; nn += b;
        if (!decided && ee_en && ns >= et) begin
          decided = 1; exp_sig = 1; exp_early = 1; exp_steps = t + 1;
          if (nn >= et) n_tie++;
        end else if (!decided && ee_en && nn >= et) begin
          decided = 1; exp_sig = 0; exp_early = 1; exp_steps = t + 1;
        end else if (!decided && t == T_MAX - 1) begin
          decided = 1; exp_sig = (ns > nn); exp_early = 0; exp_steps = T_MAX;
        end
        send(AER_SYNC, t, 0);
        if (decided && exp_steps == t + 1) begin
          // The verdict pulse follows the SYNC that decided it.
          check("verdict now", v_valid, 1);
          check("verdict class", v_signal, exp_sig);
          check("verdict early", v_early, exp_early);
          check("verdict steps", v_steps, exp_steps);
          if (exp_early && exp_sig) n_early_sig++;
          else if (exp_early) n_early_noise++;
          else n_fallback++;
        end
      end
      send(AER_EOE, 0, 0);
      check("one verdict per event", n_verdicts - n_before, 1);
    end
    check("early Signal seen", n_early_sig > 50, 1);
    check("early Noise seen", n_early_noise > 50, 1);
    check("fallback seen", n_fallback > 50, 1);
    check("tie seen", n_tie > 10, 1);
    $display("early sig %0d early noise %0d fallback %0d ties %0d", n_early_sig, n_early_noise, n_fallback, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
