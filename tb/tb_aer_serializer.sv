// tb_aer_serializer -- the testbench plays 42 PDU encoders. In each BC every PDU
// may raise one spike (random bin, random arrival cycle) and reports done at a
// random cycle; the AER output sees random backpressure. Every fourth BC is a
// burst: all spikes and done flags present at once, no backpressure.
// Checks: each emitted spike is the pending one with the smallest bin not below
// the watermark (ties to the lower id), with the right id and bin; a spike is
// dropped exactly when its bin is below the watermark; spikes leave in
// non-decreasing bin order; one end-of-event per BC, after all PDUs are done;
// a burst BC with s spikes occupies exactly s + 1 consecutive bus cycles.
module tb_aer_serializer;
  import drich_snn_pkg::*;

  localparam int N = 42;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] spk_valid, done, take;
  logic [N-1:0][BIN_W-1:0] spk_bin;
  logic bc_close, drop, out_valid, out_ready;
  aer_word_t out_word;

  aer_serializer #(.N_PDU(N)) dut (
    .clk, .rst_n, .spk_valid_i(spk_valid), .spk_bin_i(spk_bin), .done_i(done),
    .spk_take_o(take), .bc_close_o(bc_close), .drop_o(drop),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_word_o(out_word));

  int checks = 0, failures = 0, n_drop = 0, n_emit = 0, n_eoe = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  int arrive[N], plan_bin[N], done_at[N];
  bit has_spk[N];
  int exp_q[$];   // ids expected on the bus, in order
  logic [N-1:0] taken = '0;

  initial begin
    spk_valid = '0; done = '0; spk_bin = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int bc = 0; bc < 400; bc++) begin
      int s_count, cyc, wm, first_hs, eoe_hs, n_hs;
      bit burst, over, emitted_now;
      burst = (bc % 4 == 0);
      s_count = 0; wm = 0; over = 0; first_hs = -1; eoe_hs = -1; n_hs = 0;
      for (int i = 0; i < N; i++) begin
        has_spk[i]  = ($urandom_range(0, 3) == 0);
        plan_bin[i] = $urandom_range(0, 7);
        arrive[i]   = burst ? 0 : $urandom_range(0, 30);
        done_at[i]  = burst ? 0 : arrive[i] + $urandom_range(0, 5);
        if (has_spk[i]) s_count++;
      end
      cyc = 0;
      while (!over && cyc < 600) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) if (taken[i]) spk_valid[i] = 0;
        taken = '0;
        out_ready = burst ? 1'b1 : ($urandom_range(0, 3) != 0);
        for (int i = 0; i < N; i++) begin
          if (has_spk[i] && cyc == arrive[i]) begin
            spk_valid[i] = 1; spk_bin[i] = BIN_W'(plan_bin[i]);
          end
          if (cyc == done_at[i]) done[i] = 1;
        end
        #1;
        // Output handshake of this cycle.
        if (out_valid && out_ready) begin
          n_hs++;
          if (first_hs < 0) first_hs = cyc;
          if (out_word.kind == AER_SPIKE) begin
            n_emit++;
            check("emitted in expected order", exp_q.size() > 0 && out_word.nid == exp_q[0], 1);
            check("emitted bin", out_word.ts, plan_bin[out_word.nid]);
            if (exp_q.size() > 0) void'(exp_q.pop_front());
          end else begin
            check("EOE kind", out_word.kind, AER_EOE);
            check("EOE after all spikes", exp_q.size(), 0);
            n_eoe++; eoe_hs = cyc; over = 1;
          end
        end
        // Takes of this cycle: reference decides drop or emit.
        emitted_now = 0;
        if (|take) begin
          int best;
          best = -1;
          for (int i = 0; i < N; i++)
            if (spk_valid[i] && spk_bin[i] >= wm && (best < 0 || spk_bin[i] < spk_bin[best])) best = i;
          for (int i = 0; i < N; i++) begin
            if (spk_valid[i] && spk_bin[i] < wm) begin
              check("late spike dropped", take[i], 1);
              n_drop++;
            end else if (i == best && (!out_valid || out_ready)) begin
              check("min spike emitted", take[i], 1);
            end else check("no other take", take[i], 0);
          end
          if (best >= 0 && take[best]) begin
            exp_q.push_back(best);
            wm = spk_bin[best];
          end
        end
        check("close only with all done", !bc_close || (&done), 1);
        taken = take;
        @(posedge clk);
        cyc++;
      end
      check("BC ended", over, 1);
      if (burst) begin
        check("burst bus cycles", n_hs, s_count + 1);
        check("burst consecutive", eoe_hs - first_hs, s_count);
      end
      @(negedge clk);
      for (int i = 0; i < N; i++) if (taken[i]) spk_valid[i] = 0;
      taken = '0;
      done = '0;
    end
    check("EOE per BC", n_eoe, 400);
    check("drops happened", n_drop > 0, 1);
    $display("emitted %0d dropped %0d eoe %0d", n_emit, n_drop, n_eoe);
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
