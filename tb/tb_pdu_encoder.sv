// tb_pdu_encoder -- drives one PDU encoder with random bunch crossings of hit
// words and acts as the serializer (takes spikes, closes each BC after done).
// Checks: the BC's spike (presence and bin) against the hit-by-hit reference;
// the spike appears the cycle after the word that caused it; one word is
// accepted per cycle with no gaps; the input stalls after the last word until
// the BC is closed; at most one spike per BC.
module tb_pdu_encoder;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic word_valid, word_ready, spk_valid, spk_take, done, bc_close;
  pdu_word_t word;
  logic [BIN_W-1:0] spk_bin;

  pdu_encoder dut (
    .clk, .rst_n, .word_valid_i(word_valid), .word_ready_o(word_ready), .word_i(word),
    .spk_valid_o(spk_valid), .spk_bin_o(spk_bin), .spk_take_i(spk_take),
    .done_o(done), .bc_close_i(bc_close));

  int checks = 0, failures = 0, n_spike_bc = 0, n_empty_bc = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  initial begin
    word_valid = 0; word = '0; spk_take = 0; bc_close = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int bc = 0; bc < 600; bc++) begin
      enc_state_t s;
      int nwords, b, exp_bin, seen;
      bit exp_fire;
      s.v = 0; s.t = 0; s.idle = 0;
      exp_fire = 0; exp_bin = 0; seen = 0;
      nwords = $urandom_range(1, 5);
      b = 0;
      for (int w = 0; w < nwords; w++) begin
        bit fired_now;
        fired_now = 0;
        @(negedge clk);
        check("ready before last word", word_ready, 1);
        for (int k = 0; k < 4; k++) begin
          b = b + $urandom_range(0, 2);
          if (b > 7) b = 7;
          word.hits[k].valid = ($urandom_range(0, 1) != 0);
          word.hits[k].bin   = BIN_W'(b);
          if (word.hits[k].valid && enc_hit(s, b, 1, 1, 2) && !exp_fire) begin
            exp_fire = 1; exp_bin = b; fired_now = 1;
          end
        end
        word.last  = (w == nwords - 1);
        word_valid = 1;
        @(posedge clk);
        #1;
        // Spike visible in the cycle after the word.
        if (fired_now) begin
          check("spike next cycle", spk_valid, 1);
          check("spike bin", spk_bin, exp_bin);
        end else if (!exp_fire) check("no spike", spk_valid, 0);
      end
      @(negedge clk);
      word_valid = 0;
      check("done after last", done, 1);
      check("stall after last", word_ready, 0);
      if (exp_fire) n_spike_bc++; else n_empty_bc++;
      // Serializer: take the spike, wait, then close.
      spk_take = spk_valid;
      @(negedge clk);
      spk_take = 0;
      check("spike cleared by take", spk_valid, 0);
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk);
        check("still stalled", word_ready, 0);
      end
      bc_close = 1;
      @(negedge clk);
      bc_close = 0;
      check("done cleared", done, 0);
    end
    check("both BC kinds seen", (n_spike_bc > 30) && (n_empty_bc > 30), 1);
    $display("BCs with spike %0d, without %0d", n_spike_bc, n_empty_bc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
