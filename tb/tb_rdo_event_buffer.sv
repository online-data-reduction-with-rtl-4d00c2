// tb_rdo_event_buffer -- writes bunch crossings of random length (1..6 words of
// 512 bits) into the buffer, delivers one random verdict per bunch crossing
// (sometimes before, sometimes long after its data) and applies random egress
// backpressure. Checks: the egress stream is exactly the concatenation of the
// bunch crossings with a Signal verdict, in order, with `last` on their final
// word; one fwd/flush pulse per bunch crossing matching its verdict; a flushed
// bunch crossing drains at one word per cycle; input backpressure when full.
module tb_rdo_event_buffer;
  localparam int W = 512, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rdo_valid, rdo_ready, rdo_last, dec_valid, dec_signal;
  logic eg_valid, eg_ready, eg_last, fwd_bc, flush_bc, dec_ovf;
  logic [W-1:0] rdo_data, eg_data;

  rdo_event_buffer #(.DATA_W(W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .rdo_valid_i(rdo_valid), .rdo_ready_o(rdo_ready), .rdo_data_i(rdo_data),
    .rdo_last_i(rdo_last), .dec_valid_i(dec_valid), .dec_signal_i(dec_signal),
    .eg_valid_o(eg_valid), .eg_ready_i(eg_ready), .eg_data_o(eg_data), .eg_last_o(eg_last),
    .fwd_bc_o(fwd_bc), .flush_bc_o(flush_bc), .dec_overflow_o(dec_ovf));

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  localparam int NBC = 400;
  int len [NBC];
  bit verdict [NBC];
  logic [W-1:0] exp_q[$];
  bit exp_last_q[$];
  bit pulse_q[$];
  int n_fwd = 0, n_flush = 0, n_full = 0, bc_in = 0, bc_dec = 0;

  function automatic logic [W-1:0] word_of(input int bc, input int i);
    return {16{32'(bc * 16 + i) ^ 32'h5a5a_0000}};
  endfunction

  initial begin
    for (int b = 0; b < NBC; b++) begin
      len[b] = $urandom_range(1, 6);
      verdict[b] = $urandom_range(0, 1);
      if (verdict[b])
        for (int i = 0; i < len[b]; i++) begin
          exp_q.push_back(word_of(b, i));
          exp_last_q.push_back(i == len[b] - 1);
        end
      pulse_q.push_back(verdict[b]);
    end
  end

  // Producer of RDO words.
  initial begin
    int i;
    rdo_valid = 0; rdo_data = '0; rdo_last = 0;
    wait (rst_n);
    i = 0;
    while (bc_in < NBC) begin
      @(negedge clk);
      rdo_valid = ($urandom_range(0, 3) != 0) || (bc_in > 100);
      rdo_data  = word_of(bc_in, i);
      rdo_last  = (i == len[bc_in] - 1);
      #1;
      if (!rdo_ready) n_full++;
      if (rdo_valid && rdo_ready) begin
        @(posedge clk);
        if (rdo_last) begin bc_in++; i = 0; end else i++;
      end
    end
    @(negedge clk);
    rdo_valid = 0;
  end

  // Verdicts: run ahead of or behind the data; held back for a while to fill the FIFO.
  initial begin
    dec_valid = 0; dec_signal = 0;
    wait (rst_n);
    for (int cyc = 0; bc_dec < NBC; cyc++) begin
      @(negedge clk);
      dec_valid = 0;
      if ((bc_dec < bc_in + 3) && (bc_dec < n_fwd + n_flush + 12) && !(cyc >= 3000 && cyc < 3600) &&
          $urandom_range(0, 2) == 0) begin
        dec_valid = 1; dec_signal = verdict[bc_dec]; bc_dec++;
      end
    end
    @(negedge clk);
    dec_valid = 0;
  end

  // Egress and pulses.
  initial begin
    eg_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000 && pulse_q.size() > 0; cyc++) begin
      @(negedge clk);
      eg_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (eg_valid && eg_ready) begin
        check("egress word", exp_q.size() > 0 && eg_data == exp_q[0], 1);
        if (exp_q.size() > 0 && eg_data != exp_q[0]) $display("  got %0d exp %0d bc_in %0d bc_dec %0d", eg_data[31:0] ^ 32'h5a5a0000, exp_q[0][31:0] ^ 32'h5a5a0000, bc_in, bc_dec);
        check("egress last", exp_q.size() > 0 && eg_last == exp_last_q[0], 1);
        if (exp_q.size() > 0) begin void'(exp_q.pop_front()); void'(exp_last_q.pop_front()); end
      end
      if (fwd_bc || flush_bc) begin
        check("one pulse", fwd_bc && flush_bc, 0);
        check("pulse matches verdict", fwd_bc, pulse_q[0]);
        void'(pulse_q.pop_front());
        if (fwd_bc) n_fwd++; else n_flush++;
      end
    end
    check("all BCs resolved", pulse_q.size(), 0);
    check("all forwarded words out", exp_q.size(), 0);
    check("FIFO filled up", n_full > 0, 1);
    check("no verdict overflow", dec_ovf, 0);
    $display("forwarded %0d flushed %0d full cycles %0d", n_fwd, n_flush, n_full);
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
