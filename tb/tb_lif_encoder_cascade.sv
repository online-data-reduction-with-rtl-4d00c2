// tb_lif_encoder_cascade -- checks the four-stage encoder datapath against the
// hit-by-hit reference model, for the deployed point (1-bit membrane, k = 1,
// theta = 2) and for a graded configuration (3-bit membrane, k = 1, theta = 4).
// Directed cases first (same-bin pair fires, adjacent bins do not, idle blocks),
// then random words with random seeded state.
module tb_lif_encoder_cascade;
  import drich_snn_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  hit_t [3:0] hits;
  logic [0:0] v1_i, v1_o;
  logic [2:0] v3_i, v3_o;
  logic [BIN_W-1:0] t_i, t1_o, t3_o, tm1, tm3;
  logic idle_i, idle1_o, idle3_o;
  enc_spike_t s1, s3;

  lif_encoder_cascade #(.MEM_W(1), .LEAK_K(1), .THETA(2)) dut1 (
    .hits_i(hits), .vmem_i(v1_i), .t_curr_i(t_i), .idle_i(idle_i),
    .vmem_o(v1_o), .t_curr_o(t1_o), .spike_o(s1), .t_max_o(tm1), .idle_o(idle1_o));
  lif_encoder_cascade #(.MEM_W(3), .LEAK_K(1), .THETA(4)) dut3 (
    .hits_i(hits), .vmem_i(v3_i), .t_curr_i(t_i), .idle_i(idle_i),
    .vmem_o(v3_o), .t_curr_o(t3_o), .spike_o(s3), .t_max_o(tm3), .idle_o(idle3_o));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic compare(input int mem_w, input int theta, input int v_in,
                         input int v_out, input int t_out, input enc_spike_t sp,
                         input int tmax, input bit idle_out);
    enc_state_t s;
    bit fired = 0;
    int fbin = 0, exp_tmax;
    s.v = v_in; s.t = t_i; s.idle = idle_i;
    exp_tmax = t_i;
    for (int k = 0; k < 4; k++) begin
      if (hits[k].valid) begin
        if (hits[k].bin >= exp_tmax) exp_tmax = hits[k].bin;
        if (enc_hit(s, hits[k].bin, mem_w, 1, theta) && !fired) begin
          fired = 1;
          fbin  = hits[k].bin;
        end
      end
    end
    check($sformatf("M%0d spike.valid", mem_w), sp.valid, fired);
    if (fired) check($sformatf("M%0d spike.bin", mem_w), sp.bin_idx, fbin);
    check($sformatf("M%0d t_max", mem_w), tmax, exp_tmax);
    check($sformatf("M%0d idle_o", mem_w), idle_out, s.idle);
    if (!fired && !idle_i) begin
      check($sformatf("M%0d vmem_o", mem_w), v_out, s.v);
      check($sformatf("M%0d t_curr_o", mem_w), t_out, s.t);
    end
  endtask

  task automatic set_hit(input int k, input bit valid, input int bin);
    hits[k].valid = valid;
    hits[k].bin   = BIN_W'(bin);
  endtask

  initial begin
    // Directed: two hits in bin 3 -> deployed encoder fires at bin 3.
    hits = '0; v1_i = 0; v3_i = 0; t_i = 0; idle_i = 0;
    set_hit(0, 1, 3); set_hit(1, 1, 3);
    #1;
    check("pair same bin fires", s1.valid, 1);
    check("pair same bin bin_idx", s1.bin_idx, 3);
    check("graded: pair does not reach 4", s3.valid, 0);
    // Directed: hits in adjacent bins -> the single bit leaks away, no spike.
    hits = '0; set_hit(0, 1, 2); set_hit(1, 1, 3); set_hit(2, 1, 4); set_hit(3, 1, 5);
    #1;
    check("adjacent bins silent", s1.valid, 0);
    check("t_max latest hit", tm1, 5);
    // Directed: membrane carried in from the previous word, same bin -> fires on hit 0.
    hits = '0; v1_i = 1; t_i = 6; set_hit(0, 1, 6);
    #1;
    check("carry-in coincidence", s1.valid, 1);
    // Directed: idle PDU never fires, t_max still tracks.
    idle_i = 1; set_hit(1, 1, 7); set_hit(2, 1, 7);
    #1;
    check("idle blocks spike", s1.valid, 0);
    check("idle t_max", tm1, 7);
    // Directed: only the first of two coincidences is reported.
    hits = '0; idle_i = 0; v1_i = 0; t_i = 0;
    set_hit(0, 1, 1); set_hit(1, 1, 1); set_hit(2, 1, 4); set_hit(3, 1, 4);
    #1;
    check("first spike wins", s1.bin_idx, 1);
    // Random words, hits sorted by bin.
    for (int it = 0; it < 4000; it++) begin
      int b;
      b = $urandom_range(0, 7);
      t_i = BIN_W'($urandom_range(0, b));
      for (int k = 0; k < 4; k++) begin
        b = b + (($urandom_range(0, 2) == 0) ? 1 : 0);
        if (b > 7) b = 7;
        set_hit(k, ($urandom_range(0, 4) != 0), b);
      end
      v1_i = 1'($urandom_range(0, 1));
      v3_i = 3'($urandom_range(0, 3));
      idle_i = ($urandom_range(0, 9) == 0);
      #1;
      compare(1, 2, v1_i, v1_o, t1_o, s1, tm1, idle1_o);
      compare(3, 4, v3_i, v3_o, t3_o, s3, tm3, idle3_o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
