// tb_ref_pkg -- reference models used by the testbenches.
//
// They restate the behaviour of the design in plain procedural code, written from
// the algorithm rather than from the RTL structure: the LIF coincidence encoder
// evaluated hit by hit, and a fully connected LIF layer in saturating Q-format
// integer arithmetic. Weight formulas shared by several testbenches live here too.
package tb_ref_pkg;

  // Encoder state of one PDU.
  typedef struct {
    int  v;      // membrane
    int  t;      // time reference (bin)
    bit  idle;   // spiked in this BC
  } enc_state_t;

  // Apply one hit to the encoder state; returns 1 if the hit makes the PDU fire.
  function automatic bit enc_hit(ref enc_state_t s, input int bin,
                                 input int mem_w, input int leak_k, input int theta);
    int dt, v;
    if (s.idle) return 0;
    dt = (bin >= s.t) ? bin - s.t : 0;
    v  = s.v;
    for (int i = 0; i < dt * leak_k; i++) v = v / 2;   // divide by 2 per shift
    v = v + 1;
    s.t = bin;
    if (v >= theta) begin
      s.v = 0;
      s.idle = 1;
      return 1;
    end
    s.v = (v > (1 << mem_w) - 1) ? (1 << mem_w) - 1 : v;
    return 0;
  endfunction

  localparam longint SMAX32 = 64'sd2147483647;
  localparam longint SMIN32 = -64'sd2147483648;

  function automatic longint sat32(input longint x);
    if (x > SMAX32) return SMAX32;
    if (x < SMIN32) return SMIN32;
    return x;
  endfunction

  // Arithmetic shift right of a signed value (floor division by 2^k).
  function automatic longint asr(input longint x, input int k);
    return x >>> k;
  endfunction

  // One timestep of a fully connected LIF layer.
  // v: membranes (updated), in_spk: presynaptic ids that spiked, w: [n_in][n_out]
  // returns the fired mask (bit n = neuron n fired).
  function automatic void lif_step(ref longint v[], input int in_spk[$], ref longint w[][],
                                   input int leak_k, input longint theta, ref bit fired[]);
    longint cur;
    for (int n = 0; n < v.size(); n++) begin
      cur = 0;
      foreach (in_spk[s]) if (in_spk[s] < w.size()) cur = sat32(cur + w[in_spk[s]][n]);
      v[n] = sat32(v[n] - asr(v[n], leak_k) + cur);
      fired[n] = (v[n] > theta);
      if (fired[n]) v[n] = 0;
    end
  endfunction

  // Deterministic test weights (Q12.20): small integers times 1/8, mostly positive.
  function automatic longint test_weight(input int layer, input int row, input int col);
    int h;
    h = (row * 37 + col * 11 + layer * 5) % 16;
    return longint'(h - 3) <<< 17;
  endfunction

endpackage
