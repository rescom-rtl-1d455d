// rescom_model_pkg: bit-exact reference model of the accelerator for the
// testbenches, written from the specification of the blocks rather than
// from their code. It models the three LFSRs, the rate encoder, the
// stochastic multipliers (stream bits, AND, ones count, shift) and the
// neuron update of every mode, and runs whole images.
package rescom_model_pkg;

  function automatic logic [7:0] lfsr_next(input logic [7:0] q, input logic [7:0] poly);
    logic fb = 1'b0;
    for (int i = 0; i < 8; i++) if (poly[7-i]) fb ^= q[i];
    return {q[6:0], fb};
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // 8-bit stream operand of a signed state: |x| saturated below 2.0 (Q.12), top 8 bits
  function automatic int state_op(input int x);
    int m = (x < 0) ? -x : x;
    if (m > 8191) m = 8191;
    return m >> 5;
  endfunction

  // stochastic product from the random numbers of the stream
  function automatic int sc_prod(input int x, input int f, input int rs[], input int rc[],
                                 input int len_log2);
    int op = state_op(x);
    int ones = 0;
    int p;
    for (int k = 0; k < (1 << len_log2); k++)
      if (op >= rs[k] && f >= rc[k]) ones++;
    p = (ones << 13) >> len_log2;
    return (x < 0) ? -p : p;
  endfunction

  class net_model;
    int n_in, n_hid, n_out;
    int w1[][], w2[][];
    int pix[];
    int mode, thr, alpha, beta, len_log2;
    logic [7:0] poly[3], q[3];
    int v1[], i1[], v2[], i2[];
    int counts[];
    int hid_spike_total, out_spike_total, sat_events;

    function new(int n_in, int n_hid, int n_out);
      this.n_in = n_in; this.n_hid = n_hid; this.n_out = n_out;
      w1 = new[n_hid]; foreach (w1[j]) w1[j] = new[n_in];
      w2 = new[n_out]; foreach (w2[j]) w2[j] = new[n_hid];
      pix = new[n_in];
      v1 = new[n_hid]; i1 = new[n_hid]; v2 = new[n_out]; i2 = new[n_out];
      counts = new[n_out];
    endfunction

    function void load_lfsr(logic [7:0] p[3], logic [7:0] s[3]);
      for (int k = 0; k < 3; k++) begin poly[k] = p[k]; q[k] = s[k]; end
    endfunction

    // one neuron update, drawing its stream random numbers
    function int neuron(ref int v, ref int it, input int syn);
      int rs[], rc[];
      int av, bi, inext, vsel, fire;
      int len = 1 << len_log2;
      rs = new[len]; rc = new[len];
      for (int k = 0; k < len; k++) begin
        rs[k] = q[1]; rc[k] = q[2];
        q[1] = lfsr_next(q[1], poly[1]);
        q[2] = lfsr_next(q[2], poly[2]);
      end
      av = sc_prod(v, alpha, rs, rc, len_log2);
      bi = sc_prod(it, beta, rs, rc, len_log2);
      inext = sat16(bi + syn);
      case (mode)
        0: vsel = sat16(v + syn);
        1: vsel = sat16(av + syn);
        2: vsel = sat16(av + inext);
        default: vsel = v;
      endcase
      fire = (mode != 3) && (vsel > thr);
      v  = fire ? sat16(vsel - thr) : vsel;
      it = (mode == 2) ? inext : (mode == 3) ? it : 0;
      return fire;
    endfunction

    function void layer(input int spk_in[], input int w[][], ref int v[], ref int it[],
                        output int spk_out[], input int nin, input int nneur);
      spk_out = new[nneur];
      for (int j = 0; j < nneur; j++) begin
        longint acc = 0;
        int syn;
        for (int k = 0; k < nin; k++) if (spk_in[k]) acc += w[j][k];
        if (acc > 32767 || acc < -32768) sat_events++;
        syn = sat16(acc);
        spk_out[j] = neuron(v[j], it[j], syn);
      end
    endfunction

    function void run_image(int steps);
      int sin[], sh[], so[];
      foreach (v1[j]) begin v1[j] = 0; i1[j] = 0; end
      foreach (v2[j]) begin v2[j] = 0; i2[j] = 0; end
      foreach (counts[j]) counts[j] = 0;
      for (int t = 0; t < steps; t++) begin
        sin = new[n_in];
        for (int k = 0; k < n_in; k++) begin
          sin[k] = (pix[k] >= q[0]);
          q[0] = lfsr_next(q[0], poly[0]);
        end
        layer(sin, w1, v1, i1, sh, n_in, n_hid);
        layer(sh, w2, v2, i2, so, n_hid, n_out);
        foreach (sh[j]) hid_spike_total += sh[j];
        foreach (so[j]) begin
          out_spike_total += so[j];
          if (so[j] && counts[j] < 255) counts[j]++;
        end
      end
    endfunction

    function int class_id();
      int best = 0;
      for (int j = 1; j < n_out; j++) if (counts[j] > counts[best]) best = j;
      return best;
    endfunction
  endclass

endpackage
