// mlp_ref_pkg: integer reference model of the approximate neuron, used by
// the testbenches to compute expected values without the RTL's structure.
//
// ref_neuron evaluates  sum_i s_i * ((x_i AND m_i) * 2^k_i) + b  with plain
// integer multiplication and negation (no inverters, no folded constants,
// no adder tree), and counts how often each approximation mechanism took
// effect: a negative summand that was non-zero, an input that lost bits to
// a partial mask, a non-zero input removed by a zero mask. ref_qrelu clips
// a sum to [0, 2^out_w - 1] after an optional right shift. ref_argmax gives
// the first index of the largest score.
package mlp_ref_pkg;

  int unsigned n_neg_terms;     // non-zero summands subtracted
  int unsigned n_partial_mask;  // inputs that lost some, not all, bits
  int unsigned n_zero_removed;  // non-zero inputs removed by a zero mask
  int unsigned n_shifted;       // non-zero summands with k > 0

  function automatic longint ref_neuron(int x[], mlp_pkg::gene_t g[], int bias, int x_w);
    longint s = longint'(bias);
    for (int i = 0; i < x.size(); i++) begin
      int m = int'(g[i].m) & ((1 << x_w) - 1);
      longint v = longint'(x[i] & m) * (longint'(1) << g[i].k);
      if (m == 0) begin
        if (x[i] != 0) n_zero_removed++;
        continue;
      end
      if ((x[i] & ~m) != 0) n_partial_mask++;
      if (v != 0 && g[i].k != 0) n_shifted++;
      if (g[i].neg) begin
        s -= v;
        if (v != 0) n_neg_terms++;
      end else begin
        s += v;
      end
    end
    return s;
  endfunction

  function automatic int ref_qrelu(longint v, int shift, int out_w);
    longint q;
    if (v < 0) return 0;
    q = v / (longint'(1) << shift);
    if (q > (longint'(1) << out_w) - 1) return (1 << out_w) - 1;
    return int'(q);
  endfunction

  function automatic int ref_argmax(longint sc[]);
    int best = 0;
    for (int i = 1; i < sc.size(); i++)
      if (sc[i] > sc[best]) best = i;
    return best;
  endfunction

endpackage
